// tb_recon_decoder -- expansion of records into frames, with and without late records.
//
// Four pixels. The test plays the writer: per pixel a queue of records, answered one
// clock after rd_en, popped on pop. Records are generated with random durations; the
// expected value of pixel u in frame f is the intensity of the record whose duration
// span covers f. Pixels 0-2 get all their records before the first frame: every frame
// must match exactly. Pixel 3 gets its records late (only when the frame being shown
// has passed their start): it must repeat its last value meanwhile (counted as
// underruns) and must be back on the true time axis once its records are in.
module tb_recon_decoder;
  import ssr_pkg::*;
  localparam int NU = 4, NF = 120;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic frame_start = 0, frame_done, idle, rd_en, rd_avail, pop, out_valid, out_ready;
  logic [1:0] rd_u, pop_u;
  enc_rec_t rd_rec;
  logic [7:0] out_pix;
  logic [15:0] underrun_cnt;

  recon_decoder #(.NU(NU)) dut (.*);

  enc_rec_t pending [NU][$];   // not yet visible to the decoder
  enc_rec_t ring [NU][$];      // visible
  int       pst [$];           // start frames of pixel 3's pending records
  logic [7:0] timeline [NU][NF];

  always @(posedge clk) begin
    if (rd_en) begin
      rd_avail <= ring[rd_u].size() > 0;
      rd_rec   <= (ring[rd_u].size() > 0) ? ring[rd_u][0] : '0;
    end
    if (pop) void'(ring[pop_u].pop_front());
  end
  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int late_checked = 0;
  initial begin
    for (int u = 0; u < NU; u++) begin
      int f;
      f = 0;
      while (f < NF + 300) begin
        enc_rec_t r;
        r.dur   = 8'($urandom_range(1, 12));
        r.inten = 8'($urandom_range(0, 255));
        if (u == 3) pst.push_back(f);
        for (int k = 0; k < r.dur; k++) if (f + k < NF) timeline[u][f + k] = r.inten;
        f += r.dur;
        if (u < 3) ring[u].push_back(r); else pending[u].push_back(r);
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (!idle) @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      // pixel 3: every tenth frame, release the records that start at or before it
      if (f % 10 == 0)
        while (pst.size() > 0 && pst[0] <= f) begin
          ring[3].push_back(pending[3].pop_front());
          void'(pst.pop_front());
        end
      @(negedge clk) frame_start = 1;
      @(negedge clk) frame_start = 0;
      for (int u = 0; u < NU; u++) begin
        @(posedge clk);
        while (!(out_valid && out_ready)) @(posedge clk);
        if (u < 3) begin
          checks++;
          if (out_pix != timeline[u][f]) begin
            failures++; $display("FAIL f%0d u%0d got %0d exp %0d", f, u, out_pix, timeline[u][f]);
          end
        end else begin
          // right after a release (f mod 10 == 0) the pixel must be aligned again
          if (f % 10 == 0 && f >= 10) begin
            checks++;
            late_checked++;
            if (out_pix != timeline[u][f]) begin
              failures++; $display("FAIL late pixel f%0d got %0d exp %0d", f, out_pix, timeline[u][f]);
            end
          end
        end
      end
      while (!idle) @(posedge clk);
    end
    checks++;
    if (underrun_cnt == 0 || late_checked == 0) begin failures++; $display("FAIL no underrun exercised"); end
    $display("underruns %0d", underrun_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
