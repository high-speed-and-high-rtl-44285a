// tb_spike_recon_full -- the engine at its full size: 400x250 pixels, 16 spikes per
// clock, 32-frame batches, 100 stability modules, 8 decoders, output lag of 64 frames.
//
// Every pixel follows a known periodic spike pattern whose interval stream is
// P, P, Q, Q, P, P, Q, Q, ... with P = 4 + (p mod 5) and Q = P + 3 frames (counting from an
// assumed spike just before frame 0). Each pair of equal intervals is a stable segment that
// the next pair breaks, so the expected picture is known in closed form: frames of a
// P-segment show floor(255/P), frames of a Q-segment floor(255/Q). 66 frames are
// streamed at the full input rate (6250 words per frame, one per clock), two full batches
// and the start of a third; output frames 0 and 1, released once frame 65 has arrived,
// are compared pixel by pixel. The test also checks that no batch overran its
// 32-frame window, that the readers finish a batch well within the 240,000-clock budget
// (1.6 ms at 150 MHz), that one output frame takes about 3 clocks per pixel per decoder
// (at most 40,000 clocks), and that no record was dropped or shown late.
module tb_spike_recon_full;
  import ssr_pkg::*;
  localparam int IW = 400, IH = 250, NP = IW * IH, WPF = NP / 16, NFR = 66, NOUT = NFR - 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  function automatic logic spike(int p, int f);
    int pp, q, l, t;
    pp = 4 + p % 5;
    q  = pp + 3;
    l  = 2 * pp + 2 * q;
    t  = (f + 1) % l;
    return (t == pp) || (t == 2 * pp) || (t == 2 * pp + q) || (t == 0);
  endfunction

  function automatic logic [7:0] expected(int p, int f);
    int pp, q, l;
    pp = 4 + p % 5;
    q  = pp + 3;
    l  = 2 * pp + 2 * q;
    return ((f % l) < 2 * pp) ? 8'(255 / pp) : 8'(255 / q);
  endfunction

  logic            spk_valid;
  logic [15:0]     spk_data;
  logic            pix_valid, pix_ready, pix_sof, pix_eol;
  logic [7:0][7:0] pix_data;
  recon_status_t   status;

  spike_recon_top dut (
    .clk, .rst_n, .spk_valid, .spk_data,
    .pix_valid, .pix_ready, .pix_data, .pix_sof, .pix_eol, .status);

  assign pix_ready = 1'b1;

  int frame = -1, word = 0, cyc = 0, t_sof = 0, max_frame_cyc = 0, bad = 0;
  always @(posedge clk) cyc++;

  // progress report
  always @(posedge clk) if (cyc % 100000 == 0)
    $display("cycle %0d: frames in %0d out %0d, batches %0d (last %0d clocks), overruns %0d drops %0d underruns %0d",
             cyc, status.frames_in, status.frames_out, status.batches, status.last_batch_cycles,
             status.overrun_cnt, status.rec_drop_cnt, status.underrun_cnt);

  always @(posedge clk) if (rst_n && pix_valid && pix_ready) begin
    if (pix_sof) begin
      if (frame >= 0 && cyc - t_sof > max_frame_cyc) max_frame_cyc = cyc - t_sof;
      frame++;
      word  = 0;
      t_sof = cyc;
    end
    if (frame < NOUT) begin
      for (int d = 0; d < 8; d++) begin
        checks++;
        if (pix_data[d] != expected(word * 8 + d, frame)) begin
          failures++;
          bad++;
          if (bad < 10) $display("FAIL frame %0d pixel %0d got %0d exp %0d", frame, word * 8 + d,
                                 pix_data[d], expected(word * 8 + d, frame));
        end
      end
    end
    word++;
  end

  initial begin
    #6_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    spk_valid = 0;
    spk_data  = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NFR; f++)
      for (int w = 0; w < WPF; w++) begin
        @(negedge clk);
        spk_valid = 1;
        for (int i = 0; i < 16; i++) spk_data[i] = spike(w * 16 + i, f);
      end
    @(negedge clk) spk_valid = 0;
    while (status.frames_out < 32'(NOUT)) @(negedge clk);
    repeat (10) @(negedge clk);

    $display("frames in %0d out %0d, batches %0d, last batch %0d clocks, output frame %0d clocks",
             status.frames_in, status.frames_out, status.batches, status.last_batch_cycles, max_frame_cyc);
    $display("breaks fsr %0d ssr %0d cap %0d, overruns %0d drops %0d underruns %0d",
             status.n_break_fsr, status.n_break_ssr, status.n_break_cap,
             status.overrun_cnt, status.rec_drop_cnt, status.underrun_cnt);
    checks++;
    if (status.overrun_cnt != 0 || status.rec_drop_cnt != 0 || status.underrun_cnt != 0) begin
      failures++; $display("FAIL overrun, drop or underrun");
    end
    checks++;
    if (status.batches != 16'(NFR / 32) || status.last_batch_cycles == 0 || status.last_batch_cycles > 240_000) begin
      failures++; $display("FAIL batch count or time");
    end
    checks++;
    if (max_frame_cyc == 0 || max_frame_cyc > 40_000) begin failures++; $display("FAIL output frame time"); end
    checks++;
    if (status.n_break_fsr == 0) begin failures++; $display("FAIL no segment closed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
