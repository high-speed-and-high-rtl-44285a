// tb_rec_router -- every record reaches writer pix mod 4, exactly once and in order.
//
// Ten sources each hold a queue of random records (random pixel numbers); writers take
// records at random. Per source the order must be kept; every delivered record must go
// to the writer given by its pixel number, and all records must be delivered.
module tb_rec_router;
  import ssr_pkg::*;
  localparam int NI = 10, NO = 4, PER = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NI-1:0] in_valid, in_ready;
  pix_rec_t [NI-1:0] in_rec;
  logic [NO-1:0] out_valid, out_ready;
  pix_rec_t [NO-1:0] out_rec;

  rec_router #(.N_IN(NI), .N_OUT(NO)) dut (.*);

  pix_rec_t src_q [NI][$];
  pix_rec_t all_q [$];
  int delivered = 0;

  always_comb for (int i = 0; i < NI; i++) begin
    in_valid[i] = rst_n && src_q[i].size() > 0;
    in_rec[i]   = (src_q[i].size() > 0) ? src_q[i][0] : '0;
  end

  always @(negedge clk) out_ready <= NO'($urandom);

  always @(posedge clk) if (rst_n) begin
    for (int w = 0; w < NO; w++) if (out_valid[w] && out_ready[w]) begin
      checks++;
      delivered++;
      if (32'(out_rec[w].pix) % NO != w) begin failures++; $display("FAIL wrong writer"); end
    end
    for (int i = 0; i < NI; i++) if (in_valid[i] && in_ready[i]) begin
      int hits;
      hits = 0;
      for (int w = 0; w < NO; w++) if (out_valid[w] && out_ready[w] && out_rec[w] == src_q[i][0]) hits++;
      checks++;
      if (hits < 1) begin failures++; $display("FAIL source %0d popped but not delivered", i); end
      void'(src_q[i].pop_front());
    end
  end

  initial begin
    #500_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NI; i++) for (int k = 0; k < PER; k++) begin
      pix_rec_t r;
      r.pix = PIX_W'($urandom_range(0, 9999));
      r.rec = 16'(i * 256 + k);     // unique per source and position
      src_q[i].push_back(r);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    checks++;
    if (delivered != NI * PER) begin failures++; $display("FAIL delivered %0d", delivered); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
