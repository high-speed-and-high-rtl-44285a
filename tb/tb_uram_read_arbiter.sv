// tb_uram_read_arbiter -- one-hot, request-only grants in round-robin order.
//
// Seven requesters raise requests at random and hold them until granted. A reference
// round-robin pointer predicts every grant; a requester must never wait more than six
// grants.
module tb_uram_read_arbiter;
  localparam int N = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] req = '0, gnt;
  uram_read_arbiter #(.N(N)) dut (.*);

  int ptr = 0;
  logic [N-1:0] exp = '0;
  int wait_cnt [N];

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) wait_cnt[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (2000) begin
      @(negedge clk);
      req = req & ~exp;     // granted requests are dropped after the grant edge
      for (int i = 0; i < N; i++) if (!req[i] && $urandom_range(0, 2) == 0) req[i] = 1'b1;
      #1;
      exp = '0;
      for (int k = 0; k < N; k++) begin
        int idx;
        idx = (ptr + k) % N;
        if (exp == '0 && req[idx]) exp[idx] = 1'b1;
      end
      checks++;
      if (gnt != exp) begin failures++; $display("FAIL req=%b gnt=%b exp=%b", req, gnt, exp); end
      for (int i = 0; i < N; i++) begin
        if (exp[i]) begin ptr = (i + 1) % N; wait_cnt[i] = 0; end
        else if (req[i]) begin
          wait_cnt[i]++;
          checks++;
          if (wait_cnt[i] > N - 1) begin failures++; $display("FAIL starvation %0d", i); end
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
