// tb_batch_ctrl -- start pulses, half selection, deadline overruns and batch timing.
//
// Three fake readers go busy for a set number of clocks after each start. Batches are
// announced at different spacings: wide enough (no overrun), and closer than the
// readers' run time (overrun counted, the waiting batch still started afterwards).
module tb_batch_ctrl;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic batch_done = 0, batch_half = 0;
  logic [N-1:0] rd_idle;
  logic start, rd_half, running;
  logic [15:0] overrun_cnt, batches_started;
  logic [31:0] last_batch_cycles;

  batch_ctrl #(.N_READERS(N)) dut (.*);

  int busy_left [N];
  int run_len = 50;
  always @(posedge clk) begin
    for (int r = 0; r < N; r++) begin
      if (start) busy_left[r] <= run_len + 5 * r;
      else if (busy_left[r] > 0) busy_left[r] <= busy_left[r] - 1;
    end
  end
  always_comb for (int r = 0; r < N; r++) rd_idle[r] = (busy_left[r] == 0);

  int starts = 0;
  logic last_half;
  always @(posedge clk) if (start) begin
    starts++;
    checks++;
    if (rd_half != last_half) begin failures++; $display("FAIL rd_half %0d exp %0d", rd_half, last_half); end
  end

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic announce(logic h);
    @(negedge clk);
    batch_done = 1; batch_half = h; last_half = h;
    @(negedge clk);
    batch_done = 0;
  endtask

  initial begin
    for (int r = 0; r < N; r++) busy_left[r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // well spaced batches
    for (int b = 0; b < 4; b++) begin
      announce(1'(b));
      repeat (100) @(negedge clk);
    end
    checks++;
    if (starts != 4 || overrun_cnt != 0) begin failures++; $display("FAIL starts=%0d overruns=%0d", starts, overrun_cnt); end
    checks++;
    // longest reader: run_len + 10 busy clocks after the start edge
    if (last_batch_cycles < 32'(run_len + 10) || last_batch_cycles > 32'(run_len + 12)) begin
      failures++; $display("FAIL last_batch_cycles=%0d", last_batch_cycles);
    end
    // a batch arriving while the readers still run is an overrun
    announce(1'b0);
    repeat (20) @(negedge clk);
    announce(1'b1);
    repeat (150) @(negedge clk);
    checks++;
    if (overrun_cnt != 1 || starts != 6) begin failures++; $display("FAIL overrun=%0d starts=%0d", overrun_cnt, starts); end
    checks++;
    if (batches_started != 16'd6) begin failures++; $display("FAIL batches_started"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
