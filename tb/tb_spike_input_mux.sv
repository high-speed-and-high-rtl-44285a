// tb_spike_input_mux -- checks word/frame counting, ping-pong halves and batch pulses.
//
// Small geometry (5 words per frame, 4-frame batches). Random 16-bit words arrive with
// random gaps; an independent counter model predicts, for each accepted word, the
// registered write (half, frame slot, word address, data) one clock later, and the
// batch_done pulse with the half just filled after every fourth frame.
module tb_spike_input_mux;
  localparam int W = 5, B = 4, L = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic spk_valid = 0;
  logic [L-1:0] spk_data = '0;
  logic wr_en, wr_half, batch_done, batch_half;
  logic [1:0] wr_frame;
  logic [2:0] wr_word;
  logic [L-1:0] wr_data;
  logic [31:0] frames_in;

  spike_input_mux #(.LANES(L), .WORDS(W), .BATCH(B)) dut (.*);

  initial begin
    #200_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n = 0;          // words accepted so far
  int batches = 0;
  logic exp_wr = 0;
  int   exp_n;
  logic [L-1:0] exp_d;

  always @(posedge clk) if (rst_n) begin
    // check what was scheduled at the previous edge
    checks++;
    if (wr_en !== exp_wr) begin failures++; $display("FAIL wr_en"); end
    if (exp_wr) begin
      int word, frame, half;
      word  = exp_n % W;
      frame = (exp_n / W) % B;
      half  = (exp_n / (W * B)) % 2;
      checks++;
      if (wr_word != 3'(word) || wr_frame != 2'(frame) || wr_half != 1'(half) || wr_data != exp_d) begin
        failures++;
        $display("FAIL write n=%0d got w%0d f%0d h%0d", exp_n, wr_word, wr_frame, wr_half);
      end
      checks++;
      if (batch_done != (word == W - 1 && frame == B - 1) || (batch_done && batch_half != 1'(half))) begin
        failures++;
        $display("FAIL batch_done at n=%0d", exp_n);
      end
      if (batch_done) batches++;
    end else begin
      checks++;
      if (batch_done) begin failures++; $display("FAIL stray batch_done"); end
    end
    exp_wr = spk_valid;
    exp_n  = n;
    exp_d  = spk_data;
    if (spk_valid) n++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (300) begin
      @(negedge clk);
      spk_valid = ($urandom_range(0, 3) != 0);
      spk_data  = L'($urandom);
    end
    @(negedge clk) spk_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (frames_in != 32'(n / W)) begin failures++; $display("FAIL frames_in %0d", frames_in); end
    checks++;
    if (batches != n / (W * B) || batches < 2) begin failures++; $display("FAIL batches %0d", batches); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
