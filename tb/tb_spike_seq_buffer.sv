// tb_spike_seq_buffer -- fills both halves of a small buffer and reads it back.
//
// 6 words x 4 frames x 16 lanes. Every (half, frame, word) is written with random data
// in a random order; then every (half, word) is read and the registered read data must
// hold, for each frame t, exactly the word written to that frame. A second pass writes
// one half while the other is read, as in operation.
module tb_spike_seq_buffer;
  localparam int W = 6, B = 4, L = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0, wr_half = 0, rd_en = 0, rd_half = 0;
  logic [1:0] wr_frame = 0;
  logic [2:0] wr_word = 0, rd_word = 0;
  logic [L-1:0] wr_data = 0;
  logic [B-1:0][L-1:0] rd_data;
  logic [L-1:0] model [2][B][W];

  spike_seq_buffer #(.LANES(L), .WORDS(W), .BATCH(B)) dut (.*);

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int h, int f, int w);
    @(negedge clk);
    wr_en = 1; wr_half = 1'(h); wr_frame = 2'(f); wr_word = 3'(w);
    wr_data = L'($urandom);
    model[h][f][w] = wr_data;
  endtask

  task automatic rd_check(int h, int w);
    @(negedge clk);
    rd_en = 1; rd_half = 1'(h); rd_word = 3'(w);
    @(negedge clk);
    rd_en = 0;
    for (int f = 0; f < B; f++) begin
      checks++;
      if (rd_data[f] != model[h][f][w]) begin
        failures++;
        $display("FAIL h%0d f%0d w%0d got %h exp %h", h, f, w, rd_data[f], model[h][f][w]);
      end
    end
  endtask

  initial begin
    for (int h = 0; h < 2; h++) for (int f = 0; f < B; f++) for (int w = W - 1; w >= 0; w--) wr(h, f, w);
    @(negedge clk) wr_en = 0;
    for (int h = 0; h < 2; h++) for (int w = 0; w < W; w++) rd_check(h, w);
    // overwrite half 0 while reading half 1
    for (int w = 0; w < W; w++) begin
      fork
        wr(0, w % B, w);
        begin @(negedge clk); end
      join
    end
    @(negedge clk) wr_en = 0;
    for (int h = 0; h < 2; h++) for (int w = 0; w < W; w++) rd_check(h, w);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
