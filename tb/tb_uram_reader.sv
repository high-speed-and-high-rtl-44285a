// tb_uram_reader -- checks that every pixel's sequence reaches the right module.
//
// A reader with 8 lanes, 4 modules of 2 lanes each, 8-frame sequences and words 2..4 of
// a modelled buffer. The test grants the read port after random delays and answers one
// clock later from its own memory model; module readiness is random. Every hand-over is
// checked against the expected pixel number, slot and bit sequence, in order, and the
// reader must report done after the last one.
module tb_uram_reader;
  localparam int L = 8, B = 8, NM = 4, LPM = 2, BASE = 2, NW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, half = 0, done, req, gnt = 0;
  logic [3:0] rd_word;
  logic [B-1:0][L-1:0] rd_data;
  logic seq_valid;
  logic [NM-1:0] seq_ready = '0;
  logic [2:0] seq_slot;
  logic [NM-1:0][ssr_pkg::PIX_W-1:0] seq_pix;
  logic [NM-1:0][B-1:0] seq_bits;

  uram_reader #(.LANES(L), .BATCH(B), .NMODS(NM), .LPM(LPM), .BASE_WORD(BASE), .NWORDS(NW),
                .AW(4), .SW(3)) dut (.*);

  logic [B-1:0][L-1:0] mem [2][16];

  // buffer model: registered read one clock after the grant
  always @(posedge clk) if (gnt && req) rd_data <= mem[half][rd_word];
  always @(negedge clk) begin
    gnt       <= req && ($urandom_range(0, 2) == 0);
    seq_ready <= NM'($urandom);
  end

  int hand = 0;
  always @(posedge clk) if (rst_n && seq_valid) begin
    int w, i;
    w = hand / LPM;
    i = hand % LPM;
    checks++;
    if (&seq_ready !== 1'b1) begin failures++; $display("FAIL valid without all ready"); end
    checks++;
    if (seq_slot != 3'(w * LPM + i)) begin failures++; $display("FAIL slot %0d", seq_slot); end
    for (int k = 0; k < NM; k++) begin
      logic [B-1:0] eb;
      for (int t = 0; t < B; t++) eb[t] = mem[half][BASE + w][t][k * LPM + i];
      checks++;
      if (seq_pix[k] != ssr_pkg::PIX_W'((BASE + w) * L + k * LPM + i) || seq_bits[k] != eb) begin
        failures++;
        $display("FAIL hand %0d mod %0d pix %0d bits %b exp %b", hand, k, seq_pix[k], seq_bits[k], eb);
      end
    end
    hand++;
  end

  initial begin
    #200_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int h = 0; h < 2; h++) for (int a = 0; a < 16; a++) for (int t = 0; t < B; t++) mem[h][a][t] = L'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      hand = 0;
      @(negedge clk);
      half = 1'(run); start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (hand != NW * LPM) begin failures++; $display("FAIL %0d hand-overs", hand); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
