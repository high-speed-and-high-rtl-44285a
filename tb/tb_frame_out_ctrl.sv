// tb_frame_out_ctrl -- frame lag, lockstep packing and frame/row markers.
//
// Two fake decoders answer each pixel after random delays with a value that encodes
// frame and position. Input frames arrive every 150 clocks; a frame may only start once
// frames_in > frames_out + LAG, and every output word must carry both decoders' values
// for the same position, with pix_sof on word 0 and pix_eol at each row end.
module tb_frame_out_ctrl;
  localparam int ND = 2, NU = 6, RW = 3, LAG = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] frames_in = 0, frames_out;
  logic [ND-1:0] dec_idle, dec_valid, dec_ready;
  logic dec_start, pix_valid, pix_ready, pix_sof, pix_eol;
  logic [ND-1:0][7:0] dec_pix, pix_data;

  frame_out_ctrl #(.N_DEC(ND), .NU(NU), .ROW_WORDS(RW), .LAG(LAG)) dut (.*);

  // fake decoders
  int pos [ND];
  int delay [ND];
  bit run [ND];
  int frame_no = 0;
  always @(posedge clk) begin
    for (int d = 0; d < ND; d++) begin
      if (dec_start) begin run[d] <= 1; pos[d] <= 0; delay[d] <= $urandom_range(0, 3); end
      else if (run[d]) begin
        if (dec_valid[d] && dec_ready[d]) begin
          if (pos[d] == NU - 1) run[d] <= 0;
          pos[d]   <= pos[d] + 1;
          delay[d] <= $urandom_range(0, 3);
        end else if (delay[d] > 0) delay[d] <= delay[d] - 1;
      end
    end
  end
  always_comb for (int d = 0; d < ND; d++) begin
    dec_idle[d]  = !run[d];
    dec_valid[d] = run[d] && delay[d] == 0;
    dec_pix[d]   = 8'(frame_no * 16 + pos[d] * 2 + d);
  end
  always @(negedge clk) pix_ready <= ($urandom_range(0, 3) != 0);

  int word = 0;
  always @(posedge clk) if (rst_n) begin
    if (dec_start) begin
      checks++;
      if (!(frames_in > frames_out + LAG)) begin failures++; $display("FAIL early start"); end
    end
    if (pix_valid && pix_ready) begin
      for (int d = 0; d < ND; d++) begin
        checks++;
        if (pix_data[d] != 8'(frame_no * 16 + word * 2 + d)) begin
          failures++; $display("FAIL frame %0d word %0d lane %0d = %0d", frame_no, word, d, pix_data[d]);
        end
      end
      checks++;
      if (pix_sof != (word == 0) || pix_eol != (word % RW == RW - 1)) begin failures++; $display("FAIL markers"); end
      if (word == NU - 1) begin word = 0; frame_no++; end else word++;
    end
  end

  initial begin
    #200_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < ND; d++) begin run[d] = 0; pos[d] = 0; delay[d] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (20) begin
      repeat (150) @(negedge clk);
      frames_in = frames_in + 1;
    end
    repeat (200) @(negedge clk);
    checks++;
    if (frames_out != 32'(20 - LAG) || frame_no != 20 - LAG) begin
      failures++; $display("FAIL frames_out %0d words-frames %0d", frames_out, frame_no);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
