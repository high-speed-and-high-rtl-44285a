// frame_out_ctrl -- schedules output frames and packs the eight decoders' values.
//
// Output frame f is started once input frame f+LAG has arrived (frames_in > f + LAG),
// which leaves time for the batch holding frame f to be read, segmented and written
// back as records. The eight decoders then scan their pixels in lockstep; in each output
// word pixel d comes from decoder d, so word c carries pixels 8c .. 8c+7 of the frame in
// raster order. pix_sof marks the first word of a frame and pix_eol the last word of a
// row (ROW_WORDS words per row). The frame lag and the stream format are this design's
// choices: the paper only says the decoders align the data to the output protocol and
// that output pixels are 8-bit.
//
// Handshake: pix_valid/pix_ready; pix_valid is high when every decoder has a value, and
// all decoders advance together when the word is taken.
module frame_out_ctrl #(
  parameter int unsigned N_DEC     = ssr_pkg::DEF_DEC,
  parameter int unsigned NU        = (ssr_pkg::DEF_IMG_W * ssr_pkg::DEF_IMG_H) / ssr_pkg::DEF_DEC,
  parameter int unsigned ROW_WORDS = ssr_pkg::DEF_IMG_W / ssr_pkg::DEF_DEC,
  parameter int unsigned LAG       = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [31:0]           frames_in,
  input  logic [N_DEC-1:0]      dec_idle,
  output logic                  dec_start,
  input  logic [N_DEC-1:0]      dec_valid,
  output logic [N_DEC-1:0]      dec_ready,
  input  logic [N_DEC-1:0][7:0] dec_pix,
  output logic                  pix_valid,
  input  logic                  pix_ready,
  output logic [N_DEC-1:0][7:0] pix_data,
  output logic                  pix_sof,
  output logic                  pix_eol,
  output logic [31:0]           frames_out
);
  localparam int unsigned CW = (NU > 1) ? $clog2(NU) : 1;
  localparam int unsigned RW = (ROW_WORDS > 1) ? $clog2(ROW_WORDS) : 1;

  logic          busy_q;
  logic [CW-1:0] c_q;
  logic [RW-1:0] col_q;
  logic          take;

  assign pix_valid = busy_q && (&dec_valid);
  assign pix_data  = dec_pix;
  assign pix_sof   = (c_q == '0);
  assign pix_eol   = (col_q == RW'(ROW_WORDS - 1));
  assign take      = pix_valid && pix_ready;
  assign dec_ready = {N_DEC{take}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q     <= 1'b0;
      dec_start  <= 1'b0;
      c_q        <= '0;
      col_q      <= '0;
      frames_out <= '0;
    end else begin
      dec_start <= 1'b0;
      if (!busy_q) begin
        if (!dec_start && (&dec_idle) && frames_in > frames_out + 32'(LAG)) begin
          dec_start <= 1'b1;
          busy_q    <= 1'b1;
          c_q       <= '0;
          col_q     <= '0;
        end
      end else if (take) begin
        col_q <= (col_q == RW'(ROW_WORDS - 1)) ? '0 : col_q + 1'b1;
        if (c_q == CW'(NU - 1)) begin
          busy_q     <= 1'b0;
          frames_out <= frames_out + 32'd1;
        end else begin
          c_q <= c_q + 1'b1;
        end
      end
    end
  end

endmodule
