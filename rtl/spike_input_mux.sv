// spike_input_mux -- writes the camera's frame-ordered spike words into the sequence buffer.
//
// The camera delivers each 1-bit spike frame row by row, 16 adjacent pixels per clock
// (word k of a frame = pixels 16k..16k+15 in raster order, bit i = pixel 16k+i). This
// block counts words and frames and routes every word to the frame memory of its frame
// slot (0..BATCH-1) in the buffer half being filled, so that after BATCH frames the
// buffer holds, at every word address, BATCH time-consecutive spikes of 16 pixels. It
// then swaps halves (ping-pong) and pulses batch_done with the half that is now full.
//
// Timing: the write port is registered (one clock after spk_valid). batch_done is
// registered together with the last write of the batch. The input is never stalled.
// Following the paper: 16 spikes per clock, 32-frame batches, two halves so that writing
// and reading overlap. Own choice: no frame-start marker; counting begins at reset.
module spike_input_mux #(
  parameter int unsigned LANES = ssr_pkg::DEF_LANES,
  parameter int unsigned WORDS = (ssr_pkg::DEF_IMG_W * ssr_pkg::DEF_IMG_H) / ssr_pkg::DEF_LANES,
  parameter int unsigned BATCH = ssr_pkg::DEF_BATCH,
  localparam int unsigned AW = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned FW = (BATCH > 1) ? $clog2(BATCH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             spk_valid,
  input  logic [LANES-1:0] spk_data,
  output logic             wr_en,
  output logic             wr_half,
  output logic [FW-1:0]    wr_frame,
  output logic [AW-1:0]    wr_word,
  output logic [LANES-1:0] wr_data,
  output logic             batch_done,
  output logic             batch_half,
  output logic [31:0]      frames_in
);
  logic [AW-1:0] word_q;
  logic [FW-1:0] frame_q;
  logic          half_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word_q     <= '0;
      frame_q    <= '0;
      half_q     <= 1'b0;
      wr_en      <= 1'b0;
      wr_half    <= 1'b0;
      wr_frame   <= '0;
      wr_word    <= '0;
      wr_data    <= '0;
      batch_done <= 1'b0;
      batch_half <= 1'b0;
      frames_in  <= '0;
    end else begin
      wr_en      <= spk_valid;
      batch_done <= 1'b0;
      if (spk_valid) begin
        wr_half  <= half_q;
        wr_frame <= frame_q;
        wr_word  <= word_q;
        wr_data  <= spk_data;
        if (word_q == AW'(WORDS - 1)) begin
          word_q    <= '0;
          frames_in <= frames_in + 32'd1;
          if (frame_q == FW'(BATCH - 1)) begin
            frame_q    <= '0;
            half_q     <= ~half_q;
            batch_done <= 1'b1;
            batch_half <= half_q;
          end else begin
            frame_q <= frame_q + 1'b1;
          end
        end else begin
          word_q <= word_q + 1'b1;
        end
      end
    end
  end
endmodule
