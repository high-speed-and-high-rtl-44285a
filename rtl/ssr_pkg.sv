// ssr_pkg -- constants and types shared by the spike-stream reconstruction engine.
//
// The engine turns the 1-bit spike frames of a 400x250 spike camera (20,000 frames/s)
// into 8-bit images using first/second-order stability segmentation (FSR/SSR).
// The numbers here are the engine's defaults: 16 spikes per input word, batches of 32
// frames, 100 stability modules of 1000 pixels each, 4 record writers and 8 decoders,
// and a 16-bit encoded record made of an 8-bit segment duration (frames) and an 8-bit
// intensity. The byte order of the record (duration high) is this design's choice.
package ssr_pkg;

  // Image and stream geometry
  localparam int unsigned DEF_IMG_W   = 400;
  localparam int unsigned DEF_IMG_H   = 250;
  localparam int unsigned DEF_LANES   = 16;    // spikes delivered per clock
  localparam int unsigned DEF_BATCH   = 32;    // frames cached before reconstruction
  localparam int unsigned DEF_PPM     = 1000;   // pixels served by one stability module
  localparam int unsigned DEF_WRITERS = 4;     // record (URAM) writers
  localparam int unsigned DEF_DEC     = 8;     // output decoders
  localparam int unsigned PIX_W       = 17;    // pixel number width (100,000 pixels)

  // Encoded reconstruction information: how many frames a stable segment lasts and
  // the intensity reconstructed for it.
  typedef struct packed {
    logic [7:0] dur;
    logic [7:0] inten;
  } enc_rec_t;

  // A record on its way from a stability module to a writer.
  typedef struct packed {
    logic [PIX_W-1:0] pix;
    enc_rec_t         rec;
  } pix_rec_t;

  // Per-pixel state kept by a stability module between batches.
  //   gap      frames since the last spike (interval counter of S0 -> S1)
  //   seg_n    number of intervals T0(i) in the open segment (N)
  //   seg_sum  sum of those intervals (duration in frames)
  //   e1, e2   the two admissible interval values of the open segment (e2 may be unset)
  //   seen, last_idx, f1, f2, f1_vld, f2_vld
  //            second-order (SSR) bookkeeping per interval value: index of its last
  //            occurrence in the segment and the admissible values of its own
  //            interval stream S2
  typedef struct packed {
    logic [7:0]      gap;
    logic [7:0]      seg_n;
    logic [7:0]      seg_sum;
    logic [7:0]      e1;
    logic [7:0]      e2;
    logic            e2_vld;
    logic [1:0]      seen;
    logic [1:0][7:0] last_idx;
    logic [1:0][7:0] f1;
    logic [1:0][7:0] f2;
    logic [1:0]      f1_vld;
    logic [1:0]      f2_vld;
  } stab_state_t;

  // Reconstructed intensity of a segment: I = 255 / (sum/N) = floor(255*N/sum).
  function automatic logic [7:0] recon_intensity(input logic [7:0] n, input logic [7:0] sum);
    logic [15:0] num;
    logic [15:0] q;
    num = 16'(n) * 16'd255;
    q   = (sum == 8'd0) ? 16'd0 : num / 16'(sum);
    return (q > 16'd255) ? 8'd255 : q[7:0];
  endfunction

  // Zero-order stability rule on a stream of values: it may hold one value, or two
  // values that differ by exactly 1.  Returns whether v is admissible given the values
  // seen so far (a, optional b).
  function automatic logic zero_order_ok(input logic [7:0] v, input logic [7:0] a,
                                         input logic [7:0] b, input logic b_vld);
    if (v == a) return 1'b1;
    if (b_vld) return v == b;
    return (v == a + 8'd1) || (v + 8'd1 == a);
  endfunction

  // Engine status, brought out of the top level.
  typedef struct packed {
    logic [31:0] frames_in;          // spike frames received
    logic [31:0] frames_out;         // reconstructed frames sent
    logic [15:0] batches;            // batches handed to the readers
    logic [15:0] overrun_cnt;        // batches that missed the 32-frame deadline
    logic [31:0] last_batch_cycles;  // clocks the readers needed for the last batch
    logic [31:0] n_break_fsr;        // segments closed by the first-order rule
    logic [31:0] n_break_ssr;        // segments closed by the second-order rule
    logic [31:0] n_break_cap;        // segments closed at the 255-frame limit
    logic [31:0] rec_drop_cnt;       // records lost to a full pixel ring
    logic [31:0] underrun_cnt;       // frames shown before their record arrived
  } recon_status_t;

endpackage
