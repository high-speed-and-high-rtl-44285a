// stability_module -- per-pixel stability segmentation and intensity encoder (FSR/SSR).
//
// A spike stream S0 from one pixel is cut into stable segments. The interval stream S1
// (frames between successive spikes) of a segment must obey the zero-order stability
// rule: it holds one value e1, or two values e1/e2 that differ by 1. When a new interval
// breaks the rule the open segment is closed and encoded as {sum of its intervals,
// 255*N/sum} (duration in frames and mean-interval intensity), and the new interval
// opens the next segment. With ORDER = 2 (second-order stability, SSR) each of the two
// interval values additionally carries its own interval stream S2 (distance, in S1
// elements, between its successive occurrences), which must obey the same rule; a
// violation there closes the segment too. ORDER = 1 gives first-order stability (FSR).
//
// Datapath: a 32-bit sequence (bit t = frame t of the batch) is accepted from a URAM
// reader with the pixel's slot and number. The pixel's state is loaded from a local
// state memory (PIX_PER_MOD entries). The interval calculator walks one frame per clock
// and pushes each finished interval into a FIFO; the stability processor pops one
// interval per clock, updates (e1, e2), N and sum, and emits records through a
// valid/ready output register. When all 32 frames are consumed the state is written
// back and the module is ready for the next pixel: about 34 clocks per pixel when the
// output is not stalled.
//
// Follows the paper: interval stream -> FIFO -> processor holding (e1,e2) and T0(i);
// record = number of stable frames + intensity 255/mean interval; reset with the new
// element on a break. This design's own choices: a segment is also closed when its
// duration would exceed the 8-bit field (255 frames); a pixel that stays dark for 255
// frames yields an interval of 255; counting starts at reset as if a spike had fired in
// the frame before; the state memory is cleared by a sweep after reset (PIX_PER_MOD
// clocks, seq_ready low meanwhile).
module stability_module
  import ssr_pkg::*;
#(
  parameter int unsigned PIX_PER_MOD = ssr_pkg::DEF_PPM,
  parameter int unsigned BATCH       = ssr_pkg::DEF_BATCH,
  parameter int unsigned ORDER       = 2,
  parameter int unsigned FIFO_DEPTH  = 4,
  localparam int unsigned SW = (PIX_PER_MOD > 1) ? $clog2(PIX_PER_MOD) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // sequence input from a URAM reader
  input  logic             seq_valid,
  output logic             seq_ready,
  input  logic [SW-1:0]    seq_slot,
  input  logic [PIX_W-1:0] seq_pix,
  input  logic [BATCH-1:0] seq_bits,
  // encoded record output
  output logic             rec_valid,
  input  logic             rec_ready,
  output pix_rec_t         rec_out,
  // status
  output logic             busy,
  output logic [15:0]      n_break_fsr,
  output logic [15:0]      n_break_ssr,
  output logic [15:0]      n_break_cap
);
  localparam int unsigned TW = $clog2(BATCH + 1);

  typedef enum logic [1:0] {S_INIT, S_IDLE, S_RUN} st_e;
  st_e st_q;

  stab_state_t      st_mem [PIX_PER_MOD];
  stab_state_t      w_q;            // working copy of the current pixel's state
  stab_state_t      w_next;
  logic [BATCH-1:0] bits_q;
  logic [TW-1:0]    t_q;
  logic [SW-1:0]    slot_q;
  logic [PIX_W-1:0] pix_q;
  logic [SW-1:0]    init_idx;

  // ---------------- interval calculator (S0 -> S1) ----------------
  logic       iv_push;
  logic [7:0] iv_val;
  logic [7:0] gap_inc;
  logic       f_empty, f_full;
  logic [7:0] f_dout;
  logic       run_step;

  assign run_step = (st_q == S_RUN) && (t_q < TW'(BATCH)) && !f_full;
  assign gap_inc  = w_q.gap + 8'd1;

  always_comb begin
    iv_push = 1'b0;
    iv_val  = gap_inc;
    if (run_step) begin
      if (bits_q[t_q[$clog2(BATCH)-1:0]] || gap_inc == 8'd255) iv_push = 1'b1;
    end
  end

  // ---------------- stability processor ----------------
  logic       pop;
  logic       emit;
  logic       brk_fsr, brk_ssr, brk_cap;
  enc_rec_t   emit_rec;

  assign pop = (st_q == S_RUN) && !f_empty && (!rec_valid || rec_ready);

  sync_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_s1_fifo (
    .clk, .rst_n,
    .push (iv_push), .din(iv_val),
    .pop  (pop),     .dout(f_dout),
    .empty(f_empty), .full(f_full)
  );

  always_comb begin
    logic [7:0] v;
    logic       fsr_ok, ssr_ok, cap_ok;
    logic       sl;
    logic [7:0] d;

    v        = f_dout;
    w_next   = w_q;
    emit     = 1'b0;
    brk_fsr  = 1'b0;
    brk_ssr  = 1'b0;
    brk_cap  = 1'b0;
    emit_rec = '{dur: w_q.seg_sum, inten: recon_intensity(w_q.seg_n, w_q.seg_sum)};
    sl       = (v == w_q.e1) ? 1'b0 : 1'b1;
    d        = w_q.seg_n - w_q.last_idx[sl];

    fsr_ok = zero_order_ok(v, w_q.e1, w_q.e2, w_q.e2_vld);
    ssr_ok = 1'b1;
    if (ORDER >= 2 && w_q.seen[sl] && w_q.f1_vld[sl])
      ssr_ok = zero_order_ok(d, w_q.f1[sl], w_q.f2[sl], w_q.f2_vld[sl]);
    cap_ok = (9'(w_q.seg_sum) + 9'(v)) <= 9'd255;

    // interval calculator's gap counter
    if (run_step) w_next.gap = iv_push ? 8'd0 : gap_inc;

    if (pop) begin
      if (w_q.seg_n != 8'd0 && fsr_ok && ssr_ok && cap_ok) begin
        // the interval joins the open segment
        if (!w_q.e2_vld && v != w_q.e1) begin
          w_next.e2     = v;
          w_next.e2_vld = 1'b1;
        end
        if (ORDER >= 2) begin
          if (w_q.seen[sl]) begin
            if (!w_q.f1_vld[sl]) begin
              w_next.f1[sl]     = d;
              w_next.f1_vld[sl] = 1'b1;
            end else if (!w_q.f2_vld[sl] && d != w_q.f1[sl]) begin
              w_next.f2[sl]     = d;
              w_next.f2_vld[sl] = 1'b1;
            end
          end
          w_next.seen[sl]     = 1'b1;
          w_next.last_idx[sl] = w_q.seg_n;
        end
        w_next.seg_n   = w_q.seg_n + 8'd1;
        w_next.seg_sum = w_q.seg_sum + v;
      end else begin
        // close the open segment (if any) and restart with this interval
        if (w_q.seg_n != 8'd0) begin
          emit    = 1'b1;
          brk_fsr = !fsr_ok;
          brk_ssr = fsr_ok && !ssr_ok;
          brk_cap = fsr_ok && ssr_ok && !cap_ok;
        end
        w_next.seg_n       = 8'd1;
        w_next.seg_sum     = v;
        w_next.e1          = v;
        w_next.e2          = 8'd0;
        w_next.e2_vld      = 1'b0;
        w_next.seen        = 2'b01;
        w_next.last_idx    = '0;
        w_next.f1          = '0;
        w_next.f2          = '0;
        w_next.f1_vld      = 2'b00;
        w_next.f2_vld      = 2'b00;
      end
    end
  end

  // ---------------- control ----------------
  assign seq_ready = (st_q == S_IDLE);
  assign busy      = (st_q != S_IDLE) || rec_valid;

  always_ff @(posedge clk) begin
    if (st_q == S_INIT) st_mem[init_idx] <= '0;
    else if (st_q == S_RUN && t_q == TW'(BATCH) && f_empty) st_mem[slot_q] <= w_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q        <= S_INIT;
      init_idx    <= '0;
      w_q         <= '0;
      bits_q      <= '0;
      t_q         <= '0;
      slot_q      <= '0;
      pix_q       <= '0;
      rec_valid   <= 1'b0;
      rec_out     <= '0;
      n_break_fsr <= '0;
      n_break_ssr <= '0;
      n_break_cap <= '0;
    end else begin
      if (rec_valid && rec_ready) rec_valid <= 1'b0;
      if (emit) begin
        rec_valid   <= 1'b1;
        rec_out     <= '{pix: pix_q, rec: emit_rec};
        n_break_fsr <= n_break_fsr + 16'(brk_fsr);
        n_break_ssr <= n_break_ssr + 16'(brk_ssr);
        n_break_cap <= n_break_cap + 16'(brk_cap);
      end
      unique case (st_q)
        S_INIT: begin
          init_idx <= init_idx + 1'b1;
          if (init_idx == SW'(PIX_PER_MOD - 1)) st_q <= S_IDLE;
        end
        S_IDLE: if (seq_valid) begin
          w_q    <= st_mem[seq_slot];
          bits_q <= seq_bits;
          slot_q <= seq_slot;
          pix_q  <= seq_pix;
          t_q    <= '0;
          st_q   <= S_RUN;
        end
        S_RUN: begin
          w_q <= w_next;
          if (run_step) t_q <= t_q + 1'b1;
          if (t_q == TW'(BATCH) && f_empty) st_q <= S_IDLE;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // A sequence is only offered while the module is ready, and it may not be withdrawn.
  a_slot_range: assert property (@(posedge clk) disable iff (!rst_n)
                                 seq_valid |-> 32'(seq_slot) < PIX_PER_MOD);
  a_rec_hold:   assert property (@(posedge clk) disable iff (!rst_n)
                                 rec_valid && !rec_ready |=> rec_valid && $stable(rec_out));
endmodule
