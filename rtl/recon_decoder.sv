// recon_decoder -- expands one pixel column of encoded records back into frames.
//
// Each of the eight decoders serves the pixels p with p mod 8 equal to its index, in
// raster order (u = p / 8 = 0 .. NU-1), once per output frame. For every pixel it keeps
// the intensity being shown, how many more frames it lasts (rem) and a debt: the number
// of frames already shown for which no record existed yet. Per pixel and frame:
//   rem > 0          show the current intensity, rem - 1;
//   record waiting   pop it; if its duration is covered by the debt, pay the debt off
//                    and look at the next record; otherwise show its intensity for
//                    (duration - debt) frames starting now;
//   nothing waiting  the pixel's stable segment is still open: show the last intensity
//                    again and add one to the debt (counted in underrun_cnt).
// The debt keeps every pixel on the true time axis even though records only arrive
// when a segment closes.
//
// Interface: frame_start starts a scan of NU pixels; each value leaves through
// out_valid/out_ready; frame_done pulses after the last one. Writer port: rd_en/rd_u,
// then rd_avail/rd_rec one clock later; pop/pop_u consume. Timing: three clocks per
// pixel when the output is not stalled (12,500 pixels -> 37,500 clocks per frame, so the
// eight decoders display about 4,000 frames/s at 150 MHz while the input runs at 20,000). The debt mechanism and the scan order are
// this design's choices; the paper says only that the decoders align the records to the
// output format.
module recon_decoder
  import ssr_pkg::*;
#(
  parameter int unsigned NU = (ssr_pkg::DEF_IMG_W * ssr_pkg::DEF_IMG_H) / ssr_pkg::DEF_DEC,
  localparam int unsigned UW = (NU > 1) ? $clog2(NU) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          frame_start,
  output logic          frame_done,
  output logic          idle,
  // writer read port
  output logic          rd_en,
  output logic [UW-1:0] rd_u,
  input  logic          rd_avail,
  input  enc_rec_t      rd_rec,
  output logic          pop,
  output logic [UW-1:0] pop_u,
  // pixel output
  output logic          out_valid,
  input  logic          out_ready,
  output logic [7:0]    out_pix,
  output logic [15:0]   underrun_cnt
);
  typedef struct packed {
    logic [7:0] rem;
    logic [7:0] inten;
    logic [7:0] debt;
  } dec_state_t;

  typedef enum logic [2:0] {D_INIT, D_IDLE, D_REQ, D_EVAL, D_OUT} ds_e;
  ds_e st_q;

  dec_state_t ds_mem [NU];
  dec_state_t ds, ds_n;
  logic [UW-1:0] u_q;
  logic [7:0]    pix_n;
  logic          show, repop, under;

  assign rd_en     = (st_q == D_REQ);
  assign rd_u      = u_q;
  assign pop_u     = u_q;
  assign out_valid = (st_q == D_OUT);
  assign idle      = (st_q == D_IDLE);
  assign ds        = ds_mem[u_q];

  always_comb begin
    ds_n  = ds;
    pix_n = ds.inten;
    pop   = 1'b0;
    show  = 1'b0;
    repop = 1'b0;
    under = 1'b0;
    if (st_q == D_EVAL) begin
      if (ds.rem != 8'd0) begin
        ds_n.rem = ds.rem - 8'd1;
        show     = 1'b1;
      end else if (rd_avail) begin
        pop        = 1'b1;
        ds_n.inten = rd_rec.inten;
        if (rd_rec.dur <= ds.debt) begin
          ds_n.debt = ds.debt - rd_rec.dur;
          repop     = 1'b1;
        end else begin
          ds_n.rem  = rd_rec.dur - ds.debt - 8'd1;
          ds_n.debt = 8'd0;
          pix_n     = rd_rec.inten;
          show      = 1'b1;
        end
      end else begin
        ds_n.debt = (ds.debt == 8'hFF) ? ds.debt : ds.debt + 8'd1;
        show      = 1'b1;
        under     = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (st_q == D_INIT) ds_mem[u_q] <= '0;
    else if (st_q == D_EVAL) ds_mem[u_q] <= ds_n;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q         <= D_INIT;
      u_q          <= '0;
      out_pix      <= '0;
      frame_done   <= 1'b0;
      underrun_cnt <= '0;
    end else begin
      frame_done <= 1'b0;
      unique case (st_q)
        D_INIT: begin
          u_q <= u_q + 1'b1;
          if (u_q == UW'(NU - 1)) begin
            u_q  <= '0;
            st_q <= D_IDLE;
          end
        end
        D_IDLE: if (frame_start) begin
          u_q  <= '0;
          st_q <= D_REQ;
        end
        D_REQ: st_q <= D_EVAL;
        D_EVAL: begin
          if (under) underrun_cnt <= underrun_cnt + 16'd1;
          if (show) begin
            out_pix <= pix_n;
            st_q    <= D_OUT;
          end else if (repop) begin
            st_q <= D_REQ;
          end
        end
        D_OUT: if (out_ready) begin
          if (u_q == UW'(NU - 1)) begin
            u_q        <= '0;
            frame_done <= 1'b1;
            st_q       <= D_IDLE;
          end else begin
            u_q  <= u_q + 1'b1;
            st_q <= D_REQ;
          end
        end
        default: st_q <= D_IDLE;
      endcase
    end
  end
endmodule
