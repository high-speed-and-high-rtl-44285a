// rec_writer -- stores encoded records per pixel for the decoders (the output URAMs).
//
// One of four writers; it receives the records of the pixels p with p mod N_WR equal to
// its index, already in time order per pixel. Each pixel owns a ring of DEPTH records.
// The store is split into two banks by (p / N_WR) mod 2, and each bank is read by its
// own decoder: with 4 writers and 8 decoders, decoder d serves pixels p mod 8 = d, which
// live in writer d mod 4, bank d / 4. Inside a bank a pixel is addressed by
// u = p / (2*N_WR), which is also the decoder's position in its raster scan.
//
// Write port: in_valid/in_ready (ready after the pointer sweep that follows reset,
// NU clocks); a record arriving at a full ring is dropped and counted in drop_cnt.
// Read port per bank: rd_en with rd_u gives, one clock later, rd_avail (ring not empty)
// and rd_rec (oldest record). pop with pop_u consumes that record at the clock edge.
// The ring organisation and DEPTH are this design's choices; the paper gives three
// URAMs per writer (DEPTH = 16 uses 640 kb of their 864 kb for a 400x250 image).
module rec_writer
  import ssr_pkg::*;
#(
  parameter int unsigned NPIX  = ssr_pkg::DEF_IMG_W * ssr_pkg::DEF_IMG_H,
  parameter int unsigned N_WR  = ssr_pkg::DEF_WRITERS,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned NU = (NPIX + 2 * N_WR - 1) / (2 * N_WR),
  localparam int unsigned UW = (NU > 1) ? $clog2(NU) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  pix_rec_t          in_rec,
  input  logic [1:0]        rd_en,
  input  logic [1:0][UW-1:0] rd_u,
  output logic [1:0]        rd_avail,
  output enc_rec_t [1:0]    rd_rec,
  input  logic [1:0]        pop,
  input  logic [1:0][UW-1:0] pop_u,
  output logic              init_done,
  output logic [15:0]       drop_cnt
);
  localparam int unsigned DW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [UW-1:0] init_u;
  logic          in_bank;
  logic [UW-1:0] in_u;
  logic [31:0]   q;

  assign q         = 32'(in_rec.pix) / N_WR;
  assign in_bank   = q[0];
  assign in_u      = UW'(q >> 1);
  assign in_ready  = init_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_u    <= '0;
      init_done <= 1'b0;
    end else if (!init_done) begin
      init_u <= init_u + 1'b1;
      if (init_u == UW'(NU - 1)) init_done <= 1'b1;
    end
  end

  logic [1:0] full_b;
  logic [1:0] wr_b;

  for (genvar b = 0; b < 2; b++) begin : g_bank
    enc_rec_t      mem  [NU * DEPTH];
    logic [DW:0]   wptr [NU];
    logic [DW:0]   rptr [NU];
    logic [DW:0]   wp, rp;

    assign wp        = wptr[in_u];
    assign rp        = rptr[in_u];
    assign full_b[b] = (wp[DW-1:0] == rp[DW-1:0]) && (wp[DW] != rp[DW]);
    assign wr_b[b]   = init_done && in_valid && (in_bank == 1'(b)) && !full_b[b];

    // record storage and write pointers
    always_ff @(posedge clk) begin
      if (!init_done) wptr[init_u] <= '0;
      else if (wr_b[b]) begin
        mem[{in_u, wp[DW-1:0]}] <= in_rec.rec;
        wptr[in_u]              <= wp + 1'b1;
      end
    end

    // read pointers
    always_ff @(posedge clk) begin
      if (!init_done) rptr[init_u] <= '0;
      else if (pop[b]) rptr[pop_u[b]] <= rptr[pop_u[b]] + 1'b1;
    end

    // registered head read
    always_ff @(posedge clk) begin
      if (rd_en[b]) begin
        rd_avail[b] <= init_done && (wptr[rd_u[b]] != rptr[rd_u[b]]);
        rd_rec[b]   <= mem[{rd_u[b], rptr[rd_u[b]][DW-1:0]}];
      end
    end

    a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n || !init_done)
                                     pop[b] |-> wptr[pop_u[b]] != rptr[pop_u[b]]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) drop_cnt <= '0;
    else if (init_done && in_valid && full_b[in_bank]) drop_cnt <= drop_cnt + 16'd1;
  end
endmodule
