// spike_recon_top -- real-time spike-camera reconstruction engine (FSR/SSR), top level.
//
// Input: the 1-bit spike frames of an IMG_W x IMG_H spike camera, 16 pixels per clock in
// raster order. Output: reconstructed 8-bit frames, 8 pixels per word in raster order.
//
// Data flow:
//   spike_input_mux  -> spike_seq_buffer  32 frame memories x 2 halves (ping-pong)
//   batch_ctrl       starts the readers on each full half (every 32 frames)
//   uram_reader x7   share the buffer read port (uram_read_arbiter) and hand each
//                    stability module the 32-spike sequence of one of its pixels
//   stability_module x100  segment each pixel's stream into stable segments and emit
//                    {duration, intensity} records (ORDER 2 = SSR, 1 = FSR)
//   rec_router       sends the record of pixel p to writer p mod 4
//   rec_writer x4    keep per-pixel record rings
//   recon_decoder x8 turn records back into one value per pixel and frame
//   frame_out_ctrl   runs the decoders LAG frames behind the input and packs the output
//
// With the defaults (400x250, 16 lanes, 1000 pixels per module) there are 6250 words per
// frame, six readers of 16 modules and a seventh of 4 modules, 100 stability modules,
// four writers and eight decoders, as in the paper's FPGA implementation. The geometry
// must satisfy: IMG_W*IMG_H divisible by LANES and by 8, IMG_W divisible by 8, and the
// pixels left over after the full readers divisible into modules of PIX_PER_MOD pixels
// whose number divides LANES.
//
// Clock: one clock domain (150 MHz in the paper); the camera interface is assumed to be
// synchronous to it. Reset: active-low, asynchronous; after reset the internal state
// memories are cleared by sweeps that take at most NPIX/8 clocks, during which spikes
// may already arrive.
module spike_recon_top
  import ssr_pkg::*;
#(
  parameter int unsigned IMG_W       = ssr_pkg::DEF_IMG_W,
  parameter int unsigned IMG_H       = ssr_pkg::DEF_IMG_H,
  parameter int unsigned PIX_PER_MOD = ssr_pkg::DEF_PPM,
  parameter int unsigned BATCH       = ssr_pkg::DEF_BATCH,
  parameter int unsigned ORDER       = 2,
  parameter int unsigned DEPTH       = 16,
  parameter int unsigned LAG         = 64,
  localparam int unsigned LANES      = ssr_pkg::DEF_LANES,
  localparam int unsigned NDEC       = ssr_pkg::DEF_DEC,
  localparam int unsigned NWR        = ssr_pkg::DEF_WRITERS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // spike camera
  input  logic                 spk_valid,
  input  logic [LANES-1:0]     spk_data,
  // reconstructed frames
  output logic                 pix_valid,
  input  logic                 pix_ready,
  output logic [NDEC-1:0][7:0] pix_data,
  output logic                 pix_sof,
  output logic                 pix_eol,
  output recon_status_t        status
);
  localparam int unsigned NPIX      = IMG_W * IMG_H;
  localparam int unsigned WORDS     = NPIX / LANES;
  localparam int unsigned AW        = (WORDS > 1) ? $clog2(WORDS) : 1;
  localparam int unsigned FW        = (BATCH > 1) ? $clog2(BATCH) : 1;
  localparam int unsigned SW        = (PIX_PER_MOD > 1) ? $clog2(PIX_PER_MOD) : 1;
  localparam int unsigned N_STAB    = NPIX / PIX_PER_MOD;
  localparam int unsigned N_FULL    = NPIX / (LANES * PIX_PER_MOD);
  localparam int unsigned REM_PIX   = NPIX - N_FULL * LANES * PIX_PER_MOD;
  localparam int unsigned REM_MODS  = REM_PIX / PIX_PER_MOD;
  localparam int unsigned REM_LPM   = (REM_MODS > 0) ? LANES / REM_MODS : 1;
  localparam int unsigned N_READERS = N_FULL + ((REM_PIX > 0) ? 1 : 0);
  localparam int unsigned NU        = NPIX / NDEC;
  localparam int unsigned UW        = (NU > 1) ? $clog2(NU) : 1;

  // ---------------- spike input and buffer ----------------
  logic                        wr_en, wr_half, batch_done, batch_half;
  logic [FW-1:0]               wr_frame;
  logic [AW-1:0]               wr_word;
  logic [LANES-1:0]            wr_data;
  logic [31:0]                 frames_in;
  logic                        rd_en, rd_half;
  logic [AW-1:0]               rd_word;
  logic [BATCH-1:0][LANES-1:0] rd_data;

  spike_input_mux #(.LANES(LANES), .WORDS(WORDS), .BATCH(BATCH)) u_mux (
    .clk, .rst_n, .spk_valid, .spk_data,
    .wr_en, .wr_half, .wr_frame, .wr_word, .wr_data,
    .batch_done, .batch_half, .frames_in);

  spike_seq_buffer #(.LANES(LANES), .WORDS(WORDS), .BATCH(BATCH)) u_buf (
    .clk, .wr_en, .wr_half, .wr_frame, .wr_word, .wr_data,
    .rd_en, .rd_half, .rd_word, .rd_data);

  // ---------------- batch control and readers ----------------
  logic [N_READERS-1:0]         rd_idle, rd_req, rd_gnt;
  logic [N_READERS-1:0][AW-1:0] rd_word_r;
  logic                         start;

  batch_ctrl #(.N_READERS(N_READERS)) u_batch (
    .clk, .rst_n, .batch_done, .batch_half, .rd_idle,
    .start, .rd_half, .running(),
    .overrun_cnt(status.overrun_cnt), .batches_started(status.batches),
    .last_batch_cycles(status.last_batch_cycles));

  uram_read_arbiter #(.N(N_READERS)) u_arb (.clk, .rst_n, .req(rd_req), .gnt(rd_gnt));

  always_comb begin
    rd_en   = |rd_gnt;
    rd_word = '0;
    for (int unsigned r = 0; r < N_READERS; r++)
      if (rd_gnt[r]) rd_word = rd_word_r[r];
  end

  logic [N_STAB-1:0]             m_seq_valid, m_seq_ready;
  logic [N_STAB-1:0][SW-1:0]     m_seq_slot;
  logic [N_STAB-1:0][PIX_W-1:0]  m_seq_pix;
  logic [N_STAB-1:0][BATCH-1:0]  m_seq_bits;

  for (genvar r = 0; r < int'(N_READERS); r++) begin : g_reader
    localparam bit          LAST  = (r == int'(N_FULL));
    localparam int unsigned NM    = LAST ? REM_MODS : LANES;
    localparam int unsigned LPM   = LAST ? REM_LPM : 1;
    localparam int unsigned BASE  = r * PIX_PER_MOD;
    localparam int unsigned NW    = LAST ? REM_PIX / LANES : PIX_PER_MOD;
    localparam int unsigned M0    = r * LANES;

    logic                      sv;
    logic [SW-1:0]             ss;
    logic [NM-1:0][PIX_W-1:0]  sp;
    logic [NM-1:0][BATCH-1:0]  sb;

    uram_reader #(.LANES(LANES), .BATCH(BATCH), .NMODS(NM), .LPM(LPM),
                  .BASE_WORD(BASE), .NWORDS(NW), .AW(AW), .SW(SW)) u_rd (
      .clk, .rst_n, .start, .half(rd_half), .done(rd_idle[r]),
      .req(rd_req[r]), .gnt(rd_gnt[r]), .rd_word(rd_word_r[r]), .rd_data,
      .seq_valid(sv), .seq_ready(m_seq_ready[M0 +: NM]), .seq_slot(ss),
      .seq_pix(sp), .seq_bits(sb));

    for (genvar k = 0; k < int'(NM); k++) begin : g_fan
      assign m_seq_valid[M0 + k] = sv;
      assign m_seq_slot[M0 + k]  = ss;
      assign m_seq_pix[M0 + k]   = sp[k];
      assign m_seq_bits[M0 + k]  = sb[k];
    end
  end

  // ---------------- stability modules ----------------
  logic     [N_STAB-1:0]        m_rec_valid, m_rec_ready;
  pix_rec_t [N_STAB-1:0]        m_rec;
  logic     [N_STAB-1:0][15:0]  m_nf, m_ns, m_nc;

  for (genvar m = 0; m < int'(N_STAB); m++) begin : g_stab
    stability_module #(.PIX_PER_MOD(PIX_PER_MOD), .BATCH(BATCH), .ORDER(ORDER)) u_stab (
      .clk, .rst_n,
      .seq_valid(m_seq_valid[m]), .seq_ready(m_seq_ready[m]), .seq_slot(m_seq_slot[m]),
      .seq_pix(m_seq_pix[m]), .seq_bits(m_seq_bits[m]),
      .rec_valid(m_rec_valid[m]), .rec_ready(m_rec_ready[m]), .rec_out(m_rec[m]),
      .busy(), .n_break_fsr(m_nf[m]), .n_break_ssr(m_ns[m]), .n_break_cap(m_nc[m]));
  end

  always_comb begin
    status.n_break_fsr = '0;
    status.n_break_ssr = '0;
    status.n_break_cap = '0;
    for (int unsigned m = 0; m < N_STAB; m++) begin
      status.n_break_fsr = status.n_break_fsr + 32'(m_nf[m]);
      status.n_break_ssr = status.n_break_ssr + 32'(m_ns[m]);
      status.n_break_cap = status.n_break_cap + 32'(m_nc[m]);
    end
  end

  // ---------------- record routing and writers ----------------
  logic     [NWR-1:0] w_valid, w_ready;
  pix_rec_t [NWR-1:0] w_rec;

  rec_router #(.N_IN(N_STAB), .N_OUT(NWR)) u_router (
    .clk, .rst_n,
    .in_valid(m_rec_valid), .in_ready(m_rec_ready), .in_rec(m_rec),
    .out_valid(w_valid), .out_ready(w_ready), .out_rec(w_rec));

  logic     [NDEC-1:0]          d_rd_en, d_avail, d_pop;
  logic     [NDEC-1:0][UW-1:0]  d_rd_u, d_pop_u;
  enc_rec_t [NDEC-1:0]          d_rec;
  logic     [NWR-1:0][15:0]     w_drop;

  for (genvar w = 0; w < int'(NWR); w++) begin : g_writer
    logic     [1:0]         avail;
    enc_rec_t [1:0]         rrec;
    rec_writer #(.NPIX(NPIX), .N_WR(NWR), .DEPTH(DEPTH)) u_wr (
      .clk, .rst_n,
      .in_valid(w_valid[w]), .in_ready(w_ready[w]), .in_rec(w_rec[w]),
      .rd_en({d_rd_en[w + NWR], d_rd_en[w]}), .rd_u({d_rd_u[w + NWR], d_rd_u[w]}),
      .rd_avail(avail), .rd_rec(rrec),
      .pop({d_pop[w + NWR], d_pop[w]}), .pop_u({d_pop_u[w + NWR], d_pop_u[w]}),
      .init_done(), .drop_cnt(w_drop[w]));
    assign d_avail[w]       = avail[0];
    assign d_avail[w + NWR] = avail[1];
    assign d_rec[w]         = rrec[0];
    assign d_rec[w + NWR]   = rrec[1];
  end

  // ---------------- decoders and output ----------------
  logic [NDEC-1:0]       d_idle, d_valid, d_ready;
  logic [NDEC-1:0][7:0]  d_pix;
  logic [NDEC-1:0][15:0] d_under;
  logic                  dec_start;

  for (genvar d = 0; d < int'(NDEC); d++) begin : g_dec
    recon_decoder #(.NU(NU)) u_dec (
      .clk, .rst_n, .frame_start(dec_start), .frame_done(), .idle(d_idle[d]),
      .rd_en(d_rd_en[d]), .rd_u(d_rd_u[d]), .rd_avail(d_avail[d]), .rd_rec(d_rec[d]),
      .pop(d_pop[d]), .pop_u(d_pop_u[d]),
      .out_valid(d_valid[d]), .out_ready(d_ready[d]), .out_pix(d_pix[d]),
      .underrun_cnt(d_under[d]));
  end

  frame_out_ctrl #(.N_DEC(NDEC), .NU(NU), .ROW_WORDS(IMG_W / NDEC), .LAG(LAG)) u_out (
    .clk, .rst_n, .frames_in, .dec_idle(d_idle), .dec_start,
    .dec_valid(d_valid), .dec_ready(d_ready), .dec_pix(d_pix),
    .pix_valid, .pix_ready, .pix_data, .pix_sof, .pix_eol,
    .frames_out(status.frames_out));

  always_comb begin
    status.frames_in    = frames_in;
    status.rec_drop_cnt = '0;
    status.underrun_cnt = '0;
    for (int unsigned w = 0; w < NWR; w++)  status.rec_drop_cnt = status.rec_drop_cnt + 32'(w_drop[w]);
    for (int unsigned d = 0; d < NDEC; d++) status.underrun_cnt = status.underrun_cnt + 32'(d_under[d]);
  end
endmodule
