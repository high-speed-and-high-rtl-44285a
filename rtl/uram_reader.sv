// uram_reader -- feeds one group of stability modules with per-pixel spike sequences.
//
// The reader owns words BASE_WORD .. BASE_WORD+NWORDS-1 of the sequence buffer. For
// each word it requests the shared read port, receives BATCH frames x LANES pixels, and
// hands them to its NMODS stability modules: module k takes lanes k*LPM .. k*LPM+LPM-1,
// one lane per hand-over, so a word is delivered in LPM hand-overs. With the default
// 16 lanes a full reader serves 16 modules with one lane each (LPM = 1); the last reader
// of the 400x250 image serves 4 modules with 4 lanes each. Module k's pixel slot for
// word w (relative) and lane i is w*LPM + i, and the pixel number is
// (BASE_WORD+w)*LANES + k*LPM + i.
//
// Handshake: all modules of the group take a sequence in the same clock. seq_valid is
// raised only when every module is ready (it depends combinationally on seq_ready), and a
// hand-over completes in that clock. Read port: req is held until gnt; rd_data is
// captured the clock after the grant. done is high while the reader is idle.
// The pixel-to-module mapping is this design's choice; the paper gives only the counts.
module uram_reader #(
  parameter int unsigned LANES     = ssr_pkg::DEF_LANES,
  parameter int unsigned BATCH     = ssr_pkg::DEF_BATCH,
  parameter int unsigned NMODS     = 16,
  parameter int unsigned LPM       = 1,
  parameter int unsigned BASE_WORD = 0,
  parameter int unsigned NWORDS    = 1000,
  parameter int unsigned AW        = 13,
  parameter int unsigned SW        = 10,
  localparam int unsigned PW = ssr_pkg::PIX_W
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic                              half,
  output logic                              done,
  // shared buffer read port
  output logic                              req,
  input  logic                              gnt,
  output logic [AW-1:0]                     rd_word,
  input  logic [BATCH-1:0][LANES-1:0]       rd_data,
  // sequence broadcast to the module group
  output logic                              seq_valid,
  input  logic [NMODS-1:0]                  seq_ready,
  output logic [SW-1:0]                     seq_slot,
  output logic [NMODS-1:0][PW-1:0]          seq_pix,
  output logic [NMODS-1:0][BATCH-1:0]       seq_bits
);
  localparam int unsigned WW = (NWORDS > 1) ? $clog2(NWORDS + 1) : 1;
  localparam int unsigned LW = (LPM > 1) ? $clog2(LPM) : 1;

  typedef enum logic [1:0] {R_IDLE, R_REQ, R_WAIT, R_SEND} rs_e;
  rs_e st_q;

  logic [WW-1:0]                     w_q;
  logic [LW-1:0]                     i_q;
  logic [BATCH-1:0][LANES-1:0]       buf_q;

  assign done      = (st_q == R_IDLE);
  assign req       = (st_q == R_REQ);
  assign rd_word   = AW'(BASE_WORD) + AW'(w_q);
  assign seq_valid = (st_q == R_SEND) && (&seq_ready);
  assign seq_slot  = SW'(32'(w_q) * LPM + 32'(i_q));

  always_comb begin
    for (int unsigned k = 0; k < NMODS; k++) begin
      int unsigned lane;
      lane       = k * LPM + 32'(i_q);
      seq_pix[k] = PW'((BASE_WORD + 32'(w_q)) * LANES + lane);
      for (int unsigned t = 0; t < BATCH; t++) seq_bits[k][t] = buf_q[t][lane];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q  <= R_IDLE;
      w_q   <= '0;
      i_q   <= '0;
      buf_q <= '0;
    end else begin
      unique case (st_q)
        R_IDLE: if (start) begin
          w_q  <= '0;
          i_q  <= '0;
          st_q <= R_REQ;
        end
        R_REQ:  if (gnt) st_q <= R_WAIT;
        R_WAIT: begin
          buf_q <= rd_data;
          st_q  <= R_SEND;
        end
        R_SEND: if (seq_valid) begin
          if (i_q == LW'(LPM - 1)) begin
            i_q <= '0;
            if (w_q == WW'(NWORDS - 1)) st_q <= R_IDLE;
            else begin
              w_q  <= w_q + 1'b1;
              st_q <= R_REQ;
            end
          end else begin
            i_q <= i_q + 1'b1;
          end
        end
        default: st_q <= R_IDLE;
      endcase
    end
  end

  // the half is only read while the reader runs; it must not change under it
  logic half_q;
  always_ff @(posedge clk) if (start) half_q <= half;
  a_half_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                  (st_q != R_IDLE && !start) |-> half == half_q);
endmodule
