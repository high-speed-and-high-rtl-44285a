// rec_router -- carries encoded records from the stability modules to the URAM writers.
//
// Writer w stores the records of pixels p with p mod N_OUT = w (four adjacent pixels
// go to four different writers). For every writer, a round-robin search over the N_IN
// module outputs picks one record addressed to it; the search for the next pick starts
// after the module served last. Up to N_OUT records move per clock.
//
// Handshake: valid/ready on both sides; the path is combinational (no storage), so
// in_ready[i] is high in the clock in which module i's record is taken by its writer.
// The arbitration scheme is this design's choice.
module rec_router
  import ssr_pkg::*;
#(
  parameter int unsigned N_IN  = 100,
  parameter int unsigned N_OUT = ssr_pkg::DEF_WRITERS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N_IN-1:0]       in_valid,
  output logic [N_IN-1:0]       in_ready,
  input  pix_rec_t [N_IN-1:0]   in_rec,
  output logic [N_OUT-1:0]      out_valid,
  input  logic [N_OUT-1:0]      out_ready,
  output pix_rec_t [N_OUT-1:0]  out_rec
);
  localparam int unsigned IW = (N_IN > 1) ? $clog2(N_IN) : 1;

  logic [N_OUT-1:0][N_IN-1:0] gnt;

  for (genvar w = 0; w < int'(N_OUT); w++) begin : g_out
    logic [N_IN-1:0] req, req_hi;
    logic [N_IN-1:0] mask_q;      // modules after the one served last
    logic [IW-1:0]   win;
    logic            hit_hi;

    always_comb begin
      for (int unsigned i = 0; i < N_IN; i++)
        req[i] = in_valid[i] && (32'(in_rec[i].pix) % N_OUT) == w;
      req_hi = req & mask_q;
      // lowest requester above the last winner, else the lowest requester overall
      win    = '0;
      hit_hi = 1'b0;
      for (int i = int'(N_IN) - 1; i >= 0; i--)
        if (req_hi[i]) begin
          win    = IW'(i);
          hit_hi = 1'b1;
        end
      if (!hit_hi)
        for (int i = int'(N_IN) - 1; i >= 0; i--)
          if (req[i]) win = IW'(i);
      out_valid[w] = |req;
      out_rec[w]   = in_rec[win];
      gnt[w]       = out_valid[w] ? (N_IN'(1) << win) : '0;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) mask_q <= '0;
      else if (out_valid[w] && out_ready[w])
        mask_q <= ~((N_IN'(2) << win) - N_IN'(1));
    end
  end

  always_comb begin
    in_ready = '0;
    for (int unsigned w = 0; w < N_OUT; w++)
      if (out_ready[w]) in_ready = in_ready | gnt[w];
  end
endmodule
