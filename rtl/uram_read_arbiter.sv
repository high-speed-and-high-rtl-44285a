// uram_read_arbiter -- round-robin grant of the spike buffer's read port.
//
// The URAM readers share one read port of the sequence buffer. Each clock at most one
// requester is granted; the search starts just after the requester granted last, so
// every requester waits at most N-1 grants. gnt is combinational from req and the
// registered pointer; a reader keeps req high until it sees its gnt bit.
module uram_read_arbiter #(
  parameter int unsigned N = 7
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  output logic [N-1:0] gnt
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] ptr_q;   // highest priority index
  logic [IW-1:0] win;
  logic          any;

  always_comb begin
    gnt = '0;
    win = '0;
    any = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned idx;
      idx = (int'(ptr_q) + k) % N;
      if (!any && req[idx]) begin
        any      = 1'b1;
        win      = IW'(idx);
        gnt[idx] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr_q <= '0;
    else if (any) ptr_q <= (win == IW'(N - 1)) ? '0 : win + 1'b1;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  a_granted_req: assert property (@(posedge clk) disable iff (!rst_n) (gnt & ~req) == '0);
endmodule
