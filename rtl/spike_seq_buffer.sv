// spike_seq_buffer -- ping-pong cache that turns frame-ordered spikes into pixel sequences.
//
// BATCH frame memories (the paper's 32 URAMs), one per frame slot of a batch. Each is
// 2*WORDS deep and LANES bits wide and is split into two halves (the paper's 64 blocks):
// while one half is written the other is read. A write stores one 16-pixel word of one
// frame; a read returns the same word address of every frame at once, i.e. BATCH
// time-consecutive spikes of LANES pixels (rd_data[t][i] = spike of lane i in frame t).
//
// Timing: writes take effect at the clock edge; reads are registered (data one clock
// after rd_en), as a block RAM / URAM read port would be. The memories have no reset:
// every location is written before it is read. The URAM primitives themselves are
// modelled as inferred arrays.
module spike_seq_buffer #(
  parameter int unsigned LANES = ssr_pkg::DEF_LANES,
  parameter int unsigned WORDS = (ssr_pkg::DEF_IMG_W * ssr_pkg::DEF_IMG_H) / ssr_pkg::DEF_LANES,
  parameter int unsigned BATCH = ssr_pkg::DEF_BATCH,
  localparam int unsigned AW = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned FW = (BATCH > 1) ? $clog2(BATCH) : 1
) (
  input  logic                        clk,
  input  logic                        wr_en,
  input  logic                        wr_half,
  input  logic [FW-1:0]               wr_frame,
  input  logic [AW-1:0]               wr_word,
  input  logic [LANES-1:0]            wr_data,
  input  logic                        rd_en,
  input  logic                        rd_half,
  input  logic [AW-1:0]               rd_word,
  output logic [BATCH-1:0][LANES-1:0] rd_data
);
  localparam int unsigned DEPTH = 2 * WORDS;
  localparam int unsigned DW    = $clog2(DEPTH);

  logic [DW-1:0] waddr, raddr;
  assign waddr = wr_half ? DW'(WORDS) + DW'(wr_word) : DW'(wr_word);
  assign raddr = rd_half ? DW'(WORDS) + DW'(rd_word) : DW'(rd_word);

  for (genvar f = 0; f < int'(BATCH); f++) begin : g_frame
    logic [LANES-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_frame == FW'(f)) mem[waddr] <= wr_data;
      if (rd_en) rd_data[f] <= mem[raddr];
    end
  end
endmodule
