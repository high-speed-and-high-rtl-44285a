// batch_ctrl -- starts reconstruction of each full batch and watches its deadline.
//
// When the input side reports a full batch (batch_done, with the half that holds it), the
// URAM readers are started on that half as soon as all of them are idle. A new batch
// must be processed before the next one is complete (32 frames x 50 us = 1.6 ms at
// 20,000 frames/s, i.e. 240,000 clocks at 150 MHz); otherwise the writer begins to
// overwrite data not yet read. Such a miss is counted in overrun_cnt: a batch that
// completes while the readers are still busy, or while an older batch is still waiting.
// The number of clocks the readers needed for the last batch is reported in
// last_batch_cycles.
//
// Timing: start is a one-clock pulse, registered; rd_half is stable while readers run.
module batch_ctrl #(
  parameter int unsigned N_READERS = 7
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 batch_done,
  input  logic                 batch_half,
  input  logic [N_READERS-1:0] rd_idle,
  output logic                 start,
  output logic                 rd_half,
  output logic                 running,
  output logic [15:0]          overrun_cnt,
  output logic [15:0]          batches_started,
  output logic [31:0]          last_batch_cycles
);
  logic        pending, pend_half;
  logic [31:0] cyc_q;
  logic        all_idle;

  assign all_idle = &rd_idle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending           <= 1'b0;
      pend_half         <= 1'b0;
      start             <= 1'b0;
      rd_half           <= 1'b0;
      running           <= 1'b0;
      overrun_cnt       <= '0;
      batches_started   <= '0;
      last_batch_cycles <= '0;
      cyc_q             <= '0;
    end else begin
      start <= 1'b0;
      if (running) begin
        cyc_q <= cyc_q + 32'd1;
        if (all_idle && !start) begin
          running           <= 1'b0;
          last_batch_cycles <= cyc_q;
        end
      end
      if (batch_done) begin
        pending   <= 1'b1;
        pend_half <= batch_half;
        if (pending || running) overrun_cnt <= overrun_cnt + 16'd1;
      end else if (pending && all_idle && !running && !start) begin
        pending         <= 1'b0;
        start           <= 1'b1;
        rd_half         <= pend_half;
        running         <= 1'b1;
        cyc_q           <= 32'd1;
        batches_started <= batches_started + 16'd1;
      end
    end
  end
endmodule
