// acc_perf_monitor: cycle monitors of one accelerator tile.
//
// Three counters give the learning agent what it needs to judge one
// accelerator invocation: cycles the accelerator is executing (acc_busy),
// cycles it is communicating with memory, i.e. it has a request issued or is
// waiting for a response (dma_pending), and cycles the invocation is open
// (inv_open, from the start of the invocation until the completion has been
// handled). All three are cleared by a one-cycle 'start' pulse, as the paper's
// accelerator cycle counters are reset at the beginning of execution, and are
// read at the end of the invocation. The paper measures total execution time
// in software; counting it here in hardware is this design's choice. Counters
// wrap at CNT_W bits (width is this design's choice).
// Timing: a counter shows an event one cycle after the cycle it happened in;
// 'start' wins over counting in the same cycle.
module acc_perf_monitor #(
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             acc_busy,
  input  logic             dma_pending,
  input  logic             inv_open,
  output logic [CNT_W-1:0] active_cycles,
  output logic [CNT_W-1:0] comm_cycles,
  output logic [CNT_W-1:0] total_cycles
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_cycles <= '0;
      comm_cycles   <= '0;
      total_cycles  <= '0;
    end else if (start) begin
      active_cycles <= '0;
      comm_cycles   <= '0;
      total_cycles  <= '0;
    end else begin
      if (acc_busy)    active_cycles <= active_cycles + 1'b1;
      if (dma_pending) comm_cycles   <= comm_cycles + 1'b1;
      if (inv_open)    total_cycles  <= total_cycles + 1'b1;
    end
  end

endmodule
