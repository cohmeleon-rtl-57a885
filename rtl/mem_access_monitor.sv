// mem_access_monitor: off-chip access counter of one memory tile.
//
// Counts every access that the memory tile makes to its DRAM channel. Each of
// the N_SRC inputs flags one access in the current cycle (here: LLC refills and
// write-backs, and non-coherent DMA requests that bypass the LLC), so up to
// N_SRC accesses are added per cycle. The counter is free running and wraps;
// as in the paper, software reads it before and after an invocation and takes
// the difference modulo 2^CNT_W, which absorbs one wrap. The source split and
// counter width are this design's choices.
// Timing: count shows the accesses of a cycle one cycle later.
module mem_access_monitor #(
  parameter int unsigned CNT_W = 32,
  parameter int unsigned N_SRC = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_SRC-1:0] access,
  output logic [CNT_W-1:0] count
);

  logic [CNT_W-1:0] inc;

  always_comb begin
    inc = '0;
    for (int i = 0; i < int'(N_SRC); i++) inc = inc + CNT_W'(access[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) count <= '0;
    else        count <= count + inc;
  end

endmodule
