// q_table: storage of the Q-values, one per (state, action) pair.
//
// 243 states x 4 actions = 972 entries, addressed as state*4 + action (the
// size follows the paper; the flattening is this design's choice). Entries are
// QW-bit UQ1.15 values. The paper sets every entry to zero at the start of
// training; here a one-cycle 'clear' pulse starts a sweep that writes zero to
// one entry per cycle (N_ENTRIES cycles, 'busy' high meanwhile), which keeps
// the array a plain single-write-port memory. Reads are synchronous: rd_data
// holds the entry addressed by rd_addr in the cycle after rd_en. A write and a
// read of the same address in one cycle return the old value. Reset clears
// only the control state: assert 'clear' after reset before using the table.
module q_table
  import cohm_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 972,
  parameter int unsigned QWID      = 16,
  localparam int unsigned AWID     = $clog2(N_ENTRIES)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  output logic            busy,
  input  logic            rd_en,
  input  logic [AWID-1:0] rd_addr,
  output logic [QWID-1:0] rd_data,
  input  logic            wr_en,
  input  logic [AWID-1:0] wr_addr,
  input  logic [QWID-1:0] wr_data
);

  logic [QWID-1:0] mem [N_ENTRIES];
  logic [AWID-1:0] clr_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      clr_addr <= '0;
    end else if (clear) begin
      busy     <= 1'b1;
      clr_addr <= '0;
    end else if (busy) begin
      if (clr_addr == AWID'(N_ENTRIES - 1)) busy <= 1'b0;
      clr_addr <= clr_addr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (busy)       mem[clr_addr] <= '0;
    else if (wr_en) mem[wr_addr]  <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  a_no_access_while_clearing: assert property (@(posedge clk) disable iff (!rst_n)
                                               busy |-> !wr_en);

endmodule
