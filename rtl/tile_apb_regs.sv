// tile_apb_regs: memory-mapped registers of one tile on an APB bus.
//
// The paper adds the monitor counters to each tile's existing APB interface and
// controls an accelerator's coherence through one memory-mapped configuration
// register in its tile. This block holds that register and exposes N_CNT
// read-only counters. Register map (byte offsets; the map is this design's
// choice):
//   0x00  coherence configuration register, bits [1:0] = cohm_pkg::coh_mode_e,
//         read/write
//   0x04 + 4*i  counter i, read only (writes ignored)
// A tile without a coherence register (HAS_CFG = 0, e.g. a memory tile) reads
// zero at 0x00 and ignores writes there. Unmapped offsets read as zero and raise pslverr. The register can also be
// written by the hardware agent through hw_we/hw_mode, which stands for the
// device driver's write in the paper; an APB write in the same cycle wins.
// Timing: APB3 with pready always high, so each access takes the usual two
// cycles (setup, access); prdata is combinational in the access phase.
module tile_apb_regs
  import cohm_pkg::*;
#(
  parameter int unsigned N_CNT   = 3,
  parameter int unsigned CNT_W   = 32,
  parameter bit          HAS_CFG = 1'b1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // APB3 slave
  input  logic                  psel,
  input  logic                  penable,
  input  logic                  pwrite,
  input  logic [7:0]            paddr,
  input  logic [31:0]           pwdata,
  output logic [31:0]           prdata,
  output logic                  pready,
  output logic                  pslverr,
  // hardware write of the configuration register
  input  logic                  hw_we,
  input  coh_mode_e             hw_mode,
  // register contents
  output coh_mode_e             coh_mode,
  input  logic [N_CNT*CNT_W-1:0] cnt
);

  logic       access;
  logic [5:0] word;
  logic       mapped;

  assign access  = psel && penable;
  assign word    = paddr[7:2];
  assign mapped  = (int'(word) <= int'(N_CNT));
  assign pready  = 1'b1;
  assign pslverr = access && !mapped;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                  coh_mode <= NON_COH_DMA;
    else if (!HAS_CFG)                           coh_mode <= NON_COH_DMA;
    else if (access && pwrite && word == 6'd0)   coh_mode <= coh_mode_e'(pwdata[1:0]);
    else if (hw_we)                              coh_mode <= hw_mode;
  end

  always_comb begin
    prdata = '0;
    if (access && !pwrite) begin
      if (word == 6'd0) prdata = HAS_CFG ? {30'd0, coh_mode} : 32'd0;
      else if (mapped)  prdata = 32'(cnt[(int'(word)-1)*CNT_W +: CNT_W]);
    end
  end

  // APB rule: the access phase follows a setup phase of the same transfer.
  property p_enable_needs_sel;
    @(posedge clk) disable iff (!rst_n) penable |-> psel;
  endproperty
  a_enable_needs_sel: assert property (p_enable_needs_sel);

endmodule
