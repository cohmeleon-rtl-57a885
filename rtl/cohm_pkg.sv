// cohm_pkg: types and constants shared by the coherence-orchestration RTL.
//
// The four accelerator coherence modes are the action set of the learning
// agent and the value of each accelerator tile's coherence configuration
// register. A learning state is a 5-tuple of attributes, each with three
// levels (0, 1, 2+), so there are 3^5 = 243 states and 243 x 4 = 972 Q-values;
// these counts follow the paper. Rewards, Q-values, weights, epsilon and alpha
// use an unsigned fixed-point format with 15 fraction bits (1.0 = 32768); that
// format, the 32-bit addresses and data words of DMA requests, and the 32-bit
// byte footprints are this design's choices. Default sizes are those of the
// evaluation SoC "SoC0": 12 accelerators, 4 memory tiles, 64 kB L2 caches,
// 512 kB LLC partitions.
package cohm_pkg;

  // Coherence modes (action set A). Encoding is this design's choice.
  typedef enum logic [1:0] {
    NON_COH_DMA = 2'd0,  // bypass the caches, go to the memory controller
    LLC_COH_DMA = 2'd1,  // go to the LLC, no recall from private caches
    COH_DMA     = 2'd2,  // go to the LLC, LLC recalls lines from private caches
    FULLY_COH   = 2'd3   // go through the accelerator's private cache
  } coh_mode_e;

  // Kind of a request that leaves the accelerator tile on the interconnect.
  typedef enum logic [1:0] {
    K_MEM     = 2'd0,  // non-coherent DMA, served by the memory controller
    K_LLC     = 2'd1,  // LLC-coherent DMA
    K_LLC_COH = 2'd2   // coherent DMA (LLC recalls first)
  } noc_kind_e;

  localparam int unsigned AW = 32;   // address width
  localparam int unsigned DW = 32;   // data word width (NoC plane / DDR link)
  localparam int unsigned FPW = 32;  // footprint width, bytes
  localparam int unsigned CW = 32;   // monitor counter width

  // State space and Q-table.
  localparam int unsigned N_ATTR    = 5;
  localparam int unsigned N_STATES  = 243;
  localparam int unsigned N_ACTIONS = 4;
  localparam int unsigned N_QENT    = N_STATES * N_ACTIONS;  // 972
  localparam int unsigned SW        = 8;   // state index width
  localparam int unsigned QAW       = 10;  // Q-table address width

  // UQ1.15 fixed point.
  localparam int unsigned QW = 16;
  localparam logic [QW-1:0] Q_ONE = 16'd32768;

  // SoC0 default sizes (Table 5 of the paper).
  localparam int unsigned SOC0_N_ACC   = 12;
  localparam int unsigned SOC0_N_MEM   = 4;
  localparam int unsigned SOC0_L2_B    = 64 * 1024;
  localparam int unsigned SOC0_LLC_B   = 512 * 1024;

  typedef logic [1:0] level_t;  // attribute level 0, 1 or 2 (= "2+")

  // State attributes, in the order of the paper's state table.
  typedef struct packed {
    level_t fully_coh_acc;     // active fully-coherent accelerators
    level_t non_coh_per_tile;  // avg non-coherent accelerators per needed partition
    level_t to_llc_per_tile;   // avg accelerators using each needed LLC partition
    level_t tile_footprint;    // avg footprint per needed partition vs L2 / LLC slice
    level_t acc_footprint;     // footprint of the target invocation vs L2 / LLC slice
  } state_attr_t;

  // Accelerator memory request (one word).
  typedef struct packed {
    logic          write;
    logic [AW-1:0] addr;
    logic [DW-1:0] wdata;
  } dma_req_t;

  // Request on the interconnect towards a memory tile.
  typedef struct packed {
    noc_kind_e     kind;
    logic          write;
    logic [AW-1:0] addr;
    logic [DW-1:0] wdata;
  } noc_req_t;

  // Traffic-generator configuration.
  typedef enum logic [1:0] {
    PAT_STREAM    = 2'd0,
    PAT_STRIDED   = 2'd1,
    PAT_IRREGULAR = 2'd2
  } pattern_e;

  typedef struct packed {
    pattern_e      pattern;
    logic [7:0]    burst_len;    // words per DMA burst
    logic [15:0]   compute_cyc;  // compute cycles per burst
    logic [3:0]    reuse;        // times each input burst is read
    logic [3:0]    rd_per_wr;    // read-to-write ratio (words read per word written)
    logic [15:0]   stride;       // words, strided pattern
    logic [7:0]    access_frac;  // fraction of bursts touched, irregular, /256
    logic          in_place;     // write results over the input
    logic [AW-1:0] base;         // input base address (bytes)
    logic [AW-1:0] out_base;     // output base address (bytes)
    logic [23:0]   words;        // input size in words
  } tg_cfg_t;

  // Flattened Q-table address of (state, action).
  function automatic logic [QAW-1:0] q_addr(input logic [SW-1:0] s, input logic [1:0] a);
    return QAW'(s) * QAW'(N_ACTIONS) + QAW'(a);
  endfunction

  // Base-3 state index of an attribute tuple.
  function automatic logic [SW-1:0] state_index(input state_attr_t t);
    return SW'(t.fully_coh_acc) * 8'd81 + SW'(t.non_coh_per_tile) * 8'd27 +
           SW'(t.to_llc_per_tile) * 8'd9 + SW'(t.tile_footprint) * 8'd3 +
           SW'(t.acc_footprint);
  endfunction

endpackage
