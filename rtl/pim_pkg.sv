// pim_pkg: constants and types shared by the ReRAM processing-in-memory node.
//
// Data: weights and feature maps are 16-bit fixed point, as the architecture
// specifies. Weights are stored in 2-bit multi-level cells, so one weight
// spans 8 adjacent bitlines (slices). The Q8.8 interpretation of the 16 bits,
// the 40-bit partial-sum width and the flit header layout are choices of this
// design; the 128-bit flit, the 16 x 20 mesh and the 14-hop SMART reach come
// from the architecture description.
package pim_pkg;
  localparam int DATA_W    = 16;              // weight / feature-map width
  localparam int FRAC_W    = 8;               // fraction bits of the Q8.8 format
  localparam int CELL_BITS = 2;               // 2-bit MLC ReRAM cell
  localparam int SLICES    = DATA_W / CELL_BITS;  // bitlines per weight (8)
  localparam int ADC_BITS  = 8;               // ADC resolution
  localparam int BL_W      = 9;               // bitline value width (128 rows x 3 = 384)
  localparam int PSUM_W    = 40;              // partial sum width
  localparam int FLIT_W    = 128;             // link width = flit size
  localparam int WPF       = FLIT_W / DATA_W; // 16-bit words per flit (8)
  localparam int HPC_MAX   = 14;              // max hops per SMART traversal
  localparam int COORD_W   = 5;               // mesh coordinate width
  localparam int MROW_W    = 12;              // tile memory row address (4096 rows of 128 bit)
  localparam int HOPS_W    = 5;

  // Bias added to every weight before it is written to the cells, so that a
  // signed weight is stored as an unsigned cell pattern (offset binary).
  localparam int WBIAS = 1 << (DATA_W - 1);

  typedef struct packed {
    logic [COORD_W-1:0] x;      // destination column
    logic [COORD_W-1:0] y;      // destination row
    logic [MROW_W-1:0]  row;    // tile-memory row written at the destination
    logic [FLIT_W-1:0]  data;   // 8 x 16-bit words, word 0 in bits 15:0
  } flit_t;

  // SMART setup request: sent by a router whose local flit leaves on an
  // output, reaching the next HPC_MAX routers in the same direction.
  typedef struct packed {
    logic              valid;
    logic [HOPS_W-1:0] hops;    // straight hops the flit wants to travel
  } ssr_t;

  // Everything that travels with the flow on one unidirectional link.
  // ssr[k] is the request of the router k+1 hops upstream.
  typedef struct packed {
    logic                     valid;
    flit_t                    flit;
    ssr_t [HPC_MAX-1:0]       ssr;
  } link_t;

  // Travel direction, also the index of the input buffer a flit enters.
  typedef enum logic [2:0] {DIR_E = 3'd0, DIR_W = 3'd1, DIR_N = 3'd2, DIR_S = 3'd3, DIR_L = 3'd4} dir_e;

  // Host configuration bus operations.
  typedef enum logic [1:0] {CFG_REG = 2'd0, CFG_PROG = 2'd1, CFG_MEM = 2'd2, CFG_START = 2'd3} cfg_op_e;

  localparam int CFG_DATA_W = 256;            // one subarray row: 128 cells x 2 bit
endpackage
