// prosperity_pkg -- sizes and types shared by the Prosperity RTL.
// The tile is m x n x k = 256 x 128 x 16 (spike rows x output columns x spike
// columns), weights are int8, and the PPU has 8 popcount units; these numbers
// follow the published architecture setup. The buffer geometry (two banks of
// 128 spike columns and 128 weight rows), the 24-bit output accumulator and the
// 12-bit tile-local result width are derived here from the stated buffer
// capacities (8KB spike, 32KB weight, 96KB output) and are this design's
// choice.
package prosperity_pkg;
  localparam int unsigned M_DEF    = 256;  // rows per spike tile (m)
  localparam int unsigned K_DEF    = 16;   // spike columns per tile (k)
  localparam int unsigned N_DEF    = 128;  // output columns per tile (n) = PEs
  localparam int unsigned KBUF_DEF = 128;  // spike columns / weight rows per buffer bank
  localparam int unsigned WW_DEF   = 8;    // weight width
  localparam int unsigned OW_DEF   = 24;   // accumulated output width
  localparam int unsigned LW_DEF   = 12;   // tile-local row result width
  localparam int unsigned P_DEF    = 8;    // popcount units / rows pre-loaded per cycle
  localparam int unsigned NCELL_DEF = 32;  // LIF neuron cells

  // SFU operations
  typedef enum logic [2:0] {
    SFU_AND = 3'd0,
    SFU_OR  = 3'd1,
    SFU_MUL = 3'd2,
    SFU_EXP = 3'd3,
    SFU_DIV = 3'd4
  } sfu_op_e;
endpackage
