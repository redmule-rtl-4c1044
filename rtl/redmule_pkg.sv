// redmule_pkg: types and constants shared by the RedMulE modules.
//
// RedMulE multiplies FP16 (IEEE binary16) matrices, Z = X * W, on an array
// of L rows by H columns of fused multiply-add units, each with P internal
// pipeline registers.  The defaults H=4, L=8, P=3 are the configuration
// the accelerator was presented in: 32 FMAs, a 256-bit data path to memory
// plus one extra 32-bit word for accesses that are not word aligned, i.e.
// a 288-bit port made of nine 32-bit memory ports.
//
// The memory port types follow the usual PULP tightly-coupled data memory
// convention (req/gnt handshake, read data one cycle after the grant);
// the exact field set is this design's choice.
package redmule_pkg;

  typedef logic [15:0] fp16_t;

  // Array shape of the presented instance.
  localparam int unsigned H_DEF = 4;
  localparam int unsigned L_DEF = 8;
  localparam int unsigned P_DEF = 3;

  // Width of the shallow-branch port of the interconnect: nine 32-bit ports.
  localparam int unsigned PORT_WORDS_DEF = 9;

  // Canonical quiet NaN returned by the FMA for any invalid operation.
  localparam fp16_t FP16_QNAN = 16'h7E00;

  // Width of the matrix dimension registers (M, N, K).
  localparam int unsigned DIM_W = 16;

  // Register map of the controller (byte offsets on the peripheral port).
  localparam logic [7:0] REG_X_ADDR  = 8'h00;
  localparam logic [7:0] REG_W_ADDR  = 8'h04;
  localparam logic [7:0] REG_Z_ADDR  = 8'h08;
  localparam logic [7:0] REG_M       = 8'h0C;
  localparam logic [7:0] REG_N       = 8'h10;
  localparam logic [7:0] REG_K       = 8'h14;
  localparam logic [7:0] REG_TRIGGER = 8'h18;
  localparam logic [7:0] REG_STATUS  = 8'h1C;

endpackage
