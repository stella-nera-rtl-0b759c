// sn_pkg: types and default sizes shared by the Stella Nera accelerator.
//
// The accelerator computes an approximate matrix product A*B the Maddness
// way: every row of A is cut into C codebooks of CW elements, each codebook
// is hashed by a 4-level binary decision tree to one of K=16 prototypes, and
// the prototype index selects a precomputed partial dot product (INT8) from a
// lookup table; C such lookups are summed in INT24 per output column.
//
// Default sizes follow the paper's main configuration (CW=9, K=16, C=16,
// four encoders, 64 decoders and 8 outputs per cycle per unit, four units).
// The input element width (8 bit, signed) and the configuration bus below
// are this design's own choices.
//
// Configuration bus: one write per cycle when `we` is set. `target` picks the
// table, `unit` the accelerator unit, `idx` the encoder (threshold and
// dimension tables) or decoder (LUT), `addr` the entry and `data` its value:
//   CFG_THRESH: addr = {tree q, node}, node = 2^level - 1 + path; data[W-1:0]
//   CFG_DIM:    addr = tree q; data = four 4-bit input indices, level 0 in [3:0]
//   CFG_LUT:    addr = {codebook c, prototype k}; data[LUT_W-1:0], signed
package sn_pkg;

  localparam int unsigned DEF_W      = 8;   // input element / threshold width
  localparam int unsigned DEF_CW     = 9;   // codebook width (elements)
  localparam int unsigned DEF_K      = 16;  // prototypes per codebook
  localparam int unsigned DEF_C      = 16;  // codebooks per decoder (C_dec)
  localparam int unsigned DEF_N_ENC  = 4;   // encoders per unit
  localparam int unsigned DEF_N_DEC  = 64;  // decoders per unit (N_dec)
  localparam int unsigned DEF_W_DEC  = 8;   // results per cycle per unit (W_dec)
  localparam int unsigned DEF_LUT_W  = 8;   // LUT entry width (INT8)
  localparam int unsigned DEF_ACC_W  = 24;  // accumulator width (INT24)
  localparam int unsigned DEF_UNITS  = 4;   // units in the system

  localparam int unsigned CFG_UNIT_W = 4;
  localparam int unsigned CFG_IDX_W  = 8;
  localparam int unsigned CFG_ADDR_W = 12;
  localparam int unsigned CFG_DATA_W = 16;

  typedef enum logic [1:0] {
    CFG_THRESH = 2'd0,
    CFG_DIM    = 2'd1,
    CFG_LUT    = 2'd2
  } cfg_target_e;

  typedef struct packed {
    logic                  we;
    cfg_target_e           target;
    logic [CFG_UNIT_W-1:0] unit;
    logic [CFG_IDX_W-1:0]  idx;
    logic [CFG_ADDR_W-1:0] addr;
    logic [CFG_DATA_W-1:0] data;
  } cfg_t;

endpackage
