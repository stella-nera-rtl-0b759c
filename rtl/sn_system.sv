// sn_system: Stella Nera system of N_UNITS (=4) accelerator units.
//
// The units are tiled along the output columns: every unit receives the same
// input beats and holds the lookup tables of N_DEC different columns, so the
// system behaves like one accelerator with N_UNITS*N_DEC decoders and
// N_UNITS*W_DEC results per cycle (256 and 32 at the defaults), with C=16
// codebooks per output. Output lane i of unit u in group g is product column
// m = u*N_DEC + g*W_DEC + i.
//
// The INT24 results leave on out_data_o; converting them to FP16 (done by
// floating-point FMA units next to the accelerator in the paper's system) is
// outside this design. cfg_i.unit selects the unit a table write goes to.
//
// Interface and timing are those of sn_unit; all units run in lockstep, so
// in_ready_o and out_valid_o are taken from unit 0 (equality is asserted).
// Tiling along the columns is this design's reading of the paper's system
// (C stays 16 while the decoder count quadruples).
module sn_system
  import sn_pkg::*;
#(
  parameter int unsigned N_UNITS = DEF_UNITS,
  parameter int unsigned W       = DEF_W,
  parameter int unsigned CW      = DEF_CW,
  parameter int unsigned K       = DEF_K,
  parameter int unsigned C       = DEF_C,
  parameter int unsigned N_ENC   = DEF_N_ENC,
  parameter int unsigned N_DEC   = DEF_N_DEC,
  parameter int unsigned W_DEC   = DEF_W_DEC,
  parameter int unsigned LUT_W   = DEF_LUT_W,
  parameter int unsigned ACC_W   = DEF_ACC_W,
  localparam int unsigned NGRP   = N_DEC / W_DEC,
  localparam int unsigned GW     = (NGRP > 1) ? $clog2(NGRP) : 1
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  cfg_t                    cfg_i,
  input  logic                    in_valid_i,
  output logic                    in_ready_o,
  input  logic signed [W-1:0]     in_data_i [N_ENC][CW],
  output logic                    out_valid_o,
  output logic [GW-1:0]           out_group_o,
  output logic signed [ACC_W-1:0] out_data_o [N_UNITS][W_DEC]
);

  logic          ready [N_UNITS];
  logic          ovld  [N_UNITS];
  logic [GW-1:0] ogrp  [N_UNITS];

  for (genvar u = 0; u < N_UNITS; u++) begin : g_unit
    sn_unit #(.W(W), .CW(CW), .K(K), .C(C), .N_ENC(N_ENC), .N_DEC(N_DEC),
              .W_DEC(W_DEC), .LUT_W(LUT_W), .ACC_W(ACC_W)) i_unit (
      .clk_i       (clk_i),
      .rst_ni      (rst_ni),
      .cfg_i       (cfg_i),
      .cfg_sel_i   (32'(cfg_i.unit) == u),
      .in_valid_i  (in_valid_i),
      .in_ready_o  (ready[u]),
      .in_data_i   (in_data_i),
      .out_valid_o (ovld[u]),
      .out_group_o (ogrp[u]),
      .out_data_o  (out_data_o[u])
    );

    a_lockstep: assert property (@(posedge clk_i) disable iff (!rst_ni)
      ready[u] == ready[0] && ovld[u] == ovld[0] && ogrp[u] == ogrp[0]);
  end

  assign in_ready_o  = ready[0];
  assign out_valid_o = ovld[0];
  assign out_group_o = ogrp[0];

endmodule
