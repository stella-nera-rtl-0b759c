// sn_unit: one Stella Nera accelerator unit.
//
// Encoding unit (N_ENC tree encoders) followed by the decoding unit (N_DEC
// lookup-and-accumulate decoders plus the Out Sel multiplexer). Input rows
// arrive as C/N_ENC beats of N_ENC codebook sub-vectors (see
// sn_encoder_unit); one encoding per cycle is broadcast to all decoders, and
// every C cycles the unit produces N_DEC INT24 results, W_DEC per cycle (see
// sn_decoder_array). In steady state it performs N_DEC lookups per cycle,
// i.e. N_DEC*CW multiply-accumulate equivalents.
//
// Latency of a row: the last encoding leaves the encoding unit
// N_ENC-1 + log2(K) + 1 cycles after the first cycle of the row's last beat;
// the first result group follows three cycles later.
//
// Configuration writes with cfg_sel_i set go to encoder cfg_i.idx
// (CFG_THRESH, CFG_DIM) or decoder cfg_i.idx (CFG_LUT).
//
// The encoder/decoder split and the broadcast of one encoding per cycle
// follow the paper; the configuration routing is this design's own.
module sn_unit
  import sn_pkg::*;
#(
  parameter int unsigned W     = DEF_W,
  parameter int unsigned CW    = DEF_CW,
  parameter int unsigned K     = DEF_K,
  parameter int unsigned C     = DEF_C,
  parameter int unsigned N_ENC = DEF_N_ENC,
  parameter int unsigned N_DEC = DEF_N_DEC,
  parameter int unsigned W_DEC = DEF_W_DEC,
  parameter int unsigned LUT_W = DEF_LUT_W,
  parameter int unsigned ACC_W = DEF_ACC_W,
  localparam int unsigned EW   = $clog2(K),
  localparam int unsigned CAW  = $clog2(C),
  localparam int unsigned NGRP = N_DEC / W_DEC,
  localparam int unsigned GW   = (NGRP > 1) ? $clog2(NGRP) : 1
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  cfg_t                    cfg_i,
  input  logic                    cfg_sel_i,
  input  logic                    in_valid_i,
  output logic                    in_ready_o,
  input  logic signed [W-1:0]     in_data_i [N_ENC][CW],
  output logic                    out_valid_o,
  output logic [GW-1:0]           out_group_o,
  output logic signed [ACC_W-1:0] out_data_o [W_DEC]
);

  logic           enc_valid;
  logic [EW-1:0]  enc;
  logic [CAW-1:0] cur_c;

  sn_encoder_unit #(.W(W), .CW(CW), .K(K), .C(C), .N_ENC(N_ENC)) i_encoding (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .in_valid_i  (in_valid_i),
    .in_ready_o  (in_ready_o),
    .in_data_i   (in_data_i),
    .cfg_i       (cfg_i),
    .cfg_sel_i   (cfg_sel_i && (cfg_i.target == CFG_THRESH || cfg_i.target == CFG_DIM)),
    .enc_valid_o (enc_valid),
    .enc_o       (enc),
    .c_o         (cur_c)
  );

  sn_decoder_array #(.K(K), .C(C), .LUT_W(LUT_W), .ACC_W(ACC_W),
                     .N_DEC(N_DEC), .W_DEC(W_DEC)) i_decoding (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .cfg_i       (cfg_i),
    .cfg_sel_i   (cfg_sel_i && cfg_i.target == CFG_LUT),
    .enc_valid_i (enc_valid),
    .enc_i       (enc),
    .c_i         (cur_c),
    .out_valid_o (out_valid_o),
    .out_group_o (out_group_o),
    .out_data_o  (out_data_o)
  );

endmodule
