// sn_decoder_array: the decoding unit of one Stella Nera accelerator.
//
// N_DEC decoders receive the same encoding and Current C each cycle; each
// holds the lookup table of a different output column, so one input row
// yields N_DEC approximate dot products after C encodings. The results are
// sent out W_DEC at a time through the Out Sel multiplexer: group g carries
// decoders g*W_DEC .. g*W_DEC+W_DEC-1, groups in ascending order on
// consecutive cycles. Because a new set of results can follow every C cycles,
// the N_DEC/W_DEC groups must fit into C cycles (checked at elaboration).
//
// Timing: out_valid_o is high for N_DEC/W_DEC consecutive cycles, starting
// the cycle after the decoders' result registers were loaded. There is no
// back-pressure on the output (own choice; the paper gives none).
//
// LUT writes: cfg_i.idx selects the decoder.
//
// The decoder bank, the Out Sel multiplexer and the N_DEC/W_DEC <= C rule
// follow the paper; the group order and readout timing are own choices.
module sn_decoder_array
  import sn_pkg::*;
#(
  parameter int unsigned K     = DEF_K,
  parameter int unsigned C     = DEF_C,
  parameter int unsigned LUT_W = DEF_LUT_W,
  parameter int unsigned ACC_W = DEF_ACC_W,
  parameter int unsigned N_DEC = DEF_N_DEC,
  parameter int unsigned W_DEC = DEF_W_DEC,
  localparam int unsigned EW   = $clog2(K),
  localparam int unsigned CAW  = $clog2(C),
  localparam int unsigned NGRP = N_DEC / W_DEC,
  localparam int unsigned GW   = (NGRP > 1) ? $clog2(NGRP) : 1
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  cfg_t                    cfg_i,
  input  logic                    cfg_sel_i,
  input  logic                    enc_valid_i,
  input  logic [EW-1:0]           enc_i,
  input  logic [CAW-1:0]          c_i,
  output logic                    out_valid_o,
  output logic [GW-1:0]           out_group_o,
  output logic signed [ACC_W-1:0] out_data_o [W_DEC]
);

  logic                    res_valid [N_DEC];
  logic signed [ACC_W-1:0] res       [N_DEC];

  for (genvar d = 0; d < N_DEC; d++) begin : g_dec
    sn_decoder #(.K(K), .C(C), .LUT_W(LUT_W), .ACC_W(ACC_W)) i_decoder (
      .clk_i       (clk_i),
      .rst_ni      (rst_ni),
      .cfg_i       (cfg_i),
      .cfg_sel_i   (cfg_sel_i && (32'(cfg_i.idx) == d)),
      .enc_valid_i (enc_valid_i),
      .enc_i       (enc_i),
      .c_i         (c_i),
      .res_valid_o (res_valid[d]),
      .res_o       (res[d])
    );
  end

  // Out Sel counter
  logic          drain_q;
  logic [GW-1:0] grp_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      drain_q <= 1'b0;
      grp_q   <= '0;
    end else if (res_valid[0]) begin
      drain_q <= 1'b1;
      grp_q   <= '0;
    end else if (drain_q) begin
      if (32'(grp_q) == NGRP - 1) drain_q <= 1'b0;
      else                        grp_q   <= grp_q + 1'b1;
    end
  end

  assign out_valid_o = drain_q;
  assign out_group_o = grp_q;

  always_comb begin
    for (int i = 0; i < W_DEC; i++) out_data_o[i] = res[32'(grp_q) * W_DEC + i];
  end

  initial begin
    assert (N_DEC % W_DEC == 0) else $fatal(1, "N_DEC must be a multiple of W_DEC");
    assert (NGRP <= C) else $fatal(1, "N_DEC/W_DEC output cycles must fit into C cycles");
  end

  // the previous results must have left before new ones arrive
  a_no_overrun: assert property (@(posedge clk_i) disable iff (!rst_ni)
    res_valid[0] |-> (!drain_q || 32'(grp_q) == NGRP - 1));

endmodule
