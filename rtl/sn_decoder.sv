// sn_decoder: one Maddness decoder (one output column of the product).
//
// For every incoming encoding the decoder reads the lookup-table entry at
// {Current C, encoding} -- the precomputed INT8 dot product of prototype
// `encoding` of codebook C with this decoder's weight column -- and adds it,
// sign-extended, to an INT24 accumulator. The sum restarts when Current C is
// 0. After the encoding of codebook C-1 the complete sum is copied into a
// second (result) register, so the accumulator can start on the next row
// while the result is being read out.
//
// Timing: one lookup and accumulation per cycle. res_valid_o pulses for one
// cycle two cycles after the encoding of codebook C-1 was presented, in the
// cycle in which res_o shows the new sum; res_o then holds until the next sum.
//
// LUT (C x K entries of LUT_W bits), adder, accumulator register and result
// register follow the paper's decoder drawing; restarting on C = 0, the
// signed interpretation of the LUT and the LUT write port are own choices.
module sn_decoder
  import sn_pkg::*;
#(
  parameter int unsigned K     = DEF_K,
  parameter int unsigned C     = DEF_C,
  parameter int unsigned LUT_W = DEF_LUT_W,
  parameter int unsigned ACC_W = DEF_ACC_W,
  localparam int unsigned EW   = $clog2(K),
  localparam int unsigned CAW  = $clog2(C)
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  cfg_t                    cfg_i,
  input  logic                    cfg_sel_i,
  input  logic                    enc_valid_i,
  input  logic [EW-1:0]           enc_i,
  input  logic [CAW-1:0]          c_i,
  output logic                    res_valid_o,
  output logic signed [ACC_W-1:0] res_o
);

  localparam int unsigned LUT_DEPTH = C * K;
  localparam int unsigned LUT_AW    = $clog2(LUT_DEPTH);

  logic [LUT_W-1:0]        lut_rdata;
  logic signed [ACC_W-1:0] acc_q;
  logic signed [ACC_W-1:0] acc_base;
  logic                    last_q;

  sn_scm #(.DEPTH(LUT_DEPTH), .WIDTH(LUT_W)) i_lut (
    .clk_i   (clk_i),
    .we_i    (cfg_i.we && cfg_sel_i && cfg_i.target == CFG_LUT),
    .waddr_i (cfg_i.addr[LUT_AW-1:0]),
    .wdata_i (cfg_i.data[LUT_W-1:0]),
    .raddr_i ({c_i, enc_i}),
    .rdata_o (lut_rdata)
  );

  assign acc_base = (c_i == '0) ? '0 : acc_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      acc_q       <= '0;
      last_q      <= 1'b0;
      res_o       <= '0;
      res_valid_o <= 1'b0;
    end else begin
      last_q      <= enc_valid_i && (32'(c_i) == C - 1);
      res_valid_o <= last_q;
      if (enc_valid_i) acc_q <= acc_base + ACC_W'($signed(lut_rdata));
      if (last_q)      res_o <= acc_q;
    end
  end

endmodule
