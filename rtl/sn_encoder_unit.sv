// sn_encoder_unit: the encoding unit of one Stella Nera accelerator.
//
// N_ENC (=4) encoders share one input beat that carries N_ENC codebook
// sub-vectors of the same input row (codebooks N_ENC*q .. N_ENC*q+N_ENC-1).
// Encoder e always serves codebooks c with c mod N_ENC = e and keeps the tree
// of codebook c at C offset q = c / N_ENC. The encoders start one cycle
// apart, so with a tree walk of log2(K) = N_ENC cycles their results come out
// on consecutive cycles: one encoding per cycle for the whole unit. The Enc
// Sel multiplexer forwards the valid encoding together with its codebook
// number, Current C = N_ENC*q + e, to the decoders.
//
// Input handshake (own choice; the paper does not give one): valid/ready.
// Encoder e latches its slice of the beat e cycles after encoder 0, so a
// beat has to stay on in_data_i for N_ENC cycles; in_ready_o is high in the
// last of them. Once in_valid_i is raised it must stay high with stable data
// until in_ready_o (checked by an assertion). A row takes C/N_ENC beats.
// Without gaps the unit accepts a beat every N_ENC cycles.
//
// Timing: the encoding of codebook N_ENC*q+e leaves enc_o
// e + log2(K) + 1 cycles after the first cycle of its beat.
module sn_encoder_unit
  import sn_pkg::*;
#(
  parameter int unsigned W     = DEF_W,
  parameter int unsigned CW    = DEF_CW,
  parameter int unsigned K     = DEF_K,
  parameter int unsigned C     = DEF_C,
  parameter int unsigned N_ENC = DEF_N_ENC,
  localparam int unsigned DEPTH = $clog2(K),
  localparam int unsigned TPE   = C / N_ENC,
  localparam int unsigned COFFW = (TPE > 1) ? $clog2(TPE) : 1,
  localparam int unsigned CAW   = $clog2(C),
  localparam int unsigned PHW   = (N_ENC > 1) ? $clog2(N_ENC) : 1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                in_valid_i,
  output logic                in_ready_o,
  input  logic signed [W-1:0] in_data_i [N_ENC][CW],
  input  cfg_t                cfg_i,
  input  logic                cfg_sel_i,
  output logic                enc_valid_o,
  output logic [DEPTH-1:0]    enc_o,
  output logic [CAW-1:0]      c_o
);

  logic [PHW-1:0]   phase_q;     // which encoder takes its slice this cycle
  logic [COFFW-1:0] q_q;         // tree (beat) index within the row
  logic             beat_done;

  logic             start   [N_ENC];
  logic             ready   [N_ENC];
  logic [N_ENC-1:0] evalid;
  logic [DEPTH-1:0] enc     [N_ENC];
  logic [COFFW-1:0] coff    [N_ENC];

  assign beat_done  = in_valid_i && (32'(phase_q) == N_ENC - 1);
  assign in_ready_o = beat_done;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      phase_q <= '0;
      q_q     <= '0;
    end else if (in_valid_i) begin
      phase_q <= beat_done ? '0 : phase_q + 1'b1;
      if (beat_done) q_q <= (32'(q_q) == TPE - 1) ? '0 : q_q + 1'b1;
    end
  end

  for (genvar e = 0; e < N_ENC; e++) begin : g_enc
    assign start[e] = in_valid_i && (32'(phase_q) == e);
    sn_encoder #(.W(W), .CW(CW), .K(K), .C(C), .N_ENC(N_ENC)) i_encoder (
      .clk_i       (clk_i),
      .rst_ni      (rst_ni),
      .start_i     (start[e]),
      .data_i      (in_data_i[e]),
      .coff_i      (q_q),
      .ready_o     (ready[e]),
      .cfg_i       (cfg_i),
      .cfg_sel_i   (cfg_sel_i && (32'(cfg_i.idx) == e)),
      .enc_valid_o (evalid[e]),
      .enc_o       (enc[e]),
      .coff_o      (coff[e])
    );
  end

  // Enc Sel: at most one encoder finishes per cycle
  always_comb begin
    enc_valid_o = 1'b0;
    enc_o       = '0;
    c_o         = '0;
    for (int e = 0; e < N_ENC; e++) begin
      if (evalid[e]) begin
        enc_valid_o = 1'b1;
        enc_o       = enc[e];
        c_o         = CAW'(32'(coff[e]) * N_ENC + e);
      end
    end
  end

  // ------------------------------------------------------------ checks
  initial begin
    assert (N_ENC >= DEPTH)
      else $fatal(1, "one beat per N_ENC cycles needs N_ENC >= log2(K) encoders");
  end

  // a started beat must be held until it is consumed
  property p_valid_held;
    @(posedge clk_i) disable iff (!rst_ni)
      (in_valid_i && !in_ready_o) |=> in_valid_i;
  endproperty
  a_valid_held: assert property (p_valid_held);

  // every encoder is free when its slice arrives
  for (genvar e = 0; e < N_ENC; e++) begin : g_chk
    a_enc_ready: assert property (@(posedge clk_i) disable iff (!rst_ni)
      start[e] |-> ready[e]);
  end

  a_one_valid: assert property (@(posedge clk_i) disable iff (!rst_ni)
    $onehot0(evalid));

endmodule
