// sn_encoder: Maddness hash encoder for one codebook at a time.
//
// A codebook sub-vector of CW elements is mapped to one of K prototypes by a
// balanced binary decision tree of depth log2(K). The tree is walked one level
// per cycle: the level's input element is compared with the threshold of the
// current node; the walk goes left (bit 0) if the element is below the
// threshold and right (bit 1) otherwise. The path bits, first level in the
// MSB, form the prototype index.
//
// Datapath (following the paper's encoder drawing): a dimension memory picks
// the log2(K) elements the tree looks at out of the CW inputs; they are
// stored in a register, a level counter selects one per cycle, the compare
// result is shifted into a path register that, with the level counter,
// addresses the threshold memory, and the final index is registered.
// The encoder holds C/N_ENC trees (one per codebook it serves); the
// "C offset" input selects the tree.
//
// Timing: start_i (with data_i, coff_i) loads the element register in cycle
// t; levels 0..log2(K)-1 are compared in cycles t+1..t+log2(K); enc_valid_o
// is high for one cycle at t+log2(K)+1. ready_o is high when idle and in the
// cycle of the last compare, so a new walk can follow back to back: one
// encoding every log2(K) cycles per encoder.
//
// Own choices (the paper is silent): heap order of the thresholds within a
// tree (node = 2^level - 1 + path, K entries per tree, K-1 used), the format
// of the dimension memory, signed W-bit compare, the configuration bus, and
// an asynchronous active-low reset of the control state.
module sn_encoder
  import sn_pkg::*;
#(
  parameter int unsigned W     = DEF_W,
  parameter int unsigned CW    = DEF_CW,
  parameter int unsigned K     = DEF_K,
  parameter int unsigned C     = DEF_C,
  parameter int unsigned N_ENC = DEF_N_ENC,
  localparam int unsigned DEPTH = $clog2(K),                 // tree levels
  localparam int unsigned TPE   = C / N_ENC,                 // trees per encoder
  localparam int unsigned COFFW = (TPE > 1) ? $clog2(TPE) : 1,
  localparam int unsigned DIMW  = $clog2(CW),
  localparam int unsigned LVLW  = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // walk request
  input  logic                     start_i,
  input  logic signed [W-1:0]      data_i [CW],
  input  logic [COFFW-1:0]         coff_i,
  output logic                     ready_o,
  // table writes
  input  cfg_t                     cfg_i,
  input  logic                     cfg_sel_i,
  // result
  output logic                     enc_valid_o,
  output logic [DEPTH-1:0]         enc_o,
  output logic [COFFW-1:0]         coff_o
);

  // ---------------------------------------------------------------- tables
  localparam int unsigned THR_DEPTH = TPE * K;
  localparam int unsigned THR_AW    = $clog2(THR_DEPTH);
  localparam int unsigned DIM_AW    = (TPE > 1) ? $clog2(TPE) : 1;

  logic [THR_AW-1:0]       thr_raddr;
  logic [W-1:0]            thr_rdata;
  logic [DIM_AW-1:0]       dim_raddr;
  logic [DEPTH*DIMW-1:0]   dim_rdata;

  sn_scm #(.DEPTH(THR_DEPTH), .WIDTH(W)) i_thr_mem (
    .clk_i   (clk_i),
    .we_i    (cfg_i.we && cfg_sel_i && cfg_i.target == CFG_THRESH),
    .waddr_i (cfg_i.addr[THR_AW-1:0]),
    .wdata_i (cfg_i.data[W-1:0]),
    .raddr_i (thr_raddr),
    .rdata_o (thr_rdata)
  );

  sn_scm #(.DEPTH(TPE), .WIDTH(DEPTH*DIMW)) i_dim_mem (
    .clk_i   (clk_i),
    .we_i    (cfg_i.we && cfg_sel_i && cfg_i.target == CFG_DIM),
    .waddr_i (cfg_i.addr[DIM_AW-1:0]),
    .wdata_i (cfg_i.data[DEPTH*DIMW-1:0]),
    .raddr_i (dim_raddr),
    .rdata_o (dim_rdata)
  );

  // ------------------------------------------------------------- datapath
  logic                   active_q;
  logic [LVLW-1:0]        lvl_q;          // tree level counter
  logic [DEPTH-2:0]       path_q;         // decisions taken so far
  logic [COFFW-1:0]       coff_q;
  logic signed [W-1:0]    sel_q [DEPTH];  // elements used by the tree levels
  logic signed [W-1:0]    sel_d [DEPTH];
  logic                   last_lvl;
  logic                   decision;
  logic [DEPTH-1:0]       node;
  logic [DEPTH-1:0]       path_ext;

  assign last_lvl  = (32'(lvl_q) == DEPTH - 1);
  assign ready_o   = !active_q || last_lvl;
  assign dim_raddr = DIM_AW'(coff_i);

  // dimension select for the walk being started
  always_comb begin
    for (int l = 0; l < DEPTH; l++) begin
      logic [DIMW-1:0] d;
      d = dim_rdata[l*DIMW +: DIMW];
      sel_d[l] = (32'(d) < CW) ? data_i[d] : '0;
    end
  end

  // node of the current level: 2^level - 1 + path
  assign path_ext  = DEPTH'(path_q);
  assign node      = DEPTH'((1 << lvl_q) - 1) + path_ext;
  assign thr_raddr = THR_AW'({coff_q, node});
  assign decision  = !($signed(sel_q[lvl_q]) < $signed(thr_rdata));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q    <= 1'b0;
      lvl_q       <= '0;
      path_q      <= '0;
      coff_q      <= '0;
      enc_valid_o <= 1'b0;
      enc_o       <= '0;
      coff_o      <= '0;
      for (int l = 0; l < DEPTH; l++) sel_q[l] <= '0;
    end else begin
      enc_valid_o <= 1'b0;
      if (active_q) begin
        if (last_lvl) begin
          enc_o       <= {path_q, decision};
          coff_o      <= coff_q;
          enc_valid_o <= 1'b1;
          active_q    <= 1'b0;
        end else begin
          path_q <= (DEPTH-1)'({path_q, decision});
          lvl_q  <= lvl_q + 1'b1;
        end
      end
      if (start_i && ready_o) begin
        active_q <= 1'b1;
        lvl_q    <= '0;
        path_q   <= '0;
        coff_q   <= coff_i;
        for (int l = 0; l < DEPTH; l++) sel_q[l] <= sel_d[l];
      end
    end
  end

  initial begin
    assert (K >= 4 && (1 << DEPTH) == K) else $fatal(1, "K must be a power of two >= 4");
    assert (C % N_ENC == 0) else $fatal(1, "C must be a multiple of N_ENC");
  end

endmodule
