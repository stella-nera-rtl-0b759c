// tb_sn_encoder: self-checking test of one tree encoder.
// Loads random thresholds and dimension selections for all trees, then runs
// random sub-vectors through the encoder, back to back and with idle gaps.
// Each result is compared with a software walk of the same tree, and its
// latency (start to valid) must be log2(K)+1 = 5 cycles. Inputs that sit
// exactly on a threshold are included (they must go right).
module tb_sn_encoder;
  import sn_pkg::*;
  localparam int unsigned W = 8, CW = 9, K = 16, C = 16, N_ENC = 4;
  localparam int unsigned DEPTH = 4, TPE = C / N_ENC, LAT = DEPTH + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                start, ready, enc_valid;
  logic signed [W-1:0] data [CW];
  logic [1:0]          coff, coff_o;
  logic [DEPTH-1:0]    enc;
  cfg_t                cfg;

  int checks = 0, failures = 0;
  int cyc = 0;
  int thr   [TPE][K];
  int dim   [TPE][DEPTH];
  typedef struct { int enc; int coff; int due; } exp_t;
  exp_t expq[$];

  always @(posedge clk) cyc <= cyc + 1;

  sn_encoder #(.W(W), .CW(CW), .K(K), .C(C), .N_ENC(N_ENC)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .data_i(data), .coff_i(coff),
    .ready_o(ready), .cfg_i(cfg), .cfg_sel_i(1'b1), .enc_valid_o(enc_valid),
    .enc_o(enc), .coff_o(coff_o));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  function automatic int walk(input int q, input int x[CW]);
    int path;
    path = 0;
    for (int l = 0; l < DEPTH; l++) begin
      int node;
      node = (1 << l) - 1 + path;
      path = path * 2 + ((x[dim[q][l]] < thr[q][node]) ? 0 : 1);
    end
    return path;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result monitor
  always @(negedge clk) if (rst_n && enc_valid) begin
    if (expq.size() == 0) check(0, "unexpected encoding");
    else begin
      exp_t e;
      e = expq.pop_front();
      check(int'(enc) == e.enc, $sformatf("encoding %0d expected %0d", enc, e.enc));
      check(int'(coff_o) == e.coff, $sformatf("coff %0d expected %0d", coff_o, e.coff));
      check(cyc == e.due, $sformatf("latency: valid at %0d expected %0d", cyc, e.due));
    end
  end

  initial begin
    int x [CW];
    int hist [K];
    cfg = '0; start = 1'b0; coff = '0;
    foreach (data[i]) data[i] = '0;
    foreach (hist[i]) hist[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // tables
    for (int q = 0; q < TPE; q++) begin
      for (int n = 0; n < K; n++) begin
        thr[q][n] = int'($urandom % 161) - 80;
        @(negedge clk);
        cfg = '0; cfg.we = 1'b1; cfg.target = CFG_THRESH;
        cfg.addr = CFG_ADDR_W'(q * K + n); cfg.data = CFG_DATA_W'(thr[q][n]);
      end
      for (int l = 0; l < DEPTH; l++) dim[q][l] = $urandom % CW;
      @(negedge clk);
      cfg = '0; cfg.we = 1'b1; cfg.target = CFG_DIM; cfg.addr = CFG_ADDR_W'(q);
      cfg.data = CFG_DATA_W'({4'(dim[q][3]), 4'(dim[q][2]), 4'(dim[q][1]), 4'(dim[q][0])});
    end
    @(negedge clk); cfg = '0;
    // walks
    for (int i = 0; i < 400; i++) begin
      int q;
      q = $urandom % TPE;
      foreach (x[j]) x[j] = int'($urandom % 201) - 100;
      if (i % 7 == 3) x[dim[q][0]] = thr[q][0];          // tie at the root
      foreach (x[j]) data[j] = W'(x[j]);
      coff  = 2'(q);
      start = 1'b1;
      #1;
      check(ready, "encoder not ready at its start slot");
      expq.push_back('{walk(q, x), q, cyc + LAT});
      hist[walk(q, x)]++;
      @(negedge clk);
      start = 1'b0;
      foreach (data[j]) data[j] = W'($urandom);   // input only sampled at start
      coff = 2'($urandom);
      repeat (DEPTH - 2) @(negedge clk);
      #1;
      check(!ready, "ready while a walk is in progress");
      @(negedge clk);
      if (i % 10 == 9) repeat ($urandom % 4) @(negedge clk);  // idle gap
    end
    repeat (10) @(negedge clk);
    check(expq.size() == 0, "missing encodings");
    begin
      int used;
      used = 0;
      foreach (hist[i]) if (hist[i] > 0) used++;
      check(used >= 12, $sformatf("only %0d of 16 leaves reached", used));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
