// tb_sn_encoder_unit: self-checking test of the encoding unit (4 encoders).
// Loads a random tree (thresholds and dimension selection) for each of the 16
// codebooks, then sends input rows as 4 beats of 4 sub-vectors. Each
// encoding is compared, in codebook order 0..15, with a software tree walk.
// Checks the rates: a beat is consumed every 4 cycles and, with no gaps in
// the input, one encoding leaves per cycle; the first encoding of a beat
// leaves 5 cycles after the beat starts. Rows with idle cycles between beats
// check that the unit stalls correctly.
module tb_sn_encoder_unit;
  import sn_pkg::*;
  localparam int unsigned W = 8, CW = 9, K = 16, C = 16, N_ENC = 4;
  localparam int unsigned DEPTH = 4, TPE = C / N_ENC;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t                cfg;
  logic                in_valid, in_ready, enc_valid;
  logic signed [W-1:0] in_data [N_ENC][CW];
  logic [3:0]          enc, c;

  int checks = 0, failures = 0, cyc = 0;
  int thr [C][K];
  int dim [C][DEPTH];
  typedef struct { int c; int enc; int due; } exp_t;
  exp_t expq[$];
  int last_valid_cyc;
  int gapless_pairs, stalls;
  bit gapless;

  always @(posedge clk) cyc <= cyc + 1;

  sn_encoder_unit #(.W(W), .CW(CW), .K(K), .C(C), .N_ENC(N_ENC)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .in_data_i(in_data), .cfg_i(cfg), .cfg_sel_i(1'b1),
    .enc_valid_o(enc_valid), .enc_o(enc), .c_o(c));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  function automatic int walk(input int cb, input int x[CW]);
    int path;
    path = 0;
    for (int l = 0; l < DEPTH; l++)
      path = path * 2 + ((x[dim[cb][l]] < thr[cb][(1 << l) - 1 + path]) ? 0 : 1);
    return path;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && enc_valid) begin
    if (expq.size() == 0) check(0, "unexpected encoding");
    else begin
      exp_t e;
      e = expq.pop_front();
      check(int'(c) == e.c, $sformatf("codebook %0d expected %0d", c, e.c));
      check(int'(enc) == e.enc, $sformatf("encoding %0d expected %0d (c=%0d)", enc, e.enc, e.c));
      check(cyc == e.due, $sformatf("encoding of c=%0d at %0d expected %0d", e.c, cyc, e.due));
      if (gapless && e.c != 0) begin
        check(cyc == last_valid_cyc + 1, "gap in the encoding stream");
        gapless_pairs++;
      end
    end
    last_valid_cyc = cyc;
  end

  initial begin
    int x [C][CW];
    cfg = '0; in_valid = 1'b0; gapless = 1'b0; gapless_pairs = 0; stalls = 0;
    foreach (in_data[e, j]) in_data[e][j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int cb = 0; cb < C; cb++) begin
      for (int n = 0; n < K; n++) begin
        thr[cb][n] = int'($urandom % 161) - 80;
        @(negedge clk);
        cfg = '0; cfg.we = 1'b1; cfg.target = CFG_THRESH; cfg.idx = CFG_IDX_W'(cb % N_ENC);
        cfg.addr = CFG_ADDR_W'((cb / N_ENC) * K + n); cfg.data = CFG_DATA_W'(thr[cb][n]);
      end
      for (int l = 0; l < DEPTH; l++) dim[cb][l] = $urandom % CW;
      @(negedge clk);
      cfg = '0; cfg.we = 1'b1; cfg.target = CFG_DIM; cfg.idx = CFG_IDX_W'(cb % N_ENC);
      cfg.addr = CFG_ADDR_W'(cb / N_ENC);
      cfg.data = CFG_DATA_W'({4'(dim[cb][3]), 4'(dim[cb][2]), 4'(dim[cb][1]), 4'(dim[cb][0])});
    end
    @(negedge clk); cfg = '0;
    for (int row = 0; row < 30; row++) begin
      gapless = (row >= 1 && row < 10);
      foreach (x[cb, j]) x[cb][j] = int'($urandom % 201) - 100;
      for (int q = 0; q < TPE; q++) begin
        int t0, waited;
        for (int e = 0; e < N_ENC; e++) begin
          for (int j = 0; j < CW; j++) in_data[e][j] = W'(x[q * N_ENC + e][j]);
          expq.push_back('{q * N_ENC + e, walk(q * N_ENC + e, x[q * N_ENC + e]), 0});
        end
        in_valid = 1'b1;
        t0 = cyc;
        for (int e = 0; e < N_ENC; e++) expq[expq.size() - N_ENC + e].due = t0 + e + DEPTH + 1;
        waited = 0;
        #1;
        while (!in_ready) begin
          @(negedge clk); #1; waited++;
        end
        check(waited == N_ENC - 1, $sformatf("beat took %0d cycles", waited + 1));
        @(negedge clk);
        in_valid = 1'b0;
        foreach (in_data[e, j]) in_data[e][j] = W'($urandom);
        if (row >= 10 && ($urandom % 2) == 0) begin
          repeat (1 + $urandom % 3) @(negedge clk);
          stalls++;
        end
      end
      if (row == 0 || row == 9) repeat (12) @(negedge clk);
    end
    repeat (12) @(negedge clk);
    check(expq.size() == 0, "missing encodings");
    check(gapless_pairs == 9 * (C - 1), $sformatf("%0d back-to-back encodings", gapless_pairs));
    check(stalls > 0, "no input stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
