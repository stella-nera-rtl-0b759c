// tb_sn_unit: end-to-end self-checking test of one Stella Nera unit.
// Runs at reduced, non-default sizes (C=8, 16 decoders, 4 results per cycle)
// to exercise the parameterisation; the default sizes are covered by tb_sn_system.
// A random layer is loaded through the configuration bus: one decision tree
// per codebook (thresholds and the 4 input elements each tree looks at) and
// one lookup table per output column. Random input rows are then streamed,
// first back to back at the full rate, then with idle cycles between beats,
// then at the full rate again. For every row a software model walks the
// trees, sums the addressed table entries per column and predicts the cycle
// of the first result group; every result lane and every cycle is compared.
// Mechanisms counted (each must occur): rows at the full rate (one result
// burst every C cycles), input stalls, threshold ties (element equal to the
// threshold goes right), every one of the K leaves reached, and result bursts
// of all N_DEC/W_DEC groups.
module tb_sn_unit;
  import sn_pkg::*;
  // reduced sizes: 8 codebooks, 16 decoders, 4 results per cycle
  localparam int unsigned N_UNITS = 1, W = 8, CW = 9, K = 16, C = 8;
  localparam int unsigned N_ENC = 4, N_DEC = 16, W_DEC = 4;
  localparam int unsigned ACC_W = 24;
  localparam int unsigned DEPTH = $clog2(K), TPE = C / N_ENC, NGRP = N_DEC / W_DEC;
  localparam int unsigned NCOL = N_UNITS * N_DEC;
  localparam int unsigned ROWS = 30;
  // first result group: last beat start + (N_ENC-1) encoder offset
  // + (DEPTH+1) tree walk + 2 decoder registers + 1 output select
  localparam int unsigned LAT = (N_ENC - 1) + (DEPTH + 1) + 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t                    cfg;
  logic                    in_valid, in_ready, out_valid;
  logic signed [W-1:0]     in_data [N_ENC][CW];
  logic [$clog2(NGRP)-1:0] out_group;
  logic signed [ACC_W-1:0] out_data [W_DEC];

  int checks = 0, failures = 0, cyc = 0;
  int thr [C][K];
  int dim [C][DEPTH];
  int lut [NCOL][C][K];
  typedef struct { int sums[NCOL]; int due; } row_t;
  row_t rows[$];
  row_t cur;
  int   grp_exp, bursts, full_rate_rows, stalls, ties, last_burst;
  int   leaf_hits [K];

  always @(posedge clk) cyc <= cyc + 1;

  sn_unit #(.W(W), .CW(CW), .K(K), .C(C), .N_ENC(N_ENC), .N_DEC(N_DEC),
            .W_DEC(W_DEC), .LUT_W(8), .ACC_W(ACC_W)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .cfg_sel_i(cfg.unit == '0),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .out_valid_o(out_valid), .out_group_o(out_group), .out_data_o(out_data));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  task automatic cfg_write(input cfg_target_e t, input int unit, input int idx,
                           input int addr, input int data);
    @(negedge clk);
    cfg = '0; cfg.we = 1'b1; cfg.target = t; cfg.unit = CFG_UNIT_W'(unit);
    cfg.idx = CFG_IDX_W'(idx); cfg.addr = CFG_ADDR_W'(addr); cfg.data = CFG_DATA_W'(data);
  endtask

  function automatic int walk(input int cb, input int x[CW]);
    int path;
    path = 0;
    for (int l = 0; l < DEPTH; l++)
      path = path * 2 + ((x[dim[cb][l]] < thr[cb][(1 << l) - 1 + path]) ? 0 : 1);
    return path;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result monitor
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      if (grp_exp == 0) begin
        if (rows.size() == 0) check(0, "unexpected result");
        else begin
          cur = rows.pop_front();
          check(cyc == cur.due, $sformatf("first group at %0d expected %0d", cyc, cur.due));
          if (bursts > 0 && cyc - last_burst == C) full_rate_rows++;
          last_burst = cyc;
        end
      end
      check(int'(out_group) == grp_exp, $sformatf("group %0d expected %0d", out_group, grp_exp));
      for (int u = 0; u < N_UNITS; u++)
        for (int i = 0; i < W_DEC; i++) begin
          int m;
          m = u * N_DEC + grp_exp * W_DEC + i;
          check(int'(out_data[i]) == cur.sums[m],
                $sformatf("column %0d: %0d expected %0d", m, out_data[i], cur.sums[m]));
        end
      grp_exp = (grp_exp + 1) % NGRP;
      if (grp_exp == 0) bursts++;
    end else begin
      check(grp_exp == 0, "result burst interrupted");
    end
  end

  initial begin
    int x [C][CW];
    row_t r;
    cfg = '0; in_valid = 1'b0;
    grp_exp = 0; bursts = 0; full_rate_rows = 0; stalls = 0; ties = 0; last_burst = 0;
    foreach (leaf_hits[k]) leaf_hits[k] = 0;
    foreach (in_data[e, j]) in_data[e][j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // ---- load the layer: trees (same in every unit) and lookup tables
    for (int cb = 0; cb < C; cb++) begin
      for (int n = 0; n < K; n++) thr[cb][n] = int'($urandom % 121) - 60;
      for (int l = 0; l < DEPTH; l++) dim[cb][l] = $urandom % CW;
    end
    for (int u = 0; u < N_UNITS; u++)
      for (int cb = 0; cb < C; cb++) begin
        for (int n = 0; n < K; n++)
          cfg_write(CFG_THRESH, u, cb % N_ENC, (cb / N_ENC) * K + n, thr[cb][n]);
        cfg_write(CFG_DIM, u, cb % N_ENC, cb / N_ENC,
                  (dim[cb][3] << 12) | (dim[cb][2] << 8) | (dim[cb][1] << 4) | dim[cb][0]);
      end
    for (int m = 0; m < NCOL; m++)
      for (int a = 0; a < C * K; a++) begin
        lut[m][a / K][a % K] = int'($urandom % 256) - 128;
        cfg_write(CFG_LUT, m / N_DEC, m % N_DEC, a, lut[m][a / K][a % K]);
      end
    @(negedge clk); cfg = '0;
    // ---- stream rows
    for (int row = 0; row < ROWS; row++) begin
      bit stall_phase;
      stall_phase = (row >= ROWS / 3) && (row < 2 * ROWS / 3);
      foreach (x[cb, j]) x[cb][j] = int'($urandom % 161) - 80;
      if (row % 5 == 2) begin
        x[3][dim[3][0]] = thr[3][0];     // element equal to the root threshold
        ties++;
      end
      foreach (r.sums[m]) r.sums[m] = 0;
      for (int cb = 0; cb < C; cb++) begin
        int e;
        e = walk(cb, x[cb]);
        leaf_hits[e]++;
        foreach (r.sums[m]) r.sums[m] += lut[m][cb][e];
      end
      for (int q = 0; q < TPE; q++) begin
        int waited;
        for (int e = 0; e < N_ENC; e++)
          for (int j = 0; j < CW; j++) in_data[e][j] = W'(x[q * N_ENC + e][j]);
        in_valid = 1'b1;
        if (q == TPE - 1) begin
          r.due = cyc + LAT;
          rows.push_back(r);
        end
        waited = 0;
        #1;
        while (!in_ready) begin
          @(negedge clk); #1; waited++;
        end
        check(waited == N_ENC - 1, $sformatf("beat took %0d cycles", waited + 1));
        @(negedge clk);
        in_valid = 1'b0;
        foreach (in_data[e, j]) in_data[e][j] = W'($urandom);
        if (stall_phase && ($urandom % 2) == 0) begin
          repeat (1 + $urandom % 4) @(negedge clk);
          stalls++;
        end
      end
    end
    repeat (LAT + NGRP + 4) @(negedge clk);
    check(rows.size() == 0 && grp_exp == 0, "missing results");
    check(bursts == ROWS, $sformatf("%0d result bursts for %0d rows", bursts, ROWS));
    $display("mechanisms: full_rate_rows=%0d stalls=%0d ties=%0d bursts=%0d",
             full_rate_rows, stalls, ties, bursts);
    check(full_rate_rows > 0, "no row at the full rate");
    check(stalls > 0, "no input stall");
    check(ties > 0, "no threshold tie");
    foreach (leaf_hits[k]) check(leaf_hits[k] > 0, $sformatf("leaf %0d never reached", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
