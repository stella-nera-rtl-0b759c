// tb_sn_resnet_layer: runs one ResNet-9 convolution layer on the default
// four-unit system. The layer is conv2 of ResNet-9 (64 -> 128 channels,
// 3x3 kernel, stride 1, padding 1), on a reduced 8x8 feature map. Full
// CIFAR-10 maps are larger but only add more rows of the same kind.
//
// Mapping: im2col turns every output pixel into one input row; codebook c is
// the unrolled 3x3 patch of one input channel (CW = 9). The system holds 16
// codebooks per output, so the 64 input channels are processed in four passes
// along D (channels 16p .. 16p+15). Before each pass the trees of those
// channels and the lookup tables of the 128 output columns (units 0 and 1)
// are loaded. The testbench adds the four partial INT24 results of every
// output. That addition stands for the adder outside the accelerator that
// tiling along D requires.
//
// Reference: for every pixel and column, the sum over all 64 channels of the
// table entry picked by a software walk of that channel's tree. Every pass
// must stream its 64 rows at the full rate (one result burst every 16 cycles).
module tb_sn_resnet_layer;
  import sn_pkg::*;
  localparam int unsigned N_UNITS = DEF_UNITS, W = DEF_W, CW = DEF_CW, K = DEF_K, C = DEF_C;
  localparam int unsigned N_ENC = DEF_N_ENC, N_DEC = DEF_N_DEC, W_DEC = DEF_W_DEC;
  localparam int unsigned ACC_W = DEF_ACC_W;
  localparam int unsigned DEPTH = $clog2(K), TPE = C / N_ENC, NGRP = N_DEC / W_DEC;
  localparam int unsigned CI = 64, CO = 128, HW = 8, ROWS = HW * HW, PASSES = CI / C;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t                    cfg;
  logic                    in_valid, in_ready, out_valid;
  logic signed [W-1:0]     in_data [N_ENC][CW];
  logic [$clog2(NGRP)-1:0] out_group;
  logic signed [ACC_W-1:0] out_data [N_UNITS][W_DEC];

  int checks = 0, failures = 0, cyc = 0;
  int fmap [CI][HW][HW];         // input feature map
  int thr  [CI][K];              // one tree per input channel
  int dim  [CI][DEPTH];
  int lut  [CO][CI][K];
  int psum [ROWS][CO];           // partial sums added over the passes
  int row_out, grp_exp, bursts, full_rate, last_burst;

  always @(posedge clk) cyc <= cyc + 1;

  sn_system dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg),
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

  // im2col: element j (= 3*ky + kx) of the patch of channel ch at pixel (y, x)
  function automatic int patch(input int ch, input int y, input int x, input int j);
    int yy, xx;
    yy = y + j / 3 - 1;
    xx = x + j % 3 - 1;
    if (yy < 0 || yy >= HW || xx < 0 || xx >= HW) return 0;
    return fmap[ch][yy][xx];
  endfunction

  function automatic int walk(input int ch, input int y, input int x);
    int path;
    path = 0;
    for (int l = 0; l < DEPTH; l++)
      path = path * 2 + ((patch(ch, y, x, dim[ch][l]) < thr[ch][(1 << l) - 1 + path]) ? 0 : 1);
    return path;
  endfunction

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collect partial results of the current pass (units 0 and 1 hold the 128 columns)
  always @(negedge clk) if (rst_n && out_valid) begin
    if (grp_exp == 0) begin
      if (bursts > 0 && cyc - last_burst == C) full_rate++;
      last_burst = cyc;
    end
    check(int'(out_group) == grp_exp, "group order");
    for (int u = 0; u < CO / N_DEC; u++)
      for (int i = 0; i < W_DEC; i++)
        psum[row_out][u * N_DEC + grp_exp * W_DEC + i] += int'(out_data[u][i]);
    grp_exp = (grp_exp + 1) % NGRP;
    if (grp_exp == 0) begin
      row_out++;
      bursts++;
    end
  end

  initial begin
    cfg = '0; in_valid = 1'b0; grp_exp = 0; bursts = 0; full_rate = 0; last_burst = 0;
    foreach (in_data[e, j]) in_data[e][j] = '0;
    foreach (psum[r, m]) psum[r][m] = 0;
    foreach (fmap[ch, y, x]) fmap[ch][y][x] = int'($urandom % 161) - 80;
    foreach (thr[ch, n]) thr[ch][n] = int'($urandom % 121) - 60;
    foreach (dim[ch, l]) dim[ch][l] = $urandom % CW;
    foreach (lut[m, ch, k]) lut[m][ch][k] = int'($urandom % 256) - 128;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < PASSES; p++) begin
      // ---- load the trees of channels 16p..16p+15 and the tables of this slice
      for (int u = 0; u < N_UNITS; u++)
        for (int cb = 0; cb < C; cb++) begin
          int ch;
          ch = p * C + cb;
          for (int n = 0; n < K; n++)
            cfg_write(CFG_THRESH, u, cb % N_ENC, (cb / N_ENC) * K + n, thr[ch][n]);
          cfg_write(CFG_DIM, u, cb % N_ENC, cb / N_ENC,
                    (dim[ch][3] << 12) | (dim[ch][2] << 8) | (dim[ch][1] << 4) | dim[ch][0]);
        end
      for (int m = 0; m < CO; m++)
        for (int cb = 0; cb < C; cb++)
          for (int k = 0; k < K; k++)
            cfg_write(CFG_LUT, m / N_DEC, m % N_DEC, cb * K + k, lut[m][p * C + cb][k]);
      @(negedge clk); cfg = '0;
      // ---- stream the 64 pixels, back to back
      row_out = 0;
      for (int r = 0; r < ROWS; r++)
        for (int q = 0; q < TPE; q++) begin
          for (int e = 0; e < N_ENC; e++)
            for (int j = 0; j < CW; j++)
              in_data[e][j] = W'(patch(p * C + q * N_ENC + e, r / HW, r % HW, j));
          in_valid = 1'b1;
          #1;
          while (!in_ready) begin
            @(negedge clk); #1;
          end
          @(negedge clk);
          in_valid = 1'b0;
        end
      repeat (20) @(negedge clk);
      check(row_out == ROWS, $sformatf("pass %0d: %0d of %0d rows returned", p, row_out, ROWS));
    end
    // ---- compare the summed passes with the whole-layer reference
    for (int r = 0; r < ROWS; r++) begin
      int enc [CI];
      for (int ch = 0; ch < CI; ch++) enc[ch] = walk(ch, r / HW, r % HW);
      for (int m = 0; m < CO; m++) begin
        int ref_sum;
        ref_sum = 0;
        for (int ch = 0; ch < CI; ch++) ref_sum += lut[m][ch][enc[ch]];
        check(psum[r][m] == ref_sum,
              $sformatf("pixel %0d column %0d: %0d expected %0d", r, m, psum[r][m], ref_sum));
      end
    end
    $display("passes=%0d bursts=%0d full_rate_bursts=%0d", PASSES, bursts, full_rate);
    check(bursts == PASSES * ROWS, "burst count");
    check(full_rate >= PASSES * (ROWS - 1), "rows not streamed at the full rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
