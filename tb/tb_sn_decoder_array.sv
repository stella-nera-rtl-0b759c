// tb_sn_decoder_array: self-checking test of the decoding unit (64 decoders,
// 8 results per cycle). Each decoder gets its own random lookup table; rows
// of 16 encodings are streamed back to back (a new row every 16 cycles, the
// full rate) and with gaps. For every row the 8 output groups must appear in
// order on 8 consecutive cycles, starting 3 cycles after the row's last
// encoding, each lane carrying the sum of its decoder's addressed entries.
module tb_sn_decoder_array;
  import sn_pkg::*;
  localparam int unsigned K = 16, C = 16, LUT_W = 8, ACC_W = 24;
  localparam int unsigned N_DEC = 64, W_DEC = 8, NGRP = N_DEC / W_DEC;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t                    cfg;
  logic                    enc_valid, out_valid;
  logic [3:0]              enc, c;
  logic [2:0]              out_group;
  logic signed [ACC_W-1:0] out_data [W_DEC];

  int checks = 0, failures = 0, cyc = 0;
  int lut [N_DEC][C][K];
  typedef struct { int sums[N_DEC]; int due; } row_t;
  row_t rows[$];
  row_t cur;
  int   grp_exp;
  int   groups_seen;

  always @(posedge clk) cyc <= cyc + 1;

  sn_decoder_array #(.K(K), .C(C), .LUT_W(LUT_W), .ACC_W(ACC_W),
                     .N_DEC(N_DEC), .W_DEC(W_DEC)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .cfg_sel_i(1'b1),
    .enc_valid_i(enc_valid), .enc_i(enc), .c_i(c),
    .out_valid_o(out_valid), .out_group_o(out_group), .out_data_o(out_data));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      if (grp_exp == 0) begin
        if (rows.size() == 0) begin
          check(0, "unexpected output");
        end else begin
          cur = rows.pop_front();
          check(cyc == cur.due, $sformatf("first group at %0d expected %0d", cyc, cur.due));
        end
      end
      check(int'(out_group) == grp_exp, $sformatf("group %0d expected %0d", out_group, grp_exp));
      for (int i = 0; i < W_DEC; i++)
        check(int'(out_data[i]) == cur.sums[grp_exp * W_DEC + i],
              $sformatf("decoder %0d: %0d expected %0d", grp_exp * W_DEC + i,
                        out_data[i], cur.sums[grp_exp * W_DEC + i]));
      groups_seen++;
      grp_exp = (grp_exp + 1) % NGRP;
    end else begin
      check(grp_exp == 0, "output burst interrupted");
    end
  end

  initial begin
    row_t r;
    cfg = '0; enc_valid = 1'b0; enc = '0; c = '0; grp_exp = 0; groups_seen = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int d = 0; d < N_DEC; d++)
      for (int a = 0; a < C * K; a++) begin
        lut[d][a / K][a % K] = int'($urandom % 256) - 128;
        @(negedge clk);
        cfg = '0; cfg.we = 1'b1; cfg.target = CFG_LUT; cfg.idx = CFG_IDX_W'(d);
        cfg.addr = CFG_ADDR_W'(a); cfg.data = CFG_DATA_W'(lut[d][a / K][a % K]);
      end
    @(negedge clk); cfg = '0;
    for (int row = 0; row < 40; row++) begin
      foreach (r.sums[d]) r.sums[d] = 0;
      for (int cb = 0; cb < C; cb++) begin
        int e;
        e = $urandom % K;
        enc_valid = 1'b1; enc = 4'(e); c = 4'(cb);
        foreach (r.sums[d]) r.sums[d] += lut[d][cb][e];
        if (cb == C - 1) begin
          r.due = cyc + 3;
          rows.push_back(r);
        end
        @(negedge clk);
        enc_valid = 1'b0;
        if (row >= 20 && ($urandom % 5) == 0) @(negedge clk);
      end
    end
    repeat (NGRP + 6) @(negedge clk);
    check(rows.size() == 0 && grp_exp == 0, "missing outputs");
    check(groups_seen == 40 * NGRP, $sformatf("%0d groups seen", groups_seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
