// tb_sn_decoder: self-checking test of one lookup-and-accumulate decoder.
// Fills the C x K lookup table with random signed bytes (including -128 and
// 127), streams rows of C encodings (codebooks 0..C-1) with and without idle
// cycles, and compares each result with the sum of the addressed entries.
// res_valid must pulse exactly two cycles after the last encoding of a row,
// and the result must hold while the next row accumulates.
module tb_sn_decoder;
  import sn_pkg::*;
  localparam int unsigned K = 16, C = 16, LUT_W = 8, ACC_W = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t                    cfg;
  logic                    enc_valid, res_valid;
  logic [3:0]              enc, c;
  logic signed [ACC_W-1:0] res;

  int checks = 0, failures = 0, cyc = 0;
  int lut [C][K];
  int exp_sum[$];
  int exp_due[$];
  int held;

  always @(posedge clk) cyc <= cyc + 1;

  sn_decoder #(.K(K), .C(C), .LUT_W(LUT_W), .ACC_W(ACC_W)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .cfg_sel_i(1'b1),
    .enc_valid_i(enc_valid), .enc_i(enc), .c_i(c),
    .res_valid_o(res_valid), .res_o(res));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (res_valid) begin
      if (exp_sum.size() == 0) check(0, "unexpected result");
      else begin
        int s, d;
        s = exp_sum.pop_front();
        d = exp_due.pop_front();
        check(int'(res) == s, $sformatf("result %0d expected %0d", res, s));
        check(cyc == d, $sformatf("result at cycle %0d expected %0d", cyc, d));
        held = s;
      end
    end else if (held != 32'h7fffffff) begin
      check(int'(res) == held, "result register changed without res_valid");
    end
  end

  initial begin
    cfg = '0; enc_valid = 1'b0; enc = '0; c = '0; held = 32'h7fffffff;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < C * K; a++) begin
      int v;
      v = (a == 5) ? -128 : (a == 6) ? 127 : int'($urandom % 256) - 128;
      lut[a / K][a % K] = v;
      @(negedge clk);
      cfg = '0; cfg.we = 1'b1; cfg.target = CFG_LUT; cfg.addr = CFG_ADDR_W'(a);
      cfg.data = CFG_DATA_W'(v);
    end
    @(negedge clk); cfg = '0;
    for (int r = 0; r < 60; r++) begin
      int sum;
      sum = 0;
      for (int cb = 0; cb < C; cb++) begin
        int e;
        e = $urandom % K;
        if (r == 0) e = (cb == 0) ? 5 : 6;   // row 0 starts with -128
        enc_valid = 1'b1; enc = 4'(e); c = 4'(cb);
        sum += lut[cb][e];
        if (cb == C - 1) begin
          exp_sum.push_back(sum);
          exp_due.push_back(cyc + 2);
        end
        @(negedge clk);
        enc_valid = 1'b0; enc = 4'($urandom); c = 4'($urandom);
        if (r % 3 == 1 && ($urandom % 3) == 0) repeat (1 + $urandom % 3) @(negedge clk);
      end
    end
    repeat (6) @(negedge clk);
    check(exp_sum.size() == 0, "missing results");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
