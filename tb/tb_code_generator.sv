// tb_code_generator: feeds passes of random correlation vectors (4 kernels,
// 30 shifts) and checks the emitted code against a maximum-|H| search done in
// the testbench: kernel, shift, sign, the scaling by 2^15, saturation, the
// tie rule (earlier shift, then lower kernel) and the one-cycle latency.
module tb_code_generator;
  import spiketrum_pkg::*;
  localparam int NK = 4, NPOS = 30;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, clear, res_valid, conv_done, code_valid;
  logic [15:0] res_pos;
  logic signed [47:0] res_acc [NK];
  code_t code;

  code_generator #(.NK(NK)) dut (.*);

  int checks = 0, failures = 0;
  function automatic void check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint v [NPOS][NK];

  task automatic run_pass(input int mode);
    longint best_abs = -1, best_val = 0;
    int bm = 0, bp = 0, s_exp;
    for (int p = 0; p < NPOS; p++)
      for (int m = 0; m < NK; m++) begin
        longint a;
        if (mode == 0) v[p][m] = longint'($urandom) - 64'sd2147483648;       // 32-bit range
        else if (mode == 1) v[p][m] = (longint'($urandom_range(0, 7)) - 4) * 64'sd1000000;  // many ties
        else v[p][m] = (longint'($urandom) <<< 15) - (64'sd1 <<< 46);    // saturating
        a = (v[p][m] < 0) ? -v[p][m] : v[p][m];
        if (a > best_abs) begin best_abs = a; best_val = v[p][m]; bm = m; bp = p; end
      end
    s_exp = int'(spiketrum_ref_pkg::sat(best_val >>> 15, 24));
    @(negedge clk); clear = 1'b1;
    @(negedge clk); clear = 1'b0;
    for (int p = 0; p < NPOS; p++) begin
      @(negedge clk);
      res_valid = 1'b1; res_pos = 16'(p);
      for (int m = 0; m < NK; m++) res_acc[m] = 48'(v[p][m]);
      conv_done = (p == NPOS - 1);
      // A gap cycle now and then, as between the convolution's results.
      if (p % 7 == 3) begin
        @(negedge clk); res_valid = 1'b0; conv_done = 1'b0;
        check(!code_valid, "no code in the middle of a pass");
      end
    end
    @(negedge clk); res_valid = 1'b0; conv_done = 1'b0;
    check(code_valid, "code one cycle after conv_done");
    check(int'(code.m) == bm && int'(code.pos) == bp,
          $sformatf("mode %0d: code (%0d,%0d), expected (%0d,%0d)", mode, code.m, code.pos, bm, bp));
    check($signed(code.s) == s_exp, $sformatf("s = %0d, expected %0d", $signed(code.s), s_exp));
    @(negedge clk);
    check(!code_valid, "code_valid is one cycle");
  endtask

  initial begin
    rst_n = 1'b0; clear = 1'b0; res_valid = 1'b0; conv_done = 1'b0; res_pos = '0;
    for (int m = 0; m < NK; m++) res_acc[m] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 6; i++) run_pass(0);
    for (int i = 0; i < 6; i++) run_pass(1);
    for (int i = 0; i < 4; i++) run_pass(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
