// tb_convolution: runs the convolution with 3 kernels of 5 taps over an
// 8-sample segment, 5 shift lanes (so the last of the 3 groups is only partly
// used), against RAM models with one cycle of read latency, and compares
// every H_m(p) with sums worked out in the testbench. Also checks the order
// and number of results, the done pulse, the pass length
// (G*(PL+L-1) + n_last + 3 cycles from start to done) and that abort stops a
// pass. Two passes run back to back, so the second must not see the first.
module tb_convolution;
  import spiketrum_pkg::*;
  localparam int NK = 3, L = 5, SEG = 8, PL = 5, NPOS = SEG + L - 1;
  localparam int G = (NPOS + PL - 1) / PL, N_LAST = NPOS - (G - 1) * PL;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, abort, busy, res_valid, done;
  logic [15:0] sig_addr, ker_addr, res_pos;
  logic signed [15:0] sig_data;
  logic signed [15:0] ker_data [NK];
  logic signed [47:0] res_acc [NK];

  convolution #(.NK(NK), .L(L), .SEG(SEG), .PL(PL)) dut (.*);

  int checks = 0, failures = 0;
  function automatic void check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endfunction

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sig [SEG];
  int ker [NK][L];
  // RAM models: registered reads.
  always_ff @(posedge clk) begin
    sig_data <= (sig_addr < SEG) ? 16'(sig[sig_addr]) : 16'sd0;
    for (int m = 0; m < NK; m++) ker_data[m] <= (ker_addr < L) ? 16'(ker[m][ker_addr]) : 16'sd0;
  end

  function automatic longint href(input int m, input int p);
    longint acc = 0;
    for (int j = 0; j < L; j++) begin
      int t = p - (L - 1) + j;
      if (t >= 0 && t < SEG) acc += longint'(sig[t]) * ker[m][j];
    end
    return acc;
  endfunction

  int n_res, n_done, cyc, t_start, t_done;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && res_valid) begin
      check(int'(res_pos) == n_res, $sformatf("result order %0d", res_pos));
      for (int m = 0; m < NK; m++)
        check(longint'(res_acc[m]) == href(m, int'(res_pos)),
              $sformatf("H_%0d(%0d) = %0d, expected %0d", m, res_pos, res_acc[m], href(m, int'(res_pos))));
      n_res++;
    end
    if (rst_n && done) begin n_done++; t_done = cyc; end
  end

  initial begin
    rst_n = 1'b0; start = 1'b0; abort = 1'b0; n_res = 0; n_done = 0; cyc = 0;
    for (int t = 0; t < SEG; t++) sig[t] = int'($urandom_range(0, 65535)) - 32768;
    for (int m = 0; m < NK; m++) for (int j = 0; j < L; j++) ker[m][j] = int'($urandom_range(0, 65535)) - 32768;
    sig[2] = -32768; ker[1][3] = -32768;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk); start = 1'b1; t_start = cyc;
    @(negedge clk); start = 1'b0;
    wait (n_done == 1);
    @(negedge clk);
    check(n_res == NPOS, $sformatf("%0d results", n_res));
    check(t_done - t_start == G * (PL + L - 1) + N_LAST + 3, $sformatf("pass took %0d cycles", t_done - t_start));
    check(!busy, "idle after the pass");
    // A second pass on new data.
    for (int t = 0; t < SEG; t++) sig[t] = int'($urandom_range(0, 65535)) - 32768;
    n_res = 0; n_done = 0;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    wait (n_done == 1);
    @(negedge clk);
    check(n_res == NPOS, $sformatf("%0d results in the second pass", n_res));
    // Abort in the middle of a second pass.
    n_res = 0;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    repeat (10) @(negedge clk);
    abort = 1'b1;
    @(negedge clk); abort = 1'b0;
    check(!busy, "abort stops the pass");
    repeat (60) @(negedge clk);
    check(n_done == 1, "no done after abort");
    check(n_res < NPOS, "results stop after abort");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
