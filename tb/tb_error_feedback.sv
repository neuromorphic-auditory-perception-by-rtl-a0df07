// tb_error_feedback: applies random codes (3 kernels of 5 taps, 8-sample
// segment, every shift) to a Signal RAM model and compares the residual with
// x - round(s*phi_m(t - tau)) worked out in the testbench, including
// saturation. Checks the summed energy change against the energies before and
// after, the update length (overlap + 3 cycles from start to done), and that
// only the overlapped samples are written.
module tb_error_feedback;
  import spiketrum_pkg::*;
  localparam int NK = 3, L = 5, SEG = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, abort, busy, we, done;
  code_t code;
  logic [15:0] sig_addr, ker_addr, wr_addr;
  logic signed [15:0] sig_data, wr_data;
  logic signed [15:0] ker_data [NK];
  logic signed [33:0] d_energy;

  error_feedback #(.NK(NK), .L(L), .SEG(SEG)) dut (.*);

  int checks = 0, failures = 0;
  function automatic void check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sig [SEG];
  int ker [NK][L];
  always_ff @(posedge clk) begin
    sig_data <= (sig_addr < SEG) ? 16'(sig[sig_addr]) : 16'sd0;
    for (int m = 0; m < NK; m++) ker_data[m] <= (ker_addr < L) ? 16'(ker[m][ker_addr]) : 16'sd0;
    if (we && rst_n) sig[wr_addr] <= int'(wr_data);
  end

  int cyc, t_start, t_done, n_writes;
  longint e_sum;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && start) t_start = cyc;
    if (rst_n && done) t_done = cyc;
    if (rst_n && we) begin n_writes++; e_sum += longint'(d_energy); end
  end

  initial begin
    int exp_sig [SEG];
    rst_n = 1'b0; start = 1'b0; abort = 1'b0; code = '0; cyc = 0;
    for (int t = 0; t < SEG; t++) sig[t] = int'($urandom_range(0, 65535)) - 32768;
    for (int m = 0; m < NK; m++) for (int j = 0; j < L; j++) ker[m][j] = int'($urandom_range(0, 65535)) - 32768;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 60; i++) begin
      int m, p, s, tlo, thi;
      longint e0, e1;
      m = int'($urandom_range(0, NK - 1));
      p = int'($urandom_range(0, SEG + L - 2));
      s = (i % 4 == 0) ? int'($urandom_range(0, 16777215)) - 8388608 : int'($urandom_range(0, 8191)) - 4096;
      tlo = (p >= L - 1) ? p - (L - 1) : 0;
      thi = (p < SEG) ? p : SEG - 1;
      e0 = 0;
      for (int t = 0; t < SEG; t++) begin
        exp_sig[t] = sig[t];
        e0 += longint'(sig[t]) * sig[t];
      end
      for (int t = tlo; t <= thi; t++)
        exp_sig[t] = int'(spiketrum_ref_pkg::sat(longint'(sig[t]) -
                          ((longint'(s) * ker[m][t + L - 1 - p] + 16384) >>> 15), 16));
      n_writes = 0; e_sum = 0;
      @(negedge clk);
      start = 1'b1; code.m = 8'(m); code.pos = 16'(p); code.s = 24'(s);
      @(negedge clk); start = 1'b0; code = '0;
      wait (rst_n && done);
      @(posedge clk);
      @(negedge clk);
      check(t_done - t_start == thi - tlo + 1 + 3, $sformatf("update took %0d cycles", t_done - t_start));
      check(n_writes == thi - tlo + 1, $sformatf("%0d writes", n_writes));
      e1 = 0;
      for (int t = 0; t < SEG; t++) begin
        check(sig[t] == exp_sig[t], $sformatf("code %0d sample %0d: %0d, expected %0d", i, t, sig[t], exp_sig[t]));
        e1 += longint'(sig[t]) * sig[t];
      end
      check(e_sum == e1 - e0, "energy change");
      check(!busy, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
