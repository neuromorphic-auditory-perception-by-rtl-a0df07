// tb_shifter: for every shift of a 6-tap kernel over a 10-sample segment,
// checks the stream of (sample address, tap address) pairs: it starts at the
// first overlapping sample, keeps j = t - p + L - 1, marks the last pair, and
// lasts exactly as many cycles as the overlap. Also checks abort.
module tb_shifter;
  import spiketrum_pkg::*;
  localparam int L = 6, SEG = 10;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, abort, busy, valid, last;
  logic [15:0] pos, sig_addr, ker_addr;

  shifter #(.L(L), .SEG(SEG)) dut (.*);

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

  initial begin
    rst_n = 1'b0; start = 1'b0; abort = 1'b0; pos = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < SEG + L - 1; p++) begin
      int tlo, thi;
      tlo = (p >= L - 1) ? p - (L - 1) : 0;
      thi = (p < SEG) ? p : SEG - 1;
      @(negedge clk); start = 1'b1; pos = 16'(p);
      @(negedge clk); start = 1'b0; pos = 16'hffff;
      for (int t = tlo; t <= thi; t++) begin
        check(valid, $sformatf("p=%0d valid at t=%0d", p, t));
        check(int'(sig_addr) == t && int'(ker_addr) == t - p + L - 1,
              $sformatf("p=%0d: (%0d,%0d), expected (%0d,%0d)", p, sig_addr, ker_addr, t, t - p + L - 1));
        check(last == (t == thi), $sformatf("p=%0d last flag at t=%0d", p, t));
        @(negedge clk);
      end
      check(!valid && !busy, $sformatf("p=%0d stream ends after the overlap", p));
    end
    @(negedge clk); start = 1'b1; pos = 16'd7;
    @(negedge clk); start = 1'b0;
    @(negedge clk); abort = 1'b1;
    @(negedge clk); abort = 1'b0;
    check(!valid, "abort ends the stream");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
