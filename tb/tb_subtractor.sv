// tb_subtractor: random and saturating operands; checks the written residual
// sat16(x - prod), its address, the energy change x_new^2 - x^2 and the
// one-cycle latency of the write.
module tb_subtractor;
  import spiketrum_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, we;
  logic [15:0] in_addr, wr_addr;
  logic signed [15:0] x, wr_data;
  logic signed [24:0] prod;
  logic signed [33:0] d_energy;

  subtractor dut (.*);

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
    rst_n = 1'b0; in_valid = 1'b0; in_addr = '0; x = '0; prod = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      longint xv, pv, nv;
      int a;
      xv = longint'($urandom_range(0, 65535)) - 32768;
      if (i % 3 == 0) pv = longint'($urandom_range(0, 65535)) - 32768;
      else pv = longint'($urandom_range(0, 33554431)) - 16777216;
      a = int'($urandom_range(0, 695));
      nv = spiketrum_ref_pkg::sat(xv - pv, 16);
      @(negedge clk); in_valid = 1'b1; x = 16'(xv); prod = 25'(pv); in_addr = 16'(a);
      @(negedge clk); in_valid = 1'b0;
      check(we, "write one cycle after in_valid");
      check(longint'(wr_data) == nv && int'(wr_addr) == a,
            $sformatf("%0d - %0d: %0d, expected %0d", xv, pv, wr_data, nv));
      check(longint'(d_energy) == nv * nv - xv * xv, "energy change");
    end
    @(negedge clk);
    check(!we, "we is one cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
