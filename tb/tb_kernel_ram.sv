// tb_kernel_ram: loads random taps into 5 kernels of 9 taps and checks that
// one read address returns tap j of every kernel one cycle later, and that a
// write to one kernel leaves the others alone.
module tb_kernel_ram;
  import spiketrum_pkg::*;
  localparam int NK = 5, L = 9;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [7:0] wr_kernel;
  logic [15:0] wr_addr, rd_addr;
  logic signed [15:0] wr_data;
  logic signed [15:0] rd_data [NK];

  kernel_ram #(.NK(NK), .L(L)) dut (.*);

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

  int ref_mem [NK][L];

  initial begin
    wr_en = 1'b0; wr_kernel = '0; wr_addr = '0; wr_data = '0; rd_addr = '0;
    for (int m = 0; m < NK; m++)
      for (int j = 0; j < L; j++) begin
        ref_mem[m][j] = int'($urandom_range(0, 65535)) - 32768;
        @(negedge clk);
        wr_en = 1'b1; wr_kernel = 8'(m); wr_addr = 16'(j); wr_data = 16'(ref_mem[m][j]);
      end
    @(negedge clk); wr_en = 1'b0;
    for (int j = 0; j < L; j++) begin
      @(negedge clk); rd_addr = 16'(j);
      @(negedge clk);
      for (int m = 0; m < NK; m++)
        check(int'(rd_data[m]) == ref_mem[m][j], $sformatf("kernel %0d tap %0d", m, j));
    end
    // Overwrite one tap of kernel 2.
    @(negedge clk); wr_en = 1'b1; wr_kernel = 8'd2; wr_addr = 16'd4; wr_data = 16'sd4321;
    ref_mem[2][4] = 4321;
    @(negedge clk); wr_en = 1'b0; rd_addr = 16'd4;
    @(negedge clk);
    for (int m = 0; m < NK; m++)
      check(int'(rd_data[m]) == ref_mem[m][4], $sformatf("after rewrite, kernel %0d", m));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
