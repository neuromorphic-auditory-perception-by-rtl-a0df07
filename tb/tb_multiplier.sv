// tb_multiplier: random and corner values of s and phi; checks
// prod = round_half_up(s*phi / 2^15) one cycle after in_valid.
module tb_multiplier;
  import spiketrum_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, out_valid;
  logic signed [23:0] s;
  logic signed [15:0] phi;
  logic signed [24:0] prod;

  multiplier dut (.*);

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
    rst_n = 1'b0; in_valid = 1'b0; s = '0; phi = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      longint sv, pv, e;
      case (i)
        0: begin sv = -(64'sd1 <<< 23); pv = -32768; end
        1: begin sv = (64'sd1 <<< 23) - 1; pv = 32767; end
        2: begin sv = 1; pv = 16384; end     // exactly one half: rounds up
        3: begin sv = -1; pv = 16384; end    // minus one half: rounds up to 0
        default: begin
          sv = longint'($urandom_range(0, 16777215)) - 8388608;
          pv = longint'($urandom_range(0, 65535)) - 32768;
        end
      endcase
      e = (sv * pv + 16384) >>> 15;
      @(negedge clk); in_valid = 1'b1; s = 24'(sv); phi = 16'(pv);
      @(negedge clk); in_valid = 1'b0;
      check(out_valid, "out_valid one cycle after in_valid");
      check(longint'(prod) == e, $sformatf("%0d*%0d: %0d, expected %0d", sv, pv, prod, e));
    end
    @(negedge clk);
    check(!out_valid, "out_valid is one cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
