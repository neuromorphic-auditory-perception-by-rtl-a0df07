// tb_itp_coder: at the full size (40 kernels, 3 intensities) sends random
// codes and checks the channel h = 3m + argmin|c - |s||, the time stamp, the
// one-hot spike vector and the one-cycle latency, first with the reset
// (log-spaced) intensities, then with a table written through the
// configuration port (including the values printed in the paper's figure for
// the first channels).
module tb_itp_coder;
  import spiketrum_pkg::*;
  localparam int NK = 40, K = 3, NCH = NK * K;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, cfg_we, code_valid, spike_valid;
  logic [7:0] cfg_ch;
  logic [23:0] cfg_center;
  code_t code;
  logic [15:0] segment;
  spike_t spike;
  logic [NCH-1:0] spike_vec;

  itp_coder dut (.*);

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

  int center [];
  int level_hits [K];

  task automatic send(input int m, input int s, input int p, input int seg);
    int h;
    h = spiketrum_ref_pkg::itp_channel(m, s, center, K);
    level_hits[h % K]++;
    @(negedge clk);
    code_valid = 1'b1; code.m = 8'(m); code.s = 24'(s); code.pos = 16'(p); segment = 16'(seg);
    @(negedge clk);
    code_valid = 1'b0;
    check(spike_valid, "spike one cycle after the code");
    check(int'(spike.channel) == h, $sformatf("m=%0d s=%0d: channel %0d, expected %0d", m, s, spike.channel, h));
    check(int'(spike.pos) == p && int'(spike.segment) == seg, "time stamp");
    check(spike_vec == (120'(1) << h), "one-hot spike vector");
  endtask

  initial begin
    rst_n = 1'b0; cfg_we = 1'b0; cfg_ch = '0; cfg_center = '0; code_valid = 1'b0; code = '0; segment = '0;
    center = new[NCH];
    for (int c = 0; c < NCH; c++) center[c] = spiketrum_ref_pkg::default_center(c % K, K);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      int mag;
      mag = (i % 2) ? int'($urandom_range(0, 40000)) : int'($urandom_range(0, 6000));
      send(int'($urandom_range(0, NK - 1)), (i % 3 == 0) ? -mag : mag,
           int'($urandom_range(0, 2047)), i);
    end
    // Exact midpoint between 512 and 4096 ties to the lower level.
    send(5, 2304, 10, 1);
    check(spike.channel == 8'(15), "tie goes to the lower intensity");
    @(negedge clk);
    check(!spike_valid && spike_vec == '0, "no spike without a code");
    // Write a new table: the figure's values for kernels 1 and 2 (x1000),
    // random increasing values elsewhere.
    for (int c = 0; c < NCH; c++) begin
      case (c)
        0: center[c] = 25800; 1: center[c] = 25400; 2: center[c] = 25000;
        3: center[c] = 24600; 4: center[c] = 24200; 5: center[c] = 23800;
        default: center[c] = int'($urandom_range(0, 40000));
      endcase
      @(negedge clk); cfg_we = 1'b1; cfg_ch = 8'(c); cfg_center = 24'(center[c]);
    end
    @(negedge clk); cfg_we = 1'b0;
    for (int i = 0; i < 300; i++)
      send(int'($urandom_range(0, NK - 1)), int'($urandom_range(0, 80000)) - 40000,
           int'($urandom_range(0, 2047)), i);
    send(0, 25300, 3, 3);
    check(spike.channel == 8'd1, "nearest of 25.8/25.4/25.0");
    for (int k = 0; k < K; k++) check(level_hits[k] > 0, $sformatf("level %0d used", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
