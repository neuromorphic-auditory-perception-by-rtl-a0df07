// tb_signal_ram: checks the two-bank Signal RAM with 8-sample segments:
// bank swap and seg_ready timing, segment energy and count, read-back of the
// completed segment, encoder write-back, isolation between the two banks, and
// that an encoder write in the swap cycle is dropped.
module tb_signal_ram;
  import spiketrum_pkg::*;
  localparam int SEG = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  logic in_valid;
  logic signed [15:0] in_sample;
  logic seg_ready;
  logic [47:0] seg_energy;
  logic [15:0] seg_count;
  logic [15:0] rd_addr, wr_addr;
  logic signed [15:0] rd_data, wr_data;
  logic we;

  signal_ram #(.SEG(SEG)) dut (.*);

  int checks = 0, failures = 0;
  function automatic void check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seg_a [SEG], seg_b [SEG];
  longint e_ref;
  int ready_seen;

  always @(posedge clk) if (seg_ready) ready_seen++;

  task automatic fill(input int data [SEG]);
    for (int i = 0; i < SEG; i++) begin
      @(negedge clk);
      in_valid = 1'b1; in_sample = 16'(data[i]);
      @(negedge clk);
      in_valid = 1'b0;
      if (i != SEG - 1) check(!seg_ready, "seg_ready early");
    end
  endtask

  task automatic read(input int a, output int v);
    @(negedge clk); rd_addr = 16'(a);
    @(negedge clk); v = int'(rd_data);
  endtask

  initial begin
    int v;
    rst_n = 1'b0; in_valid = 1'b0; in_sample = '0; we = 1'b0;
    rd_addr = '0; wr_addr = '0; wr_data = '0; ready_seen = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    e_ref = 0;
    for (int i = 0; i < SEG; i++) begin
      seg_a[i] = int'($urandom_range(0, 65535)) - 32768;
      seg_b[i] = int'($urandom_range(0, 65535)) - 32768;
      e_ref += longint'(seg_a[i]) * seg_a[i];
    end
    seg_a[1] = -32768;  // largest square
    e_ref = 0;
    for (int i = 0; i < SEG; i++) e_ref += longint'(seg_a[i]) * seg_a[i];

    // First segment: the last sample triggers the swap.
    fill(seg_a);
    // The pulse came the cycle after the last write, i.e. now.
    check(seg_ready == 1'b1, "seg_ready after the last sample");
    check(seg_energy == 48'(e_ref), $sformatf("energy %0d vs %0d", seg_energy, e_ref));
    check(seg_count == 16'd1, "segment count 1");
    // An encoder write in the swap cycle must be dropped.
    we = 1'b1; wr_addr = 16'd3; wr_data = 16'sd1234;
    @(negedge clk);
    we = 1'b0;
    check(!seg_ready, "seg_ready is one cycle");
    for (int i = 0; i < SEG; i++) begin
      read(i, v);
      check(v == seg_a[i], $sformatf("read-back %0d: %0d vs %0d", i, v, seg_a[i]));
    end
    // Encoder rewrites sample 5 while the next segment is being filled.
    @(negedge clk); we = 1'b1; wr_addr = 16'd5; wr_data = 16'sd777;
    in_valid = 1'b1; in_sample = 16'(seg_b[0]);
    @(negedge clk); we = 1'b0; in_valid = 1'b0;
    read(5, v); check(v == 777, "encoder write-back");
    read(0, v); check(v == seg_a[0], "fill does not touch the encoder bank");
    // Rest of the second segment.
    for (int i = 1; i < SEG; i++) begin
      @(negedge clk); in_valid = 1'b1; in_sample = 16'(seg_b[i]);
      @(negedge clk); in_valid = 1'b0;
    end
    check(seg_count == 16'd2, "segment count 2");
    for (int i = 0; i < SEG; i++) begin
      read(i, v);
      check(v == seg_b[i], $sformatf("second segment %0d", i));
    end
    check(ready_seen == 2, $sformatf("two swaps, saw %0d", ready_seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
