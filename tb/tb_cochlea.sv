// tb_cochlea: one cochlea at a reduced size (4 kernels of 8 taps, 16-sample
// segments, 3 intensities) against the bit-exact reference model. Every code
// (m, tau, s) and every spike channel is compared with the reference
// matching-pursuit run on the same segment. Scenarios: a segment coded until
// max_codes, with the cycle count between codes checked against
// overlap + T_conv + 5 (T_conv the convolution pass); a silent segment (zero-code stop); a segment stopped
// by the energy ratio; and a segment cut short by the arrival of the next one,
// whose codes must then follow the new segment.
module tb_cochlea;
  import spiketrum_pkg::*;
  localparam int NK = 4, K = 3, L = 8, SEG = 16, PL = 4, NCH = NK * K;
  // convolution pass: G groups of PL shifts, PL+L-1 reads each
  localparam int NPOS = SEG + L - 1, G = (NPOS + PL - 1) / PL;
  localparam int T_CONV = G * (PL + L - 1) + (NPOS - (G - 1) * PL) + 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  logic sample_valid;
  logic signed [15:0] sample;
  logic ker_we, ci_we;
  logic [7:0] ker_sel, ci_ch;
  logic [15:0] ker_addr;
  logic signed [15:0] ker_data;
  logic [23:0] ci_value;
  logic [15:0] max_codes, eps_ratio, codes_in_seg;
  logic code_valid, spike_valid, busy;
  code_t code;
  spike_t spike;
  logic [NCH-1:0] spike_vec;
  logic ev_seg_start, ev_seg_cut, ev_stop_max, ev_stop_energy, ev_stop_zero;

  cochlea #(.NK(NK), .K(K), .L(L), .SEG(SEG), .PL(PL)) dut (.*);

  int checks = 0, failures = 0;
  function automatic void check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ker [];
  int center [];
  int segs [$][SEG];
  int ref_r [];
  int seg_idx;
  int n_codes, n_spikes, n_start, n_cut, n_max, n_energy, n_zero;
  int exp_ch;
  bit exp_spike;
  int last_code_cyc, cyc, last_overlap, n_timed;

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (exp_spike) begin
        check(spike_valid && int'(spike.channel) == exp_ch,
              $sformatf("spike channel %0d, expected %0d", spike.channel, exp_ch));
        check(spike_vec == NCH'(1) << exp_ch, "spike vector");
        n_spikes++;
      end else begin
        check(!spike_valid, "no spike without a code");
      end
      exp_spike = 1'b0;
      if (ev_seg_start) begin
        ref_r = new[SEG];
        for (int t = 0; t < SEG; t++) ref_r[t] = segs[seg_idx][t];
        seg_idx++;
        n_start++;
        last_code_cyc = -1;
      end
      if (ev_seg_cut) n_cut++;
      if (ev_stop_max) n_max++;
      if (ev_stop_energy) n_energy++;
      if (ev_stop_zero) n_zero++;
      if (code_valid) begin
        int m, p, s, tlo, thi;
        spiketrum_ref_pkg::mp_step(ref_r, ker, NK, L, SEG, m, p, s);
        check(int'(code.m) == m && int'(code.pos) == p && $signed(code.s) == s,
              $sformatf("code (%0d,%0d,%0d), expected (%0d,%0d,%0d)",
                        code.m, code.pos, $signed(code.s), m, p, s));
        if (last_code_cyc >= 0) begin
          check(cyc - last_code_cyc == last_overlap + T_CONV + 5,
                $sformatf("%0d cycles between codes", cyc - last_code_cyc));
          n_timed++;
        end
        tlo = (p >= L - 1) ? p - (L - 1) : 0;
        thi = (p < SEG) ? p : SEG - 1;
        last_overlap = thi - tlo + 1;
        last_code_cyc = cyc;
        exp_ch = spiketrum_ref_pkg::itp_channel(m, s, center, K);
        exp_spike = 1'b1;
        n_codes++;
      end
    end
  end

  task automatic feed(input int data [SEG], input int gap);
    segs.push_back(data);
    for (int t = 0; t < SEG; t++) begin
      @(negedge clk); sample_valid = 1'b1; sample = 16'(data[t]);
      @(negedge clk); sample_valid = 1'b0;
      repeat (gap) @(negedge clk);
    end
  endtask

  function automatic void make_signal(output int d [SEG], input int n_atoms, input int amp);
    longint acc [SEG];
    for (int t = 0; t < SEG; t++) acc[t] = longint'($urandom_range(0, 200)) - 100;
    for (int a = 0; a < n_atoms; a++) begin
      int m, p, s;
      m = int'($urandom_range(0, NK - 1));
      p = int'($urandom_range(0, SEG + L - 2));
      s = int'($urandom_range(0, 2 * amp)) - amp;
      for (int t = 0; t < SEG; t++) begin
        int j;
        j = t + L - 1 - p;
        if (j >= 0 && j < L) acc[t] += (longint'(s) * ker[m * L + j]) >>> 15;
      end
    end
    for (int t = 0; t < SEG; t++) d[t] = int'(spiketrum_ref_pkg::sat(acc[t], 16));
  endfunction

  initial begin
    int d [SEG];
    rst_n = 1'b0; sample_valid = 1'b0; sample = '0; ker_we = 1'b0; ker_sel = '0; ker_addr = '0;
    ker_data = '0; ci_we = 1'b0; ci_ch = '0; ci_value = '0; max_codes = 16'd6; eps_ratio = '0;
    cyc = 0; seg_idx = 0; n_codes = 0; n_spikes = 0; n_start = 0; n_cut = 0; n_max = 0;
    n_energy = 0; n_zero = 0; exp_spike = 1'b0; n_timed = 0; last_code_cyc = -1;
    // Unit-energy test kernels.
    ker = new[NK * L];
    for (int m = 0; m < NK; m++) begin
      real e, v [L];
      e = 0.0;
      for (int j = 0; j < L; j++) begin
        v[j] = real'(spiketrum_ref_pkg::gammatone_tap(m, NK, j + 1, L, 10000)) + real'($urandom_range(0, 2000)) - 1000.0;
        e += v[j] * v[j];
      end
      for (int j = 0; j < L; j++) ker[m * L + j] = $rtoi(v[j] * 32767.0 / $sqrt(e));
    end
    center = new[NCH];
    for (int c = 0; c < NCH; c++) center[c] = spiketrum_ref_pkg::default_center(c % K, K);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < NK; m++)
      for (int j = 0; j < L; j++) begin
        @(negedge clk); ker_we = 1'b1; ker_sel = 8'(m); ker_addr = 16'(j); ker_data = 16'(ker[m * L + j]);
      end
    @(negedge clk); ker_we = 1'b0;

    // 1: coded until max_codes.
    make_signal(d, 4, 20000);
    feed(d, 0);
    wait (n_max == 1);
    check(n_codes == 6, $sformatf("%0d codes for max_codes = 6", n_codes));
    check(codes_in_seg == 16'd6, "codes_in_seg");
    repeat (5) @(negedge clk);
    check(!busy, "idle after the stop");

    // 2: silence gives no code.
    for (int t = 0; t < SEG; t++) d[t] = 0;
    feed(d, 1);
    wait (n_zero == 1);
    check(n_codes == 6, "no code for silence");

    // 3: energy-ratio stop after the first code.
    eps_ratio = 16'hffff;
    make_signal(d, 1, 30000);
    feed(d, 0);
    wait (n_energy == 1);
    check(n_codes == 7, $sformatf("one code before the energy stop, %0d", n_codes));
    eps_ratio = 16'd0;

    // 4: the next segment cuts the current one short.
    max_codes = 16'd1000;
    make_signal(d, 6, 20000);
    feed(d, 0);
    make_signal(d, 3, 20000);
    feed(d, 3 * T_CONV / SEG);   // arrives during the first few codes
    wait (n_cut == 1);
    max_codes = 16'd3;
    wait (n_max == 2);
    repeat (5) @(negedge clk);

    check(n_start == 5, $sformatf("%0d segments taken up", n_start));
    check(n_spikes == n_codes, "one spike per code");
    check(n_timed >= 4, "code timing checked");
    $display("codes %0d, stops: max %0d energy %0d zero %0d, cut %0d", n_codes, n_max, n_energy, n_zero, n_cut);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
