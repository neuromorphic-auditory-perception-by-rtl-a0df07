// tb_spiketrum_full: the device at its full size (two cochleae, 40 kernels of
// 1353 taps, 696-sample segments of 43.5 ms, 120 channels, 32 shift lanes)
// with a 200 MHz clock. It loads a unit-energy Gammatone kernel set, hands
// each cochlea one segment of sparse Gammatone atoms in noise, and lets both
// encode it until the max_codes stop (N_CODES codes). Every code and spike is
// compared with the reference matching pursuit and ITP coder. It also checks
// the timing the paper states for the prototype: the first spike of a segment
// within 0.5 ms (100,000 cycles) of the segment being complete, and a code
// period short enough for 87 codes (2000 spikes/s) in one 43.5 ms segment
// (8,700,000 cycles). Only the first N_CODES codes are run, to keep the
// reference model's work small; the period is the same for every code.
module tb_spiketrum_full;
  import spiketrum_pkg::*;
  localparam int NC = N_COCHLEAE, NK = N_KERNELS, K = K_LEVELS, L = KERNEL_LEN, SEG = SEG_LEN;
  localparam int NCH = NK * K;
  localparam int SEG_CYCLES = 8_700_000;  // 43.5 ms at 200 MHz
  localparam int N_CODES = 12;

  logic clk = 1'b0;
  always #2.5 clk = ~clk;                 // 200 MHz
  logic rst_n, src_sel, usb_valid, ker_we, ci_we;
  logic [NC-1:0] adc_valid, ci_sel;
  logic signed [15:0] adc_sample [NC];
  logic signed [15:0] usb_sample [NC];
  logic [7:0] ker_sel, ci_ch;
  logic [15:0] ker_addr, max_codes, eps_ratio;
  logic signed [15:0] ker_data;
  logic [23:0] ci_value;
  logic [NC-1:0] code_valid, spike_valid, busy, ev_seg_start, ev_seg_cut;
  logic [NC-1:0] ev_stop_max, ev_stop_energy, ev_stop_zero;
  code_t code [NC];
  spike_t spike [NC];
  logic [NCH-1:0] spike_vec [NC];
  logic [15:0] codes_in_seg [NC];

  spiketrum_top dut (.*);

  int checks = 0, failures = 0;
  function automatic void check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endfunction

  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ker [];
  int center [];
  int segq [NC][$];
  int ref_r [NC][];
  int exp_ch [NC];
  bit exp_spike [NC];
  int n_codes [NC], n_seg_codes [NC], first_seg_codes [NC];
  int n_start [NC], n_cut [NC], n_max [NC];
  longint cyc, t_start [NC], t_first [NC], t_last [NC];

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      for (int c = 0; c < NC; c++) begin
        if (ev_stop_max[c]) n_max[c]++;
        if (exp_spike[c]) begin
          check(spike_valid[c] && int'(spike[c].channel) == exp_ch[c],
                $sformatf("cochlea %0d spike channel %0d, expected %0d", c, spike[c].channel, exp_ch[c]));
          check(spike_vec[c] == NCH'(1) << exp_ch[c], "spike vector");
        end else if (spike_valid[c]) check(1'b0, "spike without a code");
        exp_spike[c] = 1'b0;
        if (ev_seg_start[c]) begin
          if (n_start[c] == 1) first_seg_codes[c] = n_seg_codes[c];
          ref_r[c] = new[SEG];
          for (int t = 0; t < SEG; t++) ref_r[c][t] = segq[c].pop_front();
          n_start[c]++;
          n_seg_codes[c] = 0;
          t_start[c] = cyc;
        end
        if (ev_seg_cut[c]) n_cut[c]++;
        if (code_valid[c]) begin
          int m, p, s;
          int r [];
          r = ref_r[c];
          spiketrum_ref_pkg::mp_step(r, ker, NK, L, SEG, m, p, s);
          ref_r[c] = r;
          check(int'(code[c].m) == m && int'(code[c].pos) == p && $signed(code[c].s) == s,
                $sformatf("cochlea %0d code (%0d,%0d,%0d), expected (%0d,%0d,%0d)", c,
                          code[c].m, code[c].pos, $signed(code[c].s), m, p, s));
          $display("cochlea %0d segment %0d code %0d: m=%0d tau=%0d s=%0d -> channel %0d",
                   c, n_start[c], n_seg_codes[c], m, p, s,
                   spiketrum_ref_pkg::itp_channel(m, s, center, K));
          exp_ch[c] = spiketrum_ref_pkg::itp_channel(m, s, center, K);
          exp_spike[c] = 1'b1;
          if (n_seg_codes[c] == 0) t_first[c] = cyc;
          t_last[c] = cyc;
          n_codes[c]++;
          n_seg_codes[c]++;
        end
      end
    end
  end

  function automatic void make_signal(output int d [SEG], input int n_atoms, input int amp);
    longint acc [SEG];
    for (int t = 0; t < SEG; t++) acc[t] = longint'($urandom_range(0, 400)) - 200;
    for (int a = 0; a < n_atoms; a++) begin
      int m, p, s;
      m = int'($urandom_range(0, NK - 1));
      p = int'($urandom_range(L - 1, SEG + L - 2));
      s = int'($urandom_range(amp / 2, amp)) * (($urandom_range(0, 1) == 1) ? 1 : -1);
      for (int t = 0; t < SEG; t++) begin
        int j;
        j = t + L - 1 - p;
        if (j >= 0 && j < L) acc[t] += (longint'(s) * ker[m * L + j]) >>> 15;
      end
    end
    for (int t = 0; t < SEG; t++) d[t] = int'(spiketrum_ref_pkg::sat(acc[t], 16));
  endfunction

  initial begin
    int a [SEG], b [SEG];
    cyc = 0;
    rst_n = 1'b0; src_sel = 1'b0; adc_valid = '0; usb_valid = 1'b0; ker_we = 1'b0; ci_we = 1'b0;
    ci_sel = '0; ker_sel = '0; ci_ch = '0; ker_addr = '0; ker_data = '0; ci_value = '0;
    max_codes = 16'(N_CODES); eps_ratio = 16'd0;
    for (int c = 0; c < NC; c++) begin
      adc_sample[c] = '0; usb_sample[c] = '0; exp_spike[c] = 1'b0; n_codes[c] = 0; n_max[c] = 0; t_start[c] = 0; t_first[c] = 0; t_last[c] = 0;
      n_seg_codes[c] = 0; first_seg_codes[c] = 0; n_start[c] = 0; n_cut[c] = 0;
      usb_sample[c] = '0;
    end
    // Gammatone kernel set, centre frequencies log-spaced from 100 Hz to
    // 6.4 kHz, each scaled to unit energy in Q1.15.
    ker = new[NK * L];
    for (int m = 0; m < NK; m++) begin
      real e, v [L];
      e = 0.0;
      for (int j = 0; j < L; j++) begin
        v[j] = real'(spiketrum_ref_pkg::gammatone_tap(m, NK, j, L, 30000));
        e += v[j] * v[j];
      end
      for (int j = 0; j < L; j++) ker[m * L + j] = $rtoi(v[j] * 32767.0 / $sqrt(e));
    end
    center = new[NCH];
    for (int h = 0; h < NCH; h++) center[h] = spiketrum_ref_pkg::default_center(h % K, K);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < NK; m++)
      for (int j = 0; j < L; j++) begin
        @(negedge clk); ker_we = 1'b1; ker_sel = 8'(m); ker_addr = 16'(j); ker_data = 16'(ker[m * L + j]);
      end
    @(negedge clk); ker_we = 1'b0;

    // First segment at once, from the ADC inputs.
    make_signal(a, 12, 30000); make_signal(b, 12, 20000);
    for (int t = 0; t < SEG; t++) begin segq[0].push_back(a[t]); segq[1].push_back(b[t]); end
    for (int t = 0; t < SEG; t++) begin
      @(negedge clk); adc_valid = 2'b11; adc_sample[0] = 16'(a[t]); adc_sample[1] = 16'(b[t]);
    end
    @(negedge clk); adc_valid = '0;
    wait (n_max[0] == 1 && n_max[1] == 1);
    repeat (5) @(negedge clk);

    for (int c = 0; c < NC; c++) begin
      longint period;
      period = (t_last[c] - t_first[c]) / (N_CODES - 1);
      check(n_start[c] == 1, "one segment taken up");
      check(n_cut[c] == 0, "no cut");
      check(n_seg_codes[c] == N_CODES, $sformatf("cochlea %0d: %0d codes", c, n_seg_codes[c]));
      check(busy[c] == 1'b0, "idle after the max-codes stop");
      check(t_first[c] - t_start[c] <= 100_000,
            $sformatf("cochlea %0d: first spike after %0d cycles", c, t_first[c] - t_start[c]));
      check(87 * period <= SEG_CYCLES,
            $sformatf("cochlea %0d: code period %0d cycles, 87 codes take %0d", c, period, 87 * period));
      $display("cochlea %0d: first spike %0d cycles after the segment, code period %0d cycles (%0d codes per 43.5 ms)",
               c, t_first[c] - t_start[c], period, SEG_CYCLES / period);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
