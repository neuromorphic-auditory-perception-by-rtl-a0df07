// tb_spiketrum_top: the two-cochlea device end to end at a reduced size
// (4 kernels of 8 taps, 16-sample segments). Both cochleae get different
// audio, first from the ADC inputs, then from the USB stream (both channels in
// one word), and every code and spike of each cochlea is compared with the
// reference matching pursuit. The right cochlea gets its own intensity table.
// It counts each mechanism of the design and fails if one never happened:
// both input sources, segment swaps, a segment cut short by the next one, the
// max-codes, energy-ratio and zero-code stops, and spikes on every intensity
// level.
module tb_spiketrum_top;
  import spiketrum_pkg::*;
  localparam int NC = 2, NK = 4, K = 3, L = 8, SEG = 16, PL = 3, NCH = NK * K;

  logic clk = 1'b0;
  always #5 clk = ~clk;
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

  spiketrum_top #(.NK(NK), .K(K), .L(L), .SEG(SEG), .PL(PL)) dut (.*);

  int checks = 0, failures = 0;
  function automatic void check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endfunction

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ker [];
  int center [NC][];
  int segq [NC][$];
  int ref_r [NC][];
  int exp_ch [NC];
  bit exp_spike [NC];
  int n_codes [NC];
  int n_start [NC], n_cut [NC], n_max [NC], n_energy [NC], n_zero [NC];
  int n_level [K];
  int n_src [2];

  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < NC; c++) begin
        if (exp_spike[c]) begin
          check(spike_valid[c] && int'(spike[c].channel) == exp_ch[c],
                $sformatf("cochlea %0d spike channel %0d, expected %0d", c, spike[c].channel, exp_ch[c]));
          check(spike_vec[c] == NCH'(1) << exp_ch[c], "spike vector");
          n_level[exp_ch[c] % K]++;
        end else check(!spike_valid[c], "no spike without a code");
        exp_spike[c] = 1'b0;
        if (ev_seg_start[c]) begin
          ref_r[c] = new[SEG];
          for (int t = 0; t < SEG; t++) ref_r[c][t] = segq[c].pop_front();
          n_start[c]++;
        end
        if (ev_seg_cut[c]) n_cut[c]++;
        if (ev_stop_max[c]) n_max[c]++;
        if (ev_stop_energy[c]) n_energy[c]++;
        if (ev_stop_zero[c]) n_zero[c]++;
        if (code_valid[c]) begin
          int m, p, s;
          int r [];
          int ct [];
          r = ref_r[c];
          spiketrum_ref_pkg::mp_step(r, ker, NK, L, SEG, m, p, s);
          ref_r[c] = r;
          check(int'(code[c].m) == m && int'(code[c].pos) == p && $signed(code[c].s) == s,
                $sformatf("cochlea %0d code (%0d,%0d,%0d), expected (%0d,%0d,%0d)", c,
                          code[c].m, code[c].pos, $signed(code[c].s), m, p, s));
          ct = center[c];
          exp_ch[c] = spiketrum_ref_pkg::itp_channel(m, s, ct, K);
          exp_spike[c] = 1'b1;
          n_codes[c]++;
        end
      end
    end
  end

  // Feed one segment to both cochleae; gap = idle cycles between samples.
  task automatic feed(input int d0 [SEG], input int d1 [SEG], input bit usb, input int gap);
    for (int t = 0; t < SEG; t++) begin
      segq[0].push_back(d0[t]);
      segq[1].push_back(d1[t]);
    end
    src_sel = usb;
    n_src[usb]++;
    for (int t = 0; t < SEG; t++) begin
      @(negedge clk);
      if (usb) begin
        usb_valid = 1'b1; usb_sample[0] = 16'(d0[t]); usb_sample[1] = 16'(d1[t]);
        adc_valid = 2'b00; adc_sample[0] = 16'sd999; adc_sample[1] = -16'sd999;
      end else begin
        adc_valid = 2'b11; adc_sample[0] = 16'(d0[t]); adc_sample[1] = 16'(d1[t]);
        usb_valid = 1'b0; usb_sample[0] = 16'sd555; usb_sample[1] = 16'sd555;
      end
      // one cycle later only the other source offers a sample: must be ignored
      @(negedge clk); adc_valid = usb ? 2'b11 : 2'b00; usb_valid = !usb;
      usb_sample[0] = 16'sd555; usb_sample[1] = 16'sd555;
      adc_sample[0] = 16'sd999; adc_sample[1] = -16'sd999;
      @(negedge clk); adc_valid = '0; usb_valid = 1'b0;
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

  task automatic wait_idle();
    repeat (5) @(negedge clk);   // the last sample is still on its way in
    while (busy != '0) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  initial begin
    int a [SEG], b [SEG], z [SEG];
    rst_n = 1'b0; src_sel = 1'b0; adc_valid = '0; usb_valid = 1'b0; ker_we = 1'b0; ci_we = 1'b0;
    ci_sel = '0; ker_sel = '0; ci_ch = '0; ker_addr = '0; ker_data = '0; ci_value = '0;
    max_codes = 16'd5; eps_ratio = 16'd0;
    for (int c = 0; c < NC; c++) begin
      adc_sample[c] = '0; usb_sample[c] = '0; exp_spike[c] = 1'b0; n_codes[c] = 0;
      n_start[c] = 0; n_cut[c] = 0; n_max[c] = 0; n_energy[c] = 0; n_zero[c] = 0;
    end
    for (int k = 0; k < K; k++) n_level[k] = 0;
    n_src[0] = 0; n_src[1] = 0;
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
    for (int c = 0; c < NC; c++) begin
      center[c] = new[NCH];
      for (int h = 0; h < NCH; h++) center[c][h] = spiketrum_ref_pkg::default_center(h % K, K);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < NK; m++)
      for (int j = 0; j < L; j++) begin
        @(negedge clk); ker_we = 1'b1; ker_sel = 8'(m); ker_addr = 16'(j); ker_data = 16'(ker[m * L + j]);
      end
    @(negedge clk); ker_we = 1'b0;
    // Right cochlea: linearly spaced intensities.
    for (int h = 0; h < NCH; h++) begin
      center[1][h] = 3000 + 6000 * (h % K);
      @(negedge clk); ci_we = 1'b1; ci_sel = 2'b10; ci_ch = 8'(h); ci_value = 24'(center[1][h]);
    end
    @(negedge clk); ci_we = 1'b0;

    // ADC input, coded to max_codes.
    make_signal(a, 4, 20000); make_signal(b, 4, 5000);
    feed(a, b, 1'b0, 0);
    wait_idle();
    // USB input.
    make_signal(a, 3, 25000); make_signal(b, 5, 15000);
    feed(a, b, 1'b1, 2);
    wait_idle();
    // Silence on the left, energy stop on the right.
    eps_ratio = 16'hffff;
    for (int t = 0; t < SEG; t++) z[t] = 0;
    make_signal(b, 1, 30000);
    feed(z, b, 1'b0, 0);
    wait_idle();
    eps_ratio = 16'd0;
    // A segment cut short by the next.
    max_codes = 16'd1000;
    make_signal(a, 6, 20000); make_signal(b, 6, 20000);
    feed(a, b, 1'b1, 0);
    make_signal(a, 3, 20000); make_signal(b, 3, 20000);
    feed(a, b, 1'b1, 3 * L);
    max_codes = 16'd4;
    wait_idle();

    for (int c = 0; c < NC; c++) begin
      check(n_start[c] == 5, $sformatf("cochlea %0d took up %0d segments", c, n_start[c]));
      check(n_codes[c] > 0, "codes made");
      $display("cochlea %0d: codes %0d, segments %0d, cut %0d, stops max %0d energy %0d zero %0d",
               c, n_codes[c], n_start[c], n_cut[c], n_max[c], n_energy[c], n_zero[c]);
    end
    check(n_src[0] > 0 && n_src[1] > 0, "both input sources used");
    check(n_cut[0] + n_cut[1] > 0, "a segment was cut short");
    check(n_max[0] + n_max[1] > 0, "max-codes stop happened");
    check(n_energy[0] + n_energy[1] > 0, "energy-ratio stop happened");
    check(n_zero[0] + n_zero[1] > 0, "zero-code stop happened");
    for (int k = 0; k < K; k++) check(n_level[k] > 0, $sformatf("intensity level %0d used (%0d)", k, n_level[k]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
