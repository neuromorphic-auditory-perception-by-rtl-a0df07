// convolution: sliding inner products of the residual with every kernel.
//
// Computes, for every shift p = 0 .. SEG+L-2 and every kernel m,
//   H_m(p) = sum_j R[p - (L-1) + j] * phi_m[j]
// where samples outside the segment count as zero. The kernel placed at shift
// p starts at sample p-(L-1), so p runs over every position where kernel and
// segment overlap (2048 shifts at the defaults). This is step 4 of the
// matching-pursuit algorithm. The paper computes it with an FFT, multiplying
// in the frequency domain; this design computes the same numbers directly in
// the time domain, which needs no transform and gives exact integer results.
//
// How it works: the shifts are taken PL at a time (a group of PL lanes, shifts
// p0 .. p0+PL-1). A window register of PL samples slides over the residual
// by one sample per cycle while one tap j of every kernel is read and
// broadcast to all lanes, so lane i of kernel m multiplies sample
// p0+i-(L-1)+j with phi_m[j]: PL*NK multiply-accumulates per cycle from one
// Signal RAM read and one Kernel RAM read. A group first preloads PL-1
// samples, then runs the L taps. Its PL*NK sums are then handed out one shift
// per cycle while the next group preloads, so the accumulators are reused
// without a second set of registers.
//
// Timing: a pass of G = ceil((SEG+L-1)/PL) groups issues G*(PL+L-1) reads;
// the last result follows n_last + 3 cycles later, n_last being the shifts in
// the last group. At the defaults (PL = 32) that is 64*1384 + 35 = 88,611
// cycles, 0.44 ms at 200 MHz. PL is this design's choice, sized so that the
// 87 codes per 43.5 ms segment of the paper's 2000 spikes/s fit.
//
// Interface
//   start       : begin a pass (ignored while busy)
//   abort       : stop at once and discard the pass
//   sig_addr    : Signal RAM read address, sig_data returns one cycle later
//   ker_addr    : Kernel RAM tap address, ker_data (all kernels) one cycle later
//   res_valid   : res_acc holds H_m(res_pos) for every m (one cycle); res_pos
//                 rises by one from 0 to SEG+L-2 over a pass
//   done        : one-cycle pulse together with the last res_valid
module convolution
  import spiketrum_pkg::*;
#(
  parameter int unsigned NK  = N_KERNELS,
  parameter int unsigned L   = KERNEL_LEN,
  parameter int unsigned SEG = SEG_LEN,
  parameter int unsigned SW  = SAMPLE_W,
  parameter int unsigned KW  = COEF_W,
  parameter int unsigned AW  = ACC_W,
  parameter int unsigned PL  = SHIFT_LANES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 abort,
  output logic                 busy,
  output logic [POS_W-1:0]     sig_addr,
  input  logic signed [SW-1:0] sig_data,
  output logic [POS_W-1:0]     ker_addr,
  input  logic signed [KW-1:0] ker_data [NK],
  output logic                 res_valid,
  output logic [POS_W-1:0]     res_pos,
  output logic signed [AW-1:0] res_acc [NK],
  output logic                 done
);
  localparam int unsigned NPOS = SEG + L - 1;     // number of shifts
  localparam int unsigned C    = PL + L - 1;      // issue cycles per group
  localparam int unsigned IW   = (PL > 1) ? $clog2(PL) : 1;

  // Issue stage: group base p0, cycle c in the group, sample index a.
  logic                   run;
  logic [POS_W-1:0]       p0, c;
  logic signed [POS_W:0]  a;
  logic                   in_seg, tap_c, last_c;

  assign in_seg   = (a >= 0) && (a < (POS_W+1)'(SEG));
  assign tap_c    = (c >= POS_W'(PL - 1));
  assign last_c   = (c == POS_W'(C - 1));
  assign sig_addr = in_seg ? a[POS_W-1:0] : '0;
  assign ker_addr = tap_c ? c - POS_W'(PL - 1) : '0;

  // Data stage: the RAM words for the issued addresses are present.
  logic                   d_valid, d_in, d_tap, d_first, d_last;
  logic [POS_W-1:0]       d_p0;
  logic signed [SW-1:0]   win   [PL];
  logic signed [SW-1:0]   win_n [PL];
  logic signed [AW-1:0]   acc   [PL][NK];

  // Result hand-out: one shift of the finished group per cycle.
  logic                   dmp_run;
  logic [POS_W-1:0]       dmp_i, dmp_p0, dmp_pos;

  assign dmp_pos = dmp_p0 + dmp_i;
  assign busy    = run || dmp_run;

  always_comb begin
    for (int i = 0; i < PL - 1; i++) win_n[i] = win[i+1];
    win_n[PL-1] = d_in ? sig_data : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= 1'b0;
      p0        <= '0;
      c         <= '0;
      a         <= '0;
      d_valid   <= 1'b0;
      d_in      <= 1'b0;
      d_tap     <= 1'b0;
      d_first   <= 1'b0;
      d_last    <= 1'b0;
      d_p0      <= '0;
      dmp_run   <= 1'b0;
      dmp_i     <= '0;
      dmp_p0    <= '0;
      res_valid <= 1'b0;
      res_pos   <= '0;
      done      <= 1'b0;
    end else if (abort) begin
      run       <= 1'b0;
      d_valid   <= 1'b0;
      dmp_run   <= 1'b0;
      res_valid <= 1'b0;
      done      <= 1'b0;
    end else begin
      d_valid <= run;
      d_in    <= run && in_seg;
      d_tap   <= tap_c;
      d_first <= (c == POS_W'(PL - 1));
      d_last  <= last_c;
      d_p0    <= p0;
      if (start && !busy) begin
        run <= 1'b1;
        p0  <= '0;
        c   <= '0;
        a   <= -(POS_W+1)'(L - 1);
      end else if (run) begin
        if (last_c) begin
          if (p0 + POS_W'(PL) >= POS_W'(NPOS)) run <= 1'b0;
          else begin
            p0 <= p0 + POS_W'(PL);
            c  <= '0;
            a  <= $signed({1'b0, p0 + POS_W'(PL)}) - (POS_W+1)'(L - 1);
          end
        end else begin
          c <= c + POS_W'(1);
          a <= a + (POS_W+1)'(1);
        end
      end
      // hand-out of the group whose last tap is in the data stage
      if (d_valid && d_last) begin
        dmp_run <= 1'b1;
        dmp_i   <= '0;
        dmp_p0  <= d_p0;
      end else if (dmp_run) begin
        if (dmp_i == POS_W'(PL - 1) || dmp_pos == POS_W'(NPOS - 1)) dmp_run <= 1'b0;
        dmp_i <= dmp_i + POS_W'(1);
      end
      res_valid <= dmp_run && (dmp_pos < POS_W'(NPOS));
      done      <= dmp_run && (dmp_pos == POS_W'(NPOS - 1));
      if (dmp_run) res_pos <= dmp_pos;
    end
  end

  // Sample window and multiply-accumulate lanes. No reset is needed: the
  // window is refilled before every group's first tap, which also overwrites
  // the accumulators.
  always_ff @(posedge clk) begin
    if (d_valid) win <= win_n;
    for (int i = 0; i < PL; i++)
      for (int m = 0; m < NK; m++)
        if (d_valid && d_tap)
          acc[i][m] <= (d_first ? AW'(0) : acc[i][m]) + AW'(win_n[i]) * AW'(ker_data[m]);
    if (dmp_run)
      for (int m = 0; m < NK; m++) res_acc[m] <= acc[dmp_i[IW-1:0]][m];
  end

endmodule
