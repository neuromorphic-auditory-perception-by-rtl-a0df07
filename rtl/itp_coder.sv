// itp_coder: intensity-to-place coding (the paper's Spiketrum Generator).
//
// Every code (m, p, s) becomes one binary spike. Each kernel owns K output
// channels, one per characteristic intensity c; the spike goes to the channel
// whose intensity is nearest to |s|:
//   k = argmin_k |c[m*K+k] - |s||,   h = K*m + k   (0-based)
// and carries the code's shift p and the segment number as its time stamp.
// The characteristic intensities are a writable table with one entry per
// channel, in the units of s (1.0 = 2^15). Its reset values are log-spaced,
// the same for every kernel: c_k = 2^15 / 2^(LOG_STEP*(K-1-k)), i.e. 1/64,
// 1/8 and 1 for K = 3. The paper chooses centres "whose logarithmic values are
// equally spaced"; the concrete values, the per-channel table and the use of
// |s| are this design's. Ties go to the lower k.
//
// Interface
//   cfg_we/cfg_ch/cfg_center : write the intensity of channel cfg_ch
//   code_valid/code/segment  : a new code
//   spike_valid/spike        : the spike, one cycle after code_valid
//   spike_vec                : the same spike as a one-hot pulse over the channels
module itp_coder
  import spiketrum_pkg::*;
#(
  parameter int unsigned NK       = N_KERNELS,
  parameter int unsigned K        = K_LEVELS,
  parameter int unsigned CW       = CODE_W,
  parameter int unsigned LOG_STEP = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [IDX_W-1:0]  cfg_ch,
  input  logic [CW-1:0]     cfg_center,
  input  logic              code_valid,
  input  code_t             code,
  input  logic [15:0]       segment,
  output logic              spike_valid,
  output spike_t            spike,
  output logic [NK*K-1:0]   spike_vec
);
  localparam int unsigned NCH = NK * K;

  function automatic logic [CW-1:0] default_center(input int unsigned k);
    return CW'((64'd1 << 15) >> (LOG_STEP * (K - 1 - k)));
  endfunction

  logic [CW-1:0] center [NCH];

  // |s| and nearest centre of kernel m.
  logic [CW-1:0]    mag;
  logic [IDX_W-1:0] k_best;
  logic [IDX_W-1:0] h;
  assign mag = code.s[CW-1] ? CW'(-$signed(code.s)) : code.s;

  always_comb begin
    logic [CW-1:0] best_d;
    best_d = '1;
    k_best = '0;
    for (int k = 0; k < K; k++) begin
      logic [CW-1:0] c, d;
      c = center[(int'(code.m) * K + k) % NCH];
      d = (c > mag) ? c - mag : mag - c;
      if (k == 0 || d < best_d) begin
        best_d = d;
        k_best = IDX_W'(k);
      end
    end
  end
  assign h = IDX_W'(code.m * IDX_W'(K)) + k_best;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCH; c++) center[c] <= default_center(c % K);
      spike_valid <= 1'b0;
      spike       <= '0;
      spike_vec   <= '0;
    end else begin
      if (cfg_we && cfg_ch < IDX_W'(NCH)) center[cfg_ch] <= cfg_center;
      spike_valid <= code_valid;
      spike_vec   <= '0;
      if (code_valid) begin
        spike.channel <= h;
        spike.pos     <= code.pos;
        spike.segment <= segment;
        if (h < IDX_W'(NCH)) spike_vec[h] <= 1'b1;
      end
    end
  end

endmodule
