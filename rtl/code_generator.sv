// code_generator: picks the most correlated kernel and shift of a pass.
//
// Step 5 of the matching-pursuit algorithm: over one convolution pass it keeps
// the largest |H_m(p)| seen so far, and when the pass ends it emits the code
// (m, p, s) with s = H_m(p) scaled back to sample units (shift right by KW-1,
// since taps are Q1.15) and saturated to CODE_W bits. The search uses the
// magnitude, so a negative correlation can win and gives a negative s: the
// paper speaks of "the maximal amplitude coefficients". On a tie the lower
// kernel index and then the earlier shift win. Each res_valid cycle compares
// all NK lanes in one combinational tree.
//
// Interface
//   clear          : forget the running maximum (start of a pass)
//   res_valid/...  : one result vector of the convolution
//   conv_done      : last result of the pass (arrives with its res_valid)
//   code_valid     : one-cycle pulse, code holds the winner; the cycle after conv_done
module code_generator
  import spiketrum_pkg::*;
#(
  parameter int unsigned NK = N_KERNELS,
  parameter int unsigned KW = COEF_W,
  parameter int unsigned AW = ACC_W,
  parameter int unsigned CW = CODE_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 res_valid,
  input  logic [POS_W-1:0]     res_pos,
  input  logic signed [AW-1:0] res_acc [NK],
  input  logic                 conv_done,
  output logic                 code_valid,
  output code_t                code
);
  // Winner of this result vector.
  logic [AW-1:0]        lane_abs;
  logic signed [AW-1:0] lane_val;
  logic [IDX_W-1:0]     lane_m;

  always_comb begin
    lane_abs = '0;
    lane_val = '0;
    lane_m   = '0;
    for (int l = 0; l < NK; l++) begin
      logic [AW-1:0] a;
      a = res_acc[l][AW-1] ? $unsigned(-res_acc[l]) : $unsigned(res_acc[l]);
      if (l == 0 || a > lane_abs) begin
        lane_abs = a;
        lane_val = res_acc[l];
        lane_m   = IDX_W'(l);
      end
    end
  end

  // Running maximum, including the current vector.
  logic                 have;
  logic [AW-1:0]        best_abs;
  logic signed [AW-1:0] best_val;
  logic [IDX_W-1:0]     best_m;
  logic [POS_W-1:0]     best_pos;

  logic                 take;
  logic signed [AW-1:0] win_val;
  logic [IDX_W-1:0]     win_m;
  logic [POS_W-1:0]     win_pos;

  assign take    = res_valid && (!have || lane_abs > best_abs);
  assign win_val = take ? lane_val : best_val;
  assign win_m   = take ? lane_m   : best_m;
  assign win_pos = take ? res_pos  : best_pos;

  // Scale to sample units and saturate.
  localparam logic signed [AW-1:0] S_MAX = AW'((64'sd1 <<< (CW - 1)) - 1);
  localparam logic signed [AW-1:0] S_MIN = -S_MAX - AW'(1);
  logic signed [AW-1:0] scaled;
  logic [CW-1:0]        s_sat;
  always_comb begin
    scaled = win_val >>> (KW - 1);
    if (scaled > S_MAX)      s_sat = S_MAX[CW-1:0];
    else if (scaled < S_MIN) s_sat = S_MIN[CW-1:0];
    else                     s_sat = scaled[CW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have       <= 1'b0;
      best_abs   <= '0;
      best_val   <= '0;
      best_m     <= '0;
      best_pos   <= '0;
      code_valid <= 1'b0;
      code       <= '0;
    end else begin
      code_valid <= 1'b0;
      if (clear) begin
        have <= 1'b0;
      end else begin
        if (take) begin
          have     <= 1'b1;
          best_abs <= lane_abs;
          best_val <= lane_val;
          best_m   <= lane_m;
          best_pos <= res_pos;
        end
        if (conv_done) begin
          code_valid <= 1'b1;
          code.m     <= win_m;
          code.pos   <= win_pos;
          code.s     <= s_sat;
          have       <= 1'b0;
        end
      end
    end
  end

endmodule
