// cochlea: one spiketrum cochlea, audio samples in, binary spikes out.
//
// Stage 1 (efficient coding) runs event-based matching pursuit on each
// buffered segment of SEG samples: the Convolution correlates the residual in
// the Signal RAM with every kernel of the Kernel RAM, the Code Generator picks
// the best (m, tau, s), and the Error Feedback subtracts s*phi_m(t - tau) from
// the residual. Stage 2, the ITP coder, turns each code into a spike on one
// of NK*K channels. A small controller repeats stage 1 until one of:
//   - max_codes codes were made for this segment (the spike-rate control,
//     N in the algorithm; 87 per 43.5 ms segment is 2000 spikes/s),
//   - the residual energy fell below eps_ratio (Q0.16) times the segment's
//     original energy (the algorithm's minimum energy ratio; 0 disables it),
//   - the best correlation scaled to zero, so no code would change anything,
//   - the next segment is complete: the current pass is dropped at once and
//     the new segment starts (the real-time rule of the paper).
// The controller states, the stop priority and the zero-code stop are this
// design's choices.
//
// Timing: one code takes one convolution pass (T_conv = G*(PL+L-1) + n_last
// + 3 cycles, see convolution; 88,611 at the defaults), one cycle in the
// code generator, (overlap + 3) cycles of error feedback and a few control
// cycles: consecutive codes of a segment are overlap + T_conv + 5 cycles
// apart, where overlap is the number of samples the previous code's kernel
// // covers. The spike leaves the ITP coder one cycle after its code.
//
// Status pulses (one cycle): ev_seg_start when a new segment is taken up,
// ev_seg_cut when that cut a segment's iterations short, ev_stop_max,
// ev_stop_energy and ev_stop_zero when iterations stopped for that reason.
module cochlea
  import spiketrum_pkg::*;
#(
  parameter int unsigned NK  = N_KERNELS,
  parameter int unsigned K   = K_LEVELS,
  parameter int unsigned L   = KERNEL_LEN,
  parameter int unsigned SEG = SEG_LEN,
  parameter int unsigned SW  = SAMPLE_W,
  parameter int unsigned KW  = COEF_W,
  parameter int unsigned CW  = CODE_W,
  parameter int unsigned AW  = ACC_W,
  parameter int unsigned EW  = ENERGY_W,
  parameter int unsigned PL  = SHIFT_LANES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // audio
  input  logic                 sample_valid,
  input  logic signed [SW-1:0] sample,
  // kernel load
  input  logic                 ker_we,
  input  logic [IDX_W-1:0]     ker_sel,
  input  logic [POS_W-1:0]     ker_addr,
  input  logic signed [KW-1:0] ker_data,
  // characteristic intensity load
  input  logic                 ci_we,
  input  logic [IDX_W-1:0]     ci_ch,
  input  logic [CW-1:0]        ci_value,
  // iteration control
  input  logic [15:0]          max_codes,
  input  logic [15:0]          eps_ratio,
  // codes and spikes
  output logic                 code_valid,
  output code_t                code,
  output logic                 spike_valid,
  output spike_t               spike,
  output logic [NK*K-1:0]      spike_vec,
  // status
  output logic                 busy,
  output logic [15:0]          codes_in_seg,
  output logic                 ev_seg_start,
  output logic                 ev_seg_cut,
  output logic                 ev_stop_max,
  output logic                 ev_stop_energy,
  output logic                 ev_stop_zero
);
  typedef enum logic [1:0] {S_WAIT, S_CHECK, S_CONV, S_EF} state_t;
  state_t state;

  // Signal RAM
  logic                 seg_ready;
  logic [EW-1:0]        seg_energy;
  logic [15:0]          seg_count;
  logic [POS_W-1:0]     sr_rd_addr;
  logic signed [SW-1:0] sr_rd_data;
  logic                 sr_we;
  logic [POS_W-1:0]     sr_wr_addr;
  logic signed [SW-1:0] sr_wr_data;

  signal_ram #(.SEG(SEG), .SW(SW), .EW(EW)) u_signal_ram (
    .clk, .rst_n,
    .in_valid (sample_valid), .in_sample (sample),
    .seg_ready, .seg_energy, .seg_count,
    .rd_addr (sr_rd_addr), .rd_data (sr_rd_data),
    .we (sr_we), .wr_addr (sr_wr_addr), .wr_data (sr_wr_data)
  );

  // Kernel RAM
  logic [POS_W-1:0]     kr_rd_addr;
  logic signed [KW-1:0] kr_rd_data [NK];

  kernel_ram #(.NK(NK), .L(L), .KW(KW)) u_kernel_ram (
    .clk,
    .wr_en (ker_we), .wr_kernel (ker_sel), .wr_addr (ker_addr), .wr_data (ker_data),
    .rd_addr (kr_rd_addr), .rd_data (kr_rd_data)
  );

  // Convolution and code generation
  logic                 conv_start, conv_busy, conv_done, res_valid;
  logic [POS_W-1:0]     conv_sig_addr, conv_ker_addr, res_pos;
  logic signed [AW-1:0] res_acc [NK];
  logic                 cg_valid;
  code_t                cg_code;

  convolution #(.NK(NK), .L(L), .SEG(SEG), .SW(SW), .KW(KW), .AW(AW), .PL(PL)) u_convolution (
    .clk, .rst_n,
    .start (conv_start), .abort (seg_ready), .busy (conv_busy),
    .sig_addr (conv_sig_addr), .sig_data (sr_rd_data),
    .ker_addr (conv_ker_addr), .ker_data (kr_rd_data),
    .res_valid, .res_pos, .res_acc, .done (conv_done)
  );

  code_generator #(.NK(NK), .KW(KW), .AW(AW), .CW(CW)) u_code_generator (
    .clk, .rst_n,
    .clear (conv_start),
    .res_valid, .res_pos, .res_acc, .conv_done,
    .code_valid (cg_valid), .code (cg_code)
  );

  // Error feedback
  logic                   ef_start, ef_busy, ef_we, ef_done;
  logic [POS_W-1:0]       ef_sig_addr, ef_ker_addr;
  logic signed [2*SW+1:0] ef_d_energy;

  error_feedback #(.NK(NK), .L(L), .SEG(SEG), .SW(SW), .KW(KW), .CW(CW)) u_error_feedback (
    .clk, .rst_n,
    .start (ef_start), .abort (seg_ready), .code (cg_code), .busy (ef_busy),
    .sig_addr (ef_sig_addr), .sig_data (sr_rd_data),
    .ker_addr (ef_ker_addr), .ker_data (kr_rd_data),
    .we (ef_we), .wr_addr (sr_wr_addr), .wr_data (sr_wr_data),
    .d_energy (ef_d_energy), .done (ef_done)
  );

  assign sr_we      = ef_we;
  assign sr_rd_addr = (state == S_EF) ? ef_sig_addr : conv_sig_addr;
  assign kr_rd_addr = (state == S_EF) ? ef_ker_addr : conv_ker_addr;

  // ITP coder (stage 2)
  logic        code_ok;
  logic [15:0] proc_seg;
  assign code_ok    = cg_valid && (state == S_CONV) && !seg_ready && (cg_code.s != '0);
  assign code_valid = code_ok;
  assign code       = cg_code;
  assign ef_start   = code_ok;

  itp_coder #(.NK(NK), .K(K), .CW(CW)) u_itp_coder (
    .clk, .rst_n,
    .cfg_we (ci_we), .cfg_ch (ci_ch), .cfg_center (ci_value),
    .code_valid (code_ok), .code (cg_code), .segment (proc_seg),
    .spike_valid, .spike, .spike_vec
  );

  // Iteration control
  logic [EW-1:0] energy, energy0;
  logic          energy_low;
  assign energy_low = (eps_ratio != 16'd0) &&
                      ((64'(energy) << 16) < (64'(energy0) * 64'(eps_ratio)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_WAIT;
      conv_start     <= 1'b0;
      energy         <= '0;
      energy0        <= '0;
      codes_in_seg   <= '0;
      proc_seg       <= '0;
      ev_seg_start   <= 1'b0;
      ev_seg_cut     <= 1'b0;
      ev_stop_max    <= 1'b0;
      ev_stop_energy <= 1'b0;
      ev_stop_zero   <= 1'b0;
    end else begin
      conv_start     <= 1'b0;
      ev_seg_start   <= 1'b0;
      ev_seg_cut     <= 1'b0;
      ev_stop_max    <= 1'b0;
      ev_stop_energy <= 1'b0;
      ev_stop_zero   <= 1'b0;
      if (seg_ready) begin
        state        <= S_CHECK;
        energy       <= seg_energy;
        energy0      <= seg_energy;
        codes_in_seg <= '0;
        proc_seg     <= seg_count - 16'd1;
        ev_seg_start <= 1'b1;
        ev_seg_cut   <= (state == S_CONV) || (state == S_EF);
      end else begin
        unique case (state)
          S_WAIT: ;
          S_CHECK: begin
            if (codes_in_seg >= max_codes) begin
              state       <= S_WAIT;
              ev_stop_max <= 1'b1;
            end else if (energy_low) begin
              state          <= S_WAIT;
              ev_stop_energy <= 1'b1;
            end else begin
              state      <= S_CONV;
              conv_start <= 1'b1;
            end
          end
          S_CONV: begin
            if (cg_valid) begin
              if (cg_code.s == '0) begin
                state        <= S_WAIT;
                ev_stop_zero <= 1'b1;
              end else begin
                state        <= S_EF;
                codes_in_seg <= codes_in_seg + 16'd1;
              end
            end
          end
          S_EF: begin
            if (ef_we) energy <= EW'($signed(energy) + EW'(ef_d_energy));
            if (ef_done) state <= S_CHECK;
          end
          default: state <= S_WAIT;
        endcase
      end
    end
  end

  assign busy = (state != S_WAIT) || conv_busy || ef_busy;

endmodule
