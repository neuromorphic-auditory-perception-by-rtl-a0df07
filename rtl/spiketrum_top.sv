// spiketrum_top: the two-cochlea neuromorphic hearing device.
//
// Two identical cochleae (left and right) each turn a 16 kHz audio stream
// into spikes on NK*K = 120 channels. Audio comes either from the two
// microphone ADCs (src_sel = 0) or from a host stream carrying both channels
// (src_sel = 1), as in the prototype, which takes its input "from two
// microphones or via a USB 3 interface". The selected sample and its valid
// are registered once before they reach a cochlea. The ADCs, the USB link and
// the USB-C spike output are board parts and stay outside: their sample and
// spike signals are the ports here. Both cochleae load the same kernel set;
// the characteristic intensities are written per cochlea (ci_sel). Index 0
// of every array port is the left cochlea.
module spiketrum_top
  import spiketrum_pkg::*;
#(
  parameter int unsigned NC  = N_COCHLEAE,
  parameter int unsigned NK  = N_KERNELS,
  parameter int unsigned K   = K_LEVELS,
  parameter int unsigned L   = KERNEL_LEN,
  parameter int unsigned SEG = SEG_LEN,
  parameter int unsigned SW  = SAMPLE_W,
  parameter int unsigned KW  = COEF_W,
  parameter int unsigned CW  = CODE_W,
  parameter int unsigned PL  = SHIFT_LANES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // audio sources
  input  logic                 src_sel,
  input  logic [NC-1:0]        adc_valid,
  input  logic signed [SW-1:0] adc_sample [NC],
  input  logic                 usb_valid,
  input  logic signed [SW-1:0] usb_sample [NC],
  // kernel load (both cochleae)
  input  logic                 ker_we,
  input  logic [IDX_W-1:0]     ker_sel,
  input  logic [POS_W-1:0]     ker_addr,
  input  logic signed [KW-1:0] ker_data,
  // characteristic intensity load
  input  logic                 ci_we,
  input  logic [NC-1:0]        ci_sel,
  input  logic [IDX_W-1:0]     ci_ch,
  input  logic [CW-1:0]        ci_value,
  // iteration control (both cochleae)
  input  logic [15:0]          max_codes,
  input  logic [15:0]          eps_ratio,
  // outputs per cochlea
  output logic [NC-1:0]        code_valid,
  output code_t                code [NC],
  output logic [NC-1:0]        spike_valid,
  output spike_t               spike [NC],
  output logic [NK*K-1:0]      spike_vec [NC],
  output logic [NC-1:0]        busy,
  output logic [15:0]          codes_in_seg [NC],
  output logic [NC-1:0]        ev_seg_start,
  output logic [NC-1:0]        ev_seg_cut,
  output logic [NC-1:0]        ev_stop_max,
  output logic [NC-1:0]        ev_stop_energy,
  output logic [NC-1:0]        ev_stop_zero
);
  logic [NC-1:0]        in_valid;
  logic signed [SW-1:0] in_sample [NC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_valid <= '0;
      for (int c = 0; c < NC; c++) in_sample[c] <= '0;
    end else begin
      for (int c = 0; c < NC; c++) begin
        in_valid[c]  <= src_sel ? usb_valid : adc_valid[c];
        in_sample[c] <= src_sel ? usb_sample[c] : adc_sample[c];
      end
    end
  end

  for (genvar c = 0; c < NC; c++) begin : g_cochlea
    cochlea #(.NK(NK), .K(K), .L(L), .SEG(SEG), .SW(SW), .KW(KW), .CW(CW), .PL(PL)) u_cochlea (
      .clk, .rst_n,
      .sample_valid (in_valid[c]), .sample (in_sample[c]),
      .ker_we, .ker_sel, .ker_addr, .ker_data,
      .ci_we (ci_we && ci_sel[c]), .ci_ch, .ci_value,
      .max_codes, .eps_ratio,
      .code_valid (code_valid[c]), .code (code[c]),
      .spike_valid (spike_valid[c]), .spike (spike[c]), .spike_vec (spike_vec[c]),
      .busy (busy[c]), .codes_in_seg (codes_in_seg[c]),
      .ev_seg_start (ev_seg_start[c]), .ev_seg_cut (ev_seg_cut[c]),
      .ev_stop_max (ev_stop_max[c]), .ev_stop_energy (ev_stop_energy[c]),
      .ev_stop_zero (ev_stop_zero[c])
    );
  end

endmodule
