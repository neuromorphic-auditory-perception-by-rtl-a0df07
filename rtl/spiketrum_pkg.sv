// spiketrum_pkg: sizes and types shared by the spiketrum cochlea.
//
// The sizes follow the published prototype: 40 Gammatone kernels, three
// characteristic intensities per kernel (120 output channels), 16 kHz audio
// cut into 43.5 ms segments (696 samples), and a correlation span of 2048
// shifts per segment. The kernel length of 1353 samples is derived from that
// span (696 + 1353 - 1 = 2048); the word widths and the default number of
// codes per segment (87, i.e. 2000 spikes/s over 43.5 ms) are this design's
// choices. Numbers are fixed point: samples and kernel taps are Q1.15, a code
// amplitude s is kept in the same scale as a sample.
package spiketrum_pkg;

  localparam int unsigned N_KERNELS  = 40;    // Gammatone kernels per cochlea
  localparam int unsigned K_LEVELS   = 3;     // characteristic intensities per kernel
  localparam int unsigned N_CHANNELS = N_KERNELS * K_LEVELS;  // 120 spike outputs
  localparam int unsigned SEG_LEN    = 696;   // 43.5 ms at 16 kHz
  localparam int unsigned KERNEL_LEN = 1353;  // taps per kernel
  localparam int unsigned N_COCHLEAE = 2;     // left and right

  localparam int unsigned SAMPLE_W = 16;      // audio sample / residual, Q1.15
  localparam int unsigned COEF_W   = 16;      // kernel tap, Q1.15
  localparam int unsigned CODE_W   = 24;      // code amplitude s, signed, 15 fraction bits
  localparam int unsigned ACC_W    = 48;      // correlation accumulator
  localparam int unsigned ENERGY_W = 48;      // sum of squared residual samples
  localparam int unsigned POS_W    = 16;      // shift / sample / tap index
  localparam int unsigned IDX_W    = 8;       // kernel or channel index

  localparam int unsigned SHIFT_LANES = 32;        // kernel shifts correlated at once
  localparam int unsigned MAX_CODES_DEFAULT = 87;  // 2000 spikes/s * 43.5 ms

  // One efficient-coding event (m, tau, s). pos is the shift index p in
  // 0 .. SEG_LEN+KERNEL_LEN-2; the kernel's first tap then sits at sample
  // p - (KERNEL_LEN-1) of the segment.
  typedef struct packed {
    logic [IDX_W-1:0]  m;
    logic [POS_W-1:0]  pos;
    logic [CODE_W-1:0] s;     // two's complement
  } code_t;

  // One output spike of the intensity-to-place coder.
  typedef struct packed {
    logic [IDX_W-1:0] channel;  // h = K*m + k, 0-based
    logic [POS_W-1:0] pos;      // shift index of the code
    logic [15:0]      segment;  // segment counter
  } spike_t;

endpackage
