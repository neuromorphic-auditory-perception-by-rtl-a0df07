// kernel_ram: the Kernel RAM of one cochlea.
//
// Holds NK kernels of L taps each, one bank per kernel, so that one address
// reads tap j of every kernel in the same cycle: the convolution uses all NK
// outputs at once (one multiply-accumulate lane per kernel), the error
// feedback picks the one of kernel m. The kernels are loaded from outside
// (the prototype computes its Gammatone set offline). The paper keeps the
// kernels in the frequency domain for an FFT convolution; this design keeps
// them in the time domain, which both the direct convolution and the error
// feedback use.
//
// Interface
//   wr_en/wr_kernel/wr_addr/wr_data : load tap wr_addr of kernel wr_kernel
//   rd_addr/rd_data                 : tap rd_addr of every kernel, one cycle later
module kernel_ram
  import spiketrum_pkg::*;
#(
  parameter int unsigned NK = N_KERNELS,
  parameter int unsigned L  = KERNEL_LEN,
  parameter int unsigned KW = COEF_W
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [IDX_W-1:0]     wr_kernel,
  input  logic [POS_W-1:0]     wr_addr,
  input  logic signed [KW-1:0] wr_data,
  input  logic [POS_W-1:0]     rd_addr,
  output logic signed [KW-1:0] rd_data [NK]
);
  localparam int unsigned AW = (L > 1) ? $clog2(L) : 1;

  for (genvar b = 0; b < NK; b++) begin : g_bank
    logic signed [KW-1:0] mem [L];
    always_ff @(posedge clk) begin
      if (wr_en && (wr_kernel == IDX_W'(b))) mem[wr_addr[AW-1:0]] <= wr_data;
      rd_data[b] <= mem[rd_addr[AW-1:0]];
    end
  end

endmodule
