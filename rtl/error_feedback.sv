// error_feedback: removes the part of the signal a code represents.
//
// Step 6 of the matching-pursuit algorithm, as the paper's Error Feedback
// block: the Shifter places phi_m at the code's shift, the Multiplier scales it
// by s, and the Subtractor writes x - s*phi back into the Signal RAM. The
// pipeline is
//   cycle c   : shifter issues sample address t and tap address j
//   cycle c+1 : RAM words x[t] and phi_m[j] arrive; multiplier registers s*phi
//   cycle c+2 : subtractor registers x - s*phi
//   cycle c+3 : write to the Signal RAM (we/wr_addr/wr_data), energy change valid
// Every sample is read once and written three cycles later, at a higher
// address than any read still pending, so there is no read-after-write hazard.
// An update of an overlap of n samples takes n+3 cycles; done pulses with the
// last write.
module error_feedback
  import spiketrum_pkg::*;
#(
  parameter int unsigned NK  = N_KERNELS,
  parameter int unsigned L   = KERNEL_LEN,
  parameter int unsigned SEG = SEG_LEN,
  parameter int unsigned SW  = SAMPLE_W,
  parameter int unsigned KW  = COEF_W,
  parameter int unsigned CW  = CODE_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic                   abort,
  input  code_t                  code,
  output logic                   busy,
  output logic [POS_W-1:0]       sig_addr,
  input  logic signed [SW-1:0]   sig_data,
  output logic [POS_W-1:0]       ker_addr,
  input  logic signed [KW-1:0]   ker_data [NK],
  output logic                   we,
  output logic [POS_W-1:0]       wr_addr,
  output logic signed [SW-1:0]   wr_data,
  output logic signed [2*SW+1:0] d_energy,
  output logic                   done
);
  logic             sh_busy, sh_valid, sh_last;
  logic [IDX_W-1:0] m_q;
  logic signed [CW-1:0] s_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_q <= '0;
      s_q <= '0;
    end else if (start && !sh_busy) begin
      m_q <= code.m;
      s_q <= code.s;
    end
  end

  shifter #(.L(L), .SEG(SEG)) u_shifter (
    .clk, .rst_n, .start, .abort,
    .pos      (code.pos),
    .busy     (sh_busy),
    .valid    (sh_valid),
    .sig_addr (sig_addr),
    .ker_addr (ker_addr),
    .last     (sh_last)
  );

  // c+1: RAM data present.
  logic             v1, l1;
  logic [POS_W-1:0] a1;
  // c+2: product present.
  logic             l2;
  logic [POS_W-1:0] a2;
  logic signed [SW-1:0] x2;
  logic             l3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; l1 <= 1'b0; a1 <= '0;
      l2 <= 1'b0; a2 <= '0;   x2 <= '0;
      l3 <= 1'b0;
    end else if (abort) begin
      v1 <= 1'b0; l1 <= 1'b0; l2 <= 1'b0; l3 <= 1'b0;
    end else begin
      v1 <= sh_valid;
      l1 <= sh_last;
      a1 <= sig_addr;
      l2 <= v1 && l1;
      a2 <= a1;
      x2 <= sig_data;
      l3 <= l2;
    end
  end

  logic                 m_valid;
  logic signed [CW:0]   prod;
  logic signed [KW-1:0] phi;
  assign phi = ker_data[m_q];

  multiplier #(.CW(CW), .KW(KW)) u_multiplier (
    .clk, .rst_n,
    .in_valid  (v1 && !abort),
    .s         (s_q),
    .phi       (phi),
    .out_valid (m_valid),
    .prod      (prod)
  );

  logic sub_we;
  subtractor #(.SW(SW), .CW(CW)) u_subtractor (
    .clk, .rst_n,
    .in_valid (m_valid && !abort),
    .in_addr  (a2),
    .x        (x2),
    .prod     (prod),
    .we       (sub_we),
    .wr_addr  (wr_addr),
    .wr_data  (wr_data),
    .d_energy (d_energy)
  );

  assign we   = sub_we;
  assign done = sub_we && l3;
  assign busy = sh_busy || v1 || m_valid || sub_we;

endmodule
