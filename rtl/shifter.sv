// shifter: the Shifter of the Error Feedback.
//
// Places kernel phi_m at shift p, i.e. forms phi_m(t - tau), by generating for
// every sample t the kernel overlaps, from max(0, p-(L-1)) to min(SEG-1, p),
// the Signal RAM address t and the Kernel RAM tap address j = t - p + (L-1).
// One address pair per cycle; last marks the final pair. The paper shows the
// Shifter fed by the Code Generator and the Kernel RAM; how it walks the
// addresses is this design's choice.
//
// Interface
//   start/pos          : begin with the shift of the new code (ignored while busy)
//   abort              : stop at once
//   valid/sig_addr/ker_addr/last : the address stream
module shifter
  import spiketrum_pkg::*;
#(
  parameter int unsigned L   = KERNEL_LEN,
  parameter int unsigned SEG = SEG_LEN
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             abort,
  input  logic [POS_W-1:0] pos,
  output logic             busy,
  output logic             valid,
  output logic [POS_W-1:0] sig_addr,
  output logic [POS_W-1:0] ker_addr,
  output logic             last
);
  logic [POS_W-1:0] p, t, t_end;

  assign valid    = busy;
  assign sig_addr = t;
  assign ker_addr = t + POS_W'(L - 1) - p;
  assign last     = busy && (t == t_end);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      p     <= '0;
      t     <= '0;
      t_end <= '0;
    end else if (abort) begin
      busy <= 1'b0;
    end else if (start && !busy) begin
      busy  <= 1'b1;
      p     <= pos;
      t     <= (pos >= POS_W'(L - 1)) ? pos - POS_W'(L - 1) : '0;
      t_end <= (pos < POS_W'(SEG)) ? pos : POS_W'(SEG - 1);
    end else if (busy) begin
      if (t == t_end) busy <= 1'b0;
      else            t    <= t + POS_W'(1);
    end
  end

endmodule
