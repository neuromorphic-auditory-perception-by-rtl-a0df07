// subtractor: the Subtractor of the Error Feedback.
//
// Forms the new residual sample x_new = x - s*phi, saturated to the sample
// width, and presents it as a Signal RAM write one cycle later. It also
// reports how the residual energy changes, x_new^2 - x^2, which the cochlea
// adds up for the energy-ratio stop of the algorithm. Saturation and the
// energy output are this design's choices.
module subtractor
  import spiketrum_pkg::*;
#(
  parameter int unsigned SW = SAMPLE_W,
  parameter int unsigned CW = CODE_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [POS_W-1:0]       in_addr,
  input  logic signed [SW-1:0]   x,
  input  logic signed [CW:0]     prod,
  output logic                   we,
  output logic [POS_W-1:0]       wr_addr,
  output logic signed [SW-1:0]   wr_data,
  output logic signed [2*SW+1:0] d_energy
);
  localparam int unsigned DW = CW + 2;
  localparam logic signed [DW-1:0] X_MAX = DW'((64'sd1 <<< (SW - 1)) - 1);
  localparam logic signed [DW-1:0] X_MIN = -X_MAX - DW'(1);

  logic signed [DW-1:0] diff;
  logic signed [SW-1:0] x_new;

  assign diff = DW'(x) - DW'(prod);

  always_comb begin
    if (diff > X_MAX)      x_new = X_MAX[SW-1:0];
    else if (diff < X_MIN) x_new = X_MIN[SW-1:0];
    else                   x_new = diff[SW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      we       <= 1'b0;
      wr_addr  <= '0;
      wr_data  <= '0;
      d_energy <= '0;
    end else begin
      we <= in_valid;
      if (in_valid) begin
        wr_addr  <= in_addr;
        wr_data  <= x_new;
        d_energy <= (2*SW+2)'(x_new) * (2*SW+2)'(x_new) - (2*SW+2)'(x) * (2*SW+2)'(x);
      end
    end
  end

endmodule
