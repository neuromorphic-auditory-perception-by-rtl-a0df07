// multiplier: the Multiplier of the Error Feedback.
//
// Scales one shifted kernel tap by the code amplitude: prod = s * phi / 2^(KW-1),
// rounded to nearest (half up), so prod is in sample units. Registered: the
// product appears one cycle after in_valid. Rounding is this design's choice.
module multiplier
  import spiketrum_pkg::*;
#(
  parameter int unsigned CW = CODE_W,
  parameter int unsigned KW = COEF_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [CW-1:0] s,
  input  logic signed [KW-1:0] phi,
  output logic                 out_valid,
  output logic signed [CW:0]   prod
);
  localparam int unsigned PW = CW + KW;
  logic signed [PW-1:0] full;
  logic signed [PW-1:0] rounded;

  assign full    = PW'(s) * PW'(phi);
  assign rounded = (full + PW'(64'sd1 <<< (KW - 2))) >>> (KW - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      prod      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) prod <= rounded[CW:0];
    end
  end

endmodule
