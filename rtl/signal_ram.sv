// signal_ram: the Signal RAM of one cochlea, as two segment banks.
//
// The paper stores the digitised audio in a Signal RAM, processes one buffered
// segment (43.5 ms) at a time, and lets the Error Feedback overwrite it with
// the residual. Here the RAM is two banks of SEG words: the fill side writes
// incoming samples into one bank while the encoder reads and rewrites the
// other. When the fill bank holds SEG samples the banks swap and seg_ready
// pulses for one cycle; the encoder must then drop its work and start on the
// new segment (the paper iterates only "until a new segment of the input
// signal is available"). The ping-pong arrangement, the energy sum and the
// write block during the swap cycle are this design's choices.
//
// Interface
//   in_valid/in_sample : one audio sample per pulse (16 kHz in the prototype)
//   seg_ready          : one-cycle pulse, the cycle after the swap
//   seg_energy         : sum of squared samples of the segment just completed,
//                        valid while seg_ready is high (held afterwards)
//   seg_count          : number of completed segments
//   rd_addr/rd_data    : encoder read port, data one cycle after the address
//   we/wr_addr/wr_data : encoder write port; ignored in the seg_ready cycle
module signal_ram
  import spiketrum_pkg::*;
#(
  parameter int unsigned SEG = SEG_LEN,
  parameter int unsigned SW  = SAMPLE_W,
  parameter int unsigned EW  = ENERGY_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [SW-1:0] in_sample,
  output logic                 seg_ready,
  output logic [EW-1:0]        seg_energy,
  output logic [15:0]          seg_count,
  input  logic [POS_W-1:0]     rd_addr,
  output logic signed [SW-1:0] rd_data,
  input  logic                 we,
  input  logic [POS_W-1:0]     wr_addr,
  input  logic signed [SW-1:0] wr_data
);
  localparam int unsigned AW = (SEG > 1) ? $clog2(SEG) : 1;

  logic signed [SW-1:0] bank0 [SEG];
  logic signed [SW-1:0] bank1 [SEG];

  logic          fill_bank;   // bank being filled; the encoder owns the other
  logic [AW-1:0] fill_ptr;
  logic [EW-1:0] fill_energy;

  // Per-bank write port: fill side or encoder side.
  logic          w0_en, w1_en;
  logic [AW-1:0] w0_addr, w1_addr;
  logic signed [SW-1:0] w0_data, w1_data;
  logic          eng_we;

  assign eng_we = we && !seg_ready;

  always_comb begin
    if (fill_bank == 1'b0) begin
      w0_en = in_valid;  w0_addr = fill_ptr;          w0_data = in_sample;
      w1_en = eng_we;    w1_addr = wr_addr[AW-1:0];   w1_data = wr_data;
    end else begin
      w0_en = eng_we;    w0_addr = wr_addr[AW-1:0];   w0_data = wr_data;
      w1_en = in_valid;  w1_addr = fill_ptr;          w1_data = in_sample;
    end
  end

  always_ff @(posedge clk) begin
    if (w0_en) bank0[w0_addr] <= w0_data;
    if (w1_en) bank1[w1_addr] <= w1_data;
    rd_data <= fill_bank ? bank0[rd_addr[AW-1:0]] : bank1[rd_addr[AW-1:0]];
  end

  logic signed [2*SW-1:0] sq;   // square of the incoming sample, never negative
  assign sq = (2*SW)'(in_sample) * (2*SW)'(in_sample);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill_bank   <= 1'b0;
      fill_ptr    <= '0;
      fill_energy <= '0;
      seg_ready   <= 1'b0;
      seg_energy  <= '0;
      seg_count   <= '0;
    end else begin
      seg_ready <= 1'b0;
      if (in_valid) begin
        if (fill_ptr == AW'(SEG - 1)) begin
          fill_ptr    <= '0;
          fill_bank   <= ~fill_bank;
          fill_energy <= '0;
          seg_energy  <= fill_energy + EW'($unsigned(sq));
          seg_ready   <= 1'b1;
          seg_count   <= seg_count + 16'd1;
        end else begin
          fill_ptr    <= fill_ptr + AW'(1);
          fill_energy <= fill_energy + EW'($unsigned(sq));
        end
      end
    end
  end

endmodule
