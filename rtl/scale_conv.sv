// scale_conv: selects which 13 bits of the 32-bit inner product reach the CORDIC.
//
// dout = Sat13( (din + 2^(s-1)) >>> s ), s = scale_select (0..31).
// The arithmetic shift keeps the sign, the added half LSB rounds to nearest
// (ties towards +infinity), and the result is clipped to the 13-bit signed
// range -4096..4095. With 12-bit m-values and A-values both read as 1.11
// fixed point, s = 11 gives the CORDIC input in 2.11 with unit gain, so
// scale_select plays the role of the feedforward gain. The paper names
// shift, sign extension, rounding and saturation; the rounding mode is this
// design's choice. One register stage.
module scale_conv #(
  parameter int unsigned IN_W  = ff_pkg::SUM_W,
  parameter int unsigned OUT_W = ff_pkg::CORD_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [IN_W-1:0]   din,
  input  logic [4:0]               scale_select,
  output logic                     out_valid,
  output logic signed [OUT_W-1:0]  dout
);
  logic signed [IN_W:0] rounded, shifted;   // one guard bit for the rounding add
  logic signed [OUT_W-1:0] sat;

  always_comb begin
    rounded = (IN_W+1)'(din);
    if (scale_select != 5'd0)
      rounded = rounded + ((IN_W+1)'(1) <<< (scale_select - 5'd1));
    shifted = rounded >>> scale_select;
    sat     = OUT_W'(ff_pkg::sat_s(64'(shifted), OUT_W));
  end

  always_ff @(posedge clk) dout <= sat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
