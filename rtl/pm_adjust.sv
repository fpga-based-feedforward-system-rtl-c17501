// pm_adjust: turns the CORDIC's polar result into the two DAC codes.
//
// Intensity path (DAC A): the 2.11 magnitude loses its sign bit ("Cut") and
// is sent as a 12-bit unsigned 1.11 code, so code 4095 ~ 2.0 ~ full scale and
// the largest CORDIC magnitude sqrt(2) gives code 2896.
//
// Phase path (DAC B), with the fixed-point formats of the paper's schematic:
//   PH  = phase (3.10, +-1 = +-pi) rescaled to 2.11
//   PM0 = magnitude (2.11) * pm_comp (0.10)          -> 2.21
//   PM1 = PM0 >>> 10                                 -> 2.11
//   PM2 = PH + PM1  (compensated phase, up to +-1.75) -> 2.11
//   PM3 = PM2 * pm_gain (2.9)                        -> 4.20
//   PM4 = PM3 >>> 9                                  -> 4.11, cut to 2.11
//   PM5 = round to 2.10 (add half an LSB, drop one bit), then + 1024
// The numeric range -2..+2 of the 2.10 code spans -2pi..+2pi, so the extra
// headroom absorbs the compensation term; +1024 (1.0 in 2.10) makes 0 rad the
// code 1024 and -pi code 0, because the DAC is unipolar. The "Cut" steps and
// the final offset wrap (no clipping); the schematic draws no saturation.
// PM2 also wraps, modulo 4.0 = two full turns, when a large compensation
// term is added.
// The schematic labels PM2 "2.21" and the offset "+2", but the following
// 4.20 product and the text's "+1024" only fit a 2.11 PM2 and a +1024 offset,
// which is what is built. Half-up rounding is this design's reading of
// "Round". Latency: 3 cycles; pm_comp and pm_gain are taken with the data
// they apply to, so they may change on any cycle.
module pm_adjust #(
  parameter int unsigned PM_OFFSET = ff_pkg::PM_OFFSET
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic signed [12:0] mag,       // 2.11
  input  logic signed [12:0] phase,     // 3.10 scaled radians
  input  logic signed [10:0] pm_comp,   // 0.10
  input  logic signed [10:0] pm_gain,   // 2.9
  output logic               out_valid,
  output logic [11:0]        im_code,   // 1.11 unsigned
  output logic [11:0]        pm_code    // 2.10 unsigned (offset)
);
  logic signed [12:0] ph211, pm1, pm2_q;
  logic signed [10:0] gain_q;
  logic signed [23:0] pm0, pm3_q;
  logic signed [14:0] pm4;
  logic signed [12:0] pm4_cut;
  logic signed [13:0] pm5_r;
  logic [11:0]        im_q1, im_q2;
  logic [2:0]         vld;

  always_comb begin
    ph211   = phase <<< 1;
    pm0     = 24'(mag) * 24'(pm_comp);
    pm1     = 13'(pm0 >>> 10);
    pm4     = 15'(pm3_q >>> 9);
    pm4_cut = pm4[12:0];
    pm5_r   = 14'(pm4_cut) + 14'sd1;
  end

  always_ff @(posedge clk) begin
    // stage 1: compensation
    pm2_q <= ph211 + pm1;
    gain_q <= pm_gain;
    im_q1 <= mag[11:0];
    // stage 2: gain
    pm3_q <= 24'(pm2_q) * 24'(gain_q);
    im_q2 <= im_q1;
    // stage 3: round to 2.10 and offset
    pm_code <= pm5_r[12:1] + 12'(PM_OFFSET);
    im_code <= im_q2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[1:0], in_valid};
  end
  assign out_valid = vld[2];
endmodule
