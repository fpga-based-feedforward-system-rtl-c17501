// cordic: rectangular-to-polar conversion of the feedforward correction.
//
// Takes the x and p corrections (13-bit signed, 2.11 fixed point, nominally
// -1..+1) and returns the magnitude r = sqrt(x^2 + p^2) in 2.11 and the phase
// atan2(p, x) in 3.10 "scaled radians", where +-1.0 means +-pi. These are the
// formats the paper's PM Adjust stage consumes. The paper uses a vendor
// CORDIC core; this is an equivalent written for this design, so its
// internals (iteration count, widths, latency) are this design's own.
//
// Method: vectoring-mode CORDIC. A first stage folds the left half-plane onto
// the right one by negating the vector and starting the angle at +-1.0 (pi).
// ITER micro-rotations then drive p to zero while the angle register
// accumulates +-atan(2^-i)/pi (table below, in 2^-16 units, rounded from
// atan(2^-i)/pi * 65536). The grown magnitude is multiplied by 1/K = 0.60725
// (39797 / 65536, K = prod sqrt(1 + 2^-2i)) and both results are rounded to
// the output formats. Internals carry GF = 4 extra fraction bits.
// STEP micro-rotations share one register stage (2: six stages for 12).
// Latency: ceil(ITER/STEP) + 2 cycles (8 by default), one new input per cycle.
// Accuracy (default ITER): magnitude within 1 LSB, phase within 1 LSB for
// vectors at least 32 LSB long; for shorter ones the phase error grows to
// the angle one input LSB subtends. Magnitudes above 4095 (beyond 2.0) clip.
module cordic #(
  parameter int unsigned ITER = 12,          // 8..16
  parameter int unsigned STEP = 2,           // micro-rotations per register
  parameter int unsigned IN_W = ff_pkg::CORD_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  x_in,
  input  logic signed [IN_W-1:0]  p_in,
  output logic                    out_valid,
  output logic signed [IN_W-1:0]  mag,      // 2.11, always >= 0
  output logic signed [IN_W-1:0]  phase     // 3.10, -1024..+1024 = -pi..+pi
);
  localparam int unsigned GF   = 4;             // guard fraction bits
  localparam int unsigned IW   = IN_W + GF + 3; // headroom for K * sqrt(2) * 2
  localparam int unsigned ZW   = 19;            // angle: 1.0 = 2^16
  localparam int unsigned NSTG = (ITER + STEP - 1) / STEP;
  localparam logic [15:0] KINV = 16'd39797;

  localparam logic signed [ZW-1:0] ATAN [16] = '{
    19'sd16384, 19'sd9672, 19'sd5110, 19'sd2594, 19'sd1302, 19'sd652, 19'sd326, 19'sd163,
    19'sd81,    19'sd41,   19'sd20,   19'sd10,   19'sd5,    19'sd3,   19'sd1,   19'sd1 };

  logic signed [IW-1:0] x0, y0;
  logic signed [ZW-1:0] z0;
  logic [NSTG+1:0]      vld;

  // stage 0: fold into the right half-plane
  always_ff @(posedge clk) begin
    logic signed [IW-1:0] xe, ye;
    xe = IW'(x_in) <<< GF;
    ye = IW'(p_in) <<< GF;
    if (x_in < 0) begin
      x0 <= -xe;
      y0 <= -ye;
      z0 <= (p_in >= 0) ? ZW'(65536) : -ZW'(65536);
    end else begin
      x0 <= xe;
      y0 <= ye;
      z0 <= '0;
    end
  end

  // micro-rotations, STEP per register stage
  for (genvar i = 0; i < ITER; i++) begin : g_it
    logic signed [IW-1:0] xi, yi, xn, yn, xo, yo;
    logic signed [ZW-1:0] zi, zn, zo;
    if (i == 0) begin : g_first
      assign xi = x0;
      assign yi = y0;
      assign zi = z0;
    end else begin : g_next
      assign xi = g_it[i-1].xo;
      assign yi = g_it[i-1].yo;
      assign zi = g_it[i-1].zo;
    end
    always_comb begin
      if (yi < 0) begin
        xn = xi - (yi >>> i);
        yn = yi + (xi >>> i);
        zn = zi - ATAN[i];
      end else begin
        xn = xi + (yi >>> i);
        yn = yi - (xi >>> i);
        zn = zi + ATAN[i];
      end
    end
    if ((i % STEP) == STEP - 1 || i == ITER - 1) begin : g_reg
      always_ff @(posedge clk) begin
        xo <= xn;
        yo <= yn;
        zo <= zn;
      end
    end else begin : g_comb
      assign xo = xn;
      assign yo = yn;
      assign zo = zn;
    end
  end

  // gain correction and output formats
  always_ff @(posedge clk) begin
    logic signed [IW+17:0] mprod;
    logic signed [IW+17:0] mr;
    logic signed [ZW-1:0]  zr;
    mprod = (IW+18)'(g_it[ITER-1].xo) * (IW+18)'($signed({1'b0, KINV}));
    mr    = (mprod + (IW+18)'(1 << (15 + GF))) >>> (16 + GF);
    zr    = (g_it[ITER-1].zo + ZW'(32)) >>> 6;
    mag   <= IN_W'(ff_pkg::sat_s(64'(mr), IN_W));
    phase <= IN_W'(ff_pkg::sat_s(64'(zr), IN_W));   // |zr| <= 1024, never clips
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[NSTG:0], in_valid};
  end
  assign out_valid = vld[NSTG+1];

  initial assert (ITER >= 8 && ITER <= 16 && STEP >= 1) else $error("cordic: ITER/STEP out of range");
endmodule
