// ff_pkg: constants and types shared by the feedforward datapath.
//
// The feedforward system samples a homodyne detector at 1 GS/s, folds each
// 100 ns optical pulse into one 12-bit m-value, keeps the last 80 m-values in
// a shift register and forms two inner products (x and p quadrature) with
// pre-computed 80-element A-vectors. The result is turned into polar form and
// drives an intensity and a phase modulator through a dual 12-bit DAC.
// Everything runs on one 250 MHz fabric clock (4 ns per cycle, 25 cycles per
// optical pulse). The sizes below are the ones the paper gives; the register
// layout of cfg_t is this design's own.
package ff_pkg;

  // Sizes from the paper
  localparam int unsigned CLK_PER_PULSE = 25;   // 250 MHz / 10 MHz laser
  localparam int unsigned N_VEC         = 80;   // m-values per m-vector / A-vector
  localparam int unsigned VAL_W         = 12;   // m-value and A-value width
  localparam int unsigned VEC_W         = N_VEC * VAL_W;      // 960
  localparam int unsigned PROD_W        = 2 * VAL_W;          // 24
  localparam int unsigned SUM_W         = 32;
  localparam int unsigned CORD_W        = 13;   // CORDIC input/output width
  localparam int unsigned DAC_W         = 12;
  localparam int unsigned N_WEIGHTS     = 100;  // M-extractor weights
  localparam int unsigned WEIGHT_W      = 8;
  localparam int unsigned ADC_LANES     = 4;    // samples per fabric clock
  localparam int unsigned ADC_W         = 12;
  localparam int unsigned AXIS_W        = 1024; // DMA stream width
  localparam int unsigned PM_OFFSET     = 1024; // PM code offset (0 rad)

  // Meas_Lock timing is counted in optical pulses (100 ns); 26 bits reach 6.7 s.
  localparam int unsigned ML_W          = 26;

  typedef logic signed [VAL_W-1:0]    val_t;
  typedef logic signed [WEIGHT_W-1:0] weight_t;
  typedef logic        [VEC_W-1:0]    vec_t;

  // Every user setting held by the configuration register.
  typedef struct packed {
    logic                   mux_xp;            // 0: stream goes to Ax buffer, 1: Ap buffer
    logic [4:0]             o_trig_delay;      // O_trig_o lead over O_trig_i, cycles
    logic [ML_W-1:0]        meas_lock_period;  // pulses per sample/hold period
    logic [ML_W-1:0]        meas_lock_duty;    // pulses of sample (lock) phase
    logic [4:0]             trig_start;        // M-extractor start offset, cycles
    logic [4:0]             trig_window;       // M-extractor window, cycles (<= 25)
    logic [4:0]             scale_select;      // right shift of the inner product
    logic signed [10:0]     pm_comp;           // 0.10 signed
    logic signed [10:0]     pm_gain;           // 2.9 signed
    logic [9:0]             wait_config;       // ring buffer read delay, cycles
    logic [2:0]             cfg_clk_dly;       // DAC clock delay, cycles
    logic [N_WEIGHTS*WEIGHT_W-1:0] weights;   // weight i at [8i+7:8i]
  } cfg_t;

  // Fixed-point saturation of a wide signed value to w bits.
  function automatic logic signed [63:0] sat_s(input logic signed [63:0] v, input int unsigned w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi)      return hi;
    else if (v < lo) return lo;
    else             return v;
  endfunction

endpackage
