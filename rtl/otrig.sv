// otrig: optical trigger and sample/hold timing generator.
//
// The feedforward system is the master clock of the experiment. A modulo-25
// counter on the 250 MHz fabric clock marks each 100 ns optical pulse slot
// (10 MHz). At count 0 the internal trigger o_trig_i pulses for one cycle; the
// M-extractor starts integrating on it. The external trigger o_trig_o, which
// fires the laser pulse generator, rises o_trig_delay cycles earlier (1..24
// cycles = 4..96 ns, as in the paper) to absorb the fixed latency of the pulse
// generator, cables and ADC. o_trig_o stays high OTRIG_HIGH cycles; that width
// is this design's choice.
//
// meas_lock_o drives the experiment's sample/hold scheme. It is counted in
// o_trig_i pulses: each period is meas_lock_period pulses long (default
// 100000 = 10 ms, 100 Hz as in the paper) and begins with meas_lock_duty
// pulses of "sample" (output low, optical locks active), followed by "hold"
// (output high, measurement running). The polarity and the placement of the
// sample phase at the start of the period are this design's choices.
// Settings take effect at the next pulse slot. Outputs are registered.
module otrig
#(
  parameter int unsigned CLK_PER_PULSE = ff_pkg::CLK_PER_PULSE,
  parameter int unsigned OTRIG_HIGH    = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [4:0]      o_trig_delay,
  input  logic [ff_pkg::ML_W-1:0] meas_lock_period,
  input  logic [ff_pkg::ML_W-1:0] meas_lock_duty,
  output logic            o_trig_o,
  output logic            o_trig_i,
  output logic            meas_lock_o
);
  localparam int unsigned CW = $clog2(CLK_PER_PULSE);

  logic [CW-1:0]   cnt;
  logic [CW-1:0]   lead;      // clamped delay
  logic [CW-1:0]   o_start;   // count at which o_trig_o rises
  logic [CW-1:0]   o_hi_cnt;  // remaining high cycles
  logic [ff_pkg::ML_W-1:0] pulse_idx;

  always_comb begin
    if (o_trig_delay == 5'd0)                         lead = CW'(1);
    else if (32'(o_trig_delay) > CLK_PER_PULSE - 1)   lead = CW'(CLK_PER_PULSE - 1);
    else                                              lead = CW'(o_trig_delay);
    o_start = CW'(CLK_PER_PULSE) - lead;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt         <= '0;
      o_trig_i    <= 1'b0;
      o_trig_o    <= 1'b0;
      o_hi_cnt    <= '0;
      pulse_idx   <= '0;
      meas_lock_o <= 1'b0;
    end else begin
      cnt      <= (cnt == CW'(CLK_PER_PULSE - 1)) ? '0 : cnt + 1'b1;
      o_trig_i <= (cnt == CW'(CLK_PER_PULSE - 1));

      // external trigger: rises lead cycles before the internal one
      if (cnt == o_start - 1'b1) begin
        o_trig_o <= 1'b1;
        o_hi_cnt <= CW'(OTRIG_HIGH - 1);
      end else if (o_hi_cnt != '0) begin
        o_hi_cnt <= o_hi_cnt - 1'b1;
      end else begin
        o_trig_o <= 1'b0;
      end

      // sample/hold period, counted in optical pulses
      if (cnt == CW'(CLK_PER_PULSE - 1)) begin
        if (pulse_idx + 1'b1 >= meas_lock_period) pulse_idx <= '0;
        else                                      pulse_idx <= pulse_idx + 1'b1;
        meas_lock_o <= ((pulse_idx + 1'b1 >= meas_lock_period) ? ff_pkg::ML_W'(0) : pulse_idx + 1'b1)
                       >= meas_lock_duty;
      end
    end
  end

  initial assert (OTRIG_HIGH >= 1 && OTRIG_HIGH < CLK_PER_PULSE)
    else $error("otrig: OTRIG_HIGH out of range");
endmodule
