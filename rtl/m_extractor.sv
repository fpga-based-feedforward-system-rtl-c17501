// m_extractor: real-time temporal mode filter producing one m-value per pulse.
//
// For every optical pulse the M-extractor computes
//     m = Sat12( (sum_{i=0}^{99} w_i * h_i) >>> 8 )
// where h_i are 100 consecutive 1 GS/s ADC samples and w_i are signed 8-bit
// user weights (w/256 spans -0.5..0.5), as the paper describes. The ADC data
// arrives four samples per 250 MHz cycle on a 48-bit bus, so 100 samples take
// 25 cycles (100 ns). Each cycle the four samples are multiplied by their
// four weights and added to an accumulator.
//
// Timing: the window opens trig_start cycles after the cycle in which
// o_trig_i is high (trig_start = 0: that same cycle; at most 24) and lasts
// trig_window cycles (0 or >25 means 25), cut short so that it ends within
// the 25-cycle pulse slot: triggers come every 25 cycles and each restarts
// the window count. m_valid pulses for one cycle in the cycle after the last
// window cycle, i.e. 25 cycles after the first sample for a full window.
// tag_in is sampled with o_trig_i and returned as m_tag with the m-value, so
// a flag that changes at pulse boundaries (the top passes meas_lock_o) stays
// attached to the pulse it was valid for. The meaning of Trig_Start/Trig_Window (only named in the paper),
// the sample order on the bus (bits [11:0] = earliest sample, two's
// complement) and truncation in the divide by 256 are this design's choices.
module m_extractor
#(
  parameter int unsigned N_WEIGHTS       = ff_pkg::N_WEIGHTS,
  parameter int unsigned SAMPLES_PER_CLK = ff_pkg::ADC_LANES,
  parameter int unsigned SAMPLE_W        = ff_pkg::ADC_W,
  parameter int unsigned WEIGHT_W        = ff_pkg::WEIGHT_W,
  parameter int unsigned M_W             = ff_pkg::VAL_W
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  o_trig_i,
  input  logic [SAMPLES_PER_CLK*SAMPLE_W-1:0]   adc_data,
  input  logic [N_WEIGHTS*WEIGHT_W-1:0]         weights,
  input  logic [4:0]                            trig_start,
  input  logic [4:0]                            trig_window,
  input  logic                                  tag_in,
  output logic signed [M_W-1:0]                 m_value,
  output logic                                  m_valid,
  output logic                                  m_tag
);
  localparam int unsigned MAX_WIN = N_WEIGHTS / SAMPLES_PER_CLK;   // 25
  localparam int unsigned ACC_W   = 32;

  logic [5:0]               t_cnt, t_now;
  logic                     armed, armed_now;
  logic [5:0]               ts, win, win_end;
  logic                     tag_q;
  logic [5:0]               j;                 // cycle index inside the window
  logic                     in_win, first, last;
  logic signed [ACC_W-1:0]  acc, partial, total;

  always_comb begin
    ts        = (32'(trig_start) > MAX_WIN - 1) ? 6'(MAX_WIN - 1) : 6'(trig_start);
    win       = (trig_window == 5'd0 || 32'(trig_window) > MAX_WIN) ? 6'(MAX_WIN) : 6'(trig_window);
    if (ts + win > 6'(MAX_WIN)) win = 6'(MAX_WIN) - ts;   // end inside the pulse slot
    t_now     = o_trig_i ? 6'd0 : t_cnt;
    armed_now = o_trig_i | armed;
    win_end   = ts + win;                      // first cycle after the window
    in_win    = armed_now && (t_now >= ts) && (t_now < win_end);
    j         = t_now - ts;
    first     = (t_now == ts);
    last      = (t_now == win_end - 6'd1);

    partial = '0;
    for (int l = 0; l < SAMPLES_PER_CLK; l++) begin
      logic signed [SAMPLE_W-1:0] h;
      logic signed [WEIGHT_W-1:0] w;
      h = adc_data[l*SAMPLE_W +: SAMPLE_W];
      w = '0;
      for (int g = 0; g < MAX_WIN; g++)
        if (j == 6'(g)) w = weights[(g*SAMPLES_PER_CLK + l)*WEIGHT_W +: WEIGHT_W];
      partial = partial + ACC_W'(h) * ACC_W'(w);
    end
    total = (first ? '0 : acc) + partial;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_cnt   <= '0;
      armed   <= 1'b0;
      acc     <= '0;
      m_value <= '0;
      m_valid <= 1'b0;
      m_tag   <= 1'b0;
      tag_q   <= 1'b0;
    end else begin
      if (o_trig_i) tag_q <= tag_in;
      t_cnt   <= (t_now == 6'h3f) ? t_now : t_now + 1'b1;
      m_valid <= 1'b0;
      if (in_win) begin
        acc <= total;
        if (last) begin
          m_value <= M_W'(ff_pkg::sat_s(64'(total >>> 8), M_W));
          m_valid <= 1'b1;
          m_tag   <= o_trig_i ? tag_in : tag_q;
        end
      end
      if (o_trig_i)               armed <= 1'b1;
      if (armed_now && t_now >= win_end - 6'd1) armed <= 1'b0;
    end
  end
endmodule
