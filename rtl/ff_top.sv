// ff_top: fabric part of the FPGA feedforward system for photonic CV-MBQIP.
//
// Every 100 ns an optical pulse reaches the homodyne detector. The pipeline
// below turns it into a correction of later pulses:
//   otrig        10 MHz trigger (o_trig_o to the laser, o_trig_i inside) and
//                the sample/hold signal meas_lock_o
//   m_extractor  100 weighted ADC samples -> one 12-bit m-value
//   mvec_sreg    the last 80 m-values (the m-vector)
//   stream_avec  A-vectors from the DMA, 300 MHz -> 250 MHz clock crossing
//   mux_xp       routes each DMA burst to the Ax or the Ap buffer
//   avec_bram x2 4096-vector buffers, request 1024-vector DMA bursts
//   vec_mult x2, vec_sum x2, scale_conv x2
//                x = A_x . m and p = A_p . m, cut to 13 bits
//   cordic       (x, p) -> magnitude and phase
//   pm_adjust    IM and PM DAC codes, PM compensation and gain
//   ring_buffer  programmable output delay (Wait_Config)
//   dac_if       strobes the dual DAC
//   config_reg   AXI4-Lite settings
// Sequencing: the m-value of a pulse whose trigger came while meas_lock_o
// was high (hold/measure phase) is shifted into the m-vector; m-values of
// pulses in the sample (lock) phase are dropped; once the m-vector holds 80 values,
// each new m-value consumes one Ax and one Ap vector (when both buffers
// have one; otherwise the calculation is skipped and calc_miss is flagged).
// Latency from the first ADC sample of a pulse to dac_wrt is 47 cycles
// (188 ns) with Wait_Config = 0: 25 M-extractor + 1 m-vector + 1 buffer read
// + 1 multiply + 4 sum + 1 scale + 8 CORDIC + 3 PM adjust + 2 ring buffer
// + 1 DAC register.
//
// Clocks: sclk_250 (fabric), clk_300 (DMA stream side). rst_n is an
// asynchronous reset, released synchronously in each domain here.
// The ADC deserialiser, the DMA engine, the processor and DDR, the clocking
// primitives and the converters themselves are outside this module; their
// signals are ports.
// STATUS word (read at 0x28): [0] meas_lock_o, [1] read_burst_x seen,
// [2] x underrun, [3] p underrun, [4] calc_miss, [5] ring near_full,
// [6] ring overflow, [7] m-vector full, [31:16] calculations done (wraps).
module ff_top
  import ff_pkg::*;
(
  input  logic                       sclk_250,
  input  logic                       clk_300,
  input  logic                       rst_n,
  // deserialised ADC data, 4 samples per cycle, bits [11:0] earliest
  input  logic [ADC_LANES*ADC_W-1:0] adc_data,
  // A-vector stream from the DMA (clk_300 domain), vector in bits [959:0]
  input  logic                       s_axis_tvalid,
  output logic                       s_axis_tready,
  input  logic [AXIS_W-1:0]          s_axis_tdata,
  // DMA burst requests (sclk_250 domain, one-cycle pulses)
  output logic                       read_burst_x,
  output logic                       read_burst_p,
  // configuration, AXI4-Lite (sclk_250 domain)
  input  logic [7:0]                 s_axil_awaddr,
  input  logic                       s_axil_awvalid,
  output logic                       s_axil_awready,
  input  logic [31:0]                s_axil_wdata,
  input  logic [3:0]                 s_axil_wstrb,
  input  logic                       s_axil_wvalid,
  output logic                       s_axil_wready,
  output logic [1:0]                 s_axil_bresp,
  output logic                       s_axil_bvalid,
  input  logic                       s_axil_bready,
  input  logic [7:0]                 s_axil_araddr,
  input  logic                       s_axil_arvalid,
  output logic                       s_axil_arready,
  output logic [31:0]                s_axil_rdata,
  output logic [1:0]                 s_axil_rresp,
  output logic                       s_axil_rvalid,
  input  logic                       s_axil_rready,
  // experiment control
  output logic                       o_trig_o,
  output logic                       meas_lock_o,
  // dual DAC: A drives the intensity modulator, B the phase modulator
  output logic [DAC_W-1:0]           dac_a,
  output logic [DAC_W-1:0]           dac_b,
  output logic                       dac_wrt,
  output logic                       dac_clk
);
  // ---------------- resets ----------------
  logic [1:0] rs250, rs300;
  logic       rst250_n, rst300_n;
  always_ff @(posedge sclk_250 or negedge rst_n)
    if (!rst_n) rs250 <= '0; else rs250 <= {rs250[0], 1'b1};
  always_ff @(posedge clk_300 or negedge rst_n)
    if (!rst_n) rs300 <= '0; else rs300 <= {rs300[0], 1'b1};
  assign rst250_n = rs250[1];
  assign rst300_n = rs300[1];

  // ---------------- configuration ----------------
  cfg_t        cfg;
  logic [31:0] status;

  config_reg u_cfg (
    .clk(sclk_250), .rst_n(rst250_n),
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid), .s_wready(s_axil_wready),
    .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid), .s_bready(s_axil_bready),
    .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready),
    .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp), .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .status(status), .cfg(cfg));

  // ---------------- triggers ----------------
  logic o_trig_i;
  otrig u_otrig (
    .clk(sclk_250), .rst_n(rst250_n),
    .o_trig_delay(cfg.o_trig_delay), .meas_lock_period(cfg.meas_lock_period),
    .meas_lock_duty(cfg.meas_lock_duty),
    .o_trig_o(o_trig_o), .o_trig_i(o_trig_i), .meas_lock_o(meas_lock_o));

  // ---------------- measurement ----------------
  val_t m_value;
  logic m_valid, m_lock, take, take_d, mvec_full, want, go, rd_x, rd_p;
  vec_t m_vec;

  m_extractor u_mext (
    .clk(sclk_250), .rst_n(rst250_n), .o_trig_i(o_trig_i), .adc_data(adc_data),
    .weights(cfg.weights), .trig_start(cfg.trig_start), .trig_window(cfg.trig_window),
    .tag_in(meas_lock_o), .m_value(m_value), .m_valid(m_valid), .m_tag(m_lock));

  // keep the m-values of pulses measured in the hold phase
  assign take = m_valid && m_lock;

  mvec_sreg u_mvec (
    .clk(sclk_250), .rst_n(rst250_n), .clear(1'b0), .shift(take), .m_in(m_value),
    .m_vec(m_vec), .full(mvec_full));

  // ---------------- A-vector streaming ----------------
  logic              cdc_tvalid, cdc_tready;
  logic [AXIS_W-1:0] cdc_tdata;
  logic              x_tvalid, x_tready, p_tvalid, p_tready;
  vec_t              mux_tdata;

  stream_avec u_cdc (
    .wclk(clk_300), .wrst_n(rst300_n),
    .s_tvalid(s_axis_tvalid), .s_tready(s_axis_tready), .s_tdata(s_axis_tdata),
    .rclk(sclk_250), .rrst_n(rst250_n),
    .m_tvalid(cdc_tvalid), .m_tready(cdc_tready), .m_tdata(cdc_tdata));

  mux_xp u_mux (
    .clk(sclk_250), .rst_n(rst250_n), .sel_p(cfg.mux_xp),
    .s_tvalid(cdc_tvalid), .s_tready(cdc_tready), .s_tdata(cdc_tdata[VEC_W-1:0]),
    .x_tvalid(x_tvalid), .x_tready(x_tready), .p_tvalid(p_tvalid), .p_tready(p_tready),
    .tdata(mux_tdata));

  vec_t ax_vec, ap_vec;
  logic ax_valid, ap_valid, ax_empty, ap_empty, ax_under, ap_under;
  logic [12:0] ax_level, ap_level;

  avec_bram u_ax (
    .clk(sclk_250), .rst_n(rst250_n),
    .s_tvalid(x_tvalid), .s_tready(x_tready), .s_tdata(mux_tdata),
    .rd_en(rd_x), .rd_data(ax_vec), .rd_valid(ax_valid), .empty(ax_empty),
    .read_burst(read_burst_x), .underrun(ax_under), .level(ax_level));

  avec_bram u_ap (
    .clk(sclk_250), .rst_n(rst250_n),
    .s_tvalid(p_tvalid), .s_tready(p_tready), .s_tdata(mux_tdata),
    .rd_en(rd_p), .rd_data(ap_vec), .rd_valid(ap_valid), .empty(ap_empty),
    .read_burst(read_burst_p), .underrun(ap_under), .level(ap_level));

  // one calculation per m-value taken, once the m-vector is full. A vector
  // is only taken together with its partner; an empty buffer still sees the
  // read request, which sets its underrun flag.
  logic calc_miss;
  assign want = take_d && mvec_full;
  assign go   = want && !ax_empty && !ap_empty;
  assign rd_x = want && (ax_empty || !ap_empty);
  assign rd_p = want && (ap_empty || !ax_empty);

  always_ff @(posedge sclk_250 or negedge rst250_n) begin
    if (!rst250_n) begin
      take_d    <= 1'b0;
      calc_miss <= 1'b0;
    end else begin
      take_d <= take;
      if (want && !go) calc_miss <= 1'b1;
    end
  end

  // ---------------- inner products ----------------
  logic [N_VEC*PROD_W-1:0] px, pp;
  logic                    px_v, pp_v, sx_v, sp_v, cx_v, cp_v;
  logic signed [SUM_W-1:0] sx, sp;
  logic signed [CORD_W-1:0] cx, cp;

  vec_mult u_mult_x (.clk(sclk_250), .rst_n(rst250_n), .in_valid(ax_valid), .a_vec(ax_vec), .m_vec(m_vec), .out_valid(px_v), .prod(px));
  vec_mult u_mult_p (.clk(sclk_250), .rst_n(rst250_n), .in_valid(ap_valid), .a_vec(ap_vec), .m_vec(m_vec), .out_valid(pp_v), .prod(pp));
  vec_sum  u_sum_x  (.clk(sclk_250), .rst_n(rst250_n), .in_valid(px_v), .prod(px), .out_valid(sx_v), .sum(sx));
  vec_sum  u_sum_p  (.clk(sclk_250), .rst_n(rst250_n), .in_valid(pp_v), .prod(pp), .out_valid(sp_v), .sum(sp));
  scale_conv u_scl_x (.clk(sclk_250), .rst_n(rst250_n), .in_valid(sx_v), .din(sx), .scale_select(cfg.scale_select), .out_valid(cx_v), .dout(cx));
  scale_conv u_scl_p (.clk(sclk_250), .rst_n(rst250_n), .in_valid(sp_v), .din(sp), .scale_select(cfg.scale_select), .out_valid(cp_v), .dout(cp));

  // ---------------- polar form and DAC codes ----------------
  logic                     pol_v, pm_v;
  logic signed [CORD_W-1:0] mag, phase;
  logic [DAC_W-1:0]         im_code, pm_code;

  cordic u_cordic (.clk(sclk_250), .rst_n(rst250_n), .in_valid(cx_v && cp_v), .x_in(cx), .p_in(cp),
                   .out_valid(pol_v), .mag(mag), .phase(phase));

  pm_adjust u_pmadj (.clk(sclk_250), .rst_n(rst250_n), .in_valid(pol_v), .mag(mag), .phase(phase),
                     .pm_comp(cfg.pm_comp), .pm_gain(cfg.pm_gain),
                     .out_valid(pm_v), .im_code(im_code), .pm_code(pm_code));

  // ---------------- output timing ----------------
  logic        rb_v, rb_full, rb_nfull, rb_ovf, dac_busy;
  logic [23:0] rb_data;

  ring_buffer u_ring (.clk(sclk_250), .rst_n(rst250_n), .wr_en(pm_v), .wr_data({im_code, pm_code}),
                      .wait_config(cfg.wait_config), .rd_valid(rb_v), .rd_data(rb_data),
                      .full(rb_full), .near_full(rb_nfull), .overflow(rb_ovf));

  dac_if u_dac (.clk(sclk_250), .rst_n(rst250_n), .in_valid(rb_v), .in_a(rb_data[23:12]), .in_b(rb_data[11:0]),
                .cfg_clk_dly(cfg.cfg_clk_dly), .dac_a(dac_a), .dac_b(dac_b), .dac_wrt(dac_wrt),
                .dac_clk(dac_clk), .busy(dac_busy));

  // ---------------- status ----------------
  logic        burst_seen;
  logic [15:0] n_calc;
  always_ff @(posedge sclk_250 or negedge rst250_n) begin
    if (!rst250_n) begin
      burst_seen <= 1'b0;
      n_calc     <= '0;
    end else begin
      if (read_burst_x) burst_seen <= 1'b1;
      if (pm_v)         n_calc     <= n_calc + 1'b1;
    end
  end
  assign status = {n_calc, 8'd0, mvec_full, rb_ovf, rb_nfull, calc_miss, ap_under, ax_under,
                   burst_seen, meas_lock_o};

  // the two lanes run in lock step
  a_lockstep: assert property (@(posedge sclk_250) disable iff (!rst250_n) cx_v == cp_v);
endmodule
