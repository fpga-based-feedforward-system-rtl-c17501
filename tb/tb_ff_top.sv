// tb_ff_top: end-to-end test of the feedforward fabric at its default sizes.
//
// The testbench plays every part around the fabric:
//  * the optics and ADC: random samples, 4 per cycle; the light of a pulse
//    reaches the ADC O_trig_Delay (3) cycles after O_trig_o rises, so the
//    M-extractor window must line up with it;
//  * the processor: AXI4-Lite writes of the settings, and the service of
//    every Read_Burst request (set Mux X/P, then start a DMA burst);
//  * the DMA: 1024-vector bursts on the 300 MHz stream with random gaps.
// A-vectors follow the pattern used to verify the hardware in the paper (a
// single large value, 1023 or 511, at a position that walks with the vector
// number) plus small pseudo-random values in the other 79 places.
//
// An independent model recomputes every m-value, the m-vector, both inner
// products, the scaling, magnitude and phase (real sqrt/atan2) and the PM
// Adjust codes, and predicts for every pulse whether it is dropped (sample
// phase), only fills the m-vector, misses its calculation (a buffer ran
// empty) or gives a DAC word, and when: 47 cycles after its first ADC sample
// plus Wait_Config. Every dac_wrt must match the next prediction exactly in
// time, within 2 LSB on DAC A and 3 LSB on DAC B (CORDIC rounding; the phase
// is not compared for vectors shorter than 32 LSB).
//
// Schedule (Meas_Lock period 1700 pulses, 500 of them sample phase):
//  period 1: the DMA serves only the first Ax and Ap bursts, so the buffers
//            run dry in the hold phase (underrun, missed calculations);
//            default settings, Wait_Config 0.
//  period 2: in the sample phase the held-back bursts are served and new
//            settings written (random weights, Scale Select 9, PM Comp,
//            PM Gain, Wait_Config 1000, Cfg_Clk_Dly 2); during the hold phase
//            refill bursts stream in while calculations run.
// Each mechanism is counted and a failure is counted for any that never
// happened. The STATUS register is read back and checked at the end.
module tb_ff_top;
  timeunit 1ns; timeprecision 1ps;

  localparam int PER  = 1700;     // Meas_Lock period, pulses
  localparam int DUTY = 500;      // sample phase, pulses
  localparam int D    = 3;        // O_trig_Delay, cycles
  localparam int LAT0 = 47;       // first ADC sample to dac_wrt, Wait_Config = 0
  localparam int BURST = 1024;
  localparam real PI = 3.14159265358979;

  logic         sclk = 0, clk300 = 0, rst_n = 0;
  logic [47:0]  adc_data = '0;
  logic         s_axis_tvalid = 0, s_axis_tready;
  logic [1023:0] s_axis_tdata = '0;
  logic         read_burst_x, read_burst_p;
  logic [7:0]   awaddr = 0, araddr = 0;
  logic         awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic         awready, wready, bvalid, arready, rvalid;
  logic [31:0]  wdata = 0, rdata;
  logic [3:0]   wstrb = 4'hF;
  logic [1:0]   bresp, rresp;
  logic         o_trig_o, meas_lock_o, dac_wrt, dac_clk;
  logic [11:0]  dac_a, dac_b;

  always #2 sclk = ~sclk;          // 250 MHz
  always #1.667 clk300 = ~clk300;  // 300 MHz

  ff_top dut (
    .sclk_250(sclk), .clk_300(clk300), .rst_n(rst_n), .adc_data(adc_data),
    .s_axis_tvalid(s_axis_tvalid), .s_axis_tready(s_axis_tready), .s_axis_tdata(s_axis_tdata),
    .read_burst_x(read_burst_x), .read_burst_p(read_burst_p),
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .o_trig_o(o_trig_o), .meas_lock_o(meas_lock_o),
    .dac_a(dac_a), .dac_b(dac_b), .dac_wrt(dac_wrt), .dac_clk(dac_clk));

  int checks = 0, failures = 0, cyc = 0;

  // ------------------------------------------------------------------
  // mechanism counters
  int n_pulses = 0, n_gated = 0, n_fill = 0, n_miss = 0, n_calc = 0, n_out = 0;
  int n_burst_x = 0, n_burst_p = 0, n_mux_sw = 0, n_backpr = 0, n_sat_m = 0, n_sat_s = 0;
  int n_out_w0 = 0, n_out_wmax = 0, n_clkdly = 0, n_lock_runs = 0, n_lock_fall = 0, n_stream_calc = 0;

  // ------------------------------------------------------------------
  // model state
  int  w_model [100];
  int  scale_m = 11, wait_m = 0, comp_m = 0, gain_m = 512, clkdly_m = 0;
  int  mv [80];
  int  mv_cnt = 0;
  int  deliv_x = 0, deliv_p = 0, cons_x = 0, cons_p = 0;
  bit  track = 0, wide_adc = 1, prev_o = 0, prev_lock = 0, dma_active = 0;
  int  run_len = 0, run_idx = 0;
  logic [47:0] hist [64];
  int  rise_q [$], pend_t [$];
  bit  pend_l [$];
  int  exp_t [$], exp_a [$];
  real exp_b [$];
  bit  exp_chkb [$];
  int  last_wrt = -100;

  // processor and DMA model state
  typedef struct { bit rd; logic [7:0] addr; logic [31:0] data; } cmd_t;
  cmd_t        cmd_q [$];
  int          burst_q [$];
  int          cmds_done = 0, dma_allow = 2;
  logic [31:0] rd_result;
  bit          dma_busy = 0, dma_buf = 0, mux_cur = 0;

  // A-vector element k of vector n of buffer b (0: Ax, 1: Ap)
  function automatic int aval(bit b, int n, int k);
    logic [31:0] h;
    int idx;
    idx = b ? (n * 7 + 3) % 80 : 79 - (n % 80);
    if (k == idx) return b ? 511 : 1023;
    h = 32'(n) * 32'd2654435761 ^ 32'(k) * 32'd40503 ^ (b ? 32'h9e3779b9 : 32'h0);
    h = h ^ (h >> 15);
    h = h * 32'd2246822519;
    return int'(h[31:28]) - 8;
  endfunction

  function automatic logic [959:0] avec(bit b, int n);
    logic [959:0] v;
    for (int k = 0; k < 80; k++) v[12*k +: 12] = 12'(aval(b, n, k));
    return v;
  endfunction

  // m-value of the pulse whose first sample came in cycle t
  function automatic int m_of(int t);
    longint acc;
    acc = 0;
    for (int j = 0; j < 25; j++)
      for (int l = 0; l < 4; l++)
        acc += longint'($signed(hist[(t + j) % 64][12*l +: 12])) * longint'(w_model[4*j + l]);
    acc = acc >>> 8;
    if (acc > 2047)  begin acc = 2047;  n_sat_m++; end
    if (acc < -2048) begin acc = -2048; n_sat_m++; end
    return int'(acc);
  endfunction

  function automatic int scale(longint s);
    longint r;
    r = (scale_m == 0) ? s : (s + (longint'(1) << (scale_m - 1))) >>> scale_m;
    if (r > 4095)  begin r = 4095;  n_sat_s++; end
    if (r < -4096) begin r = -4096; n_sat_s++; end
    return int'(r);
  endfunction

  // what happens to the pulse whose first sample came in cycle t
  task automatic pulse_done(int t, bit lock);
    int m, x, p, ea;
    longint sx, sp;
    real mag, ph, code;
    n_pulses++;
    m = m_of(t);
    if (!lock) begin n_gated++; return; end
    for (int k = 0; k < 79; k++) mv[k] = mv[k + 1];
    mv[79] = m;
    mv_cnt++;
    if (mv_cnt < 80) begin n_fill++; return; end
    if (deliv_x - cons_x < 1 || deliv_p - cons_p < 1) begin n_miss++; return; end
    sx = 0; sp = 0;
    for (int k = 0; k < 80; k++) begin
      sx += longint'(aval(0, cons_x, k)) * mv[k];
      sp += longint'(aval(1, cons_p, k)) * mv[k];
    end
    cons_x++; cons_p++;
    n_calc++;
    if (dma_active) n_stream_calc++;
    x = scale(sx);
    p = scale(sp);
    mag = $sqrt(real'(x) * x + real'(p) * p);
    if (mag > 4095.0) mag = 4095.0;
    ph = $atan2(real'(p), real'(x)) / PI * 1024.0;     // 3.10, 1.0 = pi
    ea = int'(mag + 0.5);
    // PM Adjust: (2 * phase + mag * comp) on the 2.11 grid, times gain, to 2.10, + 1024
    code = ((2.0 * ph + mag * comp_m / 1024.0) * gain_m / 512.0) / 2.0 + 1024.0;
    exp_t.push_back(t + LAT0 + wait_m);
    exp_a.push_back(ea);
    exp_b.push_back(code);
    exp_chkb.push_back(mag >= 32.0);
  endtask

  // ------------------------------------------------------------------
  // per-cycle stimulus and checking on the fabric clock
  always @(posedge sclk) begin
    #0.1;
    cyc++;
    for (int l = 0; l < 4; l++) begin
      int amp;
      amp = (wide_adc || $urandom_range(0, 1) != 0) ? 2048 : 200;
      adc_data[12*l +: 12] = 12'($urandom_range(0, 2 * amp - 1) - amp);
    end
    hist[cyc % 64] = adc_data;
    if (rst_n) begin
      if (read_burst_x) begin burst_q.push_back(0); n_burst_x++; end
      if (read_burst_p) begin burst_q.push_back(1); n_burst_p++; end
    end
    // the light of a pulse arrives D cycles after O_trig_o rises
    if (track && o_trig_o && !prev_o) rise_q.push_back(cyc + D);
    prev_o = o_trig_o;
    if (rise_q.size() > 0 && rise_q[0] == cyc) begin
      void'(rise_q.pop_front());
      pend_t.push_back(cyc);
      pend_l.push_back(meas_lock_o);
      // sample/hold pattern: whole runs must be DUTY low and PER-DUTY high
      if (meas_lock_o != prev_lock && run_len > 0) begin
        if (run_idx > 0) begin
          checks++;
          n_lock_runs++;
          if (run_len != (prev_lock ? PER - DUTY : DUTY)) begin
            failures++; $display("FAIL: Meas_Lock %s phase lasted %0d pulses", prev_lock ? "hold" : "sample", run_len);
          end
        end
        if (prev_lock) n_lock_fall++;
        $display("cycle %0d: %s phase of %0d pulses ends; %0d calculations, %0d missed so far",
                 cyc, prev_lock ? "hold" : "sample", run_len, n_calc, n_miss);
        run_idx++;
        run_len = 0;
      end
      run_len++;
      prev_lock = meas_lock_o;
    end
    if (pend_t.size() > 0 && pend_t[0] + 25 == cyc) begin
      int t;
      bit l;
      t = pend_t.pop_front();
      l = pend_l.pop_front();
      pulse_done(t, l);
    end
    // DAC
    if (dac_wrt) begin
      n_out++;
      last_wrt = cyc;
      checks++;
      if (exp_t.size() == 0) begin
        failures++; $display("FAIL: unexpected DAC write at cycle %0d", cyc);
      end else begin
        int et, ea;
        real eb, db;
        bit cb;
        et = exp_t.pop_front(); ea = exp_a.pop_front(); eb = exp_b.pop_front(); cb = exp_chkb.pop_front();
        if (cyc != et) begin failures++; $display("FAIL: DAC write at %0d, expected %0d", cyc, et); end
        if (wait_m == 0) n_out_w0++; else if (wait_m == 1000) n_out_wmax++;
        checks++;
        if (int'(dac_a) - ea > 2 || ea - int'(dac_a) > 2) begin
          failures++; $display("FAIL: DAC A %0d expected %0d", dac_a, ea);
        end
        db = real'(dac_b) - eb;
        db = db - 4096.0 * $floor(db / 4096.0 + 0.5);     // codes wrap modulo 4096
        checks++;
        if (cb && (db > 3.0 || db < -3.0)) begin
          failures++; $display("FAIL: DAC B %0d expected %f", dac_b, eb);
        end
      end
    end
    if (dac_clk) begin
      checks++;
      if (cyc - last_wrt != clkdly_m) begin failures++; $display("FAIL: dac_clk %0d cycles after dac_wrt", cyc - last_wrt); end
      if (clkdly_m > 0) n_clkdly++;
    end
  end

  // ------------------------------------------------------------------
  // processor model: settings and DMA burst service over AXI4-Lite

  task automatic axi_write(logic [7:0] a, logic [31:0] d);
    @(posedge sclk); #0.2;
    awvalid = 1; awaddr = a; wvalid = 1; wdata = d;
    fork
      begin do @(posedge sclk); while (!awready); #0.2 awvalid = 0; end
      begin do @(posedge sclk); while (!wready);  #0.2 wvalid = 0; end
    join
    bready = 1;
    do @(posedge sclk); while (!bvalid);
    #0.2 bready = 0;
  endtask

  task automatic axi_read(logic [7:0] a, output logic [31:0] d);
    @(posedge sclk); #0.2;
    arvalid = 1; araddr = a;
    do @(posedge sclk); while (!arready);
    #0.2 arvalid = 0; rready = 1;
    do @(posedge sclk); while (!rvalid);
    d = rdata;
    #0.2 rready = 0;
  endtask

  task automatic cmd_w(logic [7:0] a, logic [31:0] d);
    cmd_t c;
    c.rd = 0; c.addr = a; c.data = d;
    cmd_q.push_back(c);
  endtask

  initial begin : cpu
    cmd_t c;
    int b;
    wait (rst_n);
    repeat (4) @(posedge sclk);    // the fabric leaves reset two cycles later
    forever begin
      if (cmd_q.size() > 0) begin
        c = cmd_q.pop_front();
        if (c.rd) axi_read(c.addr, rd_result);
        else      axi_write(c.addr, c.data);
        cmds_done++;
      end else if (burst_q.size() > 0 && dma_allow != 0 && !dma_busy) begin
        b = burst_q.pop_front();
        if (dma_allow > 0) dma_allow--;
        if (1'(b) != mux_cur) begin
          axi_write(8'h00, 32'(b));
          mux_cur = 1'(b);
          n_mux_sw++;
        end
        dma_buf  = 1'(b);
        dma_busy = 1;
      end else begin
        @(posedge sclk);
      end
    end
  end

  // ------------------------------------------------------------------
  // DMA model on the 300 MHz stream clock
  int beat = 0;
  always @(posedge clk300) begin
    bit acc;
    acc = s_axis_tvalid && s_axis_tready;
    if (s_axis_tvalid && !s_axis_tready) n_backpr++;
    #0.2;
    if (acc) begin
      if (dma_buf) deliv_p++; else deliv_x++;
      s_axis_tvalid = 0;
      beat++;
      if (beat == BURST) begin beat = 0; dma_busy = 0; end
    end
    dma_active = dma_busy;
    if (dma_busy && !s_axis_tvalid && $urandom_range(0, 9) != 0) begin
      s_axis_tvalid = 1;
      s_axis_tdata  = {32'($urandom), 32'($urandom), avec(dma_buf, dma_buf ? deliv_p : deliv_x)};
    end
  end

  // ------------------------------------------------------------------
  // schedule
  initial begin : main
    logic [31:0] st;
    for (int i = 0; i < 100; i++) w_model[i] = (i < 4) ? 64 : 0;
    for (int k = 0; k < 80; k++) mv[k] = 0;
    repeat (5) @(posedge sclk);
    #0.2 rst_n = 1;
    cmd_w(8'h04, D);
    cmd_w(8'h08, PER);
    cmd_w(8'h0C, DUTY);
    wait (cmds_done == 3);
    repeat (60) @(posedge sclk);
    track = 1;

    // period 2, sample phase: serve the held-back bursts, new settings
    wait (n_lock_fall == 1);
    repeat (60 * 25) @(posedge sclk);
    dma_allow = -1;
    wide_adc  = 0;
    cmd_w(8'h14, 9);            scale_m  = 9;
    cmd_w(8'h18, 32'(-300));    comp_m   = -300;
    cmd_w(8'h1C, 700);          gain_m   = 700;
    cmd_w(8'h20, 1000);         wait_m   = 1000;
    cmd_w(8'h24, 2);            clkdly_m = 2;
    for (int i = 0; i < 25; i++) begin
      logic [31:0] wd;
      for (int b = 0; b < 4; b++) begin
        w_model[4*i + b] = $urandom_range(0, 255) - 128;
        wd[8*b +: 8] = 8'(w_model[4*i + b]);
      end
      cmd_w(8'h40 + 8'(4 * i), wd);
    end

    // period 3, sample phase: let the delayed outputs drain, read STATUS
    wait (n_lock_fall == 2);
    repeat (60 * 25 + 1100) @(posedge sclk);
    begin
      cmd_t c;
      c.rd = 1; c.addr = 8'h28; c.data = 0;
      cmd_q.push_back(c);
    end
    wait (cmds_done == 3 + 30 + 1);
    st = rd_result;
    checks++;
    if (st[16 +: 16] != 16'(n_calc) || !st[1] || !st[2] || !st[3] || !st[4] || st[6] || !st[7] || st[0]) begin
      failures++; $display("FAIL: STATUS %h (model: %0d calculations)", st, n_calc);
    end
    checks++;
    if (exp_t.size() != 0) begin failures++; $display("FAIL: %0d DAC words never came", exp_t.size()); end

    $display("pulses %0d: gated %0d, m-vector fill %0d, missed %0d, calculated %0d, DAC words %0d",
             n_pulses, n_gated, n_fill, n_miss, n_calc, n_out);
    $display("bursts x %0d p %0d, Mux X/P switches %0d, stream back-pressure cycles %0d, calcs during streaming %0d",
             n_burst_x, n_burst_p, n_mux_sw, n_backpr, n_stream_calc);
    $display("saturations m %0d scale %0d, words at Wait_Config 0: %0d, at 1000: %0d, delayed dac_clk %0d, lock runs %0d",
             n_sat_m, n_sat_s, n_out_w0, n_out_wmax, n_clkdly, n_lock_runs);
    // every mechanism must have happened
    check_seen("sample-phase gating", n_gated);
    check_seen("m-vector fill", n_fill);
    check_seen("missed calculation (buffer underrun)", n_miss);
    check_seen("calculation", n_calc);
    check_seen("refill burst request x", n_burst_x - 4);
    check_seen("refill burst request p", n_burst_p - 4);
    check_seen("Mux X/P switch", n_mux_sw - 2);
    check_seen("stream back-pressure", n_backpr);
    check_seen("m-value saturation", n_sat_m);
    check_seen("scale saturation", n_sat_s);
    check_seen("output at Wait_Config 0", n_out_w0);
    check_seen("output at Wait_Config 1000", n_out_wmax);
    check_seen("delayed DAC clock", n_clkdly);
    check_seen("full Meas_Lock runs", n_lock_runs - 2);
    check_seen("calculation while streaming", n_stream_calc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_seen(string what, int n);
    checks++;
    if (n <= 0) begin failures++; $display("FAIL: never happened: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge sclk);
    failures++;
    $display("watchdog: stopped at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
