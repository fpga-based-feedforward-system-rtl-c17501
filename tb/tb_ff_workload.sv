// tb_ff_workload: the two system tests of the feedforward fabric, run at the
// default settings and sizes.
//
// 1. System verification (one full default Meas_Lock period of 10 ms: 2 ms
//    sample phase, then an 8 ms hold phase of 80,000 pulses). A 10 kHz sine
//    of full-scale amplitude drives the ADC; the M-extractor weights keep
//    their reset value [64,64,64,64,0,...], which picks one sample in four
//    of each pulse at unit gain. The Ax and Ap vectors are identical and
//    follow the test pattern: vector n holds 1023 (n even) or 511 (n odd) at
//    element 79 - (n mod 80) and zeros elsewhere, so each m-value is used by
//    80 consecutive calculations (8 us) while it travels through the
//    m-vector. With x = p the phase must be 45 degrees (PM code 1280) while
//    the sine is positive and -135 degrees (code 256) while it is negative,
//    and the intensity must follow the sine. The calculation count of the
//    8 ms phase must fit into the 80,100 vectors per side that the
//    experiment stored, with no calculation missed. As in the stability
//    run, one Ax vector (here MARK_VEC = 79900, the last ones are not reached
//    in the first period) carries an extra 1500 at index 0, which must show
//    up as a single phase peak.
// 2. Pulsed light: the Meas_Lock period is shortened to 1000 pulses (200 of
//    them sample phase) and every pulse gives an m-value of 260 (ten samples
//    of 260 at the start of the pulse slot, the light arriving O_trig_Delay
//    cycles after O_trig_o). Once the m-vector holds only such values the
//    outputs must alternate between intensity codes 184 and 92 at phase code
//    1280 - the values expected for this test.
// Every DAC word is also compared with an independent model (m-values, inner
// products, scaling, real sqrt/atan2, PM Adjust) and must come exactly
// 47 cycles after the first ADC sample of its pulse.
module tb_ff_workload;
  timeunit 1ns; timeprecision 1ps;

  localparam int PER  = 100000;   // default Meas_Lock period, pulses
  localparam int DUTY = 20000;    // default sample phase, pulses
  localparam int PER2 = 1000, DUTY2 = 200;
  localparam int D    = 1;        // default O_trig_Delay, cycles
  localparam int LAT0 = 47;
  localparam int BURST = 1024;
  localparam int DDR_VECTORS = 80100;
  localparam real PI = 3.14159265358979;
  localparam int MARK_VEC = 79900;  // altered A-vector, see above

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

  int n_pulses = 0, n_gated = 0, n_fill = 0, n_miss = 0, n_calc = 0, n_out = 0;
  int n_burst_x = 0, n_burst_p = 0, n_mux_sw = 0, n_backpr = 0;
  int n_45 = 0, n_m135 = 0, n_peak = 0, n_pulsed_ok = 0, n_pulsed_chk = 0, calc_p1 = 0;
  int n_lock_fall = 0;
  bit pulsed = 0;
  int scale_m = 11, wait_m = 0, comp_m = 0, gain_m = 512, clkdly_m = 0;
  int mv [80];
  int mv_cnt = 0, pulsed_taken = 0;
  int deliv_x = 0, deliv_p = 0, cons_x = 0, cons_p = 0;
  bit track = 0, prev_o = 0, prev_lock = 0;
  logic [47:0] hist [64];
  int  rise_q [$], pend_t [$], light_q [$];
  bit  pend_l [$];
  int  exp_t [$], exp_a [$], exp_k [$];
  real exp_b [$];
  bit  exp_chkb [$];
  int  last_wrt = -100, light_t = -100;

  typedef struct { bit rd; logic [7:0] addr; logic [31:0] data; } cmd_t;
  cmd_t        cmd_q [$];
  int          burst_q [$];
  int          cmds_done = 0, dma_allow = -1;
  logic [31:0] rd_result;
  bit          dma_busy = 0, dma_buf = 0, mux_cur = 0;

  // test-pattern A-vector element k of vector n (same for Ax and Ap)
  function automatic int aval(bit b, int n, int k);
    if (!b && n == MARK_VEC && k == 0) return 1500;
    if (k == 79 - (n % 80)) return (n % 2) ? 511 : 1023;
    return 0;
  endfunction

  function automatic logic [959:0] avec(bit b, int n);
    logic [959:0] v;
    for (int k = 0; k < 80; k++) v[12*k +: 12] = 12'(aval(b, n, k));
    return v;
  endfunction

  // reset weights: the first four samples of the window, 64/256 each
  function automatic int m_of(int t);
    longint acc;
    acc = 0;
    for (int l = 0; l < 4; l++) acc += 64 * longint'($signed(hist[t % 64][12*l +: 12]));
    acc = acc >>> 8;
    if (acc > 2047)  acc = 2047;
    if (acc < -2048) acc = -2048;
    return int'(acc);
  endfunction

  function automatic int scale(longint s);
    longint r;
    r = (s + (longint'(1) << (scale_m - 1))) >>> scale_m;
    if (r > 4095)  r = 4095;
    if (r < -4096) r = -4096;
    return int'(r);
  endfunction

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
    if (pulsed) pulsed_taken++;
    if (mv_cnt < 80) begin n_fill++; return; end
    if (deliv_x - cons_x < 1 || deliv_p - cons_p < 1) begin n_miss++; return; end
    sx = 0; sp = 0;
    for (int k = 0; k < 80; k++) begin
      sx += longint'(aval(0, cons_x, k)) * mv[k];
      sp += longint'(aval(1, cons_p, k)) * mv[k];
    end
    cons_x++; cons_p++;
    n_calc++;
    x = scale(sx);
    p = scale(sp);
    mag = $sqrt(real'(x) * x + real'(p) * p);
    if (mag > 4095.0) mag = 4095.0;
    ph = $atan2(real'(p), real'(x)) / PI * 1024.0;
    ea = int'(mag + 0.5);
    code = ((2.0 * ph + mag * comp_m / 1024.0) * gain_m / 512.0) / 2.0 + 1024.0;
    exp_t.push_back(t + LAT0 + wait_m);
    exp_a.push_back(ea);
    exp_b.push_back(code);
    exp_chkb.push_back(mag >= 32.0);
    // pulsed light: once 80 values of 260 are held, the expected codes
    exp_k.push_back((pulsed && pulsed_taken >= 80) ? ((cons_x - 1) % 2 ? 92 : 184) :
                    (cons_x - 1 == MARK_VEC) ? -2 : -1);
  endtask

  always @(posedge sclk) begin
    #0.1;
    cyc++;
    // ADC: 10 kHz full-scale sine, or a train of 10 ns pulses of 260
    if (track && o_trig_o && !prev_o) begin rise_q.push_back(cyc + D); light_q.push_back(cyc + D); end
    if (light_q.size() > 0 && light_q[0] == cyc) light_t = light_q.pop_front();
    for (int l = 0; l < 4; l++) begin
      int v, s;
      s = 4 * (cyc - light_t) + l;               // sample index within the pulse
      if (pulsed) v = (s >= 0 && s < 10) ? 260 : 0;
      else        v = int'($floor(2047.0 * $sin(2.0 * PI * 1.0e4 * (4.0 * cyc + l) * 1.0e-9) + 0.5));
      adc_data[12*l +: 12] = 12'(v);
    end
    hist[cyc % 64] = adc_data;
    if (rst_n) begin
      if (read_burst_x) begin burst_q.push_back(0); n_burst_x++; end
      if (read_burst_p) begin burst_q.push_back(1); n_burst_p++; end
    end
    prev_o = o_trig_o;
    if (rise_q.size() > 0 && rise_q[0] == cyc) begin
      void'(rise_q.pop_front());
      pend_t.push_back(cyc);
      pend_l.push_back(meas_lock_o);
      if (prev_lock && !meas_lock_o) begin
        n_lock_fall++;
        $display("cycle %0d: hold phase ends; %0d calculations, %0d missed", cyc, n_calc, n_miss);
      end
      prev_lock = meas_lock_o;
    end
    if (pend_t.size() > 0 && pend_t[0] + 25 == cyc) begin
      int t;
      bit l;
      t = pend_t.pop_front();
      l = pend_l.pop_front();
      pulse_done(t, l);
    end
    if (dac_wrt) begin
      n_out++;
      last_wrt = cyc;
      checks++;
      if (exp_t.size() == 0) begin
        failures++; $display("FAIL: unexpected DAC write at cycle %0d", cyc);
      end else begin
        int et, ea, ek;
        real eb, db;
        bit cb;
        et = exp_t.pop_front(); ea = exp_a.pop_front(); eb = exp_b.pop_front();
        cb = exp_chkb.pop_front(); ek = exp_k.pop_front();
        if (cyc != et) begin failures++; $display("FAIL: DAC write at %0d, expected %0d", cyc, et); end
        checks++;
        if (int'(dac_a) - ea > 2 || ea - int'(dac_a) > 2) begin
          failures++; $display("FAIL: DAC A %0d expected %0d", dac_a, ea);
        end
        db = real'(dac_b) - eb;
        db = db - 4096.0 * $floor(db / 4096.0 + 0.5);
        checks++;
        if (cb && (db > 3.0 || db < -3.0)) begin
          failures++; $display("FAIL: DAC B %0d expected %f", dac_b, eb);
        end
        if (ek == -2) begin
          // the altered vector must stand out in phase
          checks++;
          if ((dac_b < 1270 || dac_b > 1290) && (dac_b < 246 || dac_b > 266)) n_peak++;
          else begin failures++; $display("FAIL: altered A-vector gave an ordinary phase code %0d", dac_b); end
        end else if (!pulsed && dac_a >= 32) begin
          // x = p: only 45 or -135 degrees
          checks++;
          if (dac_b >= 1279 && dac_b <= 1281)     n_45++;
          else if (dac_b >= 255 && dac_b <= 257)  n_m135++;
          else begin failures++; $display("FAIL: phase code %0d in the sine test", dac_b); end
        end
        if (ek >= 0) begin
          checks++;
          n_pulsed_chk++;
          if (int'(dac_a) == ek && dac_b == 1280) n_pulsed_ok++;
          else begin failures++; $display("FAIL: pulsed light: codes %0d/%0d, expected %0d/1280", dac_a, dac_b, ek); end
        end
      end
    end
    if (dac_clk) begin
      checks++;
      if (cyc - last_wrt != clkdly_m) begin failures++; $display("FAIL: dac_clk %0d cycles after dac_wrt", cyc - last_wrt); end
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
    if (dma_busy && !s_axis_tvalid && $urandom_range(0, 9) != 0) begin
      s_axis_tvalid = 1;
      s_axis_tdata  = {32'($urandom), 32'($urandom), avec(dma_buf, dma_buf ? deliv_p : deliv_x)};
    end
  end

  initial begin : main
    logic [31:0] st;
    for (int k = 0; k < 80; k++) mv[k] = 0;
    repeat (5) @(posedge sclk);
    #0.2 rst_n = 1;
    repeat (4) @(posedge sclk);
    track = 1;
    // 1: one full default period (2 ms sample, 8 ms hold)
    wait (n_lock_fall == 1);
    calc_p1 = n_calc;
    checks++;
    if (calc_p1 != PER - DUTY - 79 || n_miss != 0 || calc_p1 > DDR_VECTORS) begin
      failures++; $display("FAIL: %0d calculations (%0d missed) in the 8 ms hold phase", calc_p1, n_miss);
    end
    // 2: pulsed light with a short sample/hold period
    cmd_w(8'h08, PER2);
    cmd_w(8'h0C, DUTY2);
    wait (cmds_done == 2);
    repeat (50) @(posedge sclk);
    pulsed = 1;
    wait (n_lock_fall == 3);
    repeat (200) @(posedge sclk);
    begin
      cmd_t c;
      c.rd = 1; c.addr = 8'h28; c.data = 0;
      cmd_q.push_back(c);
    end
    wait (cmds_done == 3);
    st = rd_result;
    checks++;
    if (st[16 +: 16] != 16'(n_calc) || st[4] || st[2] || st[3] || st[6]) begin
      failures++; $display("FAIL: STATUS %h (model: %0d calculations)", st, n_calc);
    end
    checks++;
    if (exp_t.size() != 0) begin failures++; $display("FAIL: %0d DAC words never came", exp_t.size()); end
    $display("8 ms hold phase: %0d calculations from %0d stored vectors per side; 45 deg words %0d, -135 deg words %0d",
             calc_p1, DDR_VECTORS, n_45, n_m135);
    $display("altered vector %0d: %0d phase peak", MARK_VEC, n_peak);
    $display("pulsed light: %0d of %0d words at 184/92 and 1280; bursts x %0d p %0d, Mux X/P switches %0d",
             n_pulsed_ok, n_pulsed_chk, n_burst_x, n_burst_p, n_mux_sw);
    checks++;
    if (n_45 < 1000 || n_m135 < 1000 || n_pulsed_chk < 100 || n_peak != 1) begin failures++; $display("FAIL: workload coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge sclk);
    failures++;
    $display("watchdog: stopped at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
