// tb_m_extractor: checks the M-extractor against a behavioural weighted sum.
// Random samples and weights are driven; for each trigger the expected m-value
// Sat12((sum w_i h_i) >>> 8) over the window is computed here and compared,
// and m_valid must be registered by the same clock edge that samples the
// last window cycle, so the 100 samples take 25 cycles (100 ns) in all.
// Triggers come every 25 cycles (the system's pace) or further apart, with
// random Trig_Start/Trig_Window (the window is cut to end inside the slot),
// and the tag sampled at the trigger must come back with its m-value. Includes saturation
// cases and the paper's verification weights [64,64,64,64,0,...].
module tb_m_extractor;
  timeunit 1ns; timeprecision 100ps;
  localparam int NC = 4000;
  logic clk = 0, rst_n = 0;
  logic o_trig_i = 0;
  logic [47:0] adc;
  logic [799:0] weights;
  logic [4:0] ts, tw;
  logic signed [11:0] m_value;
  logic m_valid, m_tag, tag_in = 0;
  bit   last_tag;
  int checks = 0, failures = 0, cyc = 0;
  logic [47:0] adc_hist [NC];
  int last_trig = -1, last_ts, last_win;
  int n_sat = 0;
  always #2 clk = ~clk;

  m_extractor dut (.clk(clk), .rst_n(rst_n), .o_trig_i(o_trig_i), .adc_data(adc), .weights(weights),
                   .trig_start(ts), .trig_window(tw), .tag_in(tag_in), .m_value(m_value), .m_valid(m_valid),
                   .m_tag(m_tag));

  function automatic int expected(int t, int s, int win);
    longint acc = 0;
    for (int j = 0; j < win; j++)
      for (int l = 0; l < 4; l++)
        acc += longint'($signed(adc_hist[t + s + j][12*l +: 12])) * longint'($signed(weights[8*(4*j+l) +: 8]));
    acc = acc >>> 8;
    if (acc > 2047) acc = 2047;
    if (acc < -2048) acc = -2048;
    return int'(acc);
  endfunction

  // per-cycle stimulus and checking; the DUT samples at the edge numbered cyc
  always @(posedge clk) if (rst_n) begin
    #0.1;
    if (m_valid) begin
      int e;
      checks++;
      if (last_trig < 0) begin failures++; $display("FAIL: m_valid without trigger"); end
      else begin
        e = expected(last_trig, last_ts, last_win);
        if (cyc != last_trig + last_ts + last_win - 1) begin
          failures++; $display("FAIL: m_valid at %0d, trigger %0d ts %0d win %0d", cyc, last_trig, last_ts, last_win);
        end
        checks++;
        if (m_value != 12'(e)) begin failures++; $display("FAIL: m=%0d exp %0d", m_value, e); end
        checks++;
        if (m_tag != last_tag) begin failures++; $display("FAIL: tag %b exp %b", m_tag, last_tag); end
        if (e == 2047 || e == -2048) n_sat++;
      end
    end
    cyc++;
  end

  task automatic drive_cycle(bit trig, int mode);
    for (int l = 0; l < 4; l++) begin
      case (mode)
        0: adc[12*l +: 12] = 12'($urandom);
        1: adc[12*l +: 12] = 12'h7ff;
        default: adc[12*l +: 12] = 12'h800;
      endcase
    end
    adc_hist[cyc] = adc;
    o_trig_i = trig;
    if (trig) begin
      last_trig = cyc;
      last_ts   = (ts > 24) ? 24 : int'(ts);
      last_win  = (tw == 0 || tw > 25) ? 25 : int'(tw);
      if (last_ts + last_win > 25) last_win = 25 - last_ts;
      last_tag  = tag_in;
    end
    @(posedge clk); #0.2;
  endtask

  initial begin
    adc = '0; ts = 0; tw = 25;
    for (int i = 0; i < 100; i++) weights[8*i +: 8] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1; #0.2;
    for (int p = 0; p < 60; p++) begin
      int mode;
      mode = 0;
      if (p == 10) for (int i = 0; i < 100; i++) weights[8*i +: 8] = 8'sd127;
      if (p == 10) mode = 1;
      if (p == 11) mode = 2;
      if (p == 12) begin
        for (int i = 0; i < 100; i++) weights[8*i +: 8] = (i < 4) ? 8'd64 : 8'd0;   // paper test weights
      end
      if (p == 20) for (int i = 0; i < 100; i++) weights[8*i +: 8] = 8'($urandom);
      if (p >= 30) begin ts = 5'($urandom_range(0, 31)); tw = 5'($urandom_range(0, 31)); end
      tag_in = 1'($urandom);
      drive_cycle(1, mode);
      // triggers 25 cycles apart as in the system, and sometimes further
      for (int k = 1; k < ((p % 3 == 0) ? 32 : 25); k++) drive_cycle(0, mode);
      tag_in = 1'($urandom);   // the tag may change between triggers
    end
    repeat (3) @(posedge clk);
    if (n_sat < 2) begin failures++; $display("FAIL: saturation not exercised"); end
    checks++;
    if (checks < 100) begin failures++; $display("FAIL: too few m-values"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NC - 10) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
