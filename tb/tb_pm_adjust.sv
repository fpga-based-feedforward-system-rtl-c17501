// tb_pm_adjust: checks the PM Adjust arithmetic.
//  * anchor points from the paper's tables: phase 0 -> code 1024, +-pi ->
//    2048 / 0, 45 degrees -> 1280 (unit gain, no compensation); magnitude
//    1.0 -> intensity code 2048, sqrt(2) -> 2896;
//  * random magnitudes, phases, compensation and gain factors against a
//    real-number model of the same fixed-point steps (floor at each shift,
//    half-up rounding, modular wrap of the 12-bit code);
//  * the 3-cycle latency with one input per cycle.
module tb_pm_adjust;
  timeunit 1ns; timeprecision 100ps;
  localparam int LAT = 3;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [12:0] mag, phase;
  logic signed [10:0] comp, gain;
  logic [11:0] im_code, pm_code;
  int checks = 0, failures = 0, cyc = 0;
  int eim_q [$], epm_q [$], t_q [$];
  always #2 clk = ~clk;

  pm_adjust dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .mag(mag), .phase(phase),
                 .pm_comp(comp), .pm_gain(gain), .out_valid(out_valid),
                 .im_code(im_code), .pm_code(pm_code));

  // compensated phase in units of pi, times gain, as a 2.10 code plus offset
  function automatic int ref_pm(int m, int ph, int c, int g);
    longint pm2;
    real pm4, code;
    // compensated phase on the 2.11 grid (1.0 = pi); the 13-bit PM2 wraps
    // modulo 4.0, i.e. by whole turns
    pm2  = 2 * longint'(ph) + longint'($floor(real'(m) * real'(c) / 1024.0));
    pm2  = ((pm2 + 4096) % 8192 + 8192) % 8192 - 4096;
    pm4  = $floor(real'(pm2) * real'(g) / 512.0);               // after gain
    code = $floor((pm4 + 1.0) / 2.0) + 1024.0;                  // 2.10, offset
    return int'(longint'(code) & 4095);
  endfunction

  always @(posedge clk) if (rst_n) begin
    #0.1;
    cyc++;
    if (out_valid) begin
      int ei, ep, t;
      ei = eim_q.pop_front(); ep = epm_q.pop_front(); t = t_q.pop_front();
      checks++;
      if (int'(im_code) != ei || int'(pm_code) != ep || cyc - t != LAT) begin
        failures++;
        $display("FAIL: im %0d exp %0d, pm %0d exp %0d, latency %0d", im_code, ei, pm_code, ep, cyc - t);
      end
    end
  end

  task automatic put(int m, int ph, int c, int g, int exp_pm = -1);
    @(posedge clk); #0.2;
    in_valid = 1; mag = 13'(m); phase = 13'(ph); comp = 11'(c); gain = 11'(g);
    eim_q.push_back(m & 4095);
    epm_q.push_back(exp_pm >= 0 ? exp_pm : ref_pm(m, ph, c, g));
    t_q.push_back(cyc);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fixed anchors (expected codes written out)
    put(2048, 0, 0, 512, 1024);          // 0 rad
    put(2048, 1024, 0, 512, 2048);       // +pi
    put(2048, -1024, 0, 512, 0);         // -pi
    put(2896, 256, 0, 512, 1280);        // 45 degrees, |v| = sqrt(2)
    put(2896, -768, 0, 512, 256);        // -135 degrees
    put(2048, 512, 0, 256, 1280);        // pi/2 at half gain -> pi/4
    put(2048, 0, 512, 512, 1536);        // compensation 0.5 * |1.0| = pi/2
    put(0, 0, -1024, 512, 1024);         // zero magnitude: no compensation
    for (int n = 0; n < 3000; n++) begin
      int m, ph, c, g;
      m  = $urandom_range(0, 4095);
      ph = $urandom_range(0, 2048) - 1024;
      c  = (n < 1000) ? 0 : $urandom_range(0, 2047) - 1024;
      g  = (n < 1000) ? 512 : $urandom_range(0, 1023);
      put(m, ph, c, g);
    end
    @(posedge clk); #0.2 in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (t_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", t_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
