// tb_otrig: checks the trigger generator.
// o_trig_i must pulse every 25 cycles (10 MHz at 250 MHz), o_trig_o must rise
// exactly o_trig_delay cycles before each o_trig_i pulse (clamped to 1..24)
// and stay high 8 cycles, and meas_lock_o must be low for meas_lock_duty
// pulses and high for the rest of each meas_lock_period-pulse period.
module tb_otrig;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst_n = 0;
  logic [4:0]  dly;
  logic [25:0] per, duty;
  logic o_o, o_i, ml;
  int checks = 0, failures = 0;
  always #2 clk = ~clk;

  otrig dut (.clk(clk), .rst_n(rst_n), .o_trig_delay(dly), .meas_lock_period(per),
             .meas_lock_duty(duty), .o_trig_o(o_o), .o_trig_i(o_i), .meas_lock_o(ml));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // run n cycles and check trigger spacing / lead for a given delay setting
  task automatic run_delay(input int d_set, input int d_exp);
    int cyc = 0, last_i = -1, last_rise = -1, hi_len = 0, n_i = 0;
    logic prev_o = o_o;
    dly = 5'(d_set);
    repeat (60) @(posedge clk);       // let a setting change settle
    prev_o = o_o;
    repeat (300) begin
      @(posedge clk); #0.1;
      cyc++;
      if (o_o && !prev_o) last_rise = cyc;
      if (o_o) hi_len++;
      if (!o_o && prev_o && n_i >= 2) begin check(hi_len == 8, $sformatf("o_trig_o width %0d", hi_len)); hi_len = 0; end
      if (!o_o) hi_len = 0;
      if (o_i) begin
        if (last_i >= 0) check(cyc - last_i == 25, $sformatf("o_trig_i spacing %0d", cyc - last_i));
        if (last_rise >= 0 && n_i >= 1) check(cyc - last_rise == d_exp,
            $sformatf("delay %0d: lead %0d expected %0d", d_set, cyc - last_rise, d_exp));
        last_i = cyc; n_i++;
      end
      prev_o = o_o;
    end
    check(n_i == 12, $sformatf("pulse count %0d", n_i));
  endtask

  initial begin
    dly = 5; per = 10; duty = 3;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_delay(5, 5);
    run_delay(1, 1);
    run_delay(24, 24);
    run_delay(0, 1);
    run_delay(30, 24);
    // meas_lock pattern over 40 pulses: in each period of 10, 3 low then 7 high
    begin
      logic was;
      int k = 0, lows = 0, highs = 0, phase_err = 0, prev = -1, idx = 0, first_rise = -1;
      repeat (40 * 25 + 5) begin
        @(posedge clk); #0.1;
        if (o_i) begin
          k++;
          if (ml) highs++; else lows++;
        end
      end
      check(lows == 12, $sformatf("meas_lock low pulses %0d (exp 12)", lows));
      check(highs == 28, $sformatf("meas_lock high pulses %0d (exp 28)", highs));
      // period: distance between falling edges in pulses
      k = 0; prev = -1;
      repeat (30 * 25) begin
        was = ml;
        @(posedge clk); #0.1;
        if (o_i) k++;
        if (was && !ml) begin
          if (prev >= 0) check(k - prev == 10, $sformatf("meas_lock period %0d", k - prev));
          prev = k;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
