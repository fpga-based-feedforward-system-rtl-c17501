// tb_dac_if: checks the DAC strobes. After reset the buses must hold A = 0
// and B = 1024. For every Cfg_Clk_Dly value 0..7 and random codes sent at the
// 10 MHz pace (and at random wider gaps), dac_a / dac_b must carry the codes
// together with a one-cycle dac_wrt right after the input strobe, and one
// dac_clk pulse must follow exactly Cfg_Clk_Dly cycles after dac_wrt.
module tb_dac_if;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst_n = 0, in_valid = 0, dac_wrt, dac_clk, busy;
  logic [11:0] in_a, in_b, dac_a, dac_b, ea, eb;
  logic [2:0] dly = 0;
  int checks = 0, failures = 0, cyc = 0, t_wrt = -100, n_wrt = 0, n_clk = 0;
  always #2 clk = ~clk;

  dac_if dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_a(in_a), .in_b(in_b),
              .cfg_clk_dly(dly), .dac_a(dac_a), .dac_b(dac_b), .dac_wrt(dac_wrt),
              .dac_clk(dac_clk), .busy(busy));

  always @(posedge clk) if (rst_n) begin
    #0.1;
    cyc++;
    if (dac_wrt) begin
      n_wrt++; t_wrt = cyc;
      checks++;
      if (dac_a != ea || dac_b != eb) begin failures++; $display("FAIL: codes %0d/%0d exp %0d/%0d", dac_a, dac_b, ea, eb); end
    end
    if (dac_clk) begin
      n_clk++;
      checks++;
      if (cyc - t_wrt != int'(dly)) begin failures++; $display("FAIL: dac_clk %0d cycles after dac_wrt, exp %0d", cyc - t_wrt, dly); end
    end
    checks++;
    if (busy != (cyc - t_wrt < int'(dly))) begin failures++; $display("FAIL: busy %b", busy); end
  end

  initial begin
    repeat (2) @(posedge clk); #0.2;
    checks++;
    if (dac_a != 0 || dac_b != 1024 || dac_wrt || dac_clk) begin failures++; $display("FAIL: reset values"); end
    rst_n = 1;
    for (int d = 0; d < 8; d++) begin
      dly = 3'(d);
      repeat (10) @(posedge clk);
      for (int n = 0; n < 40; n++) begin
        @(posedge clk); #0.2;
        in_valid = 1; in_a = 12'($urandom); in_b = 12'($urandom);
        ea = in_a; eb = in_b;
        @(posedge clk); #0.2 in_valid = 0;
        repeat ((n % 2) ? 23 : $urandom_range(8, 60)) @(posedge clk);
      end
    end
    repeat (10) @(posedge clk);
    checks++;
    if (n_wrt != 320 || n_clk != 320) begin failures++; $display("FAIL: %0d writes, %0d clocks", n_wrt, n_clk); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
