// tb_mvec_sreg: checks the 80-entry m-vector shift register.
// Pushes random m-values, compares every element with a queue model (newest
// at index 79), checks that full rises exactly at the 80th push and that
// clear empties it.
module tb_mvec_sreg;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst_n = 0, clear = 0, shift = 0;
  logic [11:0] m_in = '0;
  logic [959:0] m_vec;
  logic full;
  int checks = 0, failures = 0;
  logic [11:0] model [80];
  int pushes = 0;
  always #2 clk = ~clk;

  mvec_sreg dut (.clk(clk), .rst_n(rst_n), .clear(clear), .shift(shift), .m_in(m_in), .m_vec(m_vec), .full(full));

  task automatic compare();
    bit ok = 1;
    for (int k = 0; k < 80; k++) if (m_vec[12*k +: 12] != model[k]) ok = 0;
    checks++;
    if (!ok) begin failures++; $display("FAIL: vector mismatch after %0d pushes", pushes); end
    checks++;
    if (full != (pushes >= 80)) begin failures++; $display("FAIL: full=%b after %0d pushes", full, pushes); end
  endtask

  initial begin
    for (int k = 0; k < 80; k++) model[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(posedge clk); #0.1;
      shift = ($urandom_range(0, 3) != 0);
      m_in  = 12'($urandom);
      if (shift) begin
        for (int k = 0; k < 79; k++) model[k] = model[k+1];
        model[79] = m_in;
      end
      @(posedge clk); #0.1;
      if (shift) pushes++;
      shift = 0;
      compare();
    end
    clear = 1; @(posedge clk); #0.1; clear = 0;
    for (int k = 0; k < 80; k++) model[k] = '0;
    pushes = 0;
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
