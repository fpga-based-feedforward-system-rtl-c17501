// tb_vec_mult: checks the 80 element-wise signed 12x12 products and the
// one-cycle latency, including the extreme values -2048 and 2047 and the
// paper's 1023 / 511 A-values.
module tb_vec_mult;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [959:0] a_vec, m_vec;
  logic [1919:0] prod;
  int checks = 0, failures = 0;
  always #2 clk = ~clk;

  vec_mult dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a_vec(a_vec), .m_vec(m_vec),
                .out_valid(out_valid), .prod(prod));

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 50; n++) begin
      for (int k = 0; k < 80; k++) begin
        int a, m;
        case (n)
          0: begin a = -2048; m = -2048; end
          1: begin a = 2047;  m = -2048; end
          2: begin a = (k % 2) ? 511 : 1023; m = 1500; end
          default: begin a = $urandom_range(0, 4095) - 2048; m = $urandom_range(0, 4095) - 2048; end
        endcase
        a_vec[12*k +: 12] = 12'(a);
        m_vec[12*k +: 12] = 12'(m);
      end
      #0.1 in_valid = 1;
      @(posedge clk); #0.1 in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL: latency"); end
      for (int k = 0; k < 80; k++) begin
        int e;
        e = int'($signed(a_vec[12*k +: 12])) * int'($signed(m_vec[12*k +: 12]));
        checks++;
        if ($signed(prod[24*k +: 24]) != 24'(e)) begin failures++; $display("FAIL: n%0d k%0d %0d exp %0d", n, k, $signed(prod[24*k +: 24]), e); end
      end
      @(posedge clk); #0.1;
      checks++;
      if (out_valid) begin failures++; $display("FAIL: valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (1000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
