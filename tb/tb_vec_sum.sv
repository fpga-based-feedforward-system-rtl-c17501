// tb_vec_sum: checks the pipelined 80-input adder tree. A new random product
// vector enters every cycle (including all-maximum and all-minimum cases);
// each sum must appear exactly 4 cycles later, in order.
module tb_vec_sum;
  timeunit 1ns; timeprecision 100ps;
  localparam int LAT = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [1919:0] prod;
  logic signed [31:0] sum;
  int checks = 0, failures = 0, cyc = 0;
  longint exp_q [$];
  int     t_q [$];
  always #2 clk = ~clk;

  vec_sum dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .prod(prod), .out_valid(out_valid), .sum(sum));

  always @(posedge clk) if (rst_n) begin
    #0.1;
    cyc++;
    if (out_valid) begin
      longint e;
      int t;
      e = exp_q.pop_front();
      t = t_q.pop_front();
      checks++;
      if (longint'(sum) != e || cyc - t != LAT) begin
        failures++; $display("FAIL: sum %0d exp %0d, latency %0d", sum, e, cyc - t);
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      longint e;
      e = 0;
      @(posedge clk); #0.2;
      in_valid = (n < 200) ? 1'b1 : ($urandom_range(0, 1) == 1);
      for (int k = 0; k < 80; k++) begin
        int v;
        if (n == 0)      v = -(1 << 22);
        else if (n == 1) v = (1 << 22) - 1;
        else             v = $urandom_range(0, (1 << 24) - 1) - (1 << 23);
        prod[24*k +: 24] = 24'(v);
        e += longint'(v);
      end
      if (in_valid) begin exp_q.push_back(e); t_q.push_back(cyc); end
    end
    @(posedge clk); #0.2 in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d sums missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
