// tb_scale_conv: checks shift, round-to-nearest and 13-bit saturation of the
// inner product for every shift amount, with random and boundary inputs.
module tb_scale_conv;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [31:0] din;
  logic [4:0] s;
  logic signed [12:0] dout;
  int checks = 0, failures = 0, n_sat = 0;
  always #2 clk = ~clk;

  scale_conv dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .din(din), .scale_select(s),
                  .out_valid(out_valid), .dout(dout));

  // reference: real division, rounding halves upwards, clipping
  function automatic int ref_val(longint d, int sh);
    real q = real'(d) / (2.0 ** sh);
    longint r = longint'($floor(q + 0.5));
    if (r > 4095)  begin r = 4095; n_sat++; end
    if (r < -4096) begin r = -4096; n_sat++; end
    return int'(r);
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int e;
      s = 5'(n % 32);
      case (n % 7)
        0: din = 32'sh7fffffff;
        1: din = 32'sh80000000;
        2: din = 32'(($urandom_range(0, 8191) - 4096)) <<< s;
        3: din = (32'sd1 <<< s) >>> 1;                 // exactly half an output LSB
        default: din = $urandom;
      endcase
      e = ref_val(longint'(din), int'(s));
      #0.1 in_valid = 1;
      @(posedge clk); #0.1 in_valid = 0;
      checks++;
      if (!out_valid || int'(dout) != e) begin
        failures++; $display("FAIL: din %0d s %0d -> %0d exp %0d", din, s, dout, e);
      end
    end
    checks++;
    if (n_sat < 10) begin failures++; $display("FAIL: saturation not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
