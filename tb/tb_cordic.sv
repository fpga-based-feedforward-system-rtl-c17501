// tb_cordic: compares the rectangular-to-polar core against real-number
// sqrt/atan2 for the four quadrants, the axes, the +-pi seam, the largest
// inputs (magnitude clipping) and random vectors, one input per cycle, and
// checks the 8-cycle latency. Tolerance: 2 LSB on magnitude (2.11) and
// 2 LSB on phase (3.10) for vectors of at least 32 LSB, the error budget of
// 12 micro-rotations.
module tb_cordic;
  timeunit 1ns; timeprecision 100ps;
  localparam int LAT = 8;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [12:0] x_in, p_in, mag, phase;
  int checks = 0, failures = 0, cyc = 0, max_em = 0, max_ep = 0;
  int xq [$], pq [$], tq [$];
  always #2 clk = ~clk;

  cordic dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x_in(x_in), .p_in(p_in),
              .out_valid(out_valid), .mag(mag), .phase(phase));

  always @(posedge clk) if (rst_n) begin
    #0.1;
    cyc++;
    if (out_valid) begin
      int x, p, t, em, ep;
      real rm, rp;
      x = xq.pop_front(); p = pq.pop_front(); t = tq.pop_front();
      rm = $sqrt(real'(x) * x + real'(p) * p);
      if (rm > 4095.0) rm = 4095.0;
      rp = $atan2(real'(p), real'(x)) / PI * 1024.0;
      em = int'(mag) - int'(rm + 0.5);
      ep = int'(phase) - int'($floor(rp + 0.5));
      if (em < 0) em = -em;
      if (ep < 0) ep = -ep;
      // +pi and -pi are the same angle
      if (x < 0 && ep > 2040) ep = 2048 - ep;
      if (x == 0 && p == 0) ep = 0;
      if (em > max_em) max_em = em;
      if (ep > max_ep && rm >= 32.0) max_ep = ep;
      checks++;
      // a vector only a few LSB long has no well-defined phase: there the
      // tolerance widens to the angle one LSB subtends
      if (em > 2 || ep > (rm >= 32.0 ? 2 : 2 + int'(400.0 / (rm + 1.0))) || cyc - t != LAT) begin
        failures++;
        $display("FAIL: x %0d p %0d -> mag %0d phase %0d (exp %f %f) latency %0d", x, p, mag, phase, rm, rp, cyc - t);
      end
    end
  end

  task automatic put(int x, int p);
    @(posedge clk); #0.2;
    in_valid = 1; x_in = 13'(x); p_in = 13'(p);
    xq.push_back(x); pq.push_back(p); tq.push_back(cyc);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // axes, diagonals (45 degrees = code 256, -135 degrees = code -768)
    put(2048, 0); put(0, 2048); put(-2048, 0); put(0, -2048);
    put(1448, 1448); put(-1448, -1448); put(-1448, 1448); put(1448, -1448);
    put(-2048, 1); put(-2048, -1); put(-4096, 0); put(4095, 4095);
    put(-4096, -4096); put(0, 0); put(1, 0); put(3, -5);
    for (int n = 0; n < 2000; n++) begin
      if (n % 2) put($urandom_range(0, 8191) - 4096, $urandom_range(0, 8191) - 4096);
      else       put($urandom_range(0, 4095) - 2048, $urandom_range(0, 4095) - 2048);
    end
    @(posedge clk); #0.2 in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (xq.size() != 0) begin failures++; $display("FAIL: %0d results missing", xq.size()); end
    $display("max error: magnitude %0d LSB, phase %0d LSB", max_em, max_ep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
