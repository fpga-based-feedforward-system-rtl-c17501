// tb_mux_xp: checks the Ax/Ap stream router at its default burst size.
// Bursts of 1024 beats are sent with random valid gaps and random readies on
// both sides; the select input is changed at random times, also in the
// middle of bursts. Each beat must reach exactly the buffer selected when
// its burst began, unchanged; ready must come back from that side only.
module tb_mux_xp;
  timeunit 1ns; timeprecision 100ps;
  localparam int BURST = 1024;
  logic clk = 0, rst_n = 0, sel_p = 0, s_tvalid = 0, s_tready, x_tvalid, x_tready = 0, p_tvalid, p_tready = 0;
  logic [959:0] s_tdata = '0, tdata;
  int checks = 0, failures = 0, beats = 0, n_x = 0, n_p = 0, mid_changes = 0;
  bit burst_sel;
  always #2 clk = ~clk;

  mux_xp dut (.clk(clk), .rst_n(rst_n), .sel_p(sel_p), .s_tvalid(s_tvalid), .s_tready(s_tready), .s_tdata(s_tdata),
              .x_tvalid(x_tvalid), .x_tready(x_tready), .p_tvalid(p_tvalid), .p_tready(p_tready), .tdata(tdata));

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 8; b++) begin
      sel_p = 1'($urandom);
      burst_sel = sel_p;
      beats = 0;
      while (beats < BURST) begin
        @(posedge clk); #0.2;
        if ($urandom_range(0, 99) < 3) begin sel_p = !sel_p; mid_changes++; end
        s_tvalid = ($urandom_range(0, 3) != 0);
        for (int w = 0; w < 30; w++) s_tdata[32*w +: 32] = $urandom;
        x_tready = 1'($urandom); p_tready = 1'($urandom);
        #0.1;
        if (beats == 0) burst_sel = sel_p;    // taken with the first beat
        checks++;
        if (x_tvalid != (s_tvalid && !burst_sel) || p_tvalid != (s_tvalid && burst_sel) ||
            s_tready != (burst_sel ? p_tready : x_tready) || tdata != s_tdata) begin
          failures++; $display("FAIL: burst %0d beat %0d sel %b", b, beats, burst_sel);
        end
        if (s_tvalid && s_tready) begin
          beats++;
          if (burst_sel) n_p++; else n_x++;
        end
      end
      // the select for the next burst is set while the stream idles
      @(posedge clk); #0.2 s_tvalid = 0;
    end
    checks++;
    if (n_x == 0 || n_p == 0 || mid_changes == 0) begin failures++; $display("FAIL: coverage %0d %0d %0d", n_x, n_p, mid_changes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
