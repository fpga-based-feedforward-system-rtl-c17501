// tb_config_reg: checks the AXI4-Lite register file.
//  * reset values, both as read back over AXI and as seen in the cfg struct;
//  * writes to every setting with address-before-data, data-before-address
//    and simultaneous handshakes, random valid delays and B/R back-pressure;
//  * byte strobes, the read-only STATUS word, unmapped addresses (read 0,
//    writes ignored) and the packing of the 100 weights.
module tb_config_reg;
  timeunit 1ns; timeprecision 100ps;
  import ff_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0]  awaddr = 0, araddr = 0;
  logic        awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata, status;
  logic [3:0]  wstrb = 0;
  logic [1:0]  bresp, rresp;
  cfg_t        cfg;
  logic [31:0] model [64];
  int checks = 0, failures = 0, order_seen [3];
  always #2 clk = ~clk;

  config_reg dut (.clk(clk), .rst_n(rst_n),
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready),
    .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready),
    .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready),
    .status(status), .cfg(cfg));

  function automatic bit is_mapped(int i);
    return (i <= 9) || (i >= 16 && i < 41);
  endfunction

  // one AXI write; order 0: address first, 1: data first, 2: together
  task automatic axi_write(logic [7:0] a, logic [31:0] d, logic [3:0] s);
    int order = $urandom_range(0, 2);
    bit aw_done = 0, w_done = 0;
    order_seen[order]++;
    @(posedge clk); #0.2;
    if (order != 1) begin awvalid = 1; awaddr = a; end
    if (order != 0) begin wvalid = 1; wdata = d; wstrb = s; end
    while (!(aw_done && w_done)) begin
      @(posedge clk);
      if (awvalid && awready) aw_done = 1;
      if (wvalid && wready) w_done = 1;
      #0.2;
      if (aw_done) awvalid = 0;
      if (w_done) wvalid = 0;
      if (!aw_done && !awvalid && $urandom_range(0, 1)) begin awvalid = 1; awaddr = a; end
      if (!w_done && !wvalid && $urandom_range(0, 1)) begin wvalid = 1; wdata = d; wstrb = s; end
    end
    repeat ($urandom_range(0, 3)) @(posedge clk);
    #0.2 bready = 1;
    do @(posedge clk); while (!bvalid);
    checks++;
    if (bresp != 2'b00) begin failures++; $display("FAIL: bresp"); end
    #0.2 bready = 0;
    if (is_mapped(int'(a[7:2]))) for (int b = 0; b < 4; b++) if (s[b]) model[a[7:2]][8*b +: 8] = d[8*b +: 8];
  endtask

  task automatic axi_read(logic [7:0] a, output logic [31:0] d);
    @(posedge clk); #0.2;
    arvalid = 1; araddr = a;
    do @(posedge clk); while (!arready);
    #0.2 arvalid = 0;
    repeat ($urandom_range(0, 3)) @(posedge clk);
    #0.2 rready = 1;
    do @(posedge clk); while (!rvalid);
    d = rdata;
    #0.2 rready = 0;
  endtask

  task automatic check_all(string when);
    logic [31:0] d;
    for (int i = 0; i < 64; i++) begin
      axi_read(8'(4 * i), d);
      checks++;
      if (d != (i == 10 ? status : model[i])) begin failures++; $display("FAIL: %s reg %0d = %h exp %h", when, i, d, model[i]); end
    end
    // struct fields
    checks++;
    if (cfg.mux_xp != model[0][0] || cfg.o_trig_delay != model[1][4:0] ||
        cfg.meas_lock_period != model[2][25:0] || cfg.meas_lock_duty != model[3][25:0] ||
        cfg.trig_start != model[4][4:0] || cfg.trig_window != model[4][12:8] ||
        cfg.scale_select != model[5][4:0] || cfg.pm_comp != model[6][10:0] ||
        cfg.pm_gain != model[7][10:0] || cfg.wait_config != model[8][9:0] ||
        cfg.cfg_clk_dly != model[9][2:0]) begin
      failures++; $display("FAIL: %s cfg fields", when);
    end
    for (int w = 0; w < 100; w++) begin
      checks++;
      if (cfg.weights[8*w +: 8] != model[16 + w / 4][8*(w % 4) +: 8]) begin failures++; $display("FAIL: %s weight %0d", when, w); end
    end
  endtask

  initial begin
    logic [31:0] d;
    for (int i = 0; i < 64; i++) model[i] = 0;
    model[1] = 1; model[2] = 100000; model[3] = 20000; model[4] = 25 << 8;
    model[5] = 11; model[7] = 512; model[16] = 32'h40404040;
    status = 32'hA5A5_0F0F;
    repeat (3) @(posedge clk);
    rst_n = 1;
    checks++;
    if (cfg.weights[31:0] != 32'h40404040 || cfg.weights[799:32] != 0 || cfg.pm_gain != 512 ||
        cfg.scale_select != 11 || cfg.trig_window != 25) begin failures++; $display("FAIL: reset cfg"); end
    check_all("reset");
    // every mapped register and some unmapped ones, full words
    for (int i = 0; i < 64; i++) axi_write(8'(4 * i), $urandom, 4'hF);
    status = 32'h1234_5678;
    check_all("full writes");
    // byte strobes
    for (int n = 0; n < 60; n++) axi_write(8'(4 * $urandom_range(0, 63)), $urandom, 4'($urandom));
    check_all("strobed writes");
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (order_seen[k] == 0) begin failures++; $display("FAIL: handshake order %0d never used", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
