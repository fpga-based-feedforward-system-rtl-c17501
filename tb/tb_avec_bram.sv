// tb_avec_bram: checks the A-vector buffer at its full size (4096 vectors,
// 1024-vector bursts). A DMA model answers each read_burst pulse with 1024
// numbered vectors. Checked: underrun flag on a read while empty, exactly 4
// requests to fill an empty buffer, back-pressure (s_tready low) when full,
// a new request only once 1024 places are free, and 6000 vectors read back
// in order and unchanged with the one-cycle read latency.
module tb_avec_bram;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst_n = 0;
  logic s_tvalid = 0, s_tready, rd_en = 0, rd_valid, empty, read_burst, underrun;
  logic [959:0] s_tdata = '0, rd_data;
  logic [12:0] level;
  int checks = 0, failures = 0;
  int owed = 0, sent = 0, n_req = 0, n_rd = 0, n_backp = 0;
  always #2 clk = ~clk;

  avec_bram dut (.clk(clk), .rst_n(rst_n), .s_tvalid(s_tvalid), .s_tready(s_tready), .s_tdata(s_tdata),
                 .rd_en(rd_en), .rd_data(rd_data), .rd_valid(rd_valid), .empty(empty),
                 .read_burst(read_burst), .underrun(underrun), .level(level));

  // element k of vector i
  function automatic logic [959:0] vec(int i);
    logic [959:0] v;
    for (int k = 0; k < 80; k++) v[12*k +: 12] = 12'(i * 7 + k * 13 + (k[0] ? 12'hfff - k : 0));
    return v;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // DMA model: sends owed vectors whenever enabled
  bit dma_on = 0;
  always @(posedge clk) if (rst_n) begin
    if (read_burst) begin owed += 1024; n_req++; end
    if (s_tvalid && s_tready) begin sent++; owed--; end
    if (!s_tready && s_tvalid) n_backp++;
    #0.1;
    s_tvalid = dma_on && owed > 0 && ($urandom_range(0, 7) != 0);
    s_tdata  = vec(sent);
  end

  // read checker
  int exp_rd = 0;
  always @(posedge clk) if (rst_n && rd_valid) begin
    #0.05;
    check(rd_data == vec(exp_rd), $sformatf("vector %0d", exp_rd));
    exp_rd++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #0.1 rd_en = 1;
    @(posedge clk); #0.1 rd_en = 0;
    @(posedge clk); #0.1;
    check(underrun && !rd_valid, "underrun on empty read");
    repeat (20) @(posedge clk);
    check(n_req == 4, $sformatf("initial requests %0d (exp 4)", n_req));
    dma_on = 1;
    wait (level == 13'd4096);
    repeat (50) @(posedge clk); #0.1;
    check(!s_tready && n_backp == 0, "full buffer must refuse data (none owed)");
    check(n_req == 4, "no request while full");
    // read 1023 vectors: still no room for a burst
    repeat (1023) begin @(posedge clk); #0.1 rd_en = 1; @(posedge clk); #0.1 rd_en = 0; end
    repeat (5) @(posedge clk);
    check(n_req == 4, $sformatf("request before 1024 free (%0d)", n_req));
    @(posedge clk); #0.1 rd_en = 1; @(posedge clk); #0.1 rd_en = 0;
    repeat (5) @(posedge clk);
    check(n_req == 5, $sformatf("request after 1024 free (%0d)", n_req));
    // steady streaming: read one vector every 3 cycles
    while (exp_rd < 6000) begin
      @(posedge clk); #0.1 rd_en = !empty;
      @(posedge clk); #0.1 rd_en = 0;
      @(posedge clk);
    end
    check(sent >= 6000, "DMA kept up");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (60000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
