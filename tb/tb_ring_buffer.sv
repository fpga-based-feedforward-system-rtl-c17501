// tb_ring_buffer: checks the programmable output delay buffer.
//  * steady 10 MHz writes (one per 25 cycles) for Wait_Config values 0, 1, 7,
//    24, 25, 100, 500 and the maximum 1000: every word must leave exactly
//    wait_config + 1 cycles after its write, in order, with nothing lost;
//  * a pause in the writes lets the buffer run empty and return to idle, so
//    the next write waits again;
//  * a burst of back-to-back writes fills the buffer: near_full at 56 words,
//    full at 64, writes beyond that dropped and the sticky overflow set;
//    the 64 stored words then drain one per 25 cycles in order.
module tb_ring_buffer;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_valid, full, near_full, overflow;
  logic [23:0] wr_data, rd_data;
  logic [9:0] wcfg = 0;
  int checks = 0, failures = 0, cyc = 0, n_out = 0, last_rd = -1000;
  bit chk_lat = 1;
  int dq [$], tq [$];
  always #2 clk = ~clk;

  ring_buffer dut (.clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_data(wr_data), .wait_config(wcfg),
                   .rd_valid(rd_valid), .rd_data(rd_data), .full(full), .near_full(near_full),
                   .overflow(overflow));

  always @(posedge clk) if (rst_n) begin
    #0.1;
    cyc++;
    if (rd_valid) begin
      int d, t;
      n_out++;
      checks++;
      if (dq.size() == 0) begin failures++; $display("FAIL: unexpected read at %0d", cyc); end
      else begin
        d = dq.pop_front(); t = tq.pop_front();
        if (int'(rd_data) != d) begin failures++; $display("FAIL: data %h exp %h", rd_data, d); end
        if (chk_lat && cyc - t != int'(wcfg) + 1) begin
          failures++; $display("FAIL: delay %0d exp %0d (wait_config %0d)", cyc - t, wcfg + 1, wcfg);
        end
      end
      checks++;
      if (cyc - last_rd < 25) begin failures++; $display("FAIL: reads %0d cycles apart", cyc - last_rd); end
      last_rd = cyc;
    end
  end

  task automatic write1();
    @(posedge clk); #0.2;
    wr_en = 1; wr_data = 24'($urandom);
    if (!full) begin dq.push_back(int'(wr_data)); tq.push_back(cyc + 1); end
    @(posedge clk); #0.2 wr_en = 0;
  endtask

  task automatic steady(int w, int n);
    wcfg = 10'(w);
    for (int i = 0; i < n; i++) begin
      write1();
      repeat (23) @(posedge clk);
    end
    repeat (w + 60) @(posedge clk);
    checks++;
    if (dq.size() != 0) begin failures++; $display("FAIL: %0d words left (wait %0d)", dq.size(), w); end
    checks++;
    if (near_full || overflow) begin failures++; $display("FAIL: flags set in steady run"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    steady(0, 10);
    steady(1, 10);
    steady(7, 10);
    steady(24, 10);
    steady(25, 10);
    steady(100, 20);
    steady(500, 30);
    steady(1000, 60);       // 41 words in flight, below near_full
    // burst: 70 writes in 70 cycles
    chk_lat = 0;
    wcfg = 10'd1000;
    @(posedge clk); #0.2;
    for (int i = 0; i < 70; i++) begin
      wr_en = 1; wr_data = 24'($urandom);
      if (!full) begin dq.push_back(int'(wr_data)); tq.push_back(cyc + 1); end
      @(posedge clk); #0.2;
      checks++;
      if (near_full != (i + 1 >= 56)) begin failures++; $display("FAIL: near_full %b after %0d", near_full, i + 1); end
      checks++;
      if (full != (i + 1 >= 64)) begin failures++; $display("FAIL: full %b after %0d", full, i + 1); end
      checks++;
      if (overflow != (i + 1 >= 65)) begin failures++; $display("FAIL: overflow %b after %0d", overflow, i + 1); end
    end
    wr_en = 0;
    repeat (1000 + 64 * 25 + 50) @(posedge clk);
    checks++;
    if (dq.size() != 0 || !overflow || full) begin failures++; $display("FAIL: drain: %0d left, ovf %b", dq.size(), overflow); end
    checks++;
    if (n_out != 10*5 + 20 + 30 + 60 + 64) begin failures++; $display("FAIL: %0d words out", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
