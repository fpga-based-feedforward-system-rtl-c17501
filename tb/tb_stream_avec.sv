// tb_stream_avec: checks the clock-domain-crossing FIFO.
// Writes 300 numbered words at 300 MHz with random valid gaps and reads them
// at 250 MHz with random ready gaps (so the FIFO runs both full and empty);
// every word must arrive once, in order, unchanged. Runs the FIFO at its
// default size (16 words of the 1024-bit DMA stream width).
module tb_stream_avec;
  timeunit 1ns; timeprecision 10ps;
  localparam int NW = 300;
  logic wclk = 0, rclk = 0, rst_n = 0;
  logic s_tvalid = 0, s_tready, m_tvalid, m_tready = 0;
  logic [ff_pkg::AXIS_W-1:0] s_tdata = '0, m_tdata;
  int checks = 0, failures = 0, n_rx = 0, n_full = 0, n_empty = 0;
  always #1.667 wclk = ~wclk;
  always #2 rclk = ~rclk;

  stream_avec dut (
    .wclk(wclk), .wrst_n(rst_n), .s_tvalid(s_tvalid), .s_tready(s_tready), .s_tdata(s_tdata),
    .rclk(rclk), .rrst_n(rst_n), .m_tvalid(m_tvalid), .m_tready(m_tready), .m_tdata(m_tdata));

  function automatic logic [ff_pkg::AXIS_W-1:0] word(int i);
    logic [ff_pkg::AXIS_W-1:0] w;
    for (int j = 0; j < ff_pkg::AXIS_W / 64; j++)
      w[64*j +: 64] = {32'(i) ^ 32'(j), (32'(i) + 32'(j) * 32'd977) * 32'h9e3779b9};
    return w;
  endfunction

  initial begin : writer
    int i = 0;
    repeat (3) @(posedge wclk);
    rst_n = 1;
    repeat (3) @(posedge wclk);
    while (i < NW) begin
      #0.1;
      s_tvalid = (i < 150) ? 1'b1 : ($urandom_range(0, 2) == 0);
      s_tdata  = word(i);
      @(posedge wclk);
      if (!s_tready) n_full++;
      if (s_tvalid && s_tready) i++;
    end
    #0.1 s_tvalid = 0;
  end

  initial begin : reader
    @(posedge rst_n);
    repeat (4) @(posedge rclk);
    while (n_rx < NW) begin
      #0.1;
      m_tready = (n_rx < 100) ? ($urandom_range(0, 3) == 0) : 1'b1;
      @(posedge rclk);
      if (!m_tvalid) n_empty++;
      if (m_tvalid && m_tready) begin
        checks++;
        if (m_tdata != word(n_rx)) begin failures++; $display("FAIL: word %0d = %h", n_rx, m_tdata); end
        n_rx++;
      end
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("FAIL: full %0d / empty %0d never seen", n_full, n_empty); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin repeat (20000) @(posedge rclk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
