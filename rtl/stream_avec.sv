// stream_avec: clock-domain-crossing FIFO for the A-vector stream.
//
// The DMA delivers A-vectors from DDR4 as an AXI4-Stream in the 300 MHz
// processing-system clock domain; the calculation runs at 250 MHz. This
// asynchronous FIFO takes the stream in on wclk and hands it out on rclk.
// Write and read pointers are kept in binary locally and passed to the other
// domain as Gray code through two-flop synchronisers, as the paper describes,
// so only one bit changes per increment and a pointer sampled mid-change is
// at worst one step stale (full/empty are then pessimistic, never wrong).
// Both ports use the AXI4-Stream valid/ready handshake; m_tdata is valid
// whenever m_tvalid is high (first-word fall-through from the memory array).
// The depth (2^ADDR_W = 16) is this design's choice. Each reset input is
// asynchronous assert, and must be released synchronously to its own clock.
module stream_avec #(
  parameter int unsigned DATA_W = ff_pkg::AXIS_W,
  parameter int unsigned ADDR_W = 4
) (
  input  logic              wclk,
  input  logic              wrst_n,
  input  logic              s_tvalid,
  output logic              s_tready,
  input  logic [DATA_W-1:0] s_tdata,

  input  logic              rclk,
  input  logic              rrst_n,
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic [DATA_W-1:0] m_tdata
);
  localparam int unsigned DEPTH = 1 << ADDR_W;

  logic [DATA_W-1:0] mem [DEPTH];

  logic [ADDR_W:0] wbin, wgray, rbin, rgray;
  logic [ADDR_W:0] rgray_w1, rgray_w2;   // read pointer seen in write domain
  logic [ADDR_W:0] wgray_r1, wgray_r2;   // write pointer seen in read domain
  logic [ADDR_W:0] wbin_nxt, rbin_nxt;
  logic            wr, rd, full, empty;

  function automatic logic [ADDR_W:0] bin2gray(input logic [ADDR_W:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write domain ----------------
  assign full     = (wgray == {~rgray_w2[ADDR_W:ADDR_W-1], rgray_w2[ADDR_W-2:0]});
  assign s_tready = !full;
  assign wr       = s_tvalid && s_tready;
  assign wbin_nxt = wbin + (ADDR_W+1)'(wr);

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_nxt;
      wgray    <= bin2gray(wbin_nxt);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge wclk) begin
    if (wr) mem[wbin[ADDR_W-1:0]] <= s_tdata;
  end

  // ---------------- read domain ----------------
  assign empty    = (rgray == wgray_r2);
  assign m_tvalid = !empty;
  assign rd       = m_tvalid && m_tready;
  assign rbin_nxt = rbin + (ADDR_W+1)'(rd);
  assign m_tdata  = mem[rbin[ADDR_W-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_nxt;
      rgray    <= bin2gray(rbin_nxt);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  initial assert (ADDR_W >= 2) else $error("stream_avec: ADDR_W must be >= 2");
endmodule
