// avec_bram: on-chip buffer of A-vectors with DMA burst requests.
//
// The ~160,000 A-vectors of an experiment do not fit on chip; they stream in
// from DDR4 and this buffer holds DEPTH of them (4096, the paper's buffer
// size) as a circular FIFO of 960-bit words (80 x 12-bit, element k at bits
// [12k+11:12k]). One instance serves the x quadrature, another the p
// quadrature.
//
// Fill side: AXI4-Stream slave (s_tready = not full). Whenever the free space
// not yet promised to an earlier request is at least BURST (1024) vectors, the
// buffer pulses read_burst for one cycle to ask the DMA for another burst
// (the paper's Read_Burst / Ready_Burst); it then counts those vectors as
// pending until they arrive. The request protocol is this design's choice.
//
// Drain side: rd_en reads the oldest vector; rd_data/rd_valid follow one
// cycle later (synchronous block-RAM read). A read while empty is skipped
// and sets the sticky underrun flag. level is the number of vectors held.
module avec_bram #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned BURST = 1024,
  parameter int unsigned VEC_W = ff_pkg::VEC_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      s_tvalid,
  output logic                      s_tready,
  input  logic [VEC_W-1:0]          s_tdata,
  input  logic                      rd_en,
  output logic [VEC_W-1:0]          rd_data,
  output logic                      rd_valid,
  output logic                      empty,
  output logic                      read_burst,
  output logic                      underrun,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned LW = $clog2(DEPTH+1);

  logic [VEC_W-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [LW:0]      pending;       // requested, not yet written
  logic             wr, rd, req;
  logic [LW+1:0]    committed;

  assign s_tready  = (level != LW'(DEPTH));
  assign empty     = (level == '0);
  assign wr        = s_tvalid && s_tready;
  assign rd        = rd_en && !empty;
  assign committed = (LW+2)'(level) + (LW+2)'(pending);
  assign req       = !read_burst && (committed + (LW+2)'(BURST) <= (LW+2)'(DEPTH));

  always_ff @(posedge clk) begin
    if (wr) mem[wptr] <= s_tdata;
    if (rd) rd_data   <= mem[rptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr       <= '0;
      rptr       <= '0;
      level      <= '0;
      pending    <= '0;
      rd_valid   <= 1'b0;
      read_burst <= 1'b0;
      underrun   <= 1'b0;
    end else begin
      rd_valid   <= rd;
      read_burst <= req;
      if (wr) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (rd) rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      level <= level + LW'(wr) - LW'(rd);
      if (req)                         pending <= pending + (LW+1)'(BURST) - (LW+1)'(wr && pending != '0);
      else if (wr && pending != '0)    pending <= pending - 1'b1;
      if (rd_en && empty) underrun <= 1'b1;
    end
  end

  initial assert (BURST <= DEPTH) else $error("avec_bram: BURST larger than DEPTH");
endmodule
