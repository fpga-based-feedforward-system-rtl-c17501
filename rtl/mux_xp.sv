// mux_xp: routes the A-vector stream to the Ax or the Ap vector buffer.
//
// The DMA fetches Ax-vector and Ap-vector bursts over one stream; the
// processor sets the Mux X/P select (a configuration register bit) before it
// starts each burst. With select 0 the stream handshake is connected to the
// Ax buffer, with select 1 to the Ap buffer; the other buffer sees no valid.
// The select is taken at the first beat of every burst and held for BURST
// (1024) beats, so the processor may already change it while the end of the
// previous burst still sits in the clock-crossing FIFO. Data and handshake
// pass combinationally; only the beat counter and the held select are
// registered. The paper only names the multiplexer and gives the burst size;
// the valid/ready routing and the per-burst select are this design's.
module mux_xp #(
  parameter int unsigned DATA_W = ff_pkg::VEC_W,
  parameter int unsigned BURST  = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sel_p,
  input  logic              s_tvalid,
  output logic              s_tready,
  input  logic [DATA_W-1:0] s_tdata,
  output logic              x_tvalid,
  input  logic              x_tready,
  output logic              p_tvalid,
  input  logic              p_tready,
  output logic [DATA_W-1:0] tdata
);
  localparam int unsigned BW = $clog2(BURST);
  logic [BW-1:0] beat;      // beats of the current burst already passed
  logic          sel_q, sel;

  always_comb begin
    sel      = (beat == '0) ? sel_p : sel_q;
    x_tvalid = s_tvalid && !sel;
    p_tvalid = s_tvalid &&  sel;
    s_tready = sel ? p_tready : x_tready;
    tdata    = s_tdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat  <= '0;
      sel_q <= 1'b0;
    end else if (s_tvalid && s_tready) begin
      if (beat == '0) sel_q <= sel_p;
      beat <= (beat == BW'(BURST - 1)) ? '0 : beat + 1'b1;
    end
  end

  // never both destinations offered the same beat
  a_onehot: assert property (@(posedge clk) !(x_tvalid && p_tvalid));
  initial assert (BURST == (1 << BW)) else $error("mux_xp: BURST must be a power of two");
endmodule
