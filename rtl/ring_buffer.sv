// ring_buffer: programmable output delay between the calculation and the DAC.
//
// A dual-port circular buffer of DEPTH = 64 words of 24 bits ({IM code,
// PM code}). Results are written as they leave PM Adjust, one per optical
// pulse. A small state machine holds the output back so that the correction
// reaches the modulators together with the optical pulse it belongs to in
// the delay line:
//   IDLE -> WAIT  on a write while idle; counts wait_config cycles (4 ns each,
//                 up to 1000 = 4 us; 0 skips WAIT). The first read enable
//                 comes wait_config + 1 cycles after the write.
//   WAIT -> READ  when the count is done: read enable pulses, one word per
//                 READ_PERIOD (25 cycles = 10 MHz), data read in write order
//   READ -> IDLE  when a read enable finds the buffer empty
// rd_valid is high for one cycle with each word on rd_data.
// A write to a full buffer is dropped and sets the sticky overflow flag;
// near_full is high at NEAR_FULL or more words. Which write event starts the
// wait (the first one after idle), the near-full threshold and the word
// packing are this design's choices; the paper gives the size, the Wait
// Config behaviour and the overflow and near-full protection.
module ring_buffer #(
  parameter int unsigned DEPTH       = 64,
  parameter int unsigned W           = 24,
  parameter int unsigned READ_PERIOD = ff_pkg::CLK_PER_PULSE,
  parameter int unsigned NEAR_FULL   = 56
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic [9:0]   wait_config,
  output logic         rd_valid,
  output logic [W-1:0] rd_data,
  output logic         full,
  output logic         near_full,
  output logic         overflow
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned PW = $clog2(READ_PERIOD);

  typedef enum logic [1:0] {IDLE, WAIT, READ} state_t;
  state_t state;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;
  logic [9:0]    wait_cnt;
  logic [PW-1:0] per_cnt;
  logic          wr, rd, rd_tick, empty;

  assign full      = (count == (AW+1)'(DEPTH));
  assign near_full = (count >= (AW+1)'(NEAR_FULL));
  assign empty     = (count == '0);
  assign wr        = wr_en && !full;
  assign rd_tick   = (state == READ) && (per_cnt == '0);
  assign rd        = rd_tick && !empty;

  always_ff @(posedge clk) begin
    if (wr) mem[wptr] <= wr_data;
    if (rd) rd_data   <= mem[rptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      wptr     <= '0;
      rptr     <= '0;
      count    <= '0;
      wait_cnt <= '0;
      per_cnt  <= '0;
      rd_valid <= 1'b0;
      overflow <= 1'b0;
    end else begin
      rd_valid <= rd;
      if (wr) wptr <= wptr + 1'b1;
      if (rd) rptr <= rptr + 1'b1;
      count <= count + (AW+1)'(wr) - (AW+1)'(rd);
      if (wr_en && full) overflow <= 1'b1;

      unique case (state)
        IDLE: if (wr_en) begin
          state    <= (wait_config == '0) ? READ : WAIT;
          wait_cnt <= wait_config - 1'b1;
          per_cnt  <= '0;
        end
        WAIT: begin
          if (wait_cnt == '0) begin
            state   <= READ;
            per_cnt <= '0;
          end else begin
            wait_cnt <= wait_cnt - 1'b1;
          end
        end
        READ: begin
          per_cnt <= (per_cnt == PW'(READ_PERIOD - 1)) ? '0 : per_cnt + 1'b1;
          if (rd_tick && empty) begin
            // a write in the same cycle starts the next wait at once
            if (wr_en) begin
              state    <= (wait_config == '0) ? READ : WAIT;
              wait_cnt <= wait_config - 1'b1;
              per_cnt  <= '0;
            end else begin
              state <= IDLE;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // the pointer arithmetic relies on a power-of-two depth
  initial assert (DEPTH == (1 << AW)) else $error("ring_buffer: DEPTH must be a power of two");
endmodule
