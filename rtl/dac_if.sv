// dac_if: drives the dual 12-bit DAC that feeds the intensity and phase modulators.
//
// On each in_valid (the ring buffer's 10 MHz read strobe) the IM code goes to
// bus A and the PM code to bus B, registered, and dac_wrt is high for that
// one cycle. The DAC's sample clock pulse dac_clk follows cfg_clk_dly cycles
// later (0: in the same cycle as dac_wrt), so the conversion edge can be
// moved by whole 4 ns steps against the data to meet the converter's setup
// and hold times. busy is high from the write until the clock pulse.
// The paper names the entity and its Cfg_Clk_Dly setting only; this strobe
// scheme is this design's. After reset the buses hold A = 0 (no intensity)
// and B = 1024 (phase code of 0 rad).
module dac_if #(
  parameter int unsigned DLY_W = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [11:0]      in_a,
  input  logic [11:0]      in_b,
  input  logic [DLY_W-1:0] cfg_clk_dly,
  output logic [11:0]      dac_a,
  output logic [11:0]      dac_b,
  output logic             dac_wrt,
  output logic             dac_clk,
  output logic             busy
);
  logic [DLY_W-1:0] dly_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_a   <= '0;
      dac_b   <= 12'(ff_pkg::PM_OFFSET);
      dac_wrt <= 1'b0;
      dac_clk <= 1'b0;
      busy    <= 1'b0;
      dly_cnt <= '0;
    end else begin
      dac_wrt <= 1'b0;
      dac_clk <= 1'b0;
      if (in_valid) begin
        dac_a   <= in_a;
        dac_b   <= in_b;
        dac_wrt <= 1'b1;
        if (cfg_clk_dly == '0) begin
          dac_clk <= 1'b1;
          busy    <= 1'b0;
        end else begin
          busy    <= 1'b1;
          dly_cnt <= cfg_clk_dly - 1'b1;
        end
      end else if (busy) begin
        if (dly_cnt == '0) begin
          dac_clk <= 1'b1;
          busy    <= 1'b0;
        end else begin
          dly_cnt <= dly_cnt - 1'b1;
        end
      end
    end
  end
endmodule
