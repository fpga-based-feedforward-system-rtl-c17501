// mvec_sreg: the M-vector, a shift register of the last 80 m-values.
//
// Each shift pushes the new m-value into element N_VEC-1 (bits at the top of
// the 960-bit word) and moves every older value one place down; element 0 is
// the oldest. With this order, the inner product sum_k A[k]*m[k] pairs A-vector
// index 79 with the newest measurement, so an A-vector whose only non-zero
// entry moves down one index per pulse keeps multiplying the same m-value for
// 80 pulses, which is the pattern the paper's system test relies on.
// `full` rises once 80 values have been shifted in since reset or clear;
// the calculation only starts then. Element k sits at bits [12k+11:12k].
// One cycle from shift to updated m_vec. The clear input is this design's own.
module mvec_sreg
#(
  parameter int unsigned N_VEC = ff_pkg::N_VEC,
  parameter int unsigned M_W   = ff_pkg::VAL_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   shift,
  input  logic [M_W-1:0]         m_in,
  output logic [N_VEC*M_W-1:0]   m_vec,
  output logic                   full
);
  logic [$clog2(N_VEC+1)-1:0] count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_vec <= '0;
      count <= '0;
    end else if (clear) begin
      m_vec <= '0;
      count <= '0;
    end else if (shift) begin
      m_vec <= {m_in, m_vec[N_VEC*M_W-1:M_W]};
      if (count != N_VEC[$bits(count)-1:0]) count <= count + 1'b1;
    end
  end

  assign full = (count == N_VEC[$bits(count)-1:0]);
endmodule
