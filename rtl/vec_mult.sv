// vec_mult: element-wise product of an A-vector and the m-vector.
//
// Both 960-bit inputs are split into 80 signed 12-bit values (element k at
// bits [12k+11:12k]); the 80 products are signed 24-bit values placed the same
// way on a 1920-bit bus, as in the paper. One register stage: prod and
// out_valid follow in_valid by one cycle. All 80 multipliers work in parallel.
module vec_mult #(
  parameter int unsigned N = ff_pkg::N_VEC,
  parameter int unsigned W = ff_pkg::VAL_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [N*W-1:0]       a_vec,
  input  logic [N*W-1:0]       m_vec,
  output logic                 out_valid,
  output logic [N*2*W-1:0]     prod
);
  always_ff @(posedge clk) begin
    for (int k = 0; k < N; k++) begin
      prod[k*2*W +: 2*W] <= (2*W)'($signed(a_vec[k*W +: W])) * (2*W)'($signed(m_vec[k*W +: W]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
