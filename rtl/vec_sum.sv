// vec_sum: pipelined adder tree forming the 32-bit inner product.
//
// Adds the 80 signed 24-bit products of vec_mult. The inputs are
// sign-extended to 32 bits, padded with zeros to the next power of two (128)
// and summed pairwise in a binary tree of LEVELS = 7 levels. LPS tree levels
// share one register stage (default 2, so 4 register stages); the last
// register is the "Sum Reg" that feeds Scale Conversion. Latency:
// ceil(LEVELS/LPS) cycles from in_valid to out_valid, one input per cycle.
// 80 products of at most 2^22 in magnitude need 29 bits, so the 32-bit
// result never wraps. The split into stages is this design's choice.
module vec_sum #(
  parameter int unsigned N     = ff_pkg::N_VEC,     // >= 3
  parameter int unsigned IN_W  = ff_pkg::PROD_W,
  parameter int unsigned OUT_W = ff_pkg::SUM_W,
  parameter int unsigned LPS   = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [N*IN_W-1:0]        prod,
  output logic                     out_valid,
  output logic signed [OUT_W-1:0]  sum
);
  localparam int unsigned LEVELS = $clog2(N);
  localparam int unsigned NP2    = 1 << LEVELS;
  localparam int unsigned NSTG   = (LEVELS + LPS - 1) / LPS;

  logic signed [OUT_W-1:0] lvl0 [NP2];
  logic [NSTG:1]           vld;

  always_comb begin
    for (int i = 0; i < NP2; i++)
      lvl0[i] = (i < N) ? OUT_W'($signed(prod[i*IN_W +: IN_W])) : '0;
  end

  for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned NO = NP2 >> l;
    logic signed [OUT_W-1:0] s [NO];
    logic signed [OUT_W-1:0] a [2*NO];
    if (l == 1) begin : g_in0
      assign a = lvl0;
    end else begin : g_inl
      assign a = g_lvl[l-1].s;
    end
    if ((l % LPS) == 0 || l == LEVELS) begin : g_reg
      always_ff @(posedge clk)
        for (int i = 0; i < NO; i++) s[i] <= a[2*i] + a[2*i+1];
    end else begin : g_comb
      always_comb
        for (int i = 0; i < NO; i++) s[i] = a[2*i] + a[2*i+1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else if (NSTG == 1) vld <= NSTG'(in_valid);
    else        vld <= {vld[NSTG-1:1], in_valid};
  end

  assign sum       = g_lvl[LEVELS].s[0];
  assign out_valid = vld[NSTG];
endmodule
