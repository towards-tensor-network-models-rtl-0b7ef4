// mat_vec_unit: contracts one index of a tensor with a vector, y[m] = sum_k a[m][k] * v[k].
//
// It is the basic step of the MPS engine: contracting an embedded particle with its site
// tensor, moving a boundary vector one site along the chain, and absorbing a vector into
// the label tensor are all this operation with different shapes. The matrix `a` may be
// stored weights or a tensor computed earlier in the pipeline.
//
// All words are Q2.FB (W = FB + 2 bits). The M*K products are formed exactly in 2W bits
// and pass through N_REG pipeline registers (the paper's n_reg, the registers of one
// multiplication); an adder tree of LEVELS registered levels then sums them exactly.
// The sum is brought back to Q2.FB by dropping FB fraction bits (rounding toward minus
// infinity) and clipping to the W-bit range; `sat` flags that at least one y[m] was
// clipped. Truncation and clipping of every intermediate result is this design's reading
// of the "quantized operations" the models were evaluated with.
//
// Timing: fully pipelined, one new (a, v) per clock; y and sat belong to the operands
// sampled N_REG + LEVELS clock edges earlier.
module mat_vec_unit #(
  parameter int unsigned W      = 10,
  parameter int unsigned FB     = 8,
  parameter int unsigned K      = 7,
  parameter int unsigned M      = 10,
  parameter int unsigned N_REG  = 1,
  parameter int unsigned LEVELS = $clog2(K)
) (
  input  logic                clk,
  input  logic signed [W-1:0] a [M][K],
  input  logic signed [W-1:0] v [K],
  output logic signed [W-1:0] y [M],
  output logic                sat
);
  localparam int unsigned PW = 2 * W;
  localparam int unsigned SW = PW + LEVELS;
  localparam logic signed [SW-1:0] MAXV = SW'((1 << (W - 1)) - 1);
  localparam logic signed [SW-1:0] MINV = -SW'(1 << (W - 1));

  initial begin
    assert (N_REG >= 1) else $error("mat_vec_unit: N_REG must be at least 1");
  end

  // Multiplier pipeline.
  logic signed [PW-1:0] prod [N_REG][M][K];
  always_ff @(posedge clk) begin
    for (int unsigned m = 0; m < M; m++)
      for (int unsigned k = 0; k < K; k++)
        prod[0][m][k] <= PW'(a[m][k]) * PW'(v[k]);
    for (int unsigned r = 1; r < N_REG; r++)
      for (int unsigned m = 0; m < M; m++)
        for (int unsigned k = 0; k < K; k++)
          prod[r][m][k] <= prod[r-1][m][k];
  end

  logic [M-1:0] sat_m;
  for (genvar m = 0; m < M; m++) begin : g_row
    logic signed [SW-1:0] acc;
    logic signed [SW-1:0] shifted;
    adder_tree #(.NUM(K), .IW(PW), .LEVELS(LEVELS), .OW(SW)) u_tree (
      .clk (clk),
      .d   (prod[N_REG-1][m]),
      .sum (acc)
    );
    always_comb begin
      shifted  = acc >>> FB;
      sat_m[m] = (shifted > MAXV) || (shifted < MINV);
      if (shifted > MAXV)      y[m] = MAXV[W-1:0];
      else if (shifted < MINV) y[m] = MINV[W-1:0];
      else                     y[m] = shifted[W-1:0];
    end
  end

  assign sat = |sat_m;
endmodule
