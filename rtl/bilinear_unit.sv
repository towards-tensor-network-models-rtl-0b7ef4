// bilinear_unit: contracts a rank-3 tensor with two vectors,
// z[c] = sum_{a,b} w[a][b][c] * x[a] * y[b].
//
// This is one node of the tree tensor network: x and y are the vectors coming up from
// its two children (embedded particles in the lowest layer), w is the node tensor and z
// goes to the parent (the class scores at the root). The weight of (a, b, c) is
// w[(a*DB + b)*DC + c].
//
// All words are Q2.FB (W = FB + 2 bits). Each triple product w*x*y is formed exactly in
// 3W bits in one stage and passes through N_REG registers in all (the paper's n_reg,
// 1 for the tree network); an adder tree of LEVELS = ceil(log2(DA*DB)) registered
// levels sums the DA*DB products of each output exactly. The sum is brought back to
// Q2.FB by dropping 2*FB fraction bits (rounding toward minus infinity) and clipping to
// the W-bit range; `sat` flags that at least one z[c] was clipped.
//
// Timing: fully pipelined, one new operand set per clock; z belongs to the operands
// sampled N_REG + LEVELS edges earlier. With d = 7 this is 1 + 6 = 7 cycles for a
// lowest-layer node and 1 + 7 = 8 cycles for a node with 10-dimensional children.
module bilinear_unit #(
  parameter int unsigned W      = 8,
  parameter int unsigned FB     = 6,
  parameter int unsigned DA     = 7,
  parameter int unsigned DB     = 7,
  parameter int unsigned DC     = 10,
  parameter int unsigned N_REG  = 1,
  parameter int unsigned LEVELS = $clog2(DA * DB)
) (
  input  logic                clk,
  input  logic signed [W-1:0] w [DA*DB*DC],
  input  logic signed [W-1:0] x [DA],
  input  logic signed [W-1:0] y [DB],
  output logic signed [W-1:0] z [DC],
  output logic                sat
);
  localparam int unsigned NT = DA * DB;
  localparam int unsigned PW = 3 * W;
  localparam int unsigned SW = PW + LEVELS;
  localparam logic signed [SW-1:0] MAXV = SW'((1 << (W - 1)) - 1);
  localparam logic signed [SW-1:0] MINV = -SW'(1 << (W - 1));

  initial begin
    assert (N_REG >= 1) else $error("bilinear_unit: N_REG must be at least 1");
  end

  logic signed [PW-1:0] prod [N_REG][DC][NT];
  always_ff @(posedge clk) begin
    for (int unsigned c = 0; c < DC; c++)
      for (int unsigned a = 0; a < DA; a++)
        for (int unsigned b = 0; b < DB; b++)
          prod[0][c][a*DB+b] <= PW'(w[(a*DB+b)*DC+c]) * PW'(x[a]) * PW'(y[b]);
    for (int unsigned r = 1; r < N_REG; r++)
      for (int unsigned c = 0; c < DC; c++)
        for (int unsigned t = 0; t < NT; t++)
          prod[r][c][t] <= prod[r-1][c][t];
  end

  logic [DC-1:0] sat_c;
  for (genvar c = 0; c < DC; c++) begin : g_out
    logic signed [SW-1:0] acc;
    logic signed [SW-1:0] shifted;
    adder_tree #(.NUM(NT), .IW(PW), .LEVELS(LEVELS), .OW(SW)) u_tree (
      .clk (clk),
      .d   (prod[N_REG-1][c]),
      .sum (acc)
    );
    always_comb begin
      shifted  = acc >>> (2 * FB);
      sat_c[c] = (shifted > MAXV) || (shifted < MINV);
      if (shifted > MAXV)      z[c] = MAXV[W-1:0];
      else if (shifted < MINV) z[c] = MINV[W-1:0];
      else                     z[c] = shifted[W-1:0];
    end
  end

  assign sat = |sat_c;
endmodule
