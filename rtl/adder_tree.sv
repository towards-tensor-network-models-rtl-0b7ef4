// adder_tree: pipelined sum of NUM signed words.
//
// The inputs are zero-padded to 2^LEVELS words and summed pairwise, one level per clock,
// so the sum of the inputs sampled at edge t appears on `sum` after edge t+LEVELS-1
// (LEVELS registers in all, the last one drives `sum`). The output is LEVELS bits wider
// than the inputs, so it never overflows. LEVELS may be set above $clog2(NUM) to pad the
// latency of a short sum to that of a longer one. With LEVELS = 0 the single input is
// passed through combinationally. Pipeline registers carry no reset: validity travels
// in the owner's valid pipeline.
module adder_tree #(
  parameter int unsigned NUM    = 8,
  parameter int unsigned IW     = 16,
  parameter int unsigned LEVELS = $clog2(NUM),
  parameter int unsigned OW     = IW + LEVELS
) (
  input  logic                 clk,
  input  logic signed [IW-1:0] d   [NUM],
  output logic signed [OW-1:0] sum
);
  localparam int unsigned P = 1 << LEVELS;

  initial begin
    assert (P >= NUM) else $error("adder_tree: LEVELS too small for NUM");
  end

  logic signed [OW-1:0] lvl0 [P];

  always_comb begin
    for (int unsigned i = 0; i < P; i++) begin
      lvl0[i] = (i < NUM) ? OW'(d[i]) : '0;
    end
  end

  if (LEVELS == 0) begin : g_pass
    assign sum = lvl0[0];
  end else begin : g_tree
    // lvl[k] holds the output of level k+1: P >> (k+1) partial sums.
    logic signed [OW-1:0] lvl [LEVELS][P/2];
    always_ff @(posedge clk) begin
      for (int unsigned i = 0; i < P / 2; i++) begin
        lvl[0][i] <= lvl0[2*i] + lvl0[2*i+1];
      end
      for (int unsigned k = 1; k < LEVELS; k++) begin
        for (int unsigned i = 0; i < (P >> (k + 1)); i++) begin
          lvl[k][i] <= lvl[k-1][2*i] + lvl[k-1][2*i+1];
        end
      end
    end
    assign sum = lvl[LEVELS-1][0];
  end
endmodule
