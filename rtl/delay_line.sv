// delay_line: fixed-length shift register used to keep side data (valid bits, overflow
// flags, intermediate tensors) aligned with a pipelined datapath.
//
// The value on `d` at edge t appears on `q` after edge t+DEPTH-1, i.e. DEPTH cycles later;
// DEPTH = 0 is a plain wire. All stages are cleared by the synchronous active-low reset.
module delay_line #(
  parameter int unsigned WIDTH = 1,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_reg
    logic [WIDTH-1:0] stage [DEPTH];
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int unsigned i = 0; i < DEPTH; i++) stage[i] <= '0;
      end else begin
        stage[0] <= d;
        for (int unsigned i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
      end
    end
    assign q = stage[DEPTH-1];
  end
endmodule
