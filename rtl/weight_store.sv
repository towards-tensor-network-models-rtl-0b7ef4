// weight_store: parameter memory of one tensor-network engine.
//
// DEPTH signed words of W bits, written one word per clock through (we, addr, wdata) and
// read all at once on `q`, because every multiplier of the fully parallel engine needs
// its own weight in every cycle. It is a register file, not a block RAM, in keeping with
// engines whose tensors sit in logic rather than BRAM. Writes to an address at or above
// DEPTH are ignored. There is no reset: the model is loaded before inference starts.
module weight_store #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 64,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                clk,
  input  logic                we,
  input  logic [AW-1:0]       addr,
  input  logic signed [W-1:0] wdata,
  output logic signed [W-1:0] q [DEPTH]
);
  logic signed [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(addr) < DEPTH)) mem[addr] <= wdata;
  end

  assign q = mem;
endmodule
