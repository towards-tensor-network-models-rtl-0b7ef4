// tb_weight_store: writes every word of a small weight_store in random order with random
// data, checks that all words read back in parallel, that a write lands only at its own
// address, that out-of-range addresses and we = 0 leave the memory unchanged.
module tb_weight_store;
  localparam int unsigned W = 8, DEPTH = 37, AW = 6;
  logic clk = 1'b0;
  logic we;
  logic [AW-1:0] addr;
  logic signed [W-1:0] wdata;
  logic signed [W-1:0] q [DEPTH];
  logic signed [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  weight_store #(.W(W), .DEPTH(DEPTH), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int unsigned a, logic signed [W-1:0] v, logic en);
    @(negedge clk);
    we = en; addr = AW'(a); wdata = v;
    @(negedge clk);
    we = 1'b0;
    if (en && a < DEPTH) model[a] = v;
  endtask

  task automatic compare(string what);
    for (int i = 0; i < DEPTH; i++) begin
      checks++;
      if (q[i] !== model[i]) begin
        failures++;
        $display("%s: word %0d = %0d, expected %0d", what, i, q[i], model[i]);
      end
    end
  endtask

  initial begin
    we = 1'b0; addr = '0; wdata = '0;
    // fill
    for (int i = 0; i < DEPTH; i++) wr(i, W'($urandom), 1'b1);
    compare("fill");
    // random overwrites
    for (int t = 0; t < 100; t++) wr($urandom_range(DEPTH - 1), W'($urandom), 1'b1);
    compare("overwrite");
    // writes with we low and out-of-range addresses are ignored
    for (int t = 0; t < 20; t++) wr($urandom_range(DEPTH - 1), W'($urandom), 1'b0);
    for (int a = DEPTH; a < (1 << AW); a++) wr(a, W'($urandom), 1'b1);
    compare("ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
