// tb_bilinear_unit: streams random node tensors and child vectors into a lowest-layer
// TTN node (7 x 7 -> 10, Q2.6, N_REG = 1), one set per clock, and compares each result
// with the exact triple-product sum floored to FB bits and clipped to W bits. Checks the
// 7-cycle latency of a lowest-layer node (1 multiply + 6 adder levels) and clipping.
module tb_bilinear_unit;
  import tn_ref_pkg::*;
  localparam int unsigned W = 8, FB = 6, DA = 7, DB = 7, DC = 10, N_REG = 1;
  localparam int unsigned LAT = 7;
  localparam int NSETS = 300;

  logic clk = 1'b0;
  logic signed [W-1:0] w [DA*DB*DC];
  logic signed [W-1:0] x [DA];
  logic signed [W-1:0] y [DB];
  logic signed [W-1:0] z [DC];
  logic                sat;
  int checks = 0, failures = 0, n_sat = 0;

  bilinear_unit #(.W(W), .FB(FB), .DA(DA), .DB(DB), .DC(DC), .N_REG(N_REG)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (NSETS + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint exp_z [NSETS][DC];
  bit     exp_s [NSETS];

  initial begin
    bit s;
    longint acc;
    int scale;
    for (int t = 0; t < NSETS + LAT; t++) begin
      @(negedge clk);
      if (t < NSETS) begin
        scale = (t % 3 == 0) ? W : W - 2;
        for (int i = 0; i < DA*DB*DC; i++) w[i] = W'(rnd(scale));
        for (int i = 0; i < DA; i++) x[i] = W'(rnd(scale));
        for (int i = 0; i < DB; i++) y[i] = W'(rnd(scale));
        s = 1'b0;
        for (int c = 0; c < DC; c++) begin
          acc = 0;
          for (int a = 0; a < DA; a++)
            for (int b = 0; b < DB; b++)
              acc += longint'(w[(a*DB + b)*DC + c]) * longint'(x[a]) * longint'(y[b]);
          exp_z[t][c] = qclip(acc, 2 * FB, W, s);
        end
        exp_s[t] = s;
      end
      if (t >= LAT) begin
        for (int c = 0; c < DC; c++) begin
          checks++;
          if (longint'(z[c]) != exp_z[t-LAT][c]) begin
            failures++;
            if (failures < 10) $display("set %0d out %0d: z=%0d expected %0d", t - LAT, c, z[c], exp_z[t-LAT][c]);
          end
        end
        checks++;
        if (sat != exp_s[t-LAT]) begin
          failures++;
          $display("set %0d: sat=%0b expected %0b", t - LAT, sat, exp_s[t-LAT]);
        end
        if (sat) n_sat++;
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("clipping never exercised"); end
    $display("clipped sets: %0d of %0d", n_sat, NSETS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
