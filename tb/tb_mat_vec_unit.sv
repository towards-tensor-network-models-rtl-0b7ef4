// tb_mat_vec_unit: streams random matrices and vectors into a 10x7 mat_vec_unit with
// N_REG = 3, one operand set per clock, and compares each result with the exact product
// floored to FB fraction bits and clipped to W bits, computed in the testbench. Checks the
// latency N_REG + ceil(log2 K) = 6 cycles and that both clipping directions are flagged.
module tb_mat_vec_unit;
  import tn_ref_pkg::*;
  localparam int unsigned W = 10, FB = 8, K = 7, M = 10, N_REG = 3;
  localparam int unsigned LAT = N_REG + 3;
  localparam int NSETS = 400;

  logic clk = 1'b0;
  logic signed [W-1:0] a [M][K];
  logic signed [W-1:0] v [K];
  logic signed [W-1:0] y [M];
  logic                sat;
  int checks = 0, failures = 0, n_sat = 0, n_pos = 0, n_neg = 0;

  mat_vec_unit #(.W(W), .FB(FB), .K(K), .M(M), .N_REG(N_REG)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (NSETS + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint exp_y [NSETS][M];
  bit     exp_s [NSETS];

  initial begin
    bit s;
    longint acc;
    int scale;
    for (int t = 0; t < NSETS + LAT; t++) begin
      @(negedge clk);
      if (t < NSETS) begin
        // small operands most of the time, full range (which clips) now and then
        scale = (t % 4 == 0) ? W : W - 2;
        for (int m = 0; m < M; m++)
          for (int k = 0; k < K; k++) a[m][k] = W'(rnd(scale));
        for (int k = 0; k < K; k++) v[k] = W'(rnd(scale));
        if (t == 1) begin   // forced positive and negative overflow
          for (int k = 0; k < K; k++) begin a[0][k] = 10'sd511; a[1][k] = -10'sd512; v[k] = 10'sd511; end
        end
        s = 1'b0;
        for (int m = 0; m < M; m++) begin
          acc = 0;
          for (int k = 0; k < K; k++) acc += longint'(a[m][k]) * longint'(v[k]);
          exp_y[t][m] = qclip(acc, FB, W, s);
        end
        exp_s[t] = s;
      end
      if (t >= LAT) begin
        for (int m = 0; m < M; m++) begin
          checks++;
          if (longint'(y[m]) != exp_y[t-LAT][m]) begin
            failures++;
            if (failures < 10) $display("set %0d row %0d: y=%0d expected %0d", t - LAT, m, y[m], exp_y[t-LAT][m]);
          end
        end
        checks++;
        if (sat != exp_s[t-LAT]) begin
          failures++;
          $display("set %0d: sat=%0b expected %0b", t - LAT, sat, exp_s[t-LAT]);
        end
        if (sat) n_sat++;
        if (t - LAT == 1) begin
          checks++;
          if (!(y[0] == 10'sd511 && y[1] == -10'sd512)) begin
            failures++;
            $display("forced overflow not clipped: %0d %0d", y[0], y[1]);
          end
        end
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("clipping never exercised"); end
    $display("clipped sets: %0d of %0d", n_sat, NSETS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
