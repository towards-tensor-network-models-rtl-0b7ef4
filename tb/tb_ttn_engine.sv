// tb_ttn_engine: end-to-end test of the tree tensor network engine at N = 8, d = 7,
// chi = 10, Q2.6. Loads the 4460 tensor elements (the model size quoted for this
// configuration) with random values, streams jets with random gaps and in back-to-back
// bursts, and compares every score vector and clip flag with the bit-exact reference in
// tn_ref_pkg. The latency must be 23 cycles, which is 92 ns at 250 MHz.
module tb_ttn_engine;
  import tn_ref_pkg::*;
  localparam int unsigned N = 8, D = 7, CHI = 10, C = 5, FB = 6, W = FB + 2;
  localparam int unsigned NPARAM_PAPER = 4460;
  localparam int unsigned LAT_PAPER    = 23;      // 92 ns / 4 ns
  localparam int unsigned AW = $clog2(NPARAM_PAPER);
  localparam int NJETS = 300;

  logic clk = 1'b0, rst_n = 1'b0;
  logic w_we = 1'b0;
  logic [AW-1:0] w_addr = '0;
  logic signed [W-1:0] w_data = '0;
  logic in_valid = 1'b0;
  logic signed [W-1:0] phi [N][D];
  logic out_valid;
  logic signed [W-1:0] score [C];
  logic clipped;

  ttn_engine #(.N(N), .D(D), .CHI(CHI), .C(C), .FB(FB)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  int n_gap = 0, n_b2b = 0, n_clip = 0, n_clean = 0, n_out = 0;

  initial begin
    repeat (NPARAM_PAPER + 4 * NJETS + 500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint wts[];
  typedef struct { longint s[C]; bit clip; int t_in; } exp_t;
  exp_t expq[$];

  // output checker
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      n_out++;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("unexpected output at cycle %0d", cyc);
      end else begin
        e = expq.pop_front();
        for (int c = 0; c < C; c++) begin
          checks++;
          if (longint'(score[c]) != e.s[c]) begin
            failures++;
            if (failures < 10) $display("jet@%0d class %0d: %0d expected %0d", e.t_in, c, score[c], e.s[c]);
          end
        end
        checks++;
        if (clipped != e.clip) begin
          failures++;
          $display("jet@%0d: clipped=%0b expected %0b", e.t_in, clipped, e.clip);
        end
        checks++;
        if (cyc - e.t_in != LAT_PAPER) begin
          failures++;
          $display("jet@%0d: latency %0d, expected %0d", e.t_in, cyc - e.t_in, LAT_PAPER);
        end
        if (e.clip) n_clip++; else n_clean++;
      end
    end
  end

  initial begin
    longint ph[];
    exp_t e;
    bit clip;
    lvec_t r;
    bit prev_valid;
    checks++;
    if (ttn_params(N, D, CHI, C) != NPARAM_PAPER || dut.NPARAM != NPARAM_PAPER) begin
      failures++;
      $display("parameter count %0d / %0d, expected %0d", ttn_params(N, D, CHI, C), dut.NPARAM, NPARAM_PAPER);
    end
    checks++;
    if (dut.LATENCY != LAT_PAPER) begin
      failures++;
      $display("LATENCY parameter %0d, expected %0d", dut.LATENCY, LAT_PAPER);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // load the model
    wts = new[NPARAM_PAPER];
    for (int i = 0; i < NPARAM_PAPER; i++) begin
      wts[i] = rnd(W - 3);
      @(negedge clk);
      w_we = 1'b1; w_addr = AW'(i); w_data = W'(wts[i]);
    end
    @(negedge clk);
    w_we = 1'b0;
    // stream jets
    ph = new[N * D];
    prev_valid = 1'b0;
    for (int j = 0; j < NJETS; j++) begin
      // gaps in the first third, back-to-back afterwards
      if (j < NJETS / 3 && $urandom_range(1) == 1) begin
        in_valid = 1'b0;
        prev_valid = 1'b0;
        n_gap++;
        @(negedge clk);
      end
      for (int i = 0; i < N; i++)
        for (int k = 0; k < D; k++) begin
          if (k == 0) ph[i*D + k] = 32;                     // the constant 1 of the embedding, normalised
          else if (j % 5 == 4) ph[i*D + k] = rnd(W) | 64;   // large inputs: forces clipping
          else ph[i*D + k] = rnd(W - 2);
          phi[i][k] = W'(ph[i*D + k]);
        end
      clip = 1'b0;
      r = ttn_ref(N, D, CHI, C, FB, W, wts, ph, clip);
      for (int c = 0; c < C; c++) e.s[c] = r[c];
      e.clip = clip;
      e.t_in = cyc;
      expq.push_back(e);
      in_valid = 1'b1;
      if (prev_valid) n_b2b++;
      prev_valid = 1'b1;
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (LAT_PAPER + 5) @(negedge clk);
    checks++;
    if (n_out != NJETS || expq.size() != 0) begin
      failures++;
      $display("%0d outputs for %0d jets", n_out, NJETS);
    end
    // every mechanism must have happened
    checks++; if (n_gap == 0)   begin failures++; $display("no input gap"); end
    checks++; if (n_b2b == 0)   begin failures++; $display("no back-to-back jets"); end
    checks++; if (n_clip == 0)  begin failures++; $display("no clipped jet"); end
    checks++; if (n_clean == 0) begin failures++; $display("no unclipped jet"); end
    $display("gaps=%0d back_to_back=%0d clipped=%0d unclipped=%0d", n_gap, n_b2b, n_clip, n_clean);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
