// tb_tn_jet_tagger_full: end-to-end test of the whole tagger with every parameter at its
// default (N = 16 particles, TTN chi = 10 in Q2.6, MPS D = 10 in Q2.8).
//
// Loads both models through their weight ports at the same time (10420 and 12278 random
// tensor elements, the model sizes quoted for N = 16), then feeds the same jets to both
// engines, with random gaps first and back-to-back afterwards, and compares every score
// vector and clip flag with the bit-exact references of tn_ref_pkg. Latencies must be
// 31 cycles for the TTN (124 ns at 250 MHz) and 62 cycles for the MPS schedule of this
// design. Counts how often each mechanism occurred (input gap, back-to-back jets, clipped
// and unclipped jets in each engine, both engines busy at once) and fails if one never did.
module tb_tn_jet_tagger_full;
  import tn_ref_pkg::*;
  localparam int N = 16, D = 7, C = 5;
  localparam int TTN_FB = 6, TTN_W = 8, CHI = 10;
  localparam int MPS_FB = 8, MPS_W = 10, DB = 10;
  localparam int TTN_NP = 10420, MPS_NP = 12278;
  localparam int TTN_LAT = 31, MPS_LAT = 62;
  localparam int TTN_AW = $clog2(TTN_NP), MPS_AW = $clog2(MPS_NP);
  localparam int NJETS = 120;

  logic clk = 1'b0, rst_n = 1'b0;
  logic ttn_w_we = 1'b0, mps_w_we = 1'b0;
  logic [TTN_AW-1:0] ttn_w_addr = '0;
  logic [MPS_AW-1:0] mps_w_addr = '0;
  logic signed [TTN_W-1:0] ttn_w_data = '0;
  logic signed [MPS_W-1:0] mps_w_data = '0;
  logic ttn_in_valid = 1'b0, mps_in_valid = 1'b0;
  logic signed [TTN_W-1:0] ttn_phi [N][D];
  logic signed [MPS_W-1:0] mps_phi [N][D];
  logic ttn_out_valid, mps_out_valid, ttn_clipped, mps_clipped;
  logic signed [TTN_W-1:0] ttn_score [C];
  logic signed [MPS_W-1:0] mps_score [C];

  tn_jet_tagger dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  int n_gap = 0, n_b2b = 0, n_both_busy = 0;
  int n_out[2] = '{0, 0}, n_clip[2] = '{0, 0}, n_clean[2] = '{0, 0};

  initial begin
    repeat (MPS_NP + 4 * NJETS + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { longint s[C]; bit clip; int t_in; } exp_t;
  exp_t expq[2][$];
  longint twts[], mwts[];

  task automatic check_out(int e_i, string name, int lat, logic signed [15:0] sc [C], logic clip);
    exp_t e;
    n_out[e_i]++;
    checks++;
    if (expq[e_i].size() == 0) begin
      failures++;
      $display("%s: unexpected output at cycle %0d", name, cyc);
      return;
    end
    e = expq[e_i].pop_front();
    for (int c = 0; c < C; c++) begin
      checks++;
      if (longint'(sc[c]) != e.s[c]) begin
        failures++;
        if (failures < 10) $display("%s jet@%0d class %0d: %0d expected %0d", name, e.t_in, c, sc[c], e.s[c]);
      end
    end
    checks++;
    if (clip != e.clip) begin
      failures++;
      $display("%s jet@%0d: clipped=%0b expected %0b", name, e.t_in, clip, e.clip);
    end
    checks++;
    if (cyc - e.t_in != lat) begin
      failures++;
      $display("%s jet@%0d: latency %0d, expected %0d", name, e.t_in, cyc - e.t_in, lat);
    end
    if (e.clip) n_clip[e_i]++; else n_clean[e_i]++;
  endtask

  always @(negedge clk) begin
    logic signed [15:0] sc [C];
    if (rst_n) begin
      if (ttn_out_valid) begin
        for (int c = 0; c < C; c++) sc[c] = 16'(ttn_score[c]);
        check_out(0, "TTN", TTN_LAT, sc, ttn_clipped);
      end
      if (mps_out_valid) begin
        for (int c = 0; c < C; c++) sc[c] = 16'(mps_score[c]);
        check_out(1, "MPS", MPS_LAT, sc, mps_clipped);
      end
      if (expq[0].size() > 0 && expq[1].size() > 0) n_both_busy++;
    end
  end

  initial begin
    longint tph[], mph[];
    exp_t e;
    bit clip;
    lvec_t r;
    bit prev_valid;
    longint x;
    checks++;
    if (ttn_params(N, D, CHI, C) != TTN_NP || mps_params(N, D, DB, C) != MPS_NP) begin
      failures++;
      $display("parameter counts %0d / %0d", ttn_params(N, D, CHI, C), mps_params(N, D, DB, C));
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // load both models in parallel
    twts = new[TTN_NP];
    mwts = new[MPS_NP];
    for (int i = 0; i < MPS_NP; i++) begin
      @(negedge clk);
      if (i < TTN_NP) begin
        twts[i] = rnd(TTN_W - 3);
        ttn_w_we = 1'b1; ttn_w_addr = TTN_AW'(i); ttn_w_data = TTN_W'(twts[i]);
      end else begin
        ttn_w_we = 1'b0;
      end
      mwts[i] = rnd(MPS_W - 3);
      mps_w_we = 1'b1; mps_w_addr = MPS_AW'(i); mps_w_data = MPS_W'(mwts[i]);
    end
    @(negedge clk);
    ttn_w_we = 1'b0;
    mps_w_we = 1'b0;
    // stream jets into both engines
    tph = new[N * D];
    mph = new[N * D];
    prev_valid = 1'b0;
    for (int j = 0; j < NJETS; j++) begin
      if (j < NJETS / 3 && $urandom_range(1) == 1) begin
        ttn_in_valid = 1'b0;
        mps_in_valid = 1'b0;
        prev_valid = 1'b0;
        n_gap++;
        @(negedge clk);
      end
      for (int i = 0; i < N; i++)
        for (int k = 0; k < D; k++) begin
          // one particle feature in Q2.8; the TTN gets it with 6 fraction bits
          if (k == 0) x = 128;
          else if (j % 5 == 4) x = rnd(MPS_W) | 256;
          else x = rnd(MPS_W - 2);
          mph[i*D + k] = x;
          tph[i*D + k] = x >>> 2;
          mps_phi[i][k] = MPS_W'(x);
          ttn_phi[i][k] = TTN_W'(x >>> 2);
        end
      clip = 1'b0;
      r = ttn_ref(N, D, CHI, C, TTN_FB, TTN_W, twts, tph, clip);
      for (int c = 0; c < C; c++) e.s[c] = r[c];
      e.clip = clip; e.t_in = cyc;
      expq[0].push_back(e);
      clip = 1'b0;
      r = mps_ref(N, D, DB, C, MPS_FB, MPS_W, mwts, mph, clip);
      for (int c = 0; c < C; c++) e.s[c] = r[c];
      e.clip = clip; e.t_in = cyc;
      expq[1].push_back(e);
      ttn_in_valid = 1'b1;
      mps_in_valid = 1'b1;
      if (prev_valid) n_b2b++;
      prev_valid = 1'b1;
      @(negedge clk);
    end
    ttn_in_valid = 1'b0;
    mps_in_valid = 1'b0;
    repeat (MPS_LAT + 5) @(negedge clk);
    for (int e_i = 0; e_i < 2; e_i++) begin
      checks++;
      if (n_out[e_i] != NJETS || expq[e_i].size() != 0) begin
        failures++;
        $display("engine %0d: %0d outputs for %0d jets", e_i, n_out[e_i], NJETS);
      end
      checks++; if (n_clip[e_i] == 0)  begin failures++; $display("engine %0d: no clipped jet", e_i); end
      checks++; if (n_clean[e_i] == 0) begin failures++; $display("engine %0d: no unclipped jet", e_i); end
    end
    checks++; if (n_gap == 0)       begin failures++; $display("no input gap"); end
    checks++; if (n_b2b == 0)       begin failures++; $display("no back-to-back jets"); end
    checks++; if (n_both_busy == 0) begin failures++; $display("engines never busy together"); end
    $display("gaps=%0d back_to_back=%0d both_busy_cycles=%0d", n_gap, n_b2b, n_both_busy);
    $display("TTN clipped=%0d unclipped=%0d  MPS clipped=%0d unclipped=%0d",
             n_clip[0], n_clean[0], n_clip[1], n_clean[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
