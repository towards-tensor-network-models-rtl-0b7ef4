// mps_engine: fully pipelined inference of a Matrix Product State classifier.
//
// The model is a chain of N site tensors; site p = N/2 carries the extra class leg
// (N_CLASSES). Inference follows the schedule of the paper's MPS firmware:
//   1. every site tensor is contracted with its embedded particle phi[k], all sites in
//      parallel, giving one matrix per site (a vector at the two ends and a rank-3
//      tensor at the label site);
//   2. two chains then run at the same time: a row vector starts at the left end and is
//      multiplied through sites 1 .. p-1, a column vector starts at the right end and is
//      multiplied through sites N-2 .. p+1 and finally absorbed into the label tensor;
//   3. the left vector is contracted with the label tensor left over from step 2, which
//      yields one score per class (softmax / argmax are left to the receiver).
// With the label at N/2 both chains take p-1 steps, so they meet without waiting.
//
// Each contraction is a mat_vec_unit (N_REG multiplier registers, then a registered
// adder tree, then truncate-and-clip back to Q2.FB). Step 1 takes N_REG + ceil(log2 d)
// cycles, every later step N_REG + ceil(log2 DB) cycles, so
//   LATENCY = (N_REG + ceil(log2 d)) + (N/2) * (N_REG + ceil(log2 DB)),
// 62 cycles for N = 16, d = 7, DB = 10, N_REG = 3. The engine takes a new jet every
// clock; because of that, the matrices of step 1 are kept in delay lines until the chain
// reaches their site. out_valid, score and `clipped` (some contraction of that jet
// saturated) appear LATENCY cycles after in_valid.
//
// Bond k (between sites k and k+1) has dimension min(d^(k+1), d^(N-1-k), DB); tensors
// live in a weight_store of NPARAM words (layout in tn_pkg), written through
// w_we/w_addr/w_data. The chain order, label position and bond dimensions follow the
// paper; the fixed-point arithmetic, the pipelining with one jet per clock, the N_REG
// value of 3 (the paper's n_reg for its MPS builds) and the weight-load port are this
// design's choices -- the paper's MPS firmware was produced by high-level synthesis and
// its internal schedule is not published.
module mps_engine
  import tn_pkg::*;
#(
  parameter int unsigned N       = 16,
  parameter int unsigned D       = tn_pkg::D_PHYS,
  parameter int unsigned DB      = 10,
  parameter int unsigned C       = tn_pkg::N_CLASSES,
  parameter int unsigned FB      = 8,
  parameter int unsigned W       = FB + tn_pkg::INT_BITS,
  parameter int unsigned N_REG   = 3,
  parameter int unsigned NPARAM  = tn_pkg::mps_num_params(N, D, DB, C),
  parameter int unsigned AW      = $clog2(NPARAM),
  parameter int unsigned LATENCY = tn_pkg::mps_latency(N, D, DB, N_REG)
) (
  input  logic                clk,
  input  logic                rst_n,
  // parameter load
  input  logic                w_we,
  input  logic [AW-1:0]       w_addr,
  input  logic signed [W-1:0] w_data,
  // one jet per clock
  input  logic                in_valid,
  input  logic signed [W-1:0] phi   [N][D],
  output logic                out_valid,
  output logic signed [W-1:0] score [C],
  output logic                clipped
);
  localparam int unsigned P    = N / 2;
  localparam int unsigned S0   = mps_site_latency(D, N_REG);
  localparam int unsigned S    = mps_step_latency(DB, N_REG);
  localparam int unsigned LVL  = $clog2(DB);
  localparam int unsigned MMAX = DB * DB * C;

  initial begin
    assert (N >= 4 && N % 2 == 0) else $error("mps_engine: N must be even and at least 4");
    assert (LATENCY == S0 + P * S) else $error("mps_engine: LATENCY must not be overridden");
  end

  logic signed [W-1:0] wq [NPARAM];
  weight_store #(.W(W), .DEPTH(NPARAM), .AW(AW)) u_weights (
    .clk   (clk),
    .we    (w_we),
    .addr  (w_addr),
    .wdata (w_data),
    .q     (wq)
  );

  // mdel[k]: site matrix k after its delay line, flattened as (l*Dr + r)*Ck + c.
  logic signed [W-1:0] mdel [N][MMAX];
  // vec[k]: left-chain vector after site k (k < P), right-chain vector after site k (k > P).
  logic signed [W-1:0] vec  [N][DB];
  // tp: label tensor with the right vector absorbed, flattened as l*C + c.
  logic signed [W-1:0] tp   [DB*C];
  // Clip flags, each delayed to the output: sites 0..N-1, chain steps N..2N-1, final 2N.
  logic [2*N:0]        clip_at_out;

  // ------------------------------------------------------------ step 1: site contractions
  for (genvar k = 0; k < N; k++) begin : g_site
    localparam int unsigned DL  = mps_left_dim(k, N, D, DB);
    localparam int unsigned DR  = mps_right_dim(k, N, D, DB);
    localparam int unsigned CK  = mps_class_dim(k, N, C);
    localparam int unsigned NM  = DL * DR * CK;
    localparam int unsigned OFF = mps_site_offset(k, N, D, DB, C);
    // Steps the chain needs before it reaches this site.
    localparam int unsigned WAIT = (k == 0 || k == N - 1) ? 0 :
                                   (k < P) ? (k - 1) : (N - 2 - k);

    logic signed [W-1:0] a  [NM][D];
    logic signed [W-1:0] m  [NM];
    logic signed [W-1:0] md [NM];
    logic                sat;
    logic [NM*W-1:0]     m_flat, md_flat;

    for (genvar l = 0; l < DL; l++) begin : g_l
      for (genvar r = 0; r < DR; r++) begin : g_r
        for (genvar c = 0; c < CK; c++) begin : g_c
          for (genvar i = 0; i < D; i++) begin : g_i
            assign a[(l*DR + r)*CK + c][i] = wq[OFF + ((l*D + i)*DR + r)*CK + c];
          end
        end
      end
    end

    mat_vec_unit #(.W(W), .FB(FB), .K(D), .M(NM), .N_REG(N_REG)) u_site (
      .clk (clk),
      .a   (a),
      .v   (phi[k]),
      .y   (m),
      .sat (sat)
    );

    for (genvar e = 0; e < NM; e++) begin : g_pack
      assign m_flat[e*W +: W] = m[e];
      assign md[e]            = md_flat[e*W +: W];
    end
    delay_line #(.WIDTH(NM*W), .DEPTH(WAIT * S)) u_dly (
      .clk (clk), .rst_n (rst_n), .d (m_flat), .q (md_flat)
    );
    for (genvar e = 0; e < MMAX; e++) begin : g_out
      if (e < NM) begin : g_v
        assign mdel[k][e] = md[e];
      end else begin : g_z
        assign mdel[k][e] = '0;
      end
    end
    delay_line #(.WIDTH(1), .DEPTH(LATENCY - S0)) u_clip (
      .clk (clk), .rst_n (rst_n), .d (sat), .q (clip_at_out[k])
    );
  end

  // ------------------------------------------------------------ step 2: the two chains
  for (genvar k = 0; k < N; k++) begin : g_chain
    localparam int unsigned DL = mps_left_dim(k, N, D, DB);
    localparam int unsigned DR = mps_right_dim(k, N, D, DB);
    if (k == 0) begin : g_lend
      // Left boundary: the site matrix is already the row vector (DL = 1).
      for (genvar e = 0; e < DB; e++) begin : g_e
        if (e < DR) begin : g_v
          assign vec[0][e] = mdel[0][e];
        end else begin : g_z
          assign vec[0][e] = '0;
        end
      end
      assign clip_at_out[N] = 1'b0;
    end else if (k == N - 1) begin : g_rend
      // Right boundary: the site matrix is already the column vector (DR = 1).
      for (genvar e = 0; e < DB; e++) begin : g_e
        if (e < DL) begin : g_v
          assign vec[N-1][e] = mdel[N-1][e];
        end else begin : g_z
          assign vec[N-1][e] = '0;
        end
      end
      assign clip_at_out[N+k] = 1'b0;
    end else if (k < P) begin : g_left
      // v'[r] = sum_l v[l] * M_k[l][r]
      logic signed [W-1:0] a  [DR][DL];
      logic signed [W-1:0] vi [DL];
      logic signed [W-1:0] vo [DR];
      logic                sat;
      for (genvar r = 0; r < DR; r++) begin : g_r
        for (genvar l = 0; l < DL; l++) begin : g_l
          assign a[r][l] = mdel[k][l*DR + r];
        end
      end
      for (genvar l = 0; l < DL; l++) begin : g_vi
        assign vi[l] = vec[k-1][l];
      end
      mat_vec_unit #(.W(W), .FB(FB), .K(DL), .M(DR), .N_REG(N_REG), .LEVELS(LVL)) u_step (
        .clk (clk), .a (a), .v (vi), .y (vo), .sat (sat)
      );
      for (genvar e = 0; e < DB; e++) begin : g_e
        if (e < DR) begin : g_v
          assign vec[k][e] = vo[e];
        end else begin : g_z
          assign vec[k][e] = '0;
        end
      end
      delay_line #(.WIDTH(1), .DEPTH(LATENCY - S0 - k * S)) u_clip (
        .clk (clk), .rst_n (rst_n), .d (sat), .q (clip_at_out[N+k])
      );
    end else if (k > P) begin : g_right
      // v'[l] = sum_r M_k[l][r] * v[r]
      logic signed [W-1:0] a  [DL][DR];
      logic signed [W-1:0] vi [DR];
      logic signed [W-1:0] vo [DL];
      logic                sat;
      for (genvar l = 0; l < DL; l++) begin : g_l
        for (genvar r = 0; r < DR; r++) begin : g_r
          assign a[l][r] = mdel[k][l*DR + r];
        end
      end
      for (genvar r = 0; r < DR; r++) begin : g_vi
        assign vi[r] = vec[k+1][r];
      end
      mat_vec_unit #(.W(W), .FB(FB), .K(DR), .M(DL), .N_REG(N_REG), .LEVELS(LVL)) u_step (
        .clk (clk), .a (a), .v (vi), .y (vo), .sat (sat)
      );
      for (genvar e = 0; e < DB; e++) begin : g_e
        if (e < DL) begin : g_v
          assign vec[k][e] = vo[e];
        end else begin : g_z
          assign vec[k][e] = '0;
        end
      end
      delay_line #(.WIDTH(1), .DEPTH(LATENCY - S0 - (N - 1 - k) * S)) u_clip (
        .clk (clk), .rst_n (rst_n), .d (sat), .q (clip_at_out[N+k])
      );
    end else begin : g_absorb
      // Label site: tp[l][c] = sum_r T[l][r][c] * v[r]
      logic signed [W-1:0] a  [DL*C][DR];
      logic signed [W-1:0] vi [DR];
      logic signed [W-1:0] vo [DL*C];
      logic                sat;
      for (genvar l = 0; l < DL; l++) begin : g_l
        for (genvar c = 0; c < C; c++) begin : g_c
          for (genvar r = 0; r < DR; r++) begin : g_r
            assign a[l*C + c][r] = mdel[k][(l*DR + r)*C + c];
          end
        end
      end
      for (genvar r = 0; r < DR; r++) begin : g_vi
        assign vi[r] = vec[k+1][r];
      end
      mat_vec_unit #(.W(W), .FB(FB), .K(DR), .M(DL*C), .N_REG(N_REG), .LEVELS(LVL)) u_step (
        .clk (clk), .a (a), .v (vi), .y (vo), .sat (sat)
      );
      for (genvar e = 0; e < DB*C; e++) begin : g_e
        if (e < DL*C) begin : g_v
          assign tp[e] = vo[e];
        end else begin : g_z
          assign tp[e] = '0;
        end
      end
      for (genvar e = 0; e < DB; e++) begin : g_none
        assign vec[k][e] = '0;
      end
      delay_line #(.WIDTH(1), .DEPTH(S)) u_clip (
        .clk (clk), .rst_n (rst_n), .d (sat), .q (clip_at_out[N+k])
      );
    end
  end

  // ------------------------------------------------------------ step 3: final contraction
  localparam int unsigned DLP = mps_left_dim(P, N, D, DB);
  logic signed [W-1:0] af [C][DLP];
  logic signed [W-1:0] vf [DLP];
  for (genvar c = 0; c < C; c++) begin : g_fc
    for (genvar l = 0; l < DLP; l++) begin : g_fl
      assign af[c][l] = tp[l*C + c];
    end
  end
  for (genvar l = 0; l < DLP; l++) begin : g_fv
    assign vf[l] = vec[P-1][l];
  end
  mat_vec_unit #(.W(W), .FB(FB), .K(DLP), .M(C), .N_REG(N_REG), .LEVELS(LVL)) u_final (
    .clk (clk), .a (af), .v (vf), .y (score), .sat (clip_at_out[2*N])
  );

  delay_line #(.WIDTH(1), .DEPTH(LATENCY)) u_valid (
    .clk (clk), .rst_n (rst_n), .d (in_valid), .q (out_valid)
  );

  assign clipped = out_valid && (|clip_at_out);
endmodule
