// tn_jet_tagger: tensor-network jet tagger for a Level-1 trigger FPGA.
//
// Two classifiers of the same jets sit side by side: a Tree Tensor Network engine
// (ttn_engine, Q2.6 words, 31-cycle latency at N = 16) and a Matrix Product State
// engine (mps_engine, Q2.8 words, 62-cycle latency at N = 16). Both take the N leading
// particles of a jet, each already embedded off-chip as a d = 7 vector
// [1, pT, Erel, dR, pT^2, Erel^2, dR^2] / norm in the engine's fixed-point format, accept
// one jet per clock and return N_CLASSES = 5 class scores (g, q, W, Z, t) with a valid
// strobe and a saturation flag. Normalising the scores into probabilities and choosing
// the label are done off-chip.
//
// Each engine has its own weight-load port (one word per clock, addresses as laid out in
// tn_pkg) and its own input and output ports, since the two models use different word
// widths. Clock and synchronous active-low reset are shared; the target clock is 250 MHz.
//
// The two engines, their sizes and precisions follow the paper's reduced-precision
// builds (TTN with chi = 10 and 6 fractional bits, MPS with D = 10 and 8 fractional
// bits); placing both in one top, the port set and N = 16 as the default are choices
// of this design (the paper builds each model as a separate firmware, for N = 8, 16 and 32).
module tn_jet_tagger
  import tn_pkg::*;
#(
  parameter int unsigned N         = 16,
  parameter int unsigned D         = tn_pkg::D_PHYS,
  parameter int unsigned C         = tn_pkg::N_CLASSES,
  parameter int unsigned TTN_CHI   = 10,
  parameter int unsigned TTN_FB    = 6,
  parameter int unsigned TTN_W     = TTN_FB + tn_pkg::INT_BITS,
  parameter int unsigned TTN_N_REG = 1,
  parameter int unsigned MPS_DB    = 10,
  parameter int unsigned MPS_FB    = 8,
  parameter int unsigned MPS_W     = MPS_FB + tn_pkg::INT_BITS,
  parameter int unsigned MPS_N_REG = 3,
  parameter int unsigned TTN_NPARAM = tn_pkg::ttn_num_params($clog2(N), D, TTN_CHI, C),
  parameter int unsigned MPS_NPARAM = tn_pkg::mps_num_params(N, D, MPS_DB, C),
  parameter int unsigned TTN_AW    = $clog2(TTN_NPARAM),
  parameter int unsigned MPS_AW    = $clog2(MPS_NPARAM)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // TTN parameter load and data path
  input  logic                    ttn_w_we,
  input  logic [TTN_AW-1:0]       ttn_w_addr,
  input  logic signed [TTN_W-1:0] ttn_w_data,
  input  logic                    ttn_in_valid,
  input  logic signed [TTN_W-1:0] ttn_phi   [N][D],
  output logic                    ttn_out_valid,
  output logic signed [TTN_W-1:0] ttn_score [C],
  output logic                    ttn_clipped,
  // MPS parameter load and data path
  input  logic                    mps_w_we,
  input  logic [MPS_AW-1:0]       mps_w_addr,
  input  logic signed [MPS_W-1:0] mps_w_data,
  input  logic                    mps_in_valid,
  input  logic signed [MPS_W-1:0] mps_phi   [N][D],
  output logic                    mps_out_valid,
  output logic signed [MPS_W-1:0] mps_score [C],
  output logic                    mps_clipped
);
  ttn_engine #(
    .N(N), .D(D), .CHI(TTN_CHI), .C(C), .FB(TTN_FB), .W(TTN_W), .N_REG(TTN_N_REG),
    .NPARAM(TTN_NPARAM), .AW(TTN_AW)
  ) u_ttn (
    .clk       (clk),
    .rst_n     (rst_n),
    .w_we      (ttn_w_we),
    .w_addr    (ttn_w_addr),
    .w_data    (ttn_w_data),
    .in_valid  (ttn_in_valid),
    .phi       (ttn_phi),
    .out_valid (ttn_out_valid),
    .score     (ttn_score),
    .clipped   (ttn_clipped)
  );

  mps_engine #(
    .N(N), .D(D), .DB(MPS_DB), .C(C), .FB(MPS_FB), .W(MPS_W), .N_REG(MPS_N_REG),
    .NPARAM(MPS_NPARAM), .AW(MPS_AW)
  ) u_mps (
    .clk       (clk),
    .rst_n     (rst_n),
    .w_we      (mps_w_we),
    .w_addr    (mps_w_addr),
    .w_data    (mps_w_data),
    .in_valid  (mps_in_valid),
    .phi       (mps_phi),
    .out_valid (mps_out_valid),
    .score     (mps_score),
    .clipped   (mps_clipped)
  );
endmodule
