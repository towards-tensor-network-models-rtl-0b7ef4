// ttn_engine: fully parallel, fixed-latency inference of a binary Tree Tensor Network.
//
// The N embedded particles phi[i] (d-dimensional Q2.FB vectors) enter the lowest layer of
// the tree. Node j of layer l contracts its rank-3 tensor with the vectors of its two
// children and hands the result to its parent; the L = log2(N) layers run one after the
// other, all nodes of a layer at once, and the root returns one overlap per class
// (score[c]; its square is proportional to the class probability, which is left to the
// receiver, as is the argmax). Layer l's children have dimension D_l = min(d^(2^(L-l-1)),
// chi); the root's output has N_CLASSES entries.
//
// Every node is a bilinear_unit (one multiplication stage, then a registered adder
// tree), so a layer takes N_REG + ceil(log2(D_l^2)) cycles and the whole tree
// LATENCY = sum over layers: 23, 31 and 39 cycles for N = 8, 16, 32 with d = 7,
// chi = 10, N_REG = 1, i.e. 92, 124 and 156 ns at 250 MHz. The engine accepts a new jet
// every clock (in_valid) and raises out_valid LATENCY cycles later together with the
// scores and `clipped`, which tells that some contraction of that jet saturated.
//
// The tensors sit in a weight_store of NPARAM words (layout in tn_pkg), written through
// w_we/w_addr/w_data before inference. The tree shape, dimensions and latency per layer
// follow the paper; the weight-load port, the per-node arithmetic (exact products,
// truncate-and-clip at each node output) and the clip flag are choices of this design.
module ttn_engine
  import tn_pkg::*;
#(
  parameter int unsigned N      = 16,
  parameter int unsigned D      = tn_pkg::D_PHYS,
  parameter int unsigned CHI    = 10,
  parameter int unsigned C      = tn_pkg::N_CLASSES,
  parameter int unsigned FB     = 6,
  parameter int unsigned W      = FB + tn_pkg::INT_BITS,
  parameter int unsigned N_REG  = 1,
  parameter int unsigned NL     = $clog2(N),
  parameter int unsigned NPARAM = tn_pkg::ttn_num_params(NL, D, CHI, C),
  parameter int unsigned AW     = $clog2(NPARAM),
  parameter int unsigned LATENCY = tn_pkg::ttn_latency(NL, D, CHI, N_REG)
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
  // Widest vector that travels between layers.
  localparam int unsigned VMAX = imax(imax(D, CHI), C);

  initial begin
    assert (N >= 2 && (1 << NL) == N) else $error("ttn_engine: N must be a power of two");
  end

  logic signed [W-1:0] wq [NPARAM];
  weight_store #(.W(W), .DEPTH(NPARAM), .AW(AW)) u_weights (
    .clk   (clk),
    .we    (w_we),
    .addr  (w_addr),
    .wdata (w_data),
    .q     (wq)
  );

  // act[l] holds the vectors entering layer l (act[NL] = the particles); act[0][0] the scores.
  logic signed [W-1:0] act [NL+1][N][VMAX];
  // Clip flags of every node, each delayed to the output of the tree.
  logic [N-1:0] clip_at_out [NL];

  for (genvar i = 0; i < N; i++) begin : g_in
    for (genvar e = 0; e < VMAX; e++) begin : g_e
      if (e < D) begin : g_v
        assign act[NL][i][e] = phi[i][e];
      end else begin : g_z
        assign act[NL][i][e] = '0;
      end
    end
  end

  for (genvar l = 0; l < NL; l++) begin : g_layer
    localparam int unsigned DCH = ttn_child_dim(l, NL, D, CHI);
    localparam int unsigned DP  = ttn_parent_dim(l, NL, D, CHI, C);
    localparam int unsigned NP  = ttn_node_params(l, NL, D, CHI, C);
    // Cycles from the output of this layer to the output of the tree.
    localparam int unsigned REST = ttn_latency_upto(l, NL, D, CHI, N_REG);
    for (genvar j = 0; j < (1 << l); j++) begin : g_node
      localparam int unsigned OFF = ttn_node_offset(l, j, NL, D, CHI, C);
      logic signed [W-1:0] wn [NP];
      logic signed [W-1:0] xl [DCH];
      logic signed [W-1:0] xr [DCH];
      logic signed [W-1:0] z  [DP];
      logic                sat;
      for (genvar p = 0; p < NP; p++) begin : g_w
        assign wn[p] = wq[OFF + p];
      end
      for (genvar e = 0; e < DCH; e++) begin : g_ch
        assign xl[e] = act[l+1][2*j][e];
        assign xr[e] = act[l+1][2*j+1][e];
      end
      bilinear_unit #(.W(W), .FB(FB), .DA(DCH), .DB(DCH), .DC(DP), .N_REG(N_REG)) u_node (
        .clk (clk),
        .w   (wn),
        .x   (xl),
        .y   (xr),
        .z   (z),
        .sat (sat)
      );
      for (genvar e = 0; e < VMAX; e++) begin : g_o
        if (e < DP) begin : g_v
          assign act[l][j][e] = z[e];
        end else begin : g_z
          assign act[l][j][e] = '0;
        end
      end
      delay_line #(.WIDTH(1), .DEPTH(REST)) u_clip_dly (
        .clk (clk), .rst_n (rst_n), .d (sat), .q (clip_at_out[l][j])
      );
    end
    for (genvar j = (1 << l); j < N; j++) begin : g_unused
      for (genvar e = 0; e < VMAX; e++) begin : g_e
        assign act[l][j][e] = '0;
      end
      assign clip_at_out[l][j] = 1'b0;
    end
  end

  delay_line #(.WIDTH(1), .DEPTH(LATENCY)) u_valid (
    .clk (clk), .rst_n (rst_n), .d (in_valid), .q (out_valid)
  );

  always_comb begin
    for (int unsigned c = 0; c < C; c++) score[c] = act[0][0][c];
    clipped = 1'b0;
    for (int unsigned l = 0; l < NL; l++) clipped |= |clip_at_out[l];
    clipped &= out_valid;
  end
endmodule
