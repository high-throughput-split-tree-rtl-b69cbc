// global_path_calc: second stage of the reconciliation processor. It
// assembles the LS^M global paths that can be made from the LS skimmed
// sub-paths of each of the M sub-decoders and computes their metrics.
//
// Global path c picks sub-path k_j = digit j of c (base LS) from sub-decoder
// j. Sub-decoder j decides symbol w_j of its sub-code; the original symbols
// of this level are u = w * Finv, where Finv is the m-fold Kronecker power
// of the inverse kernel [[1,0],[alpha/beta,1/beta]] (m = log2 M). A global
// path is valid when all its sub-paths are valid, all extend the same parent
// path, and every frozen symbol u_j' of this level comes out as the frozen
// value 0. Its metric is the parent metric plus each sub-path's increment:
// pm_0 + sum_{j>=1} (pm_j - pm_parent), an array of LS^M M-input adders.
// Entries are {valid, pm, tag = c}.
//
// The paper leaves open how sub-paths of different parents combine and how
// the inter-sub-tree constraint is checked; the same-parent rule and the
// Finv check are this design's reading of the split-tree code structure.
//
// Timing: one registered cycle; out_valid follows in_valid by one clock.
module global_path_calc #(
  parameter int Q     = 256,
  parameter int L     = 4,
  parameter int M     = 2,
  parameter int LS    = 16,
  parameter int PW    = 16,
  parameter int ALPHA = 2,
  parameter int BETA  = 3,
  localparam int TW  = $clog2(Q * L),
  localparam int SEW = 1 + PW + TW,
  localparam int NG  = LS ** M,
  localparam int GTW = $clog2(NG),
  localparam int GEW = 1 + PW + GTW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [SEW-1:0] sub      [M][LS],
  input  logic [PW-1:0]  pm       [L],
  input  logic           frozen_u [M],
  output logic           out_valid,
  output logic [GEW-1:0] gpath    [NG]
);
  import nb_pkg::*;
  localparam int R  = $clog2(Q);
  localparam int MB = $clog2(M);
  localparam int LB = $clog2(LS);
  localparam logic [MAXR-1:0] FI_C = gf_mul(MAXR'(ALPHA), gf_inv(MAXR'(BETA), R), R);
  localparam logic [MAXR-1:0] FI_D = gf_inv(MAXR'(BETA), R);

  logic [GEW-1:0] g [NG];

  always_comb begin
    for (int c = 0; c < NG; c++) begin
      logic             ok;
      logic [PW-1:0]    acc;
      logic [TW-1:0]    tag0, tagj;
      logic [R-1:0]     w [M];
      int               par;
      ok   = 1'b1;
      tag0 = sub[0][c % LS][TW-1:0];
      par  = int'(tag0) / Q;
      acc  = sub[0][c % LS][PW+TW-1:TW];
      for (int j = 0; j < M; j++) begin
        logic [SEW-1:0] e;
        e    = sub[j][(c >> (j * LB)) % LS];
        tagj = e[TW-1:0];
        w[j] = R'(int'(tagj) % Q);
        if (!e[SEW-1]) ok = 1'b0;
        if (int'(tagj) / Q != par) ok = 1'b0;
        if (j > 0) acc = acc + (e[PW+TW-1:TW] - pm[par % L]);
      end
      for (int jp = 0; jp < M; jp++) begin
        logic [MAXR-1:0] u;
        u = '0;
        for (int j = 0; j < M; j++)
          u = u ^ gf_mul(MAXR'(w[j]), kron_entry(j, jp, MB, FI_C, FI_D, R), R);
        if (frozen_u[jp] && u != 0) ok = 1'b0;
      end
      g[c] = {ok, ok ? acc : PW'(0), GTW'(c)};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int c = 0; c < NG; c++) gpath[c] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) gpath <= g;
    end
  end

endmodule
