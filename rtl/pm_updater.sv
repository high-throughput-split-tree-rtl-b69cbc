// pm_updater: last stage of the reconciliation processor. It owns the list:
// the L path metrics, their valid flags and each path's decision history.
//
// Recon update (recon): the top L global paths from the global sorter are
// disassembled. Global path c names skimmed sub-path k_j = digit j of c in
// each sub-decoder j; its tag gives the parent path and the decided symbol
// w_j. New path n takes parent, symbols and metric of the n-th best global
// path, or becomes invalid when that entry is invalid.
// Bypass update (bypass): when every symbol of the level is frozen, each
// path keeps its place, decides w_j = 0 everywhere and adds the metrics of
// symbol 0 from each sub-decoder (subpm0[j][l] - pm[l]).
// Either way the new history of path n is its parent's with the level's
// symbols appended, and the parents and symbols are sent to the M
// sub-decoders (upd with upd_par/upd_w) so they can copy trellis state and
// update partial sums.
//
// dec_u is the codeword's information vector as decided by the best valid
// path: u[j'*NSUB + i] = sum_j w_j[i] * Finv[j][j'] (see global_path_calc).
//
// Timing: init, recon and bypass each take one clock; upd pulses in the
// cycle after, with upd_par/upd_w valid.
module pm_updater #(
  parameter int Q     = 256,
  parameter int L     = 4,
  parameter int M     = 2,
  parameter int LS    = 16,
  parameter int NSUB  = 64,
  parameter int PW    = 16,
  parameter int ALPHA = 2,
  parameter int BETA  = 3,
  localparam int TW  = $clog2(Q * L),
  localparam int SEW = 1 + PW + TW,
  localparam int GTW = $clog2(LS ** M),
  localparam int GEW = 1 + PW + GTW,
  localparam int R   = $clog2(Q)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    init,
  input  logic                    recon,
  input  logic                    bypass,
  input  logic [$clog2(NSUB)-1:0] level,
  input  logic [GEW-1:0]          gtop   [L],
  input  logic [SEW-1:0]          sub    [M][LS],
  input  logic [PW-1:0]           subpm0 [M][L],
  output logic [PW-1:0]           pm     [L],
  output logic                    pvalid [L],
  output logic                    upd,
  output logic [$clog2(L)-1:0]    upd_par [L],
  output logic [R-1:0]            upd_w   [M][L],
  output logic [R-1:0]            dec_u   [M*NSUB]
);
  import nb_pkg::*;
  localparam int MB = $clog2(M);
  localparam int LB = $clog2(LS);
  localparam logic [MAXR-1:0] FI_C = gf_mul(MAXR'(ALPHA), gf_inv(MAXR'(BETA), R), R);
  localparam logic [MAXR-1:0] FI_D = gf_inv(MAXR'(BETA), R);

  logic [R-1:0] hist [L][M][NSUB];

  // New list, combinational.
  logic [$clog2(L)-1:0] npar [L];
  logic [R-1:0]         nw   [L][M];
  logic [PW-1:0]        npm  [L];
  logic                 nval [L];
  always_comb begin
    logic [GTW-1:0] c;
    logic [TW-1:0]  e;
    c = '0;
    e = '0;
    for (int n = 0; n < L; n++) begin
      npar[n] = '0;
      npm[n]  = '0;
      nval[n] = 1'b0;
      for (int j = 0; j < M; j++) nw[n][j] = '0;
      if (bypass) begin
        npar[n] = $clog2(L)'(n);
        nval[n] = pvalid[n];
        npm[n]  = pm[n];
        for (int j = 0; j < M; j++) npm[n] = npm[n] + (subpm0[j][n] - pm[n]);
      end else begin
        c       = gtop[n][GTW-1:0];
        nval[n] = gtop[n][GEW-1];
        npm[n]  = gtop[n][PW+GTW-1:GTW];
        for (int j = 0; j < M; j++) begin
          e = sub[j][(int'(c) >> (j * LB)) % LS][TW-1:0];
          nw[n][j] = R'(int'(e) % Q);
          if (j == 0) npar[n] = $clog2(L)'(int'(e) / Q);
        end
        if (!nval[n]) begin
          npar[n] = '0;
          npm[n]  = '0;
          for (int j = 0; j < M; j++) nw[n][j] = '0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      upd <= 1'b0;
      for (int n = 0; n < L; n++) begin
        pm[n] <= '0; pvalid[n] <= 1'b0; upd_par[n] <= '0;
        for (int j = 0; j < M; j++) begin
          upd_w[j][n] <= '0;
          for (int i = 0; i < NSUB; i++) hist[n][j][i] <= '0;
        end
      end
    end else begin
      upd <= 1'b0;
      if (init) begin
        for (int n = 0; n < L; n++) begin
          pm[n] <= '0;
          pvalid[n] <= (n == 0);
          for (int j = 0; j < M; j++) for (int i = 0; i < NSUB; i++) hist[n][j][i] <= '0;
        end
      end else if (recon || bypass) begin
        upd <= 1'b1;
        for (int n = 0; n < L; n++) begin
          pm[n]      <= npm[n];
          pvalid[n]  <= nval[n];
          upd_par[n] <= npar[n];
          for (int j = 0; j < M; j++) begin
            upd_w[j][n] <= nw[n][j];
            hist[n][j]  <= hist[npar[n]][j];
            hist[n][j][level] <= nw[n][j];
          end
        end
      end
    end
  end

  // Decoded symbols of the best valid path.
  logic [$clog2(L)-1:0] best;
  always_comb begin
    best = '0;
    for (int n = L - 1; n >= 0; n--)
      if (pvalid[n] && (!pvalid[best] || pm[n] >= pm[best])) best = $clog2(L)'(n);
    for (int jp = 0; jp < M; jp++) begin
      for (int i = 0; i < NSUB; i++) begin
        logic [MAXR-1:0] u;
        u = '0;
        for (int j = 0; j < M; j++)
          u = u ^ gf_mul(MAXR'(hist[best][j][i]), kron_entry(j, jp, MB, FI_C, FI_D, R), R);
        dec_u[jp*NSUB + i] = R'(u);
      end
    end
  end

endmodule
