// recon_processor: sub-path skimming reconciliation processor. It turns the
// sub-path metrics of the M sub-decoders into the next list of L global
// paths.
//
// Four stages run one after the other:
//   1. M sub-path filters: validate the Q*L sub-paths of each sub-decoder
//      against the frozen information and keep the top LS (skimming);
//   2. global path calculator: LS^M assembled global paths and metrics;
//   3. global path sorter: a 2D sorter of length LS^M keeping the top L;
//   4. PM updater: disassembles the top L and distributes parents and
//      symbols to the sub-decoders (upd, upd_par, upd_w).
// A level whose M symbols are all frozen skips stages 1-3 (bypass): every
// path simply appends the frozen value.
//
// Sub-decoder j's own symbol w_j counts as frozen when every original
// symbol u_j' it depends on is frozen, i.e. every j' whose bits include
// those of j (the non-zero entries of column j of the kernel power).
//
// Timing: start or bypass for one cycle (subpm must be stable from then
// until upd). Bypass: upd 2 cycles later. Reconciliation: filters
// (1 + sorter latency at length Q*L), 1 cycle of global path calculation,
// the global sorter at length LS^M, 1 cycle of PM update; upd pulses at the
// end. init clears the list to a single valid path with metric 0.
module recon_processor #(
  parameter int Q     = 256,
  parameter int L     = 4,
  parameter int M     = 2,
  parameter int LS    = 16,
  parameter int NSUB  = 64,
  parameter int PW    = 16,
  parameter int ALPHA = 2,
  parameter int BETA  = 3,
  localparam int R    = $clog2(Q)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    init,
  input  logic                    start,
  input  logic                    bypass,
  input  logic [$clog2(NSUB)-1:0] level,
  input  logic [PW-1:0]           subpm    [M][L][Q],
  input  logic                    frozen_u [M],
  output logic [PW-1:0]           pm       [L],
  output logic                    pvalid   [L],
  output logic                    upd,
  output logic [$clog2(L)-1:0]    upd_par  [L],
  output logic [R-1:0]            upd_w    [M][L],
  output logic [R-1:0]            dec_u    [M*NSUB]
);
  localparam int TW  = $clog2(Q * L);
  localparam int SEW = 1 + PW + TW;
  localparam int NG  = LS ** M;
  localparam int GTW = $clog2(NG);
  localparam int GEW = 1 + PW + GTW;

  // 1. sub-path filters
  logic           fdone [M];
  logic [SEW-1:0] sub   [M][LS];
  for (genvar j = 0; j < M; j++) begin : g_filt
    logic fr;
    always_comb begin
      fr = 1'b1;
      for (int jp = 0; jp < M; jp++)
        if ((jp & j) == j && !frozen_u[jp]) fr = 1'b0;
    end
    subpath_filter #(.Q(Q), .L(L), .LS(LS), .PW(PW)) u_filt (
      .clk, .rst_n, .start, .subpm(subpm[j]), .svalid(pvalid), .frozen(fr),
      .done(fdone[j]), .top(sub[j]));
  end

  // 2. global path calculator
  logic           gv;
  logic [GEW-1:0] gpath [NG];
  global_path_calc #(.Q(Q), .L(L), .M(M), .LS(LS), .PW(PW), .ALPHA(ALPHA), .BETA(BETA)) u_gcalc (
    .clk, .rst_n, .in_valid(fdone[0]), .sub, .pm, .frozen_u, .out_valid(gv), .gpath);

  // 3. global path sorter
  logic           gdone, gbusy;
  logic [GEW-1:0] gtop [L];
  sorter_2d #(.NIN(NG), .KEEP(L), .EW(GEW), .KW(1 + PW)) u_gsort (
    .clk, .rst_n, .start(gv), .in_data(gpath), .busy(gbusy), .done(gdone), .top(gtop));

  // 4. PM updater
  logic [PW-1:0] subpm0 [M][L];
  always_comb
    for (int j = 0; j < M; j++) for (int l = 0; l < L; l++) subpm0[j][l] = subpm[j][l][0];

  logic byp_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) byp_q <= 1'b0;
    else        byp_q <= bypass;

  pm_updater #(.Q(Q), .L(L), .M(M), .LS(LS), .NSUB(NSUB), .PW(PW), .ALPHA(ALPHA), .BETA(BETA)) u_upd (
    .clk, .rst_n, .init, .recon(gdone), .bypass(byp_q), .level, .gtop, .sub, .subpm0,
    .pm, .pvalid, .upd, .upd_par, .upd_w, .dec_u);

  // Rules of use: one operation at a time (start and bypass are low during
  // reset, so the checks need no reset qualifier).
  a_one_op: assert property (@(posedge clk) !(start && bypass));
  a_no_restart: assert property (@(posedge clk) start |-> !gbusy);

endmodule
