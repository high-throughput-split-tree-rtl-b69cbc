// snbscl_decoder: split-tree nonbinary successive-cancellation list (S-NBSCL)
// polar decoder, top level.
//
// An (N, K) polar code over GF(Q) is split into M sub-codes of NSUB = N/M
// symbols. Sub-decoder j decodes sub-code j from channel LLRVs
// j*NSUB .. (j+1)*NSUB-1; the M sub-decoders run in parallel, one level i
// (symbol i of every sub-code) at a time, and the reconciliation processor
// joins their candidates into L global list paths after every level:
//   leaf    - all sub-decoders compute the leaf LLRVs of level i for all L
//             paths (PE_LAT = 2 log2 Q + 3 cycles per trellis stage);
//   metric  - M sub-path PM calculators form Q*L sub-path metrics each;
//   recon   - the reconciliation processor keeps the best L global paths,
//             or, when all M symbols of the level are frozen, bypasses
//             sorting and extends every path with the frozen value;
//   update  - the sub-decoders copy path state and propagate partial sums
//             (log2 NSUB cycles).
// After level NSUB-1, dec_u holds the N decided symbols of the best path
// and done pulses.
//
// Interface: load the N channel LLRVs (8-bit likelihoods, larger = more
// likely, entry x for symbol value x) with ch_we/ch_addr/ch_data, hold
// frozen[a] = 1 for every frozen symbol a (frozen symbols take the value
// 0), then pulse start. busy is high until done. Channel loading and the
// frozen set are this design's interface; the paper shows neither.
//
// Defaults are the prototype's: (128,64) code over GF(256), M = 2, L = 4,
// LS = 16, 8-bit LLRVs, 16-bit metrics. alpha and beta are this design's
// choice.
module snbscl_decoder #(
  parameter int Q     = 256,
  parameter int N     = 128,
  parameter int M     = 2,
  parameter int L     = 4,
  parameter int LS    = 16,
  parameter int PW    = 16,
  parameter int ALPHA = 2,
  parameter int BETA  = 3,
  localparam int R    = $clog2(Q),
  localparam int NSUB = N / M
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ch_we,
  input  logic [$clog2(N)-1:0] ch_addr,
  input  logic [7:0]           ch_data [Q],
  input  logic                 frozen  [N],
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output logic [R-1:0]         dec_u   [N]
);
  localparam int NS = $clog2(NSUB);

  typedef enum logic [2:0] {S_IDLE, S_LEAF, S_WLEAF, S_METRIC, S_RECON, S_WREC, S_WUPD} state_t;
  state_t state;
  logic [NS-1:0] level;

  // Sub-decoders and their sub-path PM calculators.
  logic          sd_start;
  logic          sd_done [M];
  logic          sd_udone [M];
  logic [7:0]    leaf_llrv [M][L][Q];
  logic [PW-1:0] subpm [M][L][Q];
  logic          sv_unused [M][L];
  logic          pmv [M];
  logic [PW-1:0] pm [L];
  logic          pvalid [L];
  logic          rp_upd;
  logic [$clog2(L)-1:0] upd_par [L];
  logic [R-1:0]  upd_w [M][L];

  for (genvar j = 0; j < M; j++) begin : g_sub
    logic we;
    assign we = ch_we && (int'(ch_addr) / NSUB == j);
    sc_subdecoder #(.Q(Q), .NSUB(NSUB), .L(L), .ALPHA(ALPHA), .BETA(BETA)) u_sd (
      .clk, .rst_n,
      .ch_we(we), .ch_addr(NS'(int'(ch_addr) % NSUB)), .ch_data,
      .start(sd_start), .leaf(level), .done(sd_done[j]), .leaf_llrv(leaf_llrv[j]),
      .upd(rp_upd), .upd_leaf(level), .upd_par, .upd_w(upd_w[j]), .upd_done(sd_udone[j]));
    subpath_pm_calc #(.Q(Q), .L(L), .PW(PW)) u_pmc (
      .clk, .rst_n, .in_valid(sd_done[j]), .leaf_llrv(leaf_llrv[j]), .pm, .pvalid,
      .out_valid(pmv[j]), .subpm(subpm[j]), .svalid(sv_unused[j]));
  end

  // Frozen flags of the current level, one per sub-code position.
  logic frozen_u [M];
  logic all_frozen;
  always_comb begin
    all_frozen = 1'b1;
    for (int j = 0; j < M; j++) begin
      frozen_u[j] = frozen[j*NSUB + int'(level)];
      if (!frozen_u[j]) all_frozen = 1'b0;
    end
  end

  logic rp_init, rp_start, rp_bypass;
  recon_processor #(.Q(Q), .L(L), .M(M), .LS(LS), .NSUB(NSUB), .PW(PW),
                    .ALPHA(ALPHA), .BETA(BETA)) u_rp (
    .clk, .rst_n, .init(rp_init), .start(rp_start), .bypass(rp_bypass), .level,
    .subpm, .frozen_u, .pm, .pvalid, .upd(rp_upd), .upd_par, .upd_w, .dec_u);

  // Level sequencer.
  always_comb begin
    sd_start  = (state == S_LEAF);
    rp_init   = (state == S_IDLE) && start;
    rp_start  = (state == S_RECON) && !all_frozen;
    rp_bypass = (state == S_RECON) && all_frozen;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      level <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE:   if (start) begin level <= '0; state <= S_LEAF; end
        S_LEAF:   state <= S_WLEAF;
        S_WLEAF:  if (sd_done[0]) state <= S_METRIC;
        S_METRIC: if (pmv[0]) state <= S_RECON;
        S_RECON:  state <= S_WREC;
        S_WREC:   if (rp_upd) state <= S_WUPD;
        S_WUPD:   if (sd_udone[0]) begin
                    if (level == NS'(NSUB - 1)) begin
                      state <= S_IDLE;
                      done  <= 1'b1;
                    end else begin
                      level <= level + 1'b1;
                      state <= S_LEAF;
                    end
                  end
        default:  state <= S_IDLE;
      endcase
    end
  end
  assign busy = (state != S_IDLE);

endmodule
