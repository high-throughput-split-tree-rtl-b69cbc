// sc_subdecoder: successive-cancellation sub-decoder for one sub-code of
// NSUB = N/M symbols, working on L list paths at once.
//
// Structure. The trellis has NS = log2(NSUB) stages; stage s (0 = channel
// side) has 2^(NS-1-s) PEs, and each of the L paths has its own copy of the
// PE array, so every path's likelihood registers live in its PEs. Stage 0
// reads the channel LLRV memory (shared by all paths, loaded through
// ch_we/ch_addr/ch_data); stage s > 0 reads the likelihood registers of
// stage s-1 of the same path. PE k of stage s combines inputs k and k + h,
// h = 2^(NS-1-s). State registers psl[s] hold, per path, the partial sums
// of the left subtree below stage s, which the G function needs.
//
// Computing leaf i (start, leaf). Stage s uses F when bit NS-1-s of i is 0
// and G when it is 1. Leaf 0 runs all stages; leaf i > 0 starts at stage
// NS-1-ctz(i), the deepest stage whose inputs changed. One stage is issued
// when the previous one delivers, so a leaf costs PE_LAT cycles per stage
// and a whole sub-code 2*NSUB-2 stage operations. done pulses when the leaf
// LLRVs are in leaf_llrv (one per path); they stay there until the next
// operation.
//
// Updating after a decision (upd, upd_leaf, upd_par, upd_w). Path l takes
// over the trellis state of path upd_par[l] (likelihood registers and
// partial sums are copied) and appends symbol upd_w[l]. The partial sum is
// then propagated towards the channel, one stage per cycle, through the GF
// adders of the PEs: at each stage where leaf i is a right child the left
// partial sums are combined with the new ones; at the first stage where it
// is a left child the result is stored in psl and propagation stops. The
// update always takes NS cycles; upd_done pulses in the last one.
//
// The per-path copy of every likelihood register is this design's reading
// of list decoding; the paper does not say how path state is copied.
module sc_subdecoder #(
  parameter int Q     = 256,
  parameter int NSUB  = 64,
  parameter int L     = 4,
  parameter int ALPHA = 2,
  parameter int BETA  = 3
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // channel LLRV memory
  input  logic                    ch_we,
  input  logic [$clog2(NSUB)-1:0] ch_addr,
  input  logic [7:0]              ch_data [Q],
  // leaf computation
  input  logic                    start,
  input  logic [$clog2(NSUB)-1:0] leaf,
  output logic                    done,
  output logic [7:0]              leaf_llrv [L][Q],
  // path update
  input  logic                    upd,
  input  logic [$clog2(NSUB)-1:0] upd_leaf,
  input  logic [$clog2(L)-1:0]    upd_par [L],
  input  logic [$clog2(Q)-1:0]    upd_w   [L],
  output logic                    upd_done
);
  localparam int R  = $clog2(Q);
  localparam int NS = $clog2(NSUB);
  localparam int HN = NSUB / 2;

  // Channel LLRV memory.
  logic [7:0] ch [NSUB][Q];
  always_ff @(posedge clk) if (ch_we) ch[ch_addr] <= ch_data;

  // Control for leaf computation.
  logic                 run;
  logic [NS-1:0]        leaf_q;
  int                   s_cur;
  logic                 issue;
  logic [NS-1:0]        st_ov;     // out_valid of each stage (path 0, PE 0)
  logic [NS-1:0]        stage_go;  // start pulse of each stage

  // Control for update.
  logic                 urun;
  int                   ustep;
  logic [NS-1:0]        uleaf_q;
  logic [$clog2(L)-1:0] par_q [L];
  logic [R-1:0]         w_q   [L];
  logic [R-1:0]         cur   [L][HN];
  logic [R-1:0] uoa_all [NS][L][HN];
  logic [R-1:0] uob_all [NS][L][HN];

  function automatic int first_stage(input logic [NS-1:0] i);
    int z;
    z = 0;
    for (int b = NS - 1; b >= 0; b--) if (i[b]) z = b;
    return (i == 0) ? 0 : NS - 1 - z;
  endfunction

  for (genvar s = 0; s < NS; s++) begin : g_st
    localparam int H = 1 << (NS - 1 - s);   // PEs in this stage
    logic [7:0]   lo   [L][H][Q];           // likelihood registers
    logic [R-1:0] psl  [L][H];              // left partial sums
    logic [R-1:0] uoa  [L][H];
    logic [R-1:0] uob  [L][H];
    logic         ov   [L][H];

    for (genvar l = 0; l < L; l++) begin : g_path
      for (genvar k = 0; k < H; k++) begin : g_pe
        logic [7:0]   in1 [Q];
        logic [7:0]   in2 [Q];
        logic [7:0]   ldv [Q];
        logic [R-1:0] ua, ub;
        if (s == 0) begin : g_ch
          assign in1 = ch[k];
          assign in2 = ch[k + H];
        end else begin : g_up
          assign in1 = g_st[s-1].lo[l][k];
          assign in2 = g_st[s-1].lo[l][k + H];
        end
        assign ldv = lo[par_q[l]][k];
        // GF adder operands: on the first update cycle the parent's state,
        // afterwards the path's own.
        always_comb begin
          if (s == NS - 1) begin
            ua = psl[par_q[l]][k];
            ub = w_q[l];
          end else begin
            ua = psl[l][k];
            ub = cur[l][k];
          end
        end
        nb_pe #(.Q(Q), .ALPHA(ALPHA), .BETA(BETA)) u_pe (
          .clk, .rst_n,
          .in_valid (stage_go[s]),
          .sel_g    (leaf_q[NS-1-s]),
          .l1       (in1),
          .l2       (in2),
          .mu       (psl[l][k]),
          .ld       (urun && ustep == 0),
          .ld_val   (ldv),
          .out_valid(ov[l][k]),
          .lout     (lo[l][k]),
          .ua, .ub,
          .uo_a     (uoa[l][k]),
          .uo_b     (uob[l][k]));
      end
    end
    assign st_ov[s] = ov[0][0];

    // Partial-sum state registers of this stage. The update of stage s
    // happens on update step NS-1-s; step 0 also copies from the parent.
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int l = 0; l < L; l++) for (int k = 0; k < H; k++) psl[l][k] <= '0;
      end else if (urun) begin
        for (int l = 0; l < L; l++) begin
          if (ustep == 0) psl[l] <= psl[par_q[l]];
          // store when leaf is a left child here and a right child below
          if (ustep == NS - 1 - s && !uleaf_q[NS-1-s] &&
              (s == NS - 1 || &uleaf_q[(NS-2-s >= 0 ? NS-2-s : 0):0])) begin
            for (int k = 0; k < H; k++)
              psl[l][k] <= (s == NS - 1) ? w_q[l] : cur[l][k];
          end
        end
      end
    end
  end

  // Running partial sum: combine at stages where the leaf is a right child.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < L; l++) for (int k = 0; k < HN; k++) cur[l][k] <= '0;
    end else if (urun) begin
      for (int l = 0; l < L; l++) begin
        for (int s = 1; s < NS; s++) begin
          if (ustep == NS - 1 - s && uleaf_q[NS-1-s]) begin
            for (int k = 0; k < (1 << (NS - 1 - s)); k++) begin
              cur[l][k]                      <= uoa_all[s][l][k];
              cur[l][k + (1 << (NS - 1 - s))] <= uob_all[s][l][k];
            end
          end
        end
      end
    end
  end

  // Access to the GF adder outputs of stage s (generate arrays cannot be
  // indexed by a variable, so the stages are gathered here).
  for (genvar s = 0; s < NS; s++) begin : g_gather
    always_comb begin
      for (int l = 0; l < L; l++) begin
        for (int k = 0; k < HN; k++) begin
          uoa_all[s][l][k] = (k < (1 << (NS - 1 - s))) ? g_st[s].uoa[l][k % (1 << (NS - 1 - s))] : '0;
          uob_all[s][l][k] = (k < (1 << (NS - 1 - s))) ? g_st[s].uob[l][k % (1 << (NS - 1 - s))] : '0;
        end
      end
    end
  end

  // A stage starts on the issue pulse (first stage of a leaf) or in the
  // cycle the previous stage delivers.
  always_comb
    for (int s = 0; s < NS; s++)
      stage_go[s] = (issue && s_cur == s) ||
                    (s > 0 && run && s_cur == s - 1 && st_ov[(s > 0) ? s - 1 : 0]);

  // Leaf computation controller.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run    <= 1'b0;
      issue  <= 1'b0;
      s_cur  <= 0;
      leaf_q <= '0;
    end else begin
      issue <= 1'b0;
      if (start && !run) begin
        run    <= 1'b1;
        issue  <= 1'b1;
        leaf_q <= leaf;
        s_cur  <= first_stage(leaf);
      end else if (run && st_ov[s_cur]) begin
        if (s_cur == NS - 1) begin
          run <= 1'b0;
        end else begin
          s_cur <= s_cur + 1;
        end
      end
    end
  end
  assign done = run && s_cur == NS - 1 && st_ov[NS-1];
  always_comb for (int l = 0; l < L; l++) leaf_llrv[l] = g_st[NS-1].lo[l][0];

  // Update controller.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      urun    <= 1'b0;
      ustep   <= 0;
      uleaf_q <= '0;
      for (int l = 0; l < L; l++) begin par_q[l] <= '0; w_q[l] <= '0; end
    end else if (upd && !urun) begin
      urun    <= 1'b1;
      ustep   <= 0;
      uleaf_q <= upd_leaf;
      par_q   <= upd_par;
      w_q     <= upd_w;
    end else if (urun) begin
      if (ustep == NS - 1) urun <= 1'b0;
      else                 ustep <= ustep + 1;
    end
  end
  assign upd_done = urun && ustep == NS - 1;

endmodule
