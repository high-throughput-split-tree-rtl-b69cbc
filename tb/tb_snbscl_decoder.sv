// tb_snbscl_decoder: end-to-end test of the split-tree decoder at a reduced
// size (GF(8), N = 16, M = 2, L = 4, LS = 4).
//
// For each frame the bench draws random information symbols (frozen
// symbols are 0), encodes them with its own model of u * F^(x)n, and builds
// channel LLRVs in which the transmitted value is clearly the most likely
// one while the others carry random likelihoods. It loads the LLRVs, starts
// the decoder and compares dec_u with the transmitted symbols. It also
// checks the trellis cycle budget (PE_LAT cycles per stage operation,
// 2*NSUB-2 operations per frame) and counts how often each mechanism
// occurred: reconciliation, bypass of all-frozen levels, skimming (more
// valid sub-paths than LS), path replacement by another path's child, and a
// global path rejected by the frozen constraint across sub-trees.
module tb_snbscl_decoder;
  import nb_pkg::*;
  localparam int Q = 8, N = 16, M = 2, L = 4, LS = 4, PW = 16;
  localparam int R = 3, NSUB = N / M, ALPHA = 2, BETA = 3;
  localparam int FRAMES = 12;
  localparam int PEL = 2 * R + 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 ch_we;
  logic [$clog2(N)-1:0] ch_addr;
  logic [7:0]           ch_data [Q];
  logic                 frozen  [N];
  logic                 start, busy, done;
  logic [R-1:0]         dec_u   [N];

  snbscl_decoder #(.Q(Q), .N(N), .M(M), .L(L), .LS(LS), .PW(PW), .ALPHA(ALPHA), .BETA(BETA)) dut (
    .clk, .rst_n, .ch_we, .ch_addr, .ch_data, .frozen, .start, .busy, .done, .dec_u);

  int checks = 0, failures = 0;
  int n_recon = 0, n_bypass = 0, n_skim = 0, n_replace = 0, n_reject = 0;
  int leaf_cycles = 0;

  // Mechanism counters, observed inside the design.
  always @(posedge clk) if (rst_n) begin
    if (dut.rp_start) begin
      int nv;
      n_recon++;
      nv = 0;
      for (int l = 0; l < L; l++) if (dut.pvalid[l]) nv++;
      if (nv * Q > LS) n_skim++;
    end
    if (dut.rp_bypass) n_bypass++;
    if (dut.rp_upd && !dut.u_rp.u_upd.bypass)
      for (int n = 0; n < L; n++) if (dut.upd_par[n] != n && dut.u_rp.u_upd.nval[n]) n_replace++;
    if (dut.u_rp.gv) begin
      for (int c = 0; c < LS ** M; c++) begin
        logic allv, samep;
        allv = 1; samep = 1;
        for (int j = 0; j < M; j++) begin
          if (!dut.u_rp.sub[j][(c >> (2*j)) % LS][PW + $clog2(Q*L)]) allv = 0;
          if (dut.u_rp.sub[j][(c >> (2*j)) % LS][$clog2(Q*L)-1:0] / Q !=
              dut.u_rp.sub[0][c % LS][$clog2(Q*L)-1:0] / Q) samep = 0;
        end
        if (allv && samep && !dut.u_rp.gpath[c][PW + $clog2(LS**M)]) n_reject++;
      end
    end
    if (dut.state == 3'(2)) leaf_cycles++;  // S_WLEAF
  end

  function automatic void encode(input logic [R-1:0] u [N], output logic [R-1:0] c [N]);
    c = u;
    for (int h = 1; h < N; h *= 2)
      for (int b = 0; b < N; b += 2 * h)
        for (int k = 0; k < h; k++) begin
          logic [R-1:0] a, bb;
          a = c[b+k]; bb = c[b+h+k];
          c[b+k]   = a ^ R'(gf_mul(MAXR'(bb), MAXR'(ALPHA), R));
          c[b+h+k] = R'(gf_mul(MAXR'(bb), MAXR'(BETA), R));
        end
  endfunction

  // Trellis stage operations of one frame: NS for leaf 0, ctz(i)+1 after.
  function automatic int stage_ops();
    int t;
    t = 0;
    for (int i = 0; i < NSUB; i++) begin
      int z;
      if (i == 0) t += $clog2(NSUB);
      else begin
        z = 0;
        while (((i >> z) & 1) == 0) z++;
        t += z + 1;
      end
    end
    return t;
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [R-1:0] u [N];
    logic [R-1:0] c [N];
    int t0, cyc;
    ch_we = 0; ch_addr = '0; start = 0;
    for (int k = 0; k < Q; k++) ch_data[k] = '0;
    // Frozen set: indices of low weight (5 of weight <= 1, and 3, 5, 6).
    for (int a = 0; a < N; a++) frozen[a] = ($countones(a) <= 1) || a == 3 || a == 5 || a == 6;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int f = 0; f < FRAMES; f++) begin
      for (int a = 0; a < N; a++) u[a] = frozen[a] ? '0 : R'($urandom);
      encode(u, c);
      for (int a = 0; a < N; a++) begin
        ch_we <= 1; ch_addr <= 4'(a);
        for (int x = 0; x < Q; x++)
          ch_data[x] <= (x == c[a]) ? 8'(200 + $urandom_range(0, 55)) : 8'($urandom_range(0, 90));
        @(posedge clk);
      end
      ch_we <= 0;
      leaf_cycles = 0;
      start <= 1;
      @(posedge clk);
      start <= 0;
      t0 = $time;
      while (!done) @(posedge clk);
      cyc = ($time - t0) / 10;
      for (int a = 0; a < N; a++) begin
        checks++;
        if (dec_u[a] !== u[a]) begin
          failures++;
          $display("frame %0d symbol %0d: got %0d expected %0d", f, a, dec_u[a], u[a]);
        end
      end
      // Trellis budget: PE_LAT per stage operation, plus one issue cycle per leaf
      // spent in the wait state.
      checks++;
      if (leaf_cycles != stage_ops() * PEL + NSUB) begin
        failures++;
        $display("trellis cycles %0d, expected %0d", leaf_cycles, stage_ops() * PEL + NSUB);
      end
      $display("frame %0d decoded in %0d cycles", f, cyc);
      @(posedge clk);
    end
    $display("recon=%0d bypass=%0d skim=%0d replace=%0d reject=%0d",
             n_recon, n_bypass, n_skim, n_replace, n_reject);
    checks++; if (n_recon == 0)   begin failures++; $display("no reconciliation"); end
    checks++; if (n_bypass == 0)  begin failures++; $display("no bypass"); end
    checks++; if (n_skim == 0)    begin failures++; $display("no skimming"); end
    checks++; if (n_replace == 0) begin failures++; $display("no path replacement"); end
    checks++; if (n_reject == 0)  begin failures++; $display("no constraint rejection"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
