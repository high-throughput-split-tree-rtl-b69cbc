// tb_pm_updater: GF(8), L = 2, M = 2, LS = 4, NSUB = 4. After init, runs
// the four levels of a sub-code with a mix of bypass and recon updates
// (random top global paths and skimmed sub-paths). Checks each new list
// (parents, symbols, metrics, valid flags, the upd pulse) against a model
// kept here, and at the end checks dec_u: the best path's symbols mapped
// back through u0 = w0 + (alpha/beta) w1, u1 = w1 / beta.
module tb_pm_updater;
  localparam int Q = 8, R = 3, POLY = 'hB, L = 2, M = 2, LS = 4, NSUB = 4, PW = 16, ALPHA = 2, BETA = 3;
  localparam int TW = 4, SEW = 1 + PW + TW, GTW = 4, GEW = 1 + PW + GTW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic init, recon, bypass, upd;
  logic [1:0] level;
  logic [GEW-1:0] gtop [L];
  logic [SEW-1:0] sub [M][LS];
  logic [PW-1:0] subpm0 [M][L];
  logic [PW-1:0] pm [L];
  logic pv [L];
  logic [0:0] upar [L];
  logic [R-1:0] uw [M][L];
  logic [R-1:0] dec [M*NSUB];
  pm_updater #(.Q(Q), .L(L), .M(M), .LS(LS), .NSUB(NSUB), .PW(PW), .ALPHA(ALPHA), .BETA(BETA)) dut (
    .clk, .rst_n, .init, .recon, .bypass, .level, .gtop, .sub, .subpm0, .pm, .pvalid(pv),
    .upd, .upd_par(upar), .upd_w(uw), .dec_u(dec));

  function automatic int mul(input int a, input int b);
    int p;
    p = 0;
    for (int i = 0; i < R; i++) begin
      if ((b >> i) & 1) p ^= a;
      a = a << 1;
      if ((a >> R) & 1) a ^= POLY;
    end
    return p;
  endfunction
  function automatic int inv(input int a);
    for (int t = 1; t < Q; t++) if (mul(a, t) == 1) return t;
    return 0;
  endfunction

  initial begin
    repeat (500) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int mpm [L], mh [L][M][NSUB], nh [L][M][NSUB];
    logic mv [L];
    int ep [L], ew [L][M];
    init = 0; recon = 0; bypass = 0; level = 0;
    for (int n = 0; n < L; n++) gtop[n] = 0;
    for (int j = 0; j < M; j++) begin for (int k = 0; k < LS; k++) sub[j][k] = 0; for (int n = 0; n < L; n++) subpm0[j][n] = 0; end
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    init = 1; @(negedge clk); init = 0;
    checks++; if (!pv[0] || pv[1] || pm[0] != 0) failures++;
    mpm[0] = 0; mpm[1] = 0; mv[0] = 1; mv[1] = 0;
    for (int n = 0; n < L; n++) for (int j = 0; j < M; j++) for (int i = 0; i < NSUB; i++) mh[n][j][i] = 0;
    for (int i = 0; i < NSUB; i++) begin
      level = 2'(i);
      if (i == 1) begin
        for (int j = 0; j < M; j++) for (int n = 0; n < L; n++) subpm0[j][n] = PW'(mpm[n] + $urandom_range(0, 255));
        for (int n = 0; n < L; n++) begin
          ep[n] = n;
          for (int j = 0; j < M; j++) ew[n][j] = 0;
          mpm[n] = mpm[n] + (int'(subpm0[0][n]) - mpm[n]) + (int'(subpm0[1][n]) - mpm[n]);
        end
        bypass = 1;
      end else begin
        int c [L];
        for (int j = 0; j < M; j++) for (int k = 0; k < LS; k++)
          sub[j][k] = {1'b1, PW'($urandom_range(0, 9999)), TW'($urandom_range(0, L * Q - 1))};
        for (int n = 0; n < L; n++) begin
          int p;
          c[n] = $urandom_range(0, LS * LS - 1);
          p = $urandom_range(1000, 2000);
          gtop[n] = {1'b1, PW'(p + 10 * (L - n)), GTW'(c[n])};
          ep[n] = int'(sub[0][c[n] % LS][TW-1:0]) / Q;
          for (int j = 0; j < M; j++) ew[n][j] = int'(sub[j][(c[n] >> (2 * j)) % LS][TW-1:0]) % Q;
          mpm[n] = p + 10 * (L - n);
          mv[n] = 1;
        end
        recon = 1;
      end
      for (int n = 0; n < L; n++) begin
        nh[n] = mh[ep[n]];
        for (int j = 0; j < M; j++) nh[n][j][i] = ew[n][j];
      end
      mh = nh;
      @(negedge clk); recon = 0; bypass = 0;
      checks++; if (!upd) begin failures++; $display("no upd"); end
      for (int n = 0; n < L; n++) begin
        checks++;
        if (int'(upar[n]) != ep[n] || int'(pm[n]) != mpm[n] || pv[n] != mv[n]) begin
          failures++; $display("level %0d path %0d: par %0d/%0d pm %0d/%0d", i, n, upar[n], ep[n], pm[n], mpm[n]);
        end
        for (int j = 0; j < M; j++) begin
          checks++; if (int'(uw[j][n]) != ew[n][j]) begin failures++; $display("level %0d w", i); end
        end
      end
      @(negedge clk);
      checks++; if (upd) failures++;
    end
    begin
      int b;
      b = (mpm[1] > mpm[0]) ? 1 : 0;
      for (int i = 0; i < NSUB; i++) begin
        int u0, u1;
        u1 = mul(mh[b][1][i], inv(BETA));
        u0 = mh[b][0][i] ^ mul(mh[b][1][i], mul(ALPHA, inv(BETA)));
        checks++;
        if (int'(dec[i]) != u0 || int'(dec[NSUB + i]) != u1) begin failures++; $display("dec_u level %0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
