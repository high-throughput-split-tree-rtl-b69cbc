// tb_recon_processor: GF(8), L = 2, M = 2, LS = 4, NSUB = 4. Runs several
// frames of four levels, with random frozen patterns (a level with both
// symbols frozen is bypassed) and random, distinct sub-path metrics. A
// reference worked out here (validate and skim the top LS sub-paths per
// sub-decoder, assemble all LS^2 global paths, check parents and frozen
// symbols u0 = w0 + (alpha/beta) w1, u1 = w1 / beta, take the top L)
// checks the metric and validity of each new path, that its parent and
// symbols form one of the admissible global paths with that metric, and
// the cycle count from start to upd.
module tb_recon_processor;
  localparam int Q = 8, R = 3, POLY = 'hB, L = 2, M = 2, LS = 4, NSUB = 4, PW = 16, ALPHA = 2, BETA = 3;
  // latency: filter (1 + 2D sort of 16, W = 8) + 1 + 2D sort of 16 keeping 2 (W = 4) + 1
  localparam int REC_LAT = (1 + (1 + 3) * (3 + 1) + 1) + 1 + ((1 + 2) * (2 + 1) + 1) + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic init, start, bypass, upd;
  logic [1:0] level;
  logic [PW-1:0] subpm [M][L][Q];
  logic fz [M];
  logic [PW-1:0] pm [L];
  logic pv [L];
  logic [0:0] upar [L];
  logic [R-1:0] uw [M][L];
  logic [R-1:0] dec [M*NSUB];
  recon_processor #(.Q(Q), .L(L), .M(M), .LS(LS), .NSUB(NSUB), .PW(PW), .ALPHA(ALPHA), .BETA(BETA)) dut (
    .clk, .rst_n, .init, .start, .bypass, .level, .subpm, .frozen_u(fz), .pm, .pvalid(pv),
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
    repeat (3000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int nrec, nbyp;
    nrec = 0; nbyp = 0;
    init = 0; start = 0; bypass = 0; level = 0;
    for (int j = 0; j < M; j++) begin fz[j] = 0; for (int l = 0; l < L; l++) for (int x = 0; x < Q; x++) subpm[j][l][x] = 0; end
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int f = 0; f < 6; f++) begin
      init = 1; @(negedge clk); init = 0;
      for (int i = 0; i < NSUB; i++) begin
        int ppm [L];
        logic ppv [L];
        int perm [M*L*Q];
        int t0;
        level = 2'(i);
        for (int j = 0; j < M; j++) fz[j] = ($urandom_range(0, 2) == 0);
        if (i == 0 && f == 0) begin fz[0] = 1; fz[1] = 1; end
        if (i == 1 && f == 0) begin fz[0] = 1; fz[1] = 0; end
        for (int n = 0; n < L; n++) begin ppm[n] = int'(pm[n]); ppv[n] = pv[n]; end
        // distinct metrics: a shuffled set of offsets
        for (int k = 0; k < M * L * Q; k++) perm[k] = k;
        perm.shuffle();
        for (int j = 0; j < M; j++) for (int l = 0; l < L; l++) for (int x = 0; x < Q; x++)
          subpm[j][l][x] = PW'(ppm[l] + 1 + 5 * perm[(j * L + l) * Q + x]);
        t0 = cyc;
        if (fz[0] && fz[1]) begin
          bypass = 1; @(negedge clk); bypass = 0;
          while (!upd) @(negedge clk);
          nbyp++;
          checks++; if (cyc - t0 != 2) begin failures++; $display("bypass latency %0d", cyc - t0); end
          for (int n = 0; n < L; n++) begin
            checks++;
            if (int'(upar[n]) != n || uw[0][n] != 0 || uw[1][n] != 0 || pv[n] != ppv[n] ||
                (ppv[n] && int'(pm[n]) != int'(subpm[0][n][0]) + int'(subpm[1][n][0]) - ppm[n])) begin
              failures++; $display("bypass path %0d wrong", n);
            end
          end
        end else begin
          int top [M][LS];    // index l*Q+x, -1 = none
          int nv, gpm [LS*LS], gbest [L];
          logic gok [LS*LS];
          // reference: skim per sub-decoder
          for (int j = 0; j < M; j++) begin
            logic frj;
            logic used [L*Q];
            frj = 1;
            for (int jp = 0; jp < M; jp++) if ((jp & j) == j && !fz[jp]) frj = 0;
            for (int e = 0; e < L * Q; e++) used[e] = 0;
            for (int k = 0; k < LS; k++) begin
              int b;
              b = -1;
              for (int e = 0; e < L * Q; e++)
                if (!used[e] && ppv[e / Q] && (!frj || e % Q == 0) &&
                    (b < 0 || subpm[j][e / Q][e % Q] > subpm[j][b / Q][b % Q])) b = e;
              top[j][k] = b;
              if (b >= 0) used[b] = 1;
            end
          end
          // reference: global paths
          nv = 0;
          for (int c = 0; c < LS * LS; c++) begin
            int a, b, u0, u1;
            a = top[0][c % LS]; b = top[1][c / LS];
            gok[c] = 0; gpm[c] = 0;
            if (a >= 0 && b >= 0 && a / Q == b / Q) begin
              u1 = mul(b % Q, inv(BETA));
              u0 = (a % Q) ^ mul(b % Q, mul(ALPHA, inv(BETA)));
              if ((!fz[0] || u0 == 0) && (!fz[1] || u1 == 0)) begin
                gok[c] = 1; nv++;
                gpm[c] = int'(subpm[0][a / Q][a % Q]) + int'(subpm[1][b / Q][b % Q]) - ppm[a / Q];
              end
            end
          end
          for (int n = 0; n < L; n++) begin
            gbest[n] = -1;
            for (int c = 0; c < LS * LS; c++) begin
              logic taken;
              taken = 0;
              for (int k = 0; k < n; k++) if (gbest[k] == c) taken = 1;
              if (gok[c] && !taken && (gbest[n] < 0 || gpm[c] > gpm[gbest[n]])) gbest[n] = c;
            end
          end
          start = 1; @(negedge clk); start = 0;
          while (!upd) @(negedge clk);
          nrec++;
          checks++; if (cyc - t0 != REC_LAT) begin failures++; $display("recon latency %0d, expected %0d", cyc - t0, REC_LAT); end
          for (int n = 0; n < L; n++) begin
            checks++;
            if (pv[n] != (n < nv)) begin failures++; $display("level %0d path %0d valid %0d", i, n, pv[n]); end
            if (n < nv) begin
              logic found;
              checks++;
              if (int'(pm[n]) != gpm[gbest[n]]) begin failures++; $display("level %0d path %0d pm %0d ref %0d", i, n, pm[n], gpm[gbest[n]]); end
              found = 0;
              for (int c = 0; c < LS * LS; c++)
                if (gok[c] && gpm[c] == int'(pm[n]) && top[0][c % LS] == int'(upar[n]) * Q + int'(uw[0][n]) &&
                    top[1][c / LS] == int'(upar[n]) * Q + int'(uw[1][n])) found = 1;
              checks++;
              if (!found) begin failures++; $display("level %0d path %0d: not an admissible global path", i, n); end
            end
          end
        end
        @(negedge clk);
      end
    end
    checks++; if (nrec == 0 || nbyp == 0) failures++;
    $display("reconciliations %0d, bypasses %0d", nrec, nbyp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
