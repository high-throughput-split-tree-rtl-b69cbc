// tb_global_path_calc: GF(8), L = 2, M = 2, LS = 4. Random skimmed
// sub-paths (parent, symbol, metric, valid) and frozen flags. Every one of
// the 16 assembled global paths is checked against a reference: valid only
// if both sub-paths are valid, share a parent and the recovered symbols
// u0 = w0 + (alpha/beta) w1, u1 = w1 / beta are 0 where frozen; metric =
// pm0 + pm1 - parent metric.
module tb_global_path_calc;
  localparam int Q = 8, R = 3, POLY = 'hB, L = 2, M = 2, LS = 4, PW = 16, ALPHA = 2, BETA = 3;
  localparam int TW = 4, SEW = 1 + PW + TW, NG = 16, GTW = 4, GEW = 1 + PW + GTW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic iv, ov;
  logic [SEW-1:0] sub [M][LS];
  logic [PW-1:0] pm [L];
  logic fu [M];
  logic [GEW-1:0] gp [NG];
  global_path_calc #(.Q(Q), .L(L), .M(M), .LS(LS), .PW(PW), .ALPHA(ALPHA), .BETA(BETA)) dut (
    .clk, .rst_n, .in_valid(iv), .sub, .pm, .frozen_u(fu), .out_valid(ov), .gpath(gp));

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

  int nvalid = 0, nrej = 0;
  initial begin
    iv = 0;
    for (int j = 0; j < M; j++) begin fu[j] = 0; for (int k = 0; k < LS; k++) sub[j][k] = 0; end
    pm[0] = 0; pm[1] = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int t = 0; t < 40; t++) begin
      int par [M][LS], w [M][LS], spm [M][LS];
      logic sv [M][LS];
      pm[0] = PW'($urandom_range(0, 1000)); pm[1] = PW'($urandom_range(0, 1000));
      fu[0] = (t % 4 == 1) || (t % 4 == 3); fu[1] = (t % 4 == 2) || (t % 4 == 3);
      for (int j = 0; j < M; j++) for (int k = 0; k < LS; k++) begin
        par[j][k] = $urandom_range(0, L - 1);
        w[j][k] = (t % 2) ? $urandom_range(0, 1) : $urandom_range(0, Q - 1);
        sv[j][k] = ($urandom_range(0, 7) != 0);
        spm[j][k] = int'(pm[par[j][k]]) + $urandom_range(0, 255);
        sub[j][k] = {sv[j][k], PW'(spm[j][k]), TW'(par[j][k] * Q + w[j][k])};
      end
      iv = 1;
      @(negedge clk); iv = 0;
      checks++; if (!ov) failures++;
      for (int c = 0; c < NG; c++) begin
        int k0, k1, u0, u1, epm;
        logic ev;
        k0 = c % LS; k1 = c / LS;
        u1 = mul(w[1][k1], inv(BETA));
        u0 = w[0][k0] ^ mul(w[1][k1], mul(ALPHA, inv(BETA)));
        ev = sv[0][k0] && sv[1][k1] && par[0][k0] == par[1][k1] && !(fu[0] && u0 != 0) && !(fu[1] && u1 != 0);
        epm = spm[0][k0] + spm[1][k1] - int'(pm[par[0][k0]]);
        checks++;
        if (gp[c][GEW-1] != ev || (ev && int'(gp[c][PW+GTW-1:GTW]) != epm) || int'(gp[c][GTW-1:0]) != c) begin
          failures++; $display("t=%0d c=%0d got v=%0d pm=%0d exp v=%0d pm=%0d", t, c, gp[c][GEW-1], gp[c][PW+GTW-1:GTW], ev, epm);
        end
        if (ev) nvalid++;
        if (sv[0][k0] && sv[1][k1] && par[0][k0] == par[1][k1] && !ev) nrej++;
      end
    end
    checks++; if (nvalid == 0 || nrej == 0) begin failures++; $display("coverage %0d %0d", nvalid, nrej); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
