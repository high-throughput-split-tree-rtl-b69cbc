// tb_sc_subdecoder: runs a GF(8) sub-decoder with NSUB = 8 symbols and L = 2
// paths through a whole sub-code. After every leaf it picks random parents
// and symbols for the paths (so path state is copied, sometimes from the
// other path) and keeps its own record of each path's decisions. Each leaf
// LLRV is compared with a reference SC computation written here (direct
// convolution for F, direct permuted product for G, partial sums by
// re-encoding the decided symbols). Checks the leaf latency (PE_LAT per
// trellis stage plus one issue cycle) and the NS-cycle update.
module tb_sc_subdecoder;
  localparam int Q = 8, R = 3, POLY = 'hB, ALPHA = 2, BETA = 3;
  localparam int NSUB = 8, NS = 3, L = 2;
  localparam int LAT = 2 * R + 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

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

  // scale a non-negative vector so that its leading one is in bit 7
  function automatic void norm(input longint v [Q], output logic [7:0] o [Q]);
    longint mx;
    int msb;
    mx = 0;
    for (int k = 0; k < Q; k++) if (v[k] > mx) mx = v[k];
    msb = 0;
    for (int b = 0; b < 62; b++) if ((mx >> b) & 1) msb = b;
    for (int k = 0; k < Q; k++) o[k] = (msb >= 7) ? 8'(v[k] >> (msb - 7)) : 8'(v[k] << (7 - msb));
  endfunction

  function automatic void ref_f(input logic [7:0] a [Q], input logic [7:0] b [Q], output logic [7:0] o [Q]);
    longint v [Q];
    int c;
    c = 0;
    for (int t = 1; t < Q; t++) if (mul(ALPHA, t) == BETA) c = t;   // c = beta/alpha
    for (int x = 0; x < Q; x++) begin
      v[x] = 0;
      for (int t = 0; t < Q; t++) v[x] += longint'(a[x ^ t]) * longint'(b[mul(c, t)]);
    end
    norm(v, o);
  endfunction

  function automatic void ref_g(input logic [7:0] a [Q], input logic [7:0] b [Q], input int mu, output logic [7:0] o [Q]);
    longint v [Q];
    for (int x = 0; x < Q; x++) v[x] = longint'(a[mul(ALPHA, x) ^ mu]) * longint'(b[mul(BETA, x)]);
    norm(v, o);
  endfunction


  logic ch_we, start, done, upd, upd_done;
  logic [NS-1:0] ch_addr, leaf, upd_leaf;
  logic [7:0] ch_data [Q];
  logic [7:0] leaf_llrv [L][Q];
  logic [0:0] upd_par [L];
  logic [R-1:0] upd_w [L];
  sc_subdecoder #(.Q(Q), .NSUB(NSUB), .L(L), .ALPHA(ALPHA), .BETA(BETA)) dut (
    .clk, .rst_n, .ch_we, .ch_addr, .ch_data, .start, .leaf, .done, .leaf_llrv,
    .upd, .upd_leaf, .upd_par, .upd_w, .upd_done);

  logic [7:0] y [NSUB][Q];
  int hist [L][NSUB];

  // Reference leaf LLRV of leaf i for a path with decisions u[0..i-1].
  function automatic void ref_leaf(input int i, input int u [NSUB], output logic [7:0] o [Q]);
    logic [7:0] cur [NSUB][Q];
    logic [7:0] nxt [NSUB][Q];
    int n, h, b0;
    int v [NSUB];
    cur = y;
    n = NSUB;
    for (int s = 0; s < NS; s++) begin
      h = n / 2;
      b0 = (i / n) * n;
      // partial sums of the left half of this subtree: encode u[b0 .. b0+h-1]
      for (int k = 0; k < h; k++) v[k] = u[b0 + k];
      for (int st = 1; st < h; st *= 2)
        for (int bb = 0; bb < h; bb += 2 * st)
          for (int k = 0; k < st; k++) begin
            int a, c;
            a = v[bb + k]; c = v[bb + st + k];
            v[bb + k] = a ^ mul(ALPHA, c);
            v[bb + st + k] = mul(BETA, c);
          end
      for (int k = 0; k < h; k++) begin
        if (((i / h) % 2) == 0) ref_f(cur[k], cur[k + h], nxt[k]);
        else                    ref_g(cur[k], cur[k + h], v[k], nxt[k]);
      end
      cur = nxt;
      n = h;
    end
    o = cur[0];
  endfunction

  function automatic int ops(input int i);
    int z;
    if (i == 0) return NS;
    z = 0;
    while (((i >> z) & 1) == 0) z++;
    return z + 1;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [7:0] e [Q];
    int t0, p [L], w [L];
    int nh [L][NSUB];
    ch_we = 0; start = 0; upd = 0; ch_addr = 0; leaf = 0; upd_leaf = 0;
    for (int l = 0; l < L; l++) begin upd_par[l] = 0; upd_w[l] = 0; end
    for (int k = 0; k < Q; k++) ch_data[k] = 0;
    for (int l = 0; l < L; l++) for (int i = 0; i < NSUB; i++) hist[l][i] = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int a = 0; a < NSUB; a++) begin
      for (int x = 0; x < Q; x++) begin y[a][x] = 8'($urandom); ch_data[x] = y[a][x]; end
      ch_we = 1; ch_addr = NS'(a);
      @(negedge clk);
    end
    ch_we = 0;
    for (int i = 0; i < NSUB; i++) begin
      start = 1; leaf = NS'(i); t0 = cyc;
      @(negedge clk); start = 0;
      while (!done && cyc - t0 < 200) @(negedge clk);
      checks++;
      if (cyc - t0 != ops(i) * LAT + 1) begin failures++; $display("leaf %0d latency %0d", i, cyc - t0); end
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        ref_leaf(i, hist[l], e);
        for (int x = 0; x < Q; x++) begin
          checks++;
          if (leaf_llrv[l][x] != e[x]) begin
            failures++; $display("leaf %0d path %0d x %0d: got %0d exp %0d", i, l, x, leaf_llrv[l][x], e[x]);
          end
        end
      end
      // path update: random parents and symbols
      for (int l = 0; l < L; l++) begin
        p[l] = $urandom_range(0, L - 1);
        w[l] = $urandom_range(0, Q - 1);
        upd_par[l] = 1'(p[l]); upd_w[l] = R'(w[l]);
      end
      for (int l = 0; l < L; l++) begin
        nh[l] = hist[p[l]];
        nh[l][i] = w[l];
      end
      hist = nh;
      upd = 1; upd_leaf = NS'(i); t0 = cyc;
      @(negedge clk); upd = 0;
      while (!upd_done && cyc - t0 < 50) @(negedge clk);
      checks++;
      if (cyc - t0 != NS) begin failures++; $display("update latency %0d", cyc - t0); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
