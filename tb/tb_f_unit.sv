// tb_f_unit: drives random likelihood vectors into the F function for
// GF(8) and compares the result with a direct evaluation written here
// (the XOR-convolution sum_t L1[x+t] L2[(beta/alpha) t], no Hadamard transform),
// normalised the same way; checks the latency in clock edges.
module tb_f_unit;
  localparam int Q = 8, R = 3, POLY = 'hB, ALPHA = 2, BETA = 3;
  localparam int LAT = 2 * R + 2;
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

  logic iv, ov;
  logic [7:0] l1 [Q];
  logic [7:0] l2 [Q];
  logic [7:0] lo [Q];
  logic [R-1:0] mu;
  f_unit #(.Q(Q), .ALPHA(ALPHA), .BETA(BETA)) dut (.clk, .rst_n, .in_valid(iv), .l1, .l2, .out_valid(ov), .lf(lo));

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [7:0] a [Q];
    logic [7:0] b [Q];
    logic [7:0] e [Q];
    int m, t0;
    iv = 0; mu = '0;
    for (int k = 0; k < Q; k++) begin l1[k] = 0; l2[k] = 0; end
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int t = 0; t < 30; t++) begin
      for (int k = 0; k < Q; k++) begin
        a[k] = 8'($urandom_range(0, 255));
        b[k] = (t % 3 == 0) ? 8'($urandom_range(0, 3)) : 8'($urandom_range(0, 255));
        l1[k] = a[k]; l2[k] = b[k];
      end
      m = $urandom_range(0, Q - 1);
      mu = R'(m);
      iv = 1; t0 = cyc;
      @(negedge clk); iv = 0;
      while (!ov && cyc - t0 < 40) @(negedge clk);
      checks++;
      if (cyc - t0 != LAT) begin failures++; $display("latency %0d", cyc - t0); end
      ref_f(a, b, e);
      for (int x = 0; x < Q; x++) begin
        checks++;
        if (lo[x] != e[x]) begin failures++; $display("t=%0d x=%0d got %0d exp %0d", t, x, lo[x], e[x]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
