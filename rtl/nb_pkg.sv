// nb_pkg: constants and GF(2^r) helper functions shared by the split-tree
// nonbinary SCL decoder.
//
// The decoder works on GF(q), q = 2^r, with a 2x2 polar kernel
// F = [[1,0],[alpha,beta]]. Field elements are r-bit polynomials over a
// fixed primitive polynomial per r; multiplication, inversion, and the
// exponent/logarithm tables that drive the LLRV permutations are computed by
// the constant functions below, so no table file is needed. Tables are packed
// into fixed 256 x 8-bit vectors (the largest field used, GF(256)); entry k
// sits at bits [8k +: 8].
//
// The code parameters themselves (the prototype's (128,64) code over
// GF(256), split factor 2, list size 4, skimming factor 16, 16-bit path
// metrics) are the parameter defaults of the modules. The primitive
// polynomials are this design's own choice.
package nb_pkg;

  localparam int MAXR = 8;
  localparam int MAXQ = 1 << MAXR;

  typedef logic [MAXQ*MAXR-1:0] gf_table_t;

  // Primitive polynomial (with the x^r term) for GF(2^r).
  function automatic int gf_poly(input int r);
    case (r)
      1: return 'h3;
      2: return 'h7;
      3: return 'hB;
      4: return 'h13;
      5: return 'h25;
      6: return 'h43;
      7: return 'h89;
      default: return 'h11D;
    endcase
  endfunction

  // Product of a and b in GF(2^r).
  function automatic logic [MAXR-1:0] gf_mul(input logic [MAXR-1:0] a,
                                             input logic [MAXR-1:0] b,
                                             input int r);
    logic [MAXR:0] acc;
    logic [MAXR:0] sh;
    acc = '0;
    sh  = {1'b0, a};
    for (int i = 0; i < MAXR; i++) begin
      if (i < r) begin
        if (b[i]) acc = acc ^ sh;
        sh = sh << 1;
        if (sh[r]) sh = sh ^ (MAXR+1)'(gf_poly(r));
      end
    end
    return acc[MAXR-1:0];
  endfunction

  // Multiplicative inverse in GF(2^r) (a^(q-2)); inverse of 0 is 0.
  function automatic logic [MAXR-1:0] gf_inv(input logic [MAXR-1:0] a, input int r);
    logic [MAXR-1:0] res;
    res = 1;
    for (int i = 0; i < (1 << r) - 2; i++) res = gf_mul(res, a, r);
    return (a == 0) ? '0 : res;
  endfunction

  // exp table: entry k = g^k for the generator g = x, k = 0 .. q-2.
  function automatic gf_table_t gf_exp_table(input int r);
    gf_table_t t;
    logic [MAXR-1:0] v;
    t = '0;
    v = 1;
    for (int k = 0; k < MAXQ - 1; k++) begin
      if (k < (1 << r) - 1) begin
        t[8*k +: 8] = 8'(v);
        v = gf_mul(v, 2, r);
      end
    end
    return t;
  endfunction

  // log table: entry x = log_g(x) for x = 1 .. q-1 (entry 0 unused).
  function automatic gf_table_t gf_log_table(input int r);
    gf_table_t t;
    logic [MAXR-1:0] v;
    t = '0;
    v = 1;
    for (int k = 0; k < MAXQ - 1; k++) begin
      if (k < (1 << r) - 1) begin
        t[8*int'(v) +: 8] = 8'(k);
        v = gf_mul(v, 2, r);
      end
    end
    return t;
  endfunction

  // Entry (a,b) of the m-fold Kronecker power of the 2x2 matrix [[1,0],[c,d]].
  function automatic logic [MAXR-1:0] kron_entry(input int a, input int b, input int m,
                                                 input logic [MAXR-1:0] c,
                                                 input logic [MAXR-1:0] d,
                                                 input int r);
    logic [MAXR-1:0] p;
    p = 1;
    for (int i = 0; i < 8; i++) begin
      if (i < m) begin
        case ({a[i], b[i]})
          2'b00: p = p;
          2'b01: p = '0;
          2'b10: p = gf_mul(p, c, r);
          default: p = gf_mul(p, d, r);
        endcase
      end
    end
    return p;
  endfunction

  // 32 * log2(v) in fixed point with 5 fraction bits, piecewise linear
  // (leading-one position as integer part, the bits below it as fraction);
  // 0 for v = 0.
  function automatic int log2_fx(input logic [31:0] v);
    int p;
    logic [4:0] f;
    p = 0;
    for (int i = 0; i < 32; i++) if (v[i]) p = i;
    f = 5'((v << (32 - p)) >> 27);   // five bits below the leading one
    return (v == 0) ? 0 : p * 32 + int'(f);
  endfunction

  // Metric increment of a symbol whose leaf likelihood is v out of a leaf
  // vector summing to total: 255 + 32 * log2(v / total), floored at 0. It
  // is 255 for a certain symbol and falls by 32 per halving of its
  // conditional probability.
  function automatic logic [7:0] sym_metric(input logic [7:0] v, input logic [31:0] total);
    int d;
    d = 255 - (log2_fx(total) - log2_fx({24'd0, v}));
    return (v == 0 || d < 0) ? 8'd0 : 8'(d);
  endfunction

endpackage
