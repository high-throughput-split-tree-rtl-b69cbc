// f_unit: the F function of the nonbinary polar trellis,
//   L_F = s1 * H( H(L1) (.) H(perm(L2)) ),
// i.e. the XOR-convolution of two likelihood vectors computed through the
// Walsh-Hadamard domain.
//
// LLRVs hold 8-bit unsigned likelihoods (larger = more likely) indexed by
// the GF(q) symbol value. For the kernel [[1,0],[alpha,beta]] the upper
// input's symbol is c0 = u0 + (alpha/beta) c1, so L2 is first permuted by the
// GF constant beta/alpha (out[t] = L2[(beta/alpha) t]). Both vectors are
// transformed by a Q-point Hadamard engine, multiplied element by element,
// and transformed again; the second transform gives Q times the convolution,
// which is divided by Q. The scaling factor s1 is realised as a power-of-two
// normalisation: the result is shifted so that its largest entry has its
// leading one in bit 7. The paper names s1 but does not define it; this
// normalisation, and the exact (unrounded) intermediate widths, are this
// design's choice.
//
// Timing: 2 cycles of permutation (L1 is delayed alongside), log2(Q) cycles
// for the first transform, 1 for the product and log2(Q) - 1 registered
// stages of the second transform; its last stage, the division and the
// normalisation are combinational, so out_valid rises 2 log2(Q) + 2 cycles
// after in_valid. The PE's likelihood register adds the final cycle of the
// paper's 2 log2(q) + 3.
module f_unit #(
  parameter int Q     = 256,
  parameter int ALPHA = 2,
  parameter int BETA  = 3
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [7:0] l1 [Q],
  input  logic [7:0] l2 [Q],
  output logic       out_valid,
  output logic [7:0] lf [Q]
);
  import nb_pkg::*;
  localparam int R   = $clog2(Q);
  localparam int C   = int'(gf_mul(MAXR'(BETA), gf_inv(MAXR'(ALPHA), R), R));
  localparam int HW1 = 9 + R;          // first transform output width
  localparam int PW  = 2 * HW1;        // product width
  localparam int HW2 = PW + R;         // second transform output width

  // Permutation of L2, L1 delayed to match.
  logic       pv;
  logic [7:0] l2p [Q];
  logic [7:0] l1d [2][Q];
  llrv_perm #(.Q(Q), .W(8), .C(C)) u_perm (
    .clk, .rst_n, .in_valid, .in_data(l2), .out_valid(pv), .out_data(l2p));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < Q; k++) begin l1d[0][k] <= '0; l1d[1][k] <= '0; end
    end else begin
      l1d[0] <= l1;
      l1d[1] <= l1d[0];
    end
  end

  // First transforms.
  logic signed [8:0]     h1in_a [Q];
  logic signed [8:0]     h1in_b [Q];
  logic signed [HW1-1:0] h1a [Q];
  logic signed [HW1-1:0] h1b [Q];
  logic                  h1v, h1v_unused;
  always_comb begin
    for (int k = 0; k < Q; k++) begin
      h1in_a[k] = {1'b0, l1d[1][k]};
      h1in_b[k] = {1'b0, l2p[k]};
    end
  end
  hadamard_engine #(.Q(Q), .IW(9)) u_h1a (
    .clk, .rst_n, .in_valid(pv), .in_data(h1in_a), .out_valid(h1v), .out_data(h1a));
  hadamard_engine #(.Q(Q), .IW(9)) u_h1b (
    .clk, .rst_n, .in_valid(pv), .in_data(h1in_b), .out_valid(h1v_unused), .out_data(h1b));

  // Element-wise product.
  logic signed [PW-1:0] prod [Q];
  logic                 prv;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prv <= 1'b0;
      for (int k = 0; k < Q; k++) prod[k] <= '0;
    end else begin
      prv <= h1v;
      for (int k = 0; k < Q; k++) prod[k] <= PW'(h1a[k]) * PW'(h1b[k]);
    end
  end

  // Second transform, last stage combinational.
  logic signed [HW2-1:0] h2 [Q];
  hadamard_engine #(.Q(Q), .IW(PW), .REG_LAST(1'b0)) u_h2 (
    .clk, .rst_n, .in_valid(prv), .in_data(prod), .out_valid(out_valid), .out_data(h2));

  // Divide by Q and normalise (scaling factor s1).
  logic [HW2-1:0] conv [Q];
  logic [HW2-1:0] orall;
  int             msb;
  always_comb begin
    orall = '0;
    for (int k = 0; k < Q; k++) begin
      conv[k] = HW2'(h2[k] >>> R);
      if (h2[k] < 0) conv[k] = '0;  // cannot happen for exact arithmetic
      orall = orall | conv[k];
    end
    msb = 0;
    for (int b = 0; b < HW2; b++) if (orall[b]) msb = b;
    for (int k = 0; k < Q; k++) begin
      if (msb >= 7) lf[k] = 8'(conv[k] >> (msb - 7));
      else          lf[k] = 8'(conv[k] << (7 - msb));
    end
  end

endmodule
