// g_unit: the G function of the nonbinary polar trellis,
//   L_G[x] = s2 * L1[alpha x + mu] * L2[beta x],
// the likelihood of the lower symbol of a kernel once the upper one's partial
// sum mu is known.
//
// L1 is permuted by alpha (out[y] = L1[alpha y]) and then shifted by the
// partial sum, which in GF(2^r) is an XOR of the index; because the shift
// follows the multiplicative permutation, the shift amount is mu/alpha. L2
// is permuted by beta. The two vectors are multiplied element by element and
// the 16-bit products normalised to 8 bits (leading one of the largest entry
// in bit 7), which is how this design realises the scaling factor s2.
//
// Timing: 2 cycles per permutation, 1 for the partial-sum shift, 1 for the
// product; normalisation is combinational, so out_valid rises 4 cycles after
// in_valid. The PE's hold register is the paper's fifth G cycle.
module g_unit #(
  parameter int Q     = 256,
  parameter int ALPHA = 2,
  parameter int BETA  = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [7:0]            l1 [Q],
  input  logic [7:0]            l2 [Q],
  input  logic [$clog2(Q)-1:0]  mu,
  output logic                  out_valid,
  output logic [7:0]            lg [Q]
);
  import nb_pkg::*;
  localparam int R = $clog2(Q);
  localparam logic [MAXR-1:0] AINV = gf_inv(MAXR'(ALPHA), R);

  logic       v2, v2b;
  logic [7:0] a  [Q];
  logic [7:0] bp [Q];
  llrv_perm #(.Q(Q), .W(8), .C(ALPHA)) u_pa (
    .clk, .rst_n, .in_valid, .in_data(l1), .out_valid(v2), .out_data(a));
  llrv_perm #(.Q(Q), .W(8), .C(BETA)) u_pb (
    .clk, .rst_n, .in_valid, .in_data(l2), .out_valid(v2b), .out_data(bp));

  // Partial sum travels with the data, pre-divided by alpha.
  logic [R-1:0] mu_d [2];
  logic [R-1:0] mu_a;
  assign mu_a = R'(gf_mul(MAXR'(mu), AINV, R));

  logic       v3, v4;
  logic [7:0] sh  [Q];
  logic [7:0] bd  [Q];
  logic [15:0] pr [Q];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mu_d[0] <= '0; mu_d[1] <= '0;
      v3 <= 1'b0; v4 <= 1'b0;
      for (int k = 0; k < Q; k++) begin sh[k] <= '0; bd[k] <= '0; pr[k] <= '0; end
    end else begin
      mu_d[0] <= mu_a;
      mu_d[1] <= mu_d[0];
      v3 <= v2 & v2b;
      v4 <= v3;
      for (int x = 0; x < Q; x++) begin
        sh[x] <= a[x ^ int'(mu_d[1])];
        bd[x] <= bp[x];
        pr[x] <= 16'(sh[x]) * 16'(bd[x]);
      end
    end
  end
  assign out_valid = v4;

  // Normalisation (scaling factor s2).
  logic [15:0] orall;
  int          msb;
  always_comb begin
    orall = '0;
    for (int k = 0; k < Q; k++) orall = orall | pr[k];
    msb = 0;
    for (int b = 0; b < 16; b++) if (orall[b]) msb = b;
    for (int k = 0; k < Q; k++) begin
      if (msb >= 7) lg[k] = 8'(pr[k] >> (msb - 7));
      else          lg[k] = 8'(pr[k] << (7 - msb));
    end
  end

endmodule
