// nb_pe: processing element of a nonbinary SC (sub-)decoder.
//
// It holds one F unit, one G unit, the output multiplexer, the likelihood
// register that stores the selected result, and the GF adders that combine
// partial sums on the way back up the trellis. F and G both start on
// in_valid; sel_g (captured with in_valid) chooses which result is kept. The
// G result is parked in a hold register when it is ready so that both
// functions deliver through the same likelihood register with the paper's
// common PE latency of 2 log2(q) + 3 cycles.
//
// The likelihood register also has a load port (ld/ld_val), used when a list
// path inherits the trellis state of another path after path selection.
//
// GF adders (combinational): for a left-child partial sum ua and a
// right-child partial sum ub, the parent partial sums are
// ua + alpha*ub and beta*ub (the kernel [[1,0],[alpha,beta]]).
//
// Timing: out_valid pulses 2 log2(Q) + 3 cycles after in_valid and lout then
// holds its value until the next result or load. One operation at a time:
// in_valid must not repeat before out_valid.
module nb_pe #(
  parameter int Q     = 256,
  parameter int ALPHA = 2,
  parameter int BETA  = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 sel_g,
  input  logic [7:0]           l1 [Q],
  input  logic [7:0]           l2 [Q],
  input  logic [$clog2(Q)-1:0] mu,
  input  logic                 ld,
  input  logic [7:0]           ld_val [Q],
  output logic                 out_valid,
  output logic [7:0]           lout [Q],
  // GF adders
  input  logic [$clog2(Q)-1:0] ua,
  input  logic [$clog2(Q)-1:0] ub,
  output logic [$clog2(Q)-1:0] uo_a,
  output logic [$clog2(Q)-1:0] uo_b
);
  import nb_pkg::*;
  localparam int R = $clog2(Q);

  logic       fv, gv, sel_q;
  logic [7:0] lf   [Q];
  logic [7:0] lg   [Q];
  logic [7:0] ghold [Q];

  f_unit #(.Q(Q), .ALPHA(ALPHA), .BETA(BETA)) u_f (
    .clk, .rst_n, .in_valid, .l1, .l2, .out_valid(fv), .lf);
  g_unit #(.Q(Q), .ALPHA(ALPHA), .BETA(BETA)) u_g (
    .clk, .rst_n, .in_valid, .l1, .l2, .mu, .out_valid(gv), .lg);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_q     <= 1'b0;
      out_valid <= 1'b0;
      for (int k = 0; k < Q; k++) begin ghold[k] <= '0; lout[k] <= '0; end
    end else begin
      if (in_valid) sel_q <= sel_g;
      if (gv) ghold <= lg;
      out_valid <= fv;
      if (ld)      lout <= ld_val;
      else if (fv) lout <= sel_q ? ghold : lf;
    end
  end

  always_comb begin
    uo_a = ua ^ R'(gf_mul(MAXR'(ub), MAXR'(ALPHA), R));
    uo_b = R'(gf_mul(MAXR'(ub), MAXR'(BETA), R));
  end

endmodule
