// subpath_pm_calc: sub-path path-metric calculator of one sub-decoder.
//
// For each of the L parent paths and each of the Q candidate values x of the
// sub-decoder's current symbol it adds the symbol metric of leaf LLRV entry
// x to the parent's path metric: Q*L two-input adders working in parallel.
// Path metrics grow with likelihood (larger is better). The symbol metric
// is a fixed-point log2 of the symbol's conditional probability, the leaf
// entry divided by the sum of the leaf vector, offset by 255 and floored
// at 0 (nb_pkg::sym_metric). Normalising by the sum matters: the trellis
// rescales every LLRV, so only the leaf vector's shape, not its size, says
// how likely a path is. The paper gives the adder array but not the metric,
// so this mapping is this design's choice. Invalid parents produce invalid
// sub-paths.
//
// Timing: one registered cycle; out_valid follows in_valid by one clock.
module subpath_pm_calc #(
  parameter int Q  = 256,
  parameter int L  = 4,
  parameter int PW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [7:0]    leaf_llrv [L][Q],
  input  logic [PW-1:0] pm        [L],
  input  logic          pvalid    [L],
  output logic          out_valid,
  output logic [PW-1:0] subpm     [L][Q],
  output logic          svalid    [L]
);
  import nb_pkg::*;

  logic [31:0] total [L];
  always_comb begin
    for (int l = 0; l < L; l++) begin
      total[l] = '0;
      for (int x = 0; x < Q; x++) total[l] = total[l] + 32'(leaf_llrv[l][x]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int l = 0; l < L; l++) begin
        svalid[l] <= 1'b0;
        for (int x = 0; x < Q; x++) subpm[l][x] <= '0;
      end
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int l = 0; l < L; l++) begin
          svalid[l] <= pvalid[l];
          for (int x = 0; x < Q; x++)
            subpm[l][x] <= pm[l] + PW'(sym_metric(leaf_llrv[l][x], total[l]));
        end
      end
    end
  end

endmodule
