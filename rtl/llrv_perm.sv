// llrv_perm: permutes an LLRV by multiplying its index with a GF(q) constant,
// out[x] = in[C * x].
//
// Multiplying by C = g^c is a cyclic shift by c of the vector when it is
// indexed by exponents. The unit therefore works in two registered steps:
// the first looks the entries up in exponent order (entry k = in[g^k], the
// zero entry kept aside), the second shifts cyclically by log(C) and writes
// the entries back in natural index order. This is the paper's two-cycle
// permutation (one cycle of table access, one of shifting); how the table is
// organised is this design's own choice. Both tables are constants computed
// from the field. C must be non-zero.
//
// Timing: out/out_valid follow in/in_valid by 2 clock cycles, no stall.
module llrv_perm #(
  parameter int Q  = 256,
  parameter int W  = 8,     // entry width
  parameter int C  = 2      // GF(q) multiplier, 1 .. q-1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data  [Q],
  output logic         out_valid,
  output logic [W-1:0] out_data [Q]
);
  import nb_pkg::*;
  localparam int R = $clog2(Q);
  localparam gf_table_t EXPT = gf_exp_table(R);
  localparam gf_table_t LOGT = gf_log_table(R);
  localparam int LOGC = int'(LOGT[8*C +: 8]);

  logic [W-1:0] ex   [Q];     // ex[k] = in[g^k] for k < Q-1, ex[Q-1] = in[0]
  logic         v1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      for (int k = 0; k < Q; k++) ex[k] <= '0;
    end else begin
      v1 <= in_valid;
      for (int k = 0; k < Q - 1; k++) ex[k] <= in_data[int'(EXPT[8*k +: 8])];
      ex[Q-1] <= in_data[0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int k = 0; k < Q; k++) out_data[k] <= '0;
    end else begin
      out_valid   <= v1;
      out_data[0] <= ex[Q-1];
      for (int x = 1; x < Q; x++)
        out_data[x] <= ex[(int'(LOGT[8*x +: 8]) + LOGC) % (Q - 1)];
    end
  end

endmodule
