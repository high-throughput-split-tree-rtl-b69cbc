// hadamard_engine: Q-point Walsh-Hadamard transform, pipelined into log2(Q)
// stages.
//
// Each stage is the same butterfly layer: output p takes x[2p] + x[2p+1] and
// output Q/2 + p takes x[2p] - x[2p+1] (the add engine and subtract engine of
// the 4-point building block). Applying this layer log2(Q) times gives the
// transform in natural (Sylvester) order; it is the "input permutation + two
// Q/2-point engines" recursion unrolled. Every stage grows the word by one
// bit, so the output is IW + log2(Q) bits wide, signed.
//
// Timing: a register follows every stage, so out/out_valid appear log2(Q)
// clock cycles after in/in_valid. With REG_LAST = 0 the last stage is left
// combinational (latency log2(Q) - 1) so that a caller can merge it with its
// own output register. The pipeline always advances; there is no stall.
module hadamard_engine #(
  parameter int Q        = 256,
  parameter int IW       = 9,    // signed input width
  parameter bit REG_LAST = 1'b1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_valid,
  input  logic signed [IW-1:0]            in_data  [Q],
  output logic                            out_valid,
  output logic signed [IW+$clog2(Q)-1:0]  out_data [Q]
);
  localparam int R  = $clog2(Q);
  localparam int OW = IW + R;

  for (genvar s = 0; s < R; s++) begin : g_stage
    logic signed [OW-1:0] xin [Q];   // stage input
    logic                 vin;
    logic signed [OW-1:0] bf  [Q];   // butterfly outputs
    logic signed [OW-1:0] q   [Q];   // stage output (registered or not)
    logic                 vq;
    if (s == 0) begin : g_first
      always_comb begin
        for (int k = 0; k < Q; k++) xin[k] = OW'(in_data[k]);
        vin = in_valid;
      end
    end else begin : g_next
      always_comb begin
        xin = g_stage[s-1].q;
        vin = g_stage[s-1].vq;
      end
    end
    always_comb begin
      for (int p = 0; p < Q / 2; p++) begin
        bf[p]         = xin[2*p] + xin[2*p+1];
        bf[Q / 2 + p] = xin[2*p] - xin[2*p+1];
      end
    end
    if (s < R - 1 || REG_LAST) begin : g_reg
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          vq <= 1'b0;
          for (int k = 0; k < Q; k++) q[k] <= '0;
        end else begin
          vq <= vin;
          q  <= bf;
        end
      end
    end else begin : g_comb
      always_comb begin
        vq = vin;
        q  = bf;
      end
    end
  end

  assign out_valid = g_stage[R-1].vq;
  assign out_data  = g_stage[R-1].q;

endmodule
