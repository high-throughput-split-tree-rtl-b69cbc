// bitonic_sorter: W-input bi-mode bitonic network, pipelined into log2(W)
// stages, sorting entries in descending order of their key.
//
// An entry is EW bits wide; its key is the KW most significant bits (for
// path metrics: a valid bit above the metric, so invalid entries sink to
// the end). Stage k (k = 1 .. log2 W) is the k-th merge stage of Batcher's
// bitonic sorter: k layers of compare-select nodes over blocks of 2^k
// entries. Equal keys are never swapped.
//
// Two modes, chosen per input vector with merge:
//   merge = 0  sort: every stage works, any input order.
//   merge = 1  merge: only the last stage works; the input must be bitonic
//              (for example a descending half followed by an ascending half)
//              and the last stage, a bitonic merger, sorts it.
// The mode travels down the pipeline with the data.
//
// Timing: fully pipelined, one vector per cycle, out_valid log2(W) cycles
// after in_valid. (Each stage registers the mode bit for the next one; the
// copy in the last stage has no reader, which lint reports as unused.)
module bitonic_sorter #(
  parameter int W  = 16,
  parameter int EW = 25,
  parameter int KW = 17
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          merge,
  input  logic [EW-1:0] in_data  [W],
  output logic          out_valid,
  output logic [EW-1:0] out_data [W]
);
  localparam int LW = $clog2(W);

  for (genvar st = 1; st <= LW; st++) begin : g_stage
    logic [EW-1:0] xin [W];
    logic          vin, min;
    logic [EW-1:0] y   [W];
    logic [EW-1:0] q   [W];
    logic          vq, mq;
    if (st == 1) begin : g_first
      assign xin = in_data;
      assign vin = in_valid;
      assign min = merge;
    end else begin : g_next
      assign xin = g_stage[st-1].q;
      assign vin = g_stage[st-1].vq;
      assign min = g_stage[st-1].mq;
    end

    // Compare-select layers of this stage.
    always_comb begin
      logic [EW-1:0] a, b;
      a = '0;
      b = '0;
      y = xin;
      if (st == LW || !min) begin
        for (int j = 1 << (st - 1); j >= 1; j = j >> 1) begin
          for (int i = 0; i < W; i++) begin
            if ((i ^ j) > i) begin
              a = y[i];
              b = y[i ^ j];
              // descending inside blocks with bit st clear, ascending otherwise
              if (((i >> st) & 1) == 0) begin
                if (a[EW-1 -: KW] < b[EW-1 -: KW]) begin y[i] = b; y[i ^ j] = a; end
              end else begin
                if (a[EW-1 -: KW] > b[EW-1 -: KW]) begin y[i] = b; y[i ^ j] = a; end
              end
            end
          end
        end
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vq <= 1'b0;
        mq <= 1'b0;
        for (int i = 0; i < W; i++) q[i] <= '0;
      end else begin
        vq <= vin;
        mq <= min;
        q  <= y;
      end
    end
  end

  assign out_valid = g_stage[LW].vq;
  assign out_data  = g_stage[LW].q;

endmodule
