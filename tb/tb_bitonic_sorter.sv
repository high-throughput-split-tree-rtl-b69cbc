// tb_bitonic_sorter: a 16-input network with 12-bit entries (4-bit key on
// top). Sort mode: random vectors, streamed one per cycle, must come out in
// descending key order as a permutation of the input. Merge mode: vectors
// made of a descending and an ascending half must come out sorted. Checks
// the log2(W)-cycle latency.
module tb_bitonic_sorter;
  localparam int W = 16, EW = 12, KW = 4, LW = 4, NV = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic iv, mg, ov;
  logic [EW-1:0] din [W];
  logic [EW-1:0] dout [W];
  bitonic_sorter #(.W(W), .EW(EW), .KW(KW)) dut (.clk, .rst_n, .in_valid(iv), .merge(mg), .in_data(din),
    .out_valid(ov), .out_data(dout));

  logic [EW-1:0] vin [NV][W];
  int tin [NV];
  int nout = 0;

  always @(negedge clk) if (rst_n && ov) begin
    int cnt_in [4096];
    checks++;
    if (cyc - tin[nout] != LW) begin failures++; $display("latency %0d", cyc - tin[nout]); end
    for (int k = 0; k + 1 < W; k++) begin
      checks++;
      if (dout[k][EW-1 -: KW] < dout[k+1][EW-1 -: KW]) begin failures++; $display("vec %0d not sorted at %0d", nout, k); end
    end
    foreach (cnt_in[i]) cnt_in[i] = 0;
    for (int k = 0; k < W; k++) begin cnt_in[vin[nout][k]]++; cnt_in[dout[k]]--; end
    checks++;
    foreach (cnt_in[i]) if (cnt_in[i] != 0) begin failures++; $display("vec %0d not a permutation", nout); break; end
    nout++;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    iv = 0; mg = 0;
    for (int k = 0; k < W; k++) din[k] = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int v = 0; v < NV; v++) begin
      if (v < NV / 2) begin
        for (int k = 0; k < W; k++) vin[v][k] = EW'($urandom);
      end else begin
        // descending half then ascending half (bitonic)
        int a [W];
        for (int k = 0; k < W; k++) a[k] = $urandom_range(0, 15);
        a.sort();
        for (int k = 0; k < W / 2; k++) vin[v][k] = EW'((a[W-1-2*k] << 8) | k);
        for (int k = 0; k < W / 2; k++) vin[v][W/2 + k] = EW'((a[1 + 2*k] << 8) | (k + 8));
      end
      for (int k = 0; k < W; k++) din[k] = vin[v][k];
      mg = (v >= NV / 2);
      iv = 1; tin[v] = cyc;
      @(negedge clk);
    end
    iv = 0;
    repeat (8) @(negedge clk);
    checks++; if (nout != NV) begin failures++; $display("got %0d vectors", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
