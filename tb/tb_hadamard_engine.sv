// tb_hadamard_engine: streams random vectors back to back through an 8-point
// engine and compares every output with a direct evaluation of the
// Walsh-Hadamard sum (sign (-1)^popcount(j&k)); checks the log2(Q)-cycle
// latency. A second engine with REG_LAST = 0 checks the shortened latency.
module tb_hadamard_engine;
  localparam int Q = 8, IW = 9, R = 3, OW = IW + R, NV = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid;
  logic signed [IW-1:0] din [Q];
  logic ov, ov2;
  logic signed [OW-1:0] dout [Q];
  logic signed [OW-1:0] dout2 [Q];
  hadamard_engine #(.Q(Q), .IW(IW)) dut (.clk, .rst_n, .in_valid, .in_data(din), .out_valid(ov), .out_data(dout));
  hadamard_engine #(.Q(Q), .IW(IW), .REG_LAST(1'b0)) dut2 (.clk, .rst_n, .in_valid, .in_data(din), .out_valid(ov2), .out_data(dout2));

  int checks = 0, failures = 0;
  logic signed [IW-1:0] vecs [NV][Q];
  int cyc = 0, issue_cyc [NV];
  int nout = 0, nout2 = 0;

  function automatic int wht(input logic signed [IW-1:0] x [Q], input int k);
    int s;
    s = 0;
    for (int j = 0; j < Q; j++) s += ($countones(j & k) % 2 == 1) ? -int'(x[j]) : int'(x[j]);
    return s;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (ov) begin
      for (int k = 0; k < Q; k++) begin
        checks++;
        if (int'(dout[k]) != wht(vecs[nout], k)) begin
          failures++; $display("vec %0d out %0d: %0d vs %0d", nout, k, dout[k], wht(vecs[nout], k));
        end
      end
      checks++;
      // cycles counted from the edge before the sampling edge
      if (cyc - issue_cyc[nout] != R + 1) begin failures++; $display("latency %0d", cyc - issue_cyc[nout]); end
      nout++;
    end
    if (ov2) begin
      for (int k = 0; k < Q; k++) begin
        checks++;
        if (int'(dout2[k]) != wht(vecs[nout2], k)) failures++;
      end
      checks++;
      if (cyc - issue_cyc[nout2] != R) failures++;
      nout2++;
    end
  end
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0;
    for (int k = 0; k < Q; k++) din[k] = '0;
    for (int v = 0; v < NV; v++) for (int k = 0; k < Q; k++) vecs[v][k] = IW'($urandom_range(0, 511)) - 9'sd256;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int v = 0; v < NV; v++) begin
      in_valid <= 1; din <= vecs[v]; issue_cyc[v] = cyc;
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++; if (nout != NV || nout2 != NV) begin failures++; $display("outputs %0d %0d", nout, nout2); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
