// tb_sorter_2d: 50 random entries {valid, 8-bit metric, 6-bit index} into a
// 2D sorter keeping the top 4 (W = 8). The top keys must equal the four
// largest keys of a reference sort, in order, and each returned entry must
// be an input entry. Also a run with duplicate keys and one with very few
// valid entries. Checks the latency (1 + log2 W) phases of (log2 W + 1)
// cycles plus one.
module tb_sorter_2d;
  localparam int NIN = 50, KEEP = 4, EW = 15, KW = 9, W = 8, LW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic start, busy, done;
  logic [EW-1:0] din [NIN];
  logic [EW-1:0] top [KEEP];
  sorter_2d #(.NIN(NIN), .KEEP(KEEP), .EW(EW), .KW(KW)) dut (.clk, .rst_n, .start, .in_data(din), .busy, .done, .top);

  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int keys [NIN];
    int t0;
    start = 0;
    for (int i = 0; i < NIN; i++) din[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int t = 0; t < 12; t++) begin
      for (int i = 0; i < NIN; i++) begin
        logic v;
        v = (t == 11) ? (i % 17 == 3) : ($urandom_range(0, 3) != 0);
        din[i] = {v, (t == 10) ? 8'($urandom_range(0, 3)) : 8'($urandom), 6'(i)};
        keys[i] = int'(din[i][EW-1 -: KW]);
      end
      keys.rsort();
      start = 1; t0 = cyc;
      @(negedge clk); start = 0;
      while (!done && cyc - t0 < 200) @(negedge clk);
      checks++;
      if (cyc - t0 != (1 + LW) * (LW + 1) + 1) begin failures++; $display("latency %0d", cyc - t0); end
      for (int k = 0; k < KEEP; k++) begin
        checks++;
        if (int'(top[k][EW-1 -: KW]) != keys[k]) begin failures++; $display("t=%0d k=%0d got %0h exp %0h", t, k, top[k][EW-1 -: KW], keys[k]); end
        checks++;
        if (din[top[k][5:0]] != top[k]) begin failures++; $display("entry %0d not an input", k); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
