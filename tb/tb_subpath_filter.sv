// tb_subpath_filter: GF(8), L = 2, LS = 4. Random sub-path metrics and
// parent valid flags, with and without the frozen condition. The kept
// entries must be the LS best valid sub-paths of a reference selection, in
// order, carry the right tag (l*Q + x) and metric, and be marked invalid
// where fewer than LS valid sub-paths exist.
module tb_subpath_filter;
  localparam int Q = 8, L = 2, LS = 4, PW = 16, TW = 4, EW = 1 + PW + TW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, frozen, done;
  logic [PW-1:0] spm [L][Q];
  logic sv [L];
  logic [EW-1:0] top [LS];
  subpath_filter #(.Q(Q), .L(L), .LS(LS), .PW(PW)) dut (.clk, .rst_n, .start, .subpm(spm), .svalid(sv), .frozen, .done, .top);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int keys [$];
    int n;
    start = 0; frozen = 0;
    for (int l = 0; l < L; l++) begin sv[l] = 0; for (int x = 0; x < Q; x++) spm[l][x] = 0; end
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int t = 0; t < 16; t++) begin
      frozen = (t % 4 == 1);
      keys = {};
      for (int l = 0; l < L; l++) begin
        sv[l] = (l == 0) || (t % 3 != 0);
        for (int x = 0; x < Q; x++) begin
          spm[l][x] = PW'(l * 100 + x * 7 + $urandom_range(0, 5000));   // distinct enough
          if (sv[l] && (!frozen || x == 0)) keys.push_back(int'(spm[l][x]));
        end
      end
      keys.rsort();
      n = keys.size();
      start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      for (int k = 0; k < LS; k++) begin
        int tg;
        tg = int'(top[k][TW-1:0]);
        checks++;
        if (top[k][EW-1] != (k < n)) begin failures++; $display("t=%0d k=%0d valid flag", t, k); end
        if (k < n) begin
          checks++;
          if (int'(top[k][PW+TW-1:TW]) != keys[k]) begin failures++; $display("t=%0d k=%0d pm %0d exp %0d", t, k, top[k][PW+TW-1:TW], keys[k]); end
          checks++;
          if (spm[tg / Q][tg % Q] != top[k][PW+TW-1:TW] || !sv[tg / Q] || (frozen && tg % Q != 0)) begin
            failures++; $display("t=%0d k=%0d tag %0d", t, k, tg);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
