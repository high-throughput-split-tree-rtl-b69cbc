// tb_subpath_pm_calc: random leaf LLRVs and parent metrics for GF(8), L = 4.
// Each sub-path metric must equal the parent metric plus
// max(0, 255 - 32*(log2(sum) - log2(entry))), with the piecewise-linear
// log2 evaluated here independently; checks the one-cycle latency and that
// parent valid flags pass through.
module tb_subpath_pm_calc;
  localparam int Q = 8, L = 4, PW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic iv, ov;
  logic [7:0] llr [L][Q];
  logic [PW-1:0] pm [L];
  logic pv [L];
  logic [PW-1:0] spm [L][Q];
  logic sv [L];
  subpath_pm_calc #(.Q(Q), .L(L), .PW(PW)) dut (.clk, .rst_n, .in_valid(iv), .leaf_llrv(llr), .pm, .pvalid(pv),
    .out_valid(ov), .subpm(spm), .svalid(sv));

  // 32*log2(v): integer part from the leading one, 5 fraction bits from the
  // bits that follow it
  function automatic int lg(input longint v);
    int p;
    longint f;
    if (v == 0) return 0;
    p = 0;
    while ((v >> (p + 1)) != 0) p++;
    f = v - (longint'(1) << p);               // bits below the leading one
    return p * 32 + int'((f * 32) >> p);
  endfunction

  initial begin
    repeat (500) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    iv = 0;
    for (int l = 0; l < L; l++) begin pm[l] = 0; pv[l] = 0; for (int x = 0; x < Q; x++) llr[l][x] = 0; end
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int t = 0; t < 20; t++) begin
      longint sum [L];
      for (int l = 0; l < L; l++) begin
        pm[l] = PW'($urandom_range(0, 30000));
        pv[l] = 1'($urandom);
        sum[l] = 0;
        for (int x = 0; x < Q; x++) begin
          llr[l][x] = (x == t % Q) ? 8'd255 : 8'($urandom_range(0, 255) >> ($urandom_range(0, 7)));
          sum[l] += llr[l][x];
        end
      end
      iv = 1;
      @(negedge clk); iv = 0;
      checks++; if (!ov) begin failures++; $display("no valid"); end
      for (int l = 0; l < L; l++) begin
        checks++; if (sv[l] != pv[l]) failures++;
        for (int x = 0; x < Q; x++) begin
          int d, m;
          d = 255 - (lg(sum[l]) - lg(llr[l][x]));
          m = (llr[l][x] == 0 || d < 0) ? 0 : d;
          checks++;
          if (spm[l][x] != PW'(pm[l] + m)) begin
            failures++; $display("l=%0d x=%0d got %0d exp %0d", l, x, spm[l][x], pm[l] + m);
          end
        end
      end
      @(negedge clk);
      checks++; if (ov) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
