// tb_llrv_perm: checks out[x] = in[C*x] in GF(8) and GF(16) for random
// vectors, with the multiplication done by a shift-and-add model written
// here, and checks the 2-cycle latency.
module tb_llrv_perm;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  function automatic int mul(input int a, input int b, input int r, input int poly);
    int p;
    p = 0;
    for (int i = 0; i < r; i++) begin
      if ((b >> i) & 1) p ^= a;
      a = a << 1;
      if ((a >> r) & 1) a ^= poly;
    end
    return p;
  endfunction

  logic iv;
  logic [7:0] d8 [8];
  logic [7:0] d16 [16];
  logic ov8, ov16;
  logic [7:0] o8 [8];
  logic [7:0] o16 [16];
  llrv_perm #(.Q(8),  .W(8), .C(6)) dut8  (.clk, .rst_n, .in_valid(iv), .in_data(d8),  .out_valid(ov8),  .out_data(o8));
  llrv_perm #(.Q(16), .W(8), .C(7)) dut16 (.clk, .rst_n, .in_valid(iv), .in_data(d16), .out_valid(ov16), .out_data(o16));

  initial begin
    repeat (500) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [7:0] s8 [8];
    logic [7:0] s16 [16];
    iv = 0;
    for (int k = 0; k < 8; k++) d8[k] = 0;
    for (int k = 0; k < 16; k++) d16[k] = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int t = 0; t < 10; t++) begin
      for (int k = 0; k < 8; k++) s8[k] = 8'($urandom);
      for (int k = 0; k < 16; k++) s16[k] = 8'($urandom);
      iv <= 1;
      for (int k = 0; k < 8; k++) d8[k] <= s8[k];
      for (int k = 0; k < 16; k++) d16[k] <= s16[k];
      @(posedge clk); iv <= 0;
      @(posedge clk);
      checks++; if (ov8 || ov16) failures++;      // not yet
      @(negedge clk);
      checks++; if (!ov8 || !ov16) begin failures++; $display("no valid after 2 cycles"); end
      for (int x = 0; x < 8; x++) begin
        checks++; if (o8[x] != s8[mul(6, x, 3, 'hB)]) begin failures++; $display("q8 x=%0d got %0d exp %0d idx %0d", x, o8[x], s8[mul(6, x, 3, 'hB)], mul(6, x, 3, 'hB)); end
      end
      for (int x = 0; x < 16; x++) begin
        checks++; if (o16[x] != s16[mul(7, x, 4, 'h13)]) begin failures++; $display("q16 x=%0d", x); end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
