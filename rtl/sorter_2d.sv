// sorter_2d: two-dimensional PM sorter that returns the KEEP largest of NIN
// entries in descending order.
//
// The entries are laid out in a W x W register file (row-major, unused
// places filled with all-zero entries, which sort last) and processed by W
// copies of a W-input bi-mode bitonic network, one per row, in phases:
//   phase 0        every row is sorted (sort mode);
//   phase p >= 1   row r (r a multiple of 2^p) takes the top W/2 entries of
//                  itself and, reversed, the top W/2 of row r + 2^(p-1); the
//                  bitonic vector is merged (merge mode) and written back.
// After 1 + log2(W) phases row 0 holds the top W/2 entries of the whole
// array in order, so KEEP <= W/2 is required; W is the smallest power of
// two with W*W >= NIN and W >= 2*KEEP (W = 16 for 256 entries, W = 32 for
// 1024, as in the paper).
//
// The paper's sorter finishes in 6 phases of W + log2(W) cycles following a
// published 2D scheme it does not spell out; the row-sort then row-merge
// phase plan here is this design's own, chosen because it gives an exact
// top-KEEP with the same register file and networks.
//
// Timing: start loads the register file. Each phase issues all rows in one
// cycle and writes them back log2(W) cycles later, so a phase is
// log2(W) + 1 cycles and done pulses (1 + log2 W)(log2 W + 1) + 1 cycles
// after start. top holds its value until the next start.
module sorter_2d #(
  parameter int NIN  = 256,
  parameter int KEEP = 4,
  parameter int EW   = 25,
  parameter int KW   = 17
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [EW-1:0] in_data [NIN],
  output logic          busy,
  output logic          done,
  output logic [EW-1:0] top [KEEP]
);
  function automatic int calc_w(input int n, input int k);
    int w;
    w = 1;
    while (w * w < n || w < 2 * k) w = w * 2;
    return w;
  endfunction
  localparam int W  = calc_w(NIN, KEEP);
  localparam int LW = $clog2(W);

  logic [EW-1:0] rf [W][W];
  int            phase;
  logic          issue;
  logic          wait_q;
  logic          ov [W];
  logic [EW-1:0] nin  [W][W];
  logic [EW-1:0] nout [W][W];

  // Network inputs for the current phase.
  always_comb begin
    for (int r = 0; r < W; r++) begin
      for (int c = 0; c < W; c++) begin
        if (phase == 0) begin
          nin[r][c] = rf[r][c];
        end else begin
          if (c < W / 2) nin[r][c] = rf[r][c];
          else           nin[r][c] = rf[(r + (1 << (phase - 1))) % W][W - 1 - c];
        end
      end
    end
  end

  for (genvar r = 0; r < W; r++) begin : g_net
    bitonic_sorter #(.W(W), .EW(EW), .KW(KW)) u_net (
      .clk, .rst_n,
      .in_valid (issue),
      .merge    (phase != 0),
      .in_data  (nin[r]),
      .out_valid(ov[r]),
      .out_data (nout[r]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase  <= 0;
      issue  <= 1'b0;
      wait_q <= 1'b0;
      done   <= 1'b0;
      for (int r = 0; r < W; r++) for (int c = 0; c < W; c++) rf[r][c] <= '0;
      for (int k = 0; k < KEEP; k++) top[k] <= '0;
    end else begin
      issue <= 1'b0;
      done  <= 1'b0;
      if (start && !busy) begin
        for (int r = 0; r < W; r++)
          for (int c = 0; c < W; c++)
            rf[r][c] <= (r * W + c < NIN) ? in_data[(r * W + c) % NIN] : '0;
        phase  <= 0;
        issue  <= 1'b1;
        wait_q <= 1'b1;
      end else if (wait_q && ov[0]) begin
        for (int r = 0; r < W; r++)
          if (phase == 0 || (r % (1 << phase)) == 0) rf[r] <= nout[r];
        if (phase == LW) begin
          wait_q <= 1'b0;
          done   <= 1'b1;
          for (int k = 0; k < KEEP; k++) top[k] <= nout[0][k];
        end else begin
          phase <= phase + 1;
          issue <= 1'b1;
        end
      end
    end
  end
  assign busy = wait_q;

endmodule
