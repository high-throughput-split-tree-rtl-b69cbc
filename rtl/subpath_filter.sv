// subpath_filter: first stage of the reconciliation processor for one
// sub-decoder (sub-path skimming).
//
// It marks each of the Q*L sub-paths valid or not - the parent path must be
// valid and, when the sub-decoder's symbol is frozen, only the frozen value
// 0 may be chosen - and sorts them with a 2D sorter of length Q*L, keeping
// the top LS valid ones (the skimming factor). An entry is
// {valid, pm, tag} with tag = l*Q + x (parent path l, symbol value x).
//
// Timing: start captures the sub-path metrics; done pulses when top is
// ready, after the sorter's latency (see sorter_2d) plus one load cycle.
// The paper spends 34 cycles on loading and validation; here both take one.
module subpath_filter #(
  parameter int Q  = 256,
  parameter int L  = 4,
  parameter int LS = 16,
  parameter int PW = 16,
  localparam int TW = $clog2(Q * L),
  localparam int EW = 1 + PW + TW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [PW-1:0] subpm  [L][Q],
  input  logic          svalid [L],
  input  logic          frozen,
  output logic          done,
  output logic [EW-1:0] top [LS]
);
  logic [EW-1:0] ent [Q*L];
  logic          ld;
  logic          sort_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld <= 1'b0;
      for (int i = 0; i < Q * L; i++) ent[i] <= '0;
    end else begin
      ld <= start;
      if (start) begin
        for (int l = 0; l < L; l++) begin
          for (int x = 0; x < Q; x++) begin
            ent[l*Q + x] <= {svalid[l] && (!frozen || x == 0), subpm[l][x], TW'(l*Q + x)};
          end
        end
      end
    end
  end

  sorter_2d #(.NIN(Q*L), .KEEP(LS), .EW(EW), .KW(1 + PW)) u_sort (
    .clk, .rst_n, .start(ld), .in_data(ent), .busy(sort_busy), .done, .top);

  // A new start must wait for done (the sorter ignores start while busy).
  a_no_restart: assert property (@(posedge clk) !(ld && sort_busy));

endmodule
