// argmax: selects the label of the largest of the ten class sums.
//
// Nine argmax_cell instances form the reduction tree: five cells compare the
// pairs (0,1), (2,3), (4,5), (6,7), (8,9) with their constant 4-bit labels;
// two cells reduce (0-1, 2-3) and (4-5, 6-7); one reduces those two; the last
// cell compares the winner of classes 0..7 (its v0 side) with the winner of
// classes 8..9 (its v1 side). Because every cell keeps its v0 side on a tie,
// equal sums resolve to the lowest class index. The tree wiring follows the
// paper's argmax figure. Purely combinational.
module argmax #(
  parameter int SUM = convcotm_pkg::SUM_BITS
) (
  input  logic signed [9:0][SUM-1:0] v,
  output logic [3:0]                 y_hat,
  output logic signed [SUM-1:0]      v_max
);

  logic signed [SUM-1:0] v1_ [5];
  logic [3:0]            a1_ [5];
  logic signed [SUM-1:0] v2_ [2];
  logic [3:0]            a2_ [2];
  logic signed [SUM-1:0] v3_;
  logic [3:0]            a3_;

  for (genvar p = 0; p < 5; p++) begin : g_l1
    argmax_cell #(.SUM(SUM)) u_cell (
      .v0(v[2*p]), .v1(v[2*p+1]),
      .label0(4'(2*p)), .label1(4'(2*p+1)),
      .vmax(v1_[p]), .amax(a1_[p]));
  end

  for (genvar p = 0; p < 2; p++) begin : g_l2
    argmax_cell #(.SUM(SUM)) u_cell (
      .v0(v1_[2*p]), .v1(v1_[2*p+1]),
      .label0(a1_[2*p]), .label1(a1_[2*p+1]),
      .vmax(v2_[p]), .amax(a2_[p]));
  end

  argmax_cell #(.SUM(SUM)) u_l3 (
    .v0(v2_[0]), .v1(v2_[1]), .label0(a2_[0]), .label1(a2_[1]),
    .vmax(v3_), .amax(a3_));

  argmax_cell #(.SUM(SUM)) u_l4 (
    .v0(v3_), .v1(v1_[4]), .label0(a3_), .label1(a1_[4]),
    .vmax(v_max), .amax(y_hat));

endmodule
