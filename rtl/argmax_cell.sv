// argmax_cell: compare-select cell of the argmax tree. If v1 > v0 (signed)
// it passes v1 and label1 on, otherwise v0 and label0, so a tie goes to the
// label0 side. Purely combinational; the structure (one comparator driving the
// select of two multiplexers) is the paper's.
module argmax_cell #(
  parameter int SUM = convcotm_pkg::SUM_BITS,
  parameter int LW  = convcotm_pkg::LABEL_BITS
) (
  input  logic signed [SUM-1:0] v0,
  input  logic signed [SUM-1:0] v1,
  input  logic [LW-1:0]         label0,
  input  logic [LW-1:0]         label1,
  output logic signed [SUM-1:0] vmax,
  output logic [LW-1:0]         amax
);

  logic sel;
  assign sel  = (v1 > v0);
  assign vmax = sel ? v1 : v0;
  assign amax = sel ? label1 : label0;

endmodule
