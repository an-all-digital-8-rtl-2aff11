// literal_append: forms the literal vector of one patch from its Boolean
// features by appending their negations, L = [x_0..x_{o-1}, ~x_0..~x_{o-1}],
// so literal k < o is feature k and literal o+k is its complement.
// Purely combinational; N_FEAT = o = 136 gives the 272 literals of the design.
module literal_append #(
  parameter int N_FEAT = convcotm_pkg::N_FEAT
) (
  input  logic [N_FEAT-1:0]   feat,
  output logic [2*N_FEAT-1:0] lit
);

  assign lit = {~feat, feat};

endmodule
