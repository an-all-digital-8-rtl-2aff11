// clause_pool: the N_CLAUSES clauses of the coalesced TM, all evaluated in
// parallel on the same literal vector (one patch per clock cycle).
//
// Each clause j has its own row ta_incl[j] of TA action bits from the model
// registers; all clauses share the literals, the clear/enable controls and the
// CSRF enable. c[j] is the sequential-OR clause output after the last patch.
// Timing as in clause: c updates on the rising clk edge when en is high.
module clause_pool #(
  parameter int N_CLAUSES = convcotm_pkg::N_CLAUSES,
  parameter int N_LIT     = convcotm_pkg::N_LIT
) (
  input  logic                            clk,
  input  logic                            rst,
  input  logic                            clr,
  input  logic                            en,
  input  logic                            csrf_en,
  input  logic [N_LIT-1:0]                lit,
  input  logic [N_CLAUSES-1:0][N_LIT-1:0] ta_incl,
  output logic [N_CLAUSES-1:0]            cb,
  output logic [N_CLAUSES-1:0]            c
);

  for (genvar j = 0; j < N_CLAUSES; j++) begin : g_clause
    clause #(.N_LIT(N_LIT)) u_clause (
      .clk     (clk),
      .rst     (rst),
      .clr     (clr),
      .en      (en),
      .csrf_en (csrf_en),
      .lit     (lit),
      .ta_incl (ta_incl[j]),
      .cb      (cb[j]),
      .c       (c[j])
    );
  end

endmodule
