// clause: one conjunctive clause of the ConvCoTM with its sequential-OR register.
//
// For each literal l_k an OR gate passes a 1 when the literal is excluded
// (include_k = 0), when the literal is 1, or when the clause register c is
// already 1 and the clause switching reduction feedback (CSRF) is enabled. The
// AND of all these terms, masked by Empty (no literal included at all), is the
// combinational clause value cb for the current patch. The register c is ORed
// with cb every enabled cycle, so after all patches it holds the OR over patches
// of the clause value. The CSRF feedback pins every OR term at 1 once c is set,
// so cb stops toggling for the rest of the image; the result is the same with or
// without it. This structure, the Empty masking and the CSRF enable pin follow the
// paper's clause circuit.
//
// Interface: lit/ta_incl are N_LIT wide; clr clears c synchronously (start of a
// new image) and wins over en; en lets c update (patch generation). rst is a
// synchronous active-high reset. Timing: cb is combinational; c updates on the
// rising clk edge. The enable and the synchronous clear are this design's choices.
module clause #(
  parameter int N_LIT = convcotm_pkg::N_LIT
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             clr,
  input  logic             en,
  input  logic             csrf_en,
  input  logic [N_LIT-1:0] lit,
  input  logic [N_LIT-1:0] ta_incl,
  output logic             cb,
  output logic             c
);

  logic             empty;
  logic             fb;
  logic [N_LIT-1:0] term;

  assign empty = ~|ta_incl;
  assign fb    = csrf_en & c;
  assign term  = lit | ~ta_incl | {N_LIT{fb}};
  assign cb    = (&term) & ~empty;

  always_ff @(posedge clk) begin
    if (rst || clr) c <= 1'b0;
    else if (en)    c <= c | cb;
  end

endmodule
