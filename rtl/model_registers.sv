// model_registers: storage of the trained model, in the model clock domain.
//
// The model is N_CLAUSES x N_LIT TA action bits (1 = literal included) and
// N_CLASSES x N_CLAUSES signed clause weights of W bits, all in registers so
// that every clause and every class sum sees its whole model at once. With the
// default sizes that is 34816 + 10240 = 45056 bits (5632 bytes). After loading,
// the clock of this block can be stopped: its outputs are static during
// inference.
//
// The model arrives as a byte stream (wr_en/wr_addr/wr_data). Byte layout, a
// choice of this design:
//   addr = j*(N_LIT/8) + b, for b < N_LIT/8: ta_incl[j][8b+i] = byte bit i
//   addr = TA_BYTES + i*N_CLAUSES + j:        weight[i][j] (two's complement)
// Timing: one byte is written per rising clk edge with wr_en high. No reset:
// the contents are defined only once a model has been loaded.
module model_registers #(
  parameter int N_CLAUSES = convcotm_pkg::N_CLAUSES,
  parameter int N_LIT     = convcotm_pkg::N_LIT,
  parameter int N_CLASSES = convcotm_pkg::N_CLASSES,
  parameter int W         = convcotm_pkg::W_BITS,
  localparam int TA_BPC   = N_LIT / 8,
  localparam int TA_BYTES = N_CLAUSES * TA_BPC,
  localparam int NBYTES   = TA_BYTES + N_CLASSES * N_CLAUSES,
  localparam int AW       = $clog2(NBYTES)
) (
  input  logic                                        clk,
  input  logic                                        wr_en,
  input  logic [AW-1:0]                               wr_addr,
  input  logic [7:0]                                  wr_data,
  output logic [N_CLAUSES-1:0][N_LIT-1:0]             ta_incl,
  output logic [N_CLASSES-1:0][N_CLAUSES-1:0][W-1:0]  weight
);

  logic [7:0] mem [NBYTES];

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_addr) < NBYTES) mem[wr_addr] <= wr_data;
  end

  always_comb begin
    for (int j = 0; j < N_CLAUSES; j++)
      for (int b = 0; b < TA_BPC; b++)
        ta_incl[j][8*b +: 8] = mem[j*TA_BPC + b];
    for (int i = 0; i < N_CLASSES; i++)
      for (int j = 0; j < N_CLAUSES; j++)
        weight[i][j] = W'(mem[TA_BYTES + i*N_CLAUSES + j]);
  end

endmodule
