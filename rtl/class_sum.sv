// class_sum: class sum v = sum_j w_j * c_j for one class.
//
// Each of the N clause outputs c_j selects, through a 2:1 multiplexer, either
// the clause's signed weight w_j or zero. The N selected values are added in a
// binary reduction tree of log2(N) levels (7 for N = 128). Pipeline registers
// sit after the tree levels flagged in REG_LEVELS; the default places them
// after levels 3, 5 and 7, giving the three-stage pipeline of the paper
// (the paper does not say after which levels; that split is this design's).
// All tree nodes carry the full SUM_BITS signed width.
//
// Interface: c[j], w[j] (two's complement, W bits); en enables the pipeline
// registers (the clock-gating enable); v is the registered class sum.
// Timing: with en held high, v reflects c/w after 3 rising edges.
// Synchronous active-high reset clears the pipeline registers.
module class_sum #(
  parameter int N         = convcotm_pkg::N_CLAUSES,
  parameter int W         = convcotm_pkg::W_BITS,
  parameter int SUM       = W + $clog2(N),
  parameter logic [31:0] REG_LEVELS = 32'b1010_1000,   // bit l = register after tree level l
  localparam int LEVELS    = $clog2(N)
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       en,
  input  logic [N-1:0]               c,
  input  logic signed [N-1:0][W-1:0] w,
  output logic signed [SUM-1:0]      v
);

  // Level 0: multiplexer outputs. g_level[l].node: values after tree level l.
  logic signed [SUM-1:0] mux_out [N];

  for (genvar j = 0; j < N; j++) begin : g_mux
    assign mux_out[j] = c[j] ? SUM'(signed'(w[j])) : '0;
  end

  for (genvar l = 1; l <= LEVELS; l++) begin : g_level
    logic signed [SUM-1:0] node [N >> l];
    for (genvar k = 0; k < (N >> l); k++) begin : g_node
      logic signed [SUM-1:0] a, b, s;
      if (l == 1) begin : g_first
        assign a = mux_out[2*k];
        assign b = mux_out[2*k+1];
      end else begin : g_next
        assign a = g_level[l-1].node[2*k];
        assign b = g_level[l-1].node[2*k+1];
      end
      assign s = a + b;
      if (REG_LEVELS[l]) begin : g_reg
        logic signed [SUM-1:0] q;
        always_ff @(posedge clk) begin
          if (rst)     q <= '0;
          else if (en) q <= s;
        end
        assign node[k] = q;
      end else begin : g_comb
        assign node[k] = s;
      end
    end
  end

  assign v = g_level[LEVELS].node[0];

endmodule
