// main_fsm: the accelerator's main state machine.
//
// States and transitions (those of the paper's state diagram):
//   Idle             -> Load Model       when load = 1
//                    -> Patch Generation when start = 1
//   Load Model       -> Idle             when the model is loaded and start = 0
//   Patch Generation -> Class Sum        when the last patch has been evaluated
//   Class Sum        -> Predict          after the adder-tree pipeline has filled
//   Predict          -> Finished
//   Finished         -> Idle             when start = 0 (stays while start = 1)
//   reset = 1        -> Idle
// This design's own choices: load wins when load and start are both high in
// Idle; Class Sum lasts SUM_PIPE cycles (one per pipeline stage of the class
// sums); the control outputs below are decoded from the state.
//
// Control outputs: core_load (Idle and start: load the first window rows and
// clear the clause registers), patch_en (Patch Generation: step the window and
// update the clause registers), release_buf (last patch: free the image
// buffer), sum_en (Class Sum and Predict: the four cycles in which the
// class-sum pipeline is clocked), predict_en (Predict: register the result),
// load_mode (Load Model), intr_done (Finished) and intr_model (Load Model with
// the model complete). Synchronous active-high reset.
module main_fsm
  import convcotm_pkg::*;
#(
  parameter int SUM_PIPE = convcotm_pkg::SUM_PIPE_STAGES
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   start,
  input  logic   load,
  input  logic   model_done,
  input  logic   patch_last,
  output state_t state,
  output logic   load_mode,
  output logic   core_load,
  output logic   patch_en,
  output logic   release_buf,
  output logic   sum_en,
  output logic   predict_en,
  output logic   intr_done,
  output logic   intr_model
);

  state_t     next;
  logic [3:0] sum_cnt;

  always_comb begin
    next = state;
    unique case (state)
      S_IDLE:       if (load) next = S_LOAD_MODEL;
                    else if (start) next = S_PATCH_GEN;
      S_LOAD_MODEL: if (model_done && !start) next = S_IDLE;
      S_PATCH_GEN:  if (patch_last) next = S_CLASS_SUM;
      S_CLASS_SUM:  if (sum_cnt == 4'(SUM_PIPE - 1)) next = S_PREDICT;
      S_PREDICT:    next = S_FINISHED;
      S_FINISHED:   if (!start) next = S_IDLE;
      default:      next = S_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_IDLE;
      sum_cnt <= '0;
    end else begin
      state   <= next;
      sum_cnt <= (state == S_CLASS_SUM) ? sum_cnt + 1'b1 : '0;
    end
  end

  assign load_mode   = (state == S_LOAD_MODEL);
  assign core_load   = (state == S_IDLE) && !load && start;
  assign patch_en    = (state == S_PATCH_GEN);
  assign release_buf = (state == S_PATCH_GEN) && patch_last;
  assign sum_en      = (state == S_CLASS_SUM) || (state == S_PREDICT);
  assign predict_en  = (state == S_PREDICT);
  assign intr_done   = (state == S_FINISHED);
  assign intr_model  = (state == S_LOAD_MODEL) && model_done;

endmodule
