// convcotm_accelerator: top level of the convolutional coalesced Tsetlin
// machine (ConvCoTM) inference accelerator for 28x28 booleanized images and
// 10 classes, with 128 clauses over 272 literals per 10x10 patch.
//
// Blocks: the 8-bit stream interface (axis_interface), the main state machine
// (main_fsm), the model registers (model_registers) and the inference core
// (inference_core). Two clock inputs as on the chip: clk_model clocks only the
// model registers and may be stopped once a model is loaded; clk_core clocks
// everything else. While a model is being loaded the two clocks must be the same
// clock (the write strobe crosses from the core side without synchronisers);
// this is an assumption of this design, the paper only says that each domain
// has its own clock pin.
//
// Use: hold `load` high, stream the 5632 model bytes, wait for intr_model, drop
// `load`. Then per image: stream its 98 bytes and the label byte, raise `start`,
// wait for intr_done, read result = {true label, predicted class}, drop
// `start`. status shows the main state (0 Idle, 1 Load Model, 2 Patch
// Generation, 3 Class Sum, 4 Predict, 5 Finished). The next image may be streamed while one is classified (continuous
// mode); tready back-pressures when both image buffers are full.
// Timing with the default sizes: from the clk_core edge that samples start in
// Idle, intr_done rises 366 edges later (1 + 361 patches + 3 pipeline + 1
// predict). csrf_en enables the clause switching reduction feedback, cg_en the
// clock-gating enables. reset: synchronous, active high.
module convcotm_accelerator
  import convcotm_pkg::*;
(
  input  logic       clk_core,
  input  logic       clk_model,
  input  logic       reset,
  input  logic       start,
  input  logic       load,
  input  logic       csrf_en,
  input  logic       cg_en,
  input  logic [7:0] s_axis_tdata,
  input  logic       s_axis_tvalid,
  output logic       s_axis_tready,
  output logic [7:0] result,
  output logic [2:0] status,
  output logic       intr_done,
  output logic       intr_model
);

  localparam int MAW = $clog2(MODEL_BYTES + 1);
  localparam int IAW = $clog2(IMG_XFER_BYTES);

  state_t                                        state;
  logic                                          load_mode, model_done;
  logic                                          core_load, patch_en, release_buf;
  logic                                          sum_en, predict_en, patch_last;
  logic                                          model_we;
  logic [MAW-1:0]                                model_addr;
  logic [7:0]                                    model_data;
  logic                                          img_we, img_last, img_ready, img_avail;
  logic [IAW-1:0]                                img_addr;
  logic [7:0]                                    img_data;
  logic [N_CLAUSES-1:0][N_LIT-1:0]               ta_incl;
  logic [N_CLASSES-1:0][N_CLAUSES-1:0][W_BITS-1:0] weight;
  logic [N_CLAUSES-1:0]                          clause_out;
  logic signed [N_CLASSES-1:0][SUM_BITS-1:0]     class_sums;
  logic [3:0]                                    pred_class, true_label;

  axis_interface u_if (
    .clk        (clk_core),
    .rst        (reset),
    .tdata      (s_axis_tdata),
    .tvalid     (s_axis_tvalid),
    .tready     (s_axis_tready),
    .load_mode  (load_mode),
    .model_done (model_done),
    .model_we   (model_we),
    .model_addr (model_addr),
    .model_data (model_data),
    .img_ready  (img_ready),
    .img_we     (img_we),
    .img_addr   (img_addr),
    .img_data   (img_data),
    .img_last   (img_last)
  );

  main_fsm u_fsm (
    .clk         (clk_core),
    .rst         (reset),
    .start       (start),
    .load        (load),
    .model_done  (model_done),
    .patch_last  (patch_last),
    .state       (state),
    .load_mode   (load_mode),
    .core_load   (core_load),
    .patch_en    (patch_en),
    .release_buf (release_buf),
    .sum_en      (sum_en),
    .predict_en  (predict_en),
    .intr_done   (intr_done),
    .intr_model  (intr_model)
  );

  model_registers u_model (
    .clk     (clk_model),
    .wr_en   (model_we),
    .wr_addr (model_addr[$clog2(MODEL_BYTES)-1:0]),
    .wr_data (model_data),
    .ta_incl (ta_incl),
    .weight  (weight)
  );

  inference_core u_core (
    .clk         (clk_core),
    .rst         (reset),
    .cg_en       (cg_en),
    .csrf_en     (csrf_en),
    .core_load   (core_load),
    .patch_en    (patch_en),
    .release_buf (release_buf),
    .sum_en      (sum_en),
    .predict_en  (predict_en),
    .patch_last  (patch_last),
    .img_we      (img_we),
    .img_addr    (img_addr),
    .img_data    (img_data),
    .img_last    (img_last),
    .img_ready   (img_ready),
    .img_avail   (img_avail),
    .ta_incl     (ta_incl),
    .weight      (weight),
    .clause_out  (clause_out),
    .class_sums  (class_sums),
    .pred_class  (pred_class),
    .true_label  (true_label)
  );

  assign result = {true_label, pred_class};
  assign status = state;

endmodule
