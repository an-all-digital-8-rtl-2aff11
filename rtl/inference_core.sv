// inference_core: everything that classifies one image once the model is in
// place: the two image buffers, the patch generator, literal forming, the clause
// pool with its sequential-OR registers, the ten class sums, the argmax and the
// result register.
//
// Operation, driven by main_fsm:
//   core_load   the first WIN rows of the next full image buffer enter the
//               patch register, the clause registers clear, the label is kept;
//   patch_en    one patch per cycle: its 272 literals go to all 128 clauses,
//               which OR their value into their registers (361 cycles);
//   release_buf on the last patch the image buffer is freed, so the next image
//               can be written while the class sums are computed;
//   sum_en      the class-sum pipeline is enabled (4 cycles);
//   predict_en  argmax of the class sums is registered with the label.
// The image write port is independent of the above, so a new image can be
// loaded during patch generation (continuous mode).
//
// Clock gating: the paper gates the inference module's clock; here the gating
// is written as register enables (clause registers: patch_en; class-sum
// pipeline: sum_en), which a synthesis flow maps to clock-gating cells. With
// cg_en low the enables are forced on, as with gating disabled on the chip; the
// result does not change. Synchronous active-high reset; one clock, clk_core.
module inference_core
  import convcotm_pkg::*;
#(
  parameter int N_CL = convcotm_pkg::N_CLAUSES,
  localparam int IAW = $clog2(IMG_XFER_BYTES)
) (
  input  logic                                         clk,
  input  logic                                         rst,
  input  logic                                         cg_en,
  input  logic                                         csrf_en,
  // control from the main state machine
  input  logic                                         core_load,
  input  logic                                         patch_en,
  input  logic                                         release_buf,
  input  logic                                         sum_en,
  input  logic                                         predict_en,
  output logic                                         patch_last,
  // image write port
  input  logic                                         img_we,
  input  logic [IAW-1:0]                               img_addr,
  input  logic [7:0]                                   img_data,
  input  logic                                         img_last,
  output logic                                         img_ready,
  output logic                                         img_avail,
  // model
  input  logic [N_CL-1:0][N_LIT-1:0]                   ta_incl,
  input  logic [N_CLASSES-1:0][N_CL-1:0][W_BITS-1:0]   weight,
  // results
  output logic [N_CL-1:0]                              clause_out,
  output logic signed [N_CLASSES-1:0][SUM_BITS-1:0]    class_sums,
  output logic [LABEL_BITS-1:0]                        pred_class,
  output logic [LABEL_BITS-1:0]                        true_label
);

  localparam int PW = $clog2(N_POS);

  logic [IMG_DIM*IMG_DIM-1:0] image;
  logic [3:0]                 buf_label;
  logic [N_FEAT-1:0]          feat;
  logic [N_LIT-1:0]           lit;
  logic [N_CL-1:0]            cb;
  logic [PW-1:0]              px, py;
  logic [3:0]                 y_hat;
  logic signed [SUM_BITS-1:0] v_max;
  logic [3:0]                 label_q;

  image_buffers #(.IMG(IMG_DIM)) u_buffers (
    .clk         (clk),
    .rst         (rst),
    .wr_en       (img_we),
    .wr_addr     (img_addr),
    .wr_data     (img_data),
    .wr_last     (img_last),
    .wr_ready    (img_ready),
    .release_buf (release_buf),
    .avail       (img_avail),
    .image       (image),
    .label       (buf_label)
  );

  patch_generator #(.IMG(IMG_DIM), .WIN(WIN)) u_patch (
    .clk   (clk),
    .rst   (rst),
    .load  (core_load),
    .step  (patch_en),
    .image (image),
    .feat  (feat),
    .x     (px),
    .y     (py),
    .last  (patch_last)
  );

  literal_append #(.N_FEAT(N_FEAT)) u_lit (
    .feat (feat),
    .lit  (lit)
  );

  clause_pool #(.N_CLAUSES(N_CL), .N_LIT(N_LIT)) u_clauses (
    .clk     (clk),
    .rst     (rst),
    .clr     (core_load),
    .en      (patch_en | ~cg_en),
    .csrf_en (csrf_en),
    .lit     (lit),
    .ta_incl (ta_incl),
    .cb      (cb),
    .c       (clause_out)
  );

  for (genvar i = 0; i < N_CLASSES; i++) begin : g_class
    class_sum #(.N(N_CL), .W(W_BITS), .SUM(SUM_BITS)) u_sum (
      .clk (clk),
      .rst (rst),
      .en  (sum_en | ~cg_en),
      .c   (clause_out),
      .w   (weight[i]),
      .v   (class_sums[i])
    );
  end

  argmax #(.SUM(SUM_BITS)) u_argmax (
    .v     (class_sums),
    .y_hat (y_hat),
    .v_max (v_max)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      label_q    <= '0;
      pred_class <= '0;
      true_label <= '0;
    end else begin
      if (core_load) label_q <= buf_label;
      if (predict_en) begin
        pred_class <= y_hat;
        true_label <= label_q;
      end
    end
  end

  // Classification may only start on a completely written image.
  a_start_on_full_buffer: assert property (@(posedge clk) disable iff (rst) core_load |-> img_avail);

endmodule
