// tb_inference_core: drives the inference core the way the main state machine
// does (core_load, 361 cycles of patch_en with release_buf on the last, 3
// class-sum cycles, predict) on a random sparse model applied directly to its
// model inputs. Images are written through the image port, the second one
// while the first is being classified. Clause outputs, the ten class sums, the
// predicted class and the label are compared with a reference computed from
// the TM equations. CSRF and clock gating are toggled between images, and the
// number of cycles until patch_last is checked to be 361.
module tb_inference_core;
  import convcotm_pkg::*;
  localparam int N_IMG = 4;
  logic clk = 0, rst, cg_en, csrf_en, core_load, patch_en, release_buf, sum_en, predict_en, patch_last;
  logic img_we, img_last, img_ready, img_avail;
  logic [6:0] img_addr;
  logic [7:0] img_data;
  logic [N_CLAUSES-1:0][N_LIT-1:0] ta;
  logic [N_CLASSES-1:0][N_CLAUSES-1:0][W_BITS-1:0] wgt;
  logic [N_CLAUSES-1:0] clause_out;
  logic signed [N_CLASSES-1:0][SUM_BITS-1:0] class_sums;
  logic [3:0] pred_class, true_label;
  logic [IMG_DIM*IMG_DIM-1:0] img [N_IMG];
  logic [3:0] lbl [N_IMG];
  logic [N_CLAUSES-1:0] ref_c [N_IMG];
  int ref_v [N_IMG][N_CLASSES];
  int ref_y [N_IMG];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  inference_core dut (.clk, .rst, .cg_en, .csrf_en, .core_load, .patch_en, .release_buf, .sum_en,
    .predict_en, .patch_last, .img_we, .img_addr, .img_data, .img_last, .img_ready, .img_avail,
    .ta_incl(ta), .weight(wgt), .clause_out, .class_sums, .pred_class, .true_label);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic reference(int n);
    logic [N_FEAT-1:0] f;
    logic [N_LIT-1:0]  l;
    ref_c[n] = '0;
    for (int y = 0; y < N_POS; y++)
      for (int x = 0; x < N_POS; x++) begin
        for (int r = 0; r < WIN; r++)
          for (int c = 0; c < WIN; c++) f[r*WIN + c] = img[n][(y + r)*IMG_DIM + x + c];
        for (int b = 0; b < THERM_BITS; b++) begin
          f[WIN*WIN + b] = (b < y);
          f[WIN*WIN + THERM_BITS + b] = (b < x);
        end
        l = {~f, f};
        for (int j = 0; j < N_CLAUSES; j++)
          if (ta[j] != '0 && ((l & ta[j]) == ta[j])) ref_c[n][j] = 1'b1;
      end
    ref_y[n] = 0;
    for (int i = 0; i < N_CLASSES; i++) begin
      ref_v[n][i] = 0;
      for (int j = 0; j < N_CLAUSES; j++) if (ref_c[n][j]) ref_v[n][i] += int'($signed(wgt[i][j]));
      if (ref_v[n][i] > ref_v[n][ref_y[n]]) ref_y[n] = i;
    end
  endtask

  task automatic write_image(int n);
    for (int a = 0; a < IMG_XFER_BYTES; a++) begin
      while (!img_ready) @(negedge clk);
      img_we = 1; img_addr = 7'(a);
      img_data = (a < IMG_BYTES) ? img[n][8*a +: 8] : {4'h0, lbl[n]};
      img_last = (a == IMG_BYTES);
      @(negedge clk);
      img_we = 0; img_last = 0;
    end
  endtask

  task automatic classify(int n);
    int cycles = 0;
    while (!img_avail) @(negedge clk);
    csrf_en = n[0]; cg_en = n[1];
    core_load = 1; @(negedge clk); core_load = 0;
    patch_en = 1;
    while (!patch_last) begin @(negedge clk); cycles++; end
    release_buf = 1; @(negedge clk); release_buf = 0; patch_en = 0;
    check(cycles + 1 == N_PATCHES, $sformatf("image %0d: %0d patches", n, cycles + 1));
    sum_en = 1; repeat (3) @(negedge clk);
    predict_en = 1; @(negedge clk); predict_en = 0; sum_en = 0;
    check(clause_out == ref_c[n], $sformatf("image %0d clause outputs", n));
    for (int i = 0; i < N_CLASSES; i++)
      check(int'($signed(class_sums[i])) == ref_v[n][i], $sformatf("image %0d class sum %0d", n, i));
    check(pred_class == 4'(ref_y[n]) && true_label == lbl[n],
          $sformatf("image %0d: predicted %0d label %0d, expected %0d %0d", n, pred_class, true_label, ref_y[n], lbl[n]));
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; cg_en = 1; csrf_en = 1; core_load = 0; patch_en = 0; release_buf = 0; sum_en = 0; predict_en = 0;
    img_we = 0; img_last = 0; img_addr = '0; img_data = '0;
    for (int j = 0; j < N_CLAUSES; j++) begin
      ta[j] = '0;
      if (j % 20 != 7) for (int q = 0; q < 1 + $urandom_range(3); q++) ta[j][$urandom_range(N_LIT-1)] = 1'b1;
      for (int i = 0; i < N_CLASSES; i++) wgt[i][j] = 8'($urandom);
    end
    for (int n = 0; n < N_IMG; n++) begin
      for (int p = 0; p < IMG_DIM*IMG_DIM; p++) img[n][p] = ($urandom_range(99) < 25);
      lbl[n] = 4'($urandom_range(9));
      reference(n);
    end
    @(negedge clk); rst = 0;
    write_image(0);
    fork
      for (int n = 0; n < N_IMG; n++) classify(n);
      for (int n = 1; n < N_IMG; n++) write_image(n);
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
