// tb_main_fsm: walks the main state machine through every transition of its
// state diagram and checks the decoded control outputs: Idle holds with
// start = 0; load enters Load Model, which is left only with the model loaded
// and start = 0; start enters Patch Generation, left on patch_last; Class Sum
// lasts 3 cycles; Predict 1 cycle; Finished holds while start = 1 and returns
// to Idle when start falls; reset returns to Idle from any state. The class-sum
// enable must be high for exactly 4 cycles per classification.
module tb_main_fsm;
  import convcotm_pkg::*;
  logic clk = 0, rst, start, load, model_done, patch_last;
  state_t state;
  logic load_mode, core_load, patch_en, release_buf, sum_en, predict_en, intr_done, intr_model;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  main_fsm dut (.clk, .rst, .start, .load, .model_done, .patch_last, .state, .load_mode,
                .core_load, .patch_en, .release_buf, .sum_en, .predict_en, .intr_done, .intr_model);

  task automatic expect_state(input state_t s, input string what);
    checks++;
    if (state != s) begin failures++; $display("FAIL: %s: state %s, expected %s", what, state.name(), s.name()); end
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_sum;
    rst = 1; start = 0; load = 0; model_done = 0; patch_last = 0;
    @(negedge clk); rst = 0;
    repeat (3) @(negedge clk);
    expect_state(S_IDLE, "idle with start=0");
    // Load model
    load = 1; start = 1;
    #1;
    check(!core_load, "load wins over start in Idle");
    @(negedge clk);
    expect_state(S_LOAD_MODEL, "load=1");
    check(load_mode && !intr_model, "load_mode in Load Model");
    load = 0; start = 0;
    repeat (4) @(negedge clk);
    expect_state(S_LOAD_MODEL, "stays until model loaded");
    model_done = 1; start = 1;
    #1;
    check(intr_model, "model interrupt");
    @(negedge clk);
    expect_state(S_LOAD_MODEL, "stays while start=1");
    start = 0;
    @(negedge clk);
    expect_state(S_IDLE, "model loaded and start=0");
    model_done = 0;
    // Classification
    for (int rep = 0; rep < 3; rep++) begin
      start = 1;
      #1;
      check(core_load, "core_load in Idle with start");
      @(negedge clk);
      expect_state(S_PATCH_GEN, "start=1");
      n_sum = 0;
      for (int k = 0; k < 20 + rep; k++) begin
        check(patch_en && !release_buf && !sum_en, "patch_en during patch generation");
        @(negedge clk);
      end
      expect_state(S_PATCH_GEN, "stays while patch_last=0");
      patch_last = 1;
      #1;
      check(release_buf, "release_buf on last patch");
      @(negedge clk);
      patch_last = 0;
      for (int k = 0; k < 3; k++) begin
        expect_state(S_CLASS_SUM, "class sum cycles");
        n_sum += sum_en;
        @(negedge clk);
      end
      expect_state(S_PREDICT, "predict after 3 class-sum cycles");
      check(predict_en, "predict_en");
      n_sum += sum_en;
      @(negedge clk);
      expect_state(S_FINISHED, "finished");
      n_sum += sum_en;
      check(n_sum == 4, $sformatf("class-sum enable high for %0d cycles, expected 4", n_sum));
      repeat (3) begin
        check(intr_done, "interrupt in Finished");
        @(negedge clk);
      end
      expect_state(S_FINISHED, "holds while start=1");
      start = 0;
      @(negedge clk);
      expect_state(S_IDLE, "back to Idle when start=0");
      check(!intr_done, "interrupt cleared");
    end
    // Reset from Patch Generation
    start = 1; @(negedge clk); start = 0;
    expect_state(S_PATCH_GEN, "patch generation before reset");
    rst = 1; @(negedge clk); rst = 0;
    expect_state(S_IDLE, "reset to Idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
