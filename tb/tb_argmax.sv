// tb_argmax: random and directed sets of ten signed 15-bit class sums; the
// expected label is the lowest index among the maxima (strict-greater compare
// at every cell keeps the lower label on ties). Includes all-equal sums, the
// two extreme values and ties between classes in different subtrees.
module tb_argmax;
  localparam int SUM = 15;
  logic signed [9:0][SUM-1:0] v;
  logic [3:0] y_hat;
  logic signed [SUM-1:0] v_max;
  int checks = 0, failures = 0;

  argmax #(.SUM(SUM)) dut (.v, .y_hat, .v_max);

  task automatic run(input string what);
    int best = 0;
    #1;
    for (int i = 1; i < 10; i++) if ($signed(v[i]) > $signed(v[best])) best = i;
    checks++;
    if (int'(y_hat) != best || v_max != $signed(v[best])) begin
      failures++; $display("FAIL: %s y_hat=%0d expected %0d", what, y_hat, best);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 10; i++) v[i] = '0;
    run("all zero");
    for (int i = 0; i < 10; i++) v[i] = -15'sd16384;
    v[9] = 15'sd16383;
    run("max at 9");
    for (int i = 0; i < 10; i++) v[i] = 15'sd100;
    v[3] = 15'sd200; v[8] = 15'sd200;
    run("tie 3 and 8");
    v[3] = 15'sd100; v[6] = 15'sd200;
    run("tie 6 and 8");
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < 10; i++) v[i] = (t % 3 == 0) ? SUM'($urandom_range(7)) - SUM'(3) : SUM'($urandom);
      run($sformatf("random %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
