// tb_class_sum: random clause vectors and signed 8-bit weights (including the
// extremes -128 and 127 on all 128 inputs) are applied to one class sum. The
// result must equal sum_j w_j*c_j exactly three enabled clock edges later and
// not earlier; with en low the output must hold.
module tb_class_sum;
  localparam int N = 128, W = 8, SUM = 15;
  logic clk = 0, rst, en;
  logic [N-1:0] c;
  logic signed [N-1:0][W-1:0] w;
  logic signed [SUM-1:0] v;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  class_sum #(.N(N), .W(W)) dut (.clk, .rst, .en, .c, .w, .v);

  function automatic int ref_sum();
    int s = 0;
    for (int j = 0; j < N; j++) if (c[j]) s += int'($signed(w[j]));
    return s;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, prev;
    rst = 1; en = 0; c = '0; w = '0;
    @(negedge clk); rst = 0;
    for (int t = 0; t < 40; t++) begin
      for (int j = 0; j < N; j++) begin
        c[j] = (t == 0 || t == 1) ? 1'b1 : 1'($urandom);
        w[j] = (t == 0) ? 8'sh80 : (t == 1) ? 8'sh7f : 8'($urandom);
      end
      e = ref_sum();
      prev = int'(v);
      en = 1;
      @(negedge clk); @(negedge clk);
      checks++;
      if (int'(v) == e && e != prev) begin failures++; $display("FAIL: t=%0d result after 2 cycles", t); end
      @(negedge clk);
      checks++;
      if (int'(v) != e) begin failures++; $display("FAIL: t=%0d v=%0d expected %0d", t, v, e); end
      en = 0;
      c = ~c;
      repeat (3) @(negedge clk);
      checks++;
      if (int'(v) != e) begin failures++; $display("FAIL: t=%0d not held with en=0", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
