// tb_clause: self-checking test of one clause with the full 272 literals.
// Random sparse include sets (and an empty one) are applied with random literal
// sequences. Expected values come from the clause equation: cb = AND of the
// included literals, 0 for an empty clause; with CSRF on, cb is forced to 1
// (non-empty clause) once c is set; c = OR of cb over the enabled cycles since
// the last clear. Also checks that clr clears c and that en = 0 holds it.
module tb_clause;
  localparam int N = 272;
  logic clk = 0, rst, clr, en, csrf_en;
  logic [N-1:0] lit, incl;
  logic cb, c;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  clause #(.N_LIT(N)) dut (.clk, .rst, .clr, .en, .csrf_en, .lit, .ta_incl(incl), .cb, .c);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit c_ref, cb_ref, fired;
    rst = 1; clr = 0; en = 0; csrf_en = 0; lit = '0; incl = '0;
    @(negedge clk); rst = 0;
    for (int t = 0; t < 60; t++) begin
      incl = '0;
      if (t % 10 != 3) for (int q = 0; q < 1 + t % 3; q++) incl[$urandom_range(N-1)] = 1'b1;
      csrf_en = t[0];
      clr = 1; @(negedge clk); clr = 0;
      check(c == 1'b0, "clr clears c");
      c_ref = 0;
      for (int p = 0; p < 40; p++) begin
        for (int k = 0; k < N; k++) lit[k] = ($urandom_range(99) < 60);
        en = ($urandom_range(9) != 0);
        #1;
        fired  = (incl != '0) && ((lit & incl) == incl);
        cb_ref = fired || (csrf_en && c_ref && incl != '0);
        check(cb == cb_ref, $sformatf("cb t=%0d p=%0d csrf=%0d", t, p, csrf_en));
        @(negedge clk);
        if (en) c_ref = c_ref | fired;
        check(c == c_ref, $sformatf("c t=%0d p=%0d", t, p));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
