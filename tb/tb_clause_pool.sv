// tb_clause_pool: self-checking test of the 128-clause pool. Each clause gets
// its own random sparse include row (some empty); 50 random literal vectors
// are applied with en high, and every clause output is compared with the OR over
// those vectors of the AND of its included literals. CSRF is on in the first
// half of the runs and off in the second; the results must not depend on it.
module tb_clause_pool;
  localparam int NC = 128, NL = 272;
  logic clk = 0, rst, clr, en, csrf_en;
  logic [NL-1:0] lit;
  logic [NC-1:0][NL-1:0] incl;
  logic [NC-1:0] cb, c, c_ref;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  clause_pool #(.N_CLAUSES(NC), .N_LIT(NL)) dut (.clk, .rst, .clr, .en, .csrf_en, .lit, .ta_incl(incl), .cb, .c);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; clr = 0; en = 0; csrf_en = 1; lit = '0;
    @(negedge clk); rst = 0;
    for (int run = 0; run < 6; run++) begin
      csrf_en = (run < 3);
      for (int j = 0; j < NC; j++) begin
        incl[j] = '0;
        if (j % 11 != 0) for (int q = 0; q < 1 + (j + run) % 4; q++) incl[j][$urandom_range(NL-1)] = 1'b1;
      end
      clr = 1; @(negedge clk); clr = 0; en = 1;
      c_ref = '0;
      for (int p = 0; p < 50; p++) begin
        for (int k = 0; k < NL; k++) lit[k] = ($urandom_range(99) < 55);
        for (int j = 0; j < NC; j++) if (incl[j] != '0 && (lit & incl[j]) == incl[j]) c_ref[j] = 1'b1;
        @(negedge clk);
      end
      en = 0;
      for (int j = 0; j < NC; j++) begin
        checks++;
        if (c[j] !== c_ref[j]) begin failures++; $display("FAIL: run %0d clause %0d c=%0b ref=%0b", run, j, c[j], c_ref[j]); end
      end
      checks++;
      if (c_ref == '0 || c_ref == '1) begin failures++; $display("FAIL: run %0d degenerate stimulus", run); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
