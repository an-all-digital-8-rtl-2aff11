// tb_literal_append: checks on random feature vectors that literal k is
// feature k and literal 136+k its complement.
module tb_literal_append;
  localparam int NF = 136;
  logic [NF-1:0]   feat;
  logic [2*NF-1:0] lit;
  int checks = 0, failures = 0;

  literal_append #(.N_FEAT(NF)) dut (.feat, .lit);

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int k = 0; k < NF; k++) feat[k] = 1'($urandom);
      #1;
      for (int k = 0; k < NF; k++) begin
        checks += 2;
        if (lit[k] !== feat[k])       begin failures++; $display("FAIL: literal %0d", k); end
        if (lit[NF+k] !== ~feat[k])   begin failures++; $display("FAIL: literal %0d", NF+k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
