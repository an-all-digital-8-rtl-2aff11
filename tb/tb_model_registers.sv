// tb_model_registers: streams a random 5632-byte model into the model
// registers and checks the byte-to-bit mapping: clause j's TA actions come from
// bytes 34j..34j+33, bit i of byte b is literal 8b+i; weight (class i, clause
// j) is byte 4352 + 128i + j. A second partial write checks that only the
// addressed byte changes.
module tb_model_registers;
  localparam int NC = 128, NL = 272, NK = 10, NBY = 5632;
  logic clk = 0, wr_en;
  logic [12:0] wr_addr;
  logic [7:0] wr_data;
  logic [NC-1:0][NL-1:0] ta_incl;
  logic [NK-1:0][NC-1:0][7:0] weight;
  logic [7:0] bytes [NBY];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  model_registers dut (.clk, .wr_en, .wr_addr, .wr_data, .ta_incl, .weight);

  task automatic verify(input string what);
    for (int j = 0; j < NC; j++)
      for (int l = 0; l < NL; l++) begin
        checks++;
        if (ta_incl[j][l] !== bytes[34*j + l/8][l%8]) begin
          failures++; if (failures < 10) $display("FAIL: %s TA clause %0d literal %0d", what, j, l);
        end
      end
    for (int i = 0; i < NK; i++)
      for (int j = 0; j < NC; j++) begin
        checks++;
        if (weight[i][j] !== bytes[4352 + 128*i + j]) begin
          failures++; if (failures < 10) $display("FAIL: %s weight %0d,%0d", what, i, j);
        end
      end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = '0; wr_data = '0;
    for (int a = 0; a < NBY; a++) bytes[a] = 8'($urandom);
    @(negedge clk);
    for (int a = 0; a < NBY; a++) begin
      wr_en = 1; wr_addr = 13'(a); wr_data = bytes[a];
      @(negedge clk);
    end
    wr_en = 0;
    @(negedge clk);
    verify("full load");
    for (int t = 0; t < 20; t++) begin
      int a = $urandom_range(NBY - 1);
      bytes[a] = 8'($urandom);
      wr_en = 1; wr_addr = 13'(a); wr_data = bytes[a];
      @(negedge clk);
      wr_en = 0; wr_data = 8'($urandom);
      @(negedge clk);
    end
    verify("partial writes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
