// tb_patch_generator: loads random 28x28 images and steps through all patches.
// For every cycle the 136 features are compared with the window taken directly
// from the image array at the expected (x, y) plus the thermometer codes of y
// and x, following the raster order x fastest. Checks that exactly 361 patches
// are produced, that `last` is high only on the 361st, and that further steps
// hold the last patch.
module tb_patch_generator;
  localparam int IMG = 28, WIN = 10, NP = 19, TB = 18, NF = 136;
  logic clk = 0, rst, load, step;
  logic [IMG*IMG-1:0] image;
  logic [NF-1:0] feat, exp_f;
  logic [4:0] x, y;
  logic last;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  patch_generator #(.IMG(IMG), .WIN(WIN)) dut (.clk, .rst, .load, .step, .image, .feat, .x, .y, .last);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    rst = 1; load = 0; step = 0; image = '0;
    @(negedge clk); rst = 0;
    for (int t = 0; t < 3; t++) begin
      for (int p = 0; p < IMG*IMG; p++) image[p] = 1'($urandom);
      load = 1; @(negedge clk); load = 0; step = 1;
      n = 0;
      for (int py = 0; py < NP; py++)
        for (int px = 0; px < NP; px++) begin
          for (int r = 0; r < WIN; r++)
            for (int c = 0; c < WIN; c++) exp_f[r*WIN + c] = image[(py + r)*IMG + px + c];
          for (int b = 0; b < TB; b++) begin
            exp_f[WIN*WIN + b] = (b < py);
            exp_f[WIN*WIN + TB + b] = (b < px);
          end
          n++;
          checks++;
          if (feat !== exp_f || int'(x) != px || int'(y) != py) begin
            failures++; $display("FAIL: image %0d patch (%0d,%0d) x=%0d y=%0d", t, py, px, x, y);
          end
          checks++;
          if (last !== (n == NP*NP)) begin failures++; $display("FAIL: last at patch %0d", n); end
          @(negedge clk);
        end
      checks++;
      if (n != 361 || !last || int'(x) != NP-1 || int'(y) != NP-1) begin
        failures++; $display("FAIL: does not hold the last patch");
      end
      step = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
