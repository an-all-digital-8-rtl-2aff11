// tb_image_buffers: writes random images (98 bytes + label byte) into the two
// buffers and checks the ping-pong behaviour: the read side shows the oldest
// complete image with its label, wr_ready drops when both buffers are full and
// returns after release_buf, avail follows the read buffer's state, and a
// third image written after a release lands in the freed buffer.
module tb_image_buffers;
  localparam int IMG = 28, NB = 98;
  logic clk = 0, rst, wr_en, wr_last, wr_ready, release_buf, avail;
  logic [6:0] wr_addr;
  logic [7:0] wr_data;
  logic [IMG*IMG-1:0] image;
  logic [3:0] label;
  logic [IMG*IMG-1:0] imgs [4];
  logic [3:0] lbls [4];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  image_buffers #(.IMG(IMG)) dut (.clk, .rst, .wr_en, .wr_addr, .wr_data, .wr_last, .wr_ready,
                                  .release_buf, .avail, .image, .label);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write_image(int n);
    for (int a = 0; a <= NB; a++) begin
      wr_en = 1; wr_addr = 7'(a);
      wr_data = (a < NB) ? imgs[n][8*a +: 8] : {4'h0, lbls[n]};
      wr_last = (a == NB);
      @(negedge clk);
    end
    wr_en = 0; wr_last = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; wr_en = 0; wr_last = 0; wr_addr = '0; wr_data = '0; release_buf = 0;
    for (int n = 0; n < 4; n++) begin
      for (int p = 0; p < IMG*IMG; p++) imgs[n][p] = 1'($urandom);
      lbls[n] = 4'($urandom_range(9));
    end
    @(negedge clk); rst = 0;
    check(wr_ready && !avail, "empty after reset");
    write_image(0);
    check(avail && wr_ready, "one image: avail, still ready");
    check(image == imgs[0] && label == lbls[0], "image 0 readable");
    write_image(1);
    check(avail && !wr_ready, "two images: not ready");
    check(image == imgs[0], "read side still image 0");
    release_buf = 1; @(negedge clk); release_buf = 0;
    check(avail && wr_ready, "after release: image 1 avail, ready");
    check(image == imgs[1] && label == lbls[1], "image 1 readable");
    write_image(2);
    check(!wr_ready && image == imgs[1], "image 2 written to freed buffer, image 1 intact");
    release_buf = 1; @(negedge clk); release_buf = 0;
    check(image == imgs[2] && label == lbls[2], "image 2 readable");
    release_buf = 1; @(negedge clk); release_buf = 0;
    check(!avail && wr_ready, "all released");
    write_image(3);
    check(avail && image == imgs[3] && label == lbls[3], "image 3 readable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
