// tb_axis_interface: checks the byte routing of the stream interface.
// Load mode: 5632 bytes with random valid gaps reach the model port at
// addresses 0..5631 with their data, never the image port; tready falls and
// model_done rises after the last byte; leaving load mode rewinds the address.
// Image mode: bytes go to the image port with addresses 0..98 repeating and
// img_last on address 98; tready follows img_ready and no byte moves while it
// is low.
module tb_axis_interface;
  logic clk = 0, rst;
  logic [7:0] tdata;
  logic tvalid, tready, load_mode, model_done, model_we, img_ready, img_we, img_last;
  logic [12:0] model_addr;
  logic [6:0] img_addr;
  logic [7:0] model_data, img_data;
  int checks = 0, failures = 0;
  int exp_model = 0, exp_img = 0, n_img_bytes = 0, n_last = 0;

  always #5 clk = ~clk;

  axis_interface dut (.clk, .rst, .tdata, .tvalid, .tready, .load_mode, .model_done,
                      .model_we, .model_addr, .model_data, .img_ready, .img_we, .img_addr,
                      .img_data, .img_last);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // Monitor on every edge.
  always @(posedge clk) if (!rst) begin
    if (tvalid && tready) begin
      if (load_mode) begin
        check(model_we && !img_we && int'(model_addr) == exp_model && model_data == tdata,
              $sformatf("model byte %0d", exp_model));
        exp_model++;
      end else begin
        check(img_we && !model_we && int'(img_addr) == exp_img && img_data == tdata &&
              img_last == (exp_img == 98), $sformatf("image byte %0d", exp_img));
        if (img_last) n_last++;
        exp_img = (exp_img == 98) ? 0 : exp_img + 1;
        n_img_bytes++;
      end
    end else begin
      check(!model_we && !img_we, "no write without a transfer");
    end
    if (!load_mode) check(tready == img_ready, "tready follows img_ready");
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; tvalid = 0; tdata = '0; load_mode = 0; img_ready = 1;
    @(negedge clk); rst = 0;
    load_mode = 1;
    while (!model_done) begin
      tvalid = ($urandom_range(3) != 0); tdata = 8'($urandom);
      @(negedge clk);
    end
    check(exp_model == 5632, "5632 model bytes accepted");
    tvalid = 1;
    repeat (3) @(negedge clk);
    check(!tready && exp_model == 5632, "no model byte accepted after the last");
    tvalid = 0; load_mode = 0;
    @(negedge clk);
    check(!model_done && model_addr == '0, "address rewound after load mode");
    for (int t = 0; t < 400; t++) begin
      tvalid = ($urandom_range(3) != 0); tdata = 8'($urandom);
      img_ready = ($urandom_range(4) != 0);
      @(negedge clk);
    end
    tvalid = 0;
    check(n_last == n_img_bytes / 99 && n_img_bytes > 200, "img_last once per 99 bytes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
