// tb_convcotm_accelerator: end-to-end test of the accelerator at its full size
// (128 clauses, 272 literals, 10 classes, 28x28 images).
//
// A processor model loads a sparse model over the byte stream, then streams
// noisy copies of ten random class templates (the model's clauses are cut from
// those templates, so images of different classes light up different clauses;
// every third image carries a wrong label so that label and prediction differ)
// while a second thread starts classifications and reads the results
// (continuous mode: the next image is streamed while the current one is
// classified). Every result is compared with a reference written
// directly from the TM equations: patches taken straight from the image array,
// literals, clauses (AND of included literals, empty clause = 0, OR over all
// patches), weighted class sums and argmax with ties to the lower class. The
// clause outputs and class sums inside the core are compared as well.
// Settings are varied per image: CSRF on/off and clock gating on/off. The
// model clock runs only while the model is loaded.
// Cycle checks: start-to-interrupt latency (366 cycles), single-image latency
// from the first image byte (within the paper's 471 cycles) and the period of
// back-to-back classifications (within the paper's 372 cycles).
// Each mechanism (model load, continuous-mode overlap, back-pressure, both CSRF
// and clock-gating settings, empty clauses, stopped model clock) is counted
// and must occur at least once. The toggles of the combinational clause values
// are counted with CSRF on and off; CSRF must reduce them.
module tb_convcotm_accelerator;
  import convcotm_pkg::*;

  localparam int N_IMG      = 10;
  localparam int LATENCY    = 366;   // start sample edge to intr_done
  localparam int PAPER_LAT  = 471;
  localparam int PAPER_PER  = 372;

  logic       clk = 1'b0;
  logic       model_clk_on = 1'b1;
  logic       clk_model;
  logic       reset, start, load, csrf_en, cg_en;
  logic [7:0] tdata;
  logic       tvalid, tready;
  logic [7:0] result;
  logic [2:0] status;
  logic       intr_done, intr_model;

  always #5 clk = ~clk;
  assign clk_model = clk & model_clk_on;

  convcotm_accelerator dut (
    .clk_core(clk), .clk_model(clk_model), .reset(reset), .start(start), .load(load),
    .csrf_en(csrf_en), .cg_en(cg_en), .s_axis_tdata(tdata), .s_axis_tvalid(tvalid),
    .s_axis_tready(tready), .result(result), .status(status),
    .intr_done(intr_done), .intr_model(intr_model));

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (cycle %0d)", what, cycle);
    end
  endtask

  // ---------------- model and images ----------------
  logic [N_LIT-1:0]       ta   [N_CLAUSES];
  logic signed [7:0]      wgt  [N_CLASSES][N_CLAUSES];
  logic [IMG_DIM*IMG_DIM-1:0] img [N_IMG];
  logic [3:0]             lbl  [N_IMG];
  logic [IMG_DIM*IMG_DIM-1:0] tmpl [N_CLASSES];
  int                     cls, x0, y0, r, c;
  logic [N_CLAUSES-1:0]   ref_c   [N_IMG];
  int                     ref_v   [N_IMG][N_CLASSES];
  int                     ref_y   [N_IMG];

  function automatic logic [7:0] model_byte(int a);
    if (a < TA_BYTES) return ta[a / TA_BYTES_PER_CL][8*(a % TA_BYTES_PER_CL) +: 8];
    a -= TA_BYTES;
    return wgt[a / N_CLAUSES][a % N_CLAUSES];
  endfunction

  function automatic logic [7:0] image_byte(int n, int a);
    if (a < IMG_BYTES) return img[n][8*a +: 8];
    return {4'h0, lbl[n]};
  endfunction

  // Reference classification straight from the equations.
  task automatic reference(int n);
    logic [N_FEAT-1:0] f;
    logic [N_LIT-1:0]  l;
    ref_c[n] = '0;
    for (int y = 0; y < N_POS; y++)
      for (int x = 0; x < N_POS; x++) begin
        for (int r = 0; r < WIN; r++)
          for (int c = 0; c < WIN; c++)
            f[r*WIN + c] = img[n][(y + r)*IMG_DIM + x + c];
        for (int b = 0; b < THERM_BITS; b++) begin
          f[WIN*WIN + b]              = (b < y);
          f[WIN*WIN + THERM_BITS + b] = (b < x);
        end
        l = {~f, f};
        for (int j = 0; j < N_CLAUSES; j++)
          if (ta[j] != '0 && ((l & ta[j]) == ta[j])) ref_c[n][j] = 1'b1;
      end
    ref_y[n] = 0;
    for (int i = 0; i < N_CLASSES; i++) begin
      ref_v[n][i] = 0;
      for (int j = 0; j < N_CLAUSES; j++) if (ref_c[n][j]) ref_v[n][i] += int'(wgt[i][j]);
      if (ref_v[n][i] > ref_v[n][ref_y[n]]) ref_y[n] = i;
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_model_load = 0, n_overlap = 0, n_backpressure = 0;
  int n_csrf_on = 0, n_csrf_off = 0, n_cg_on = 0, n_cg_off = 0;
  int n_empty = 0, n_model_clk_stopped = 0, n_clause_fired = 0, n_clause_quiet = 0;

  // Toggle count of the combinational clause values c_j^b during patch
  // generation, kept apart for images run with CSRF on and off.
  longint toggles_csrf_on = 0, toggles_csrf_off = 0;
  logic [N_CLAUSES-1:0] cb_prev = '0;
  always @(posedge clk) begin
    if (status == 3'(S_PATCH_GEN)) begin
      if (csrf_en) toggles_csrf_on  += $countones(dut.u_core.cb ^ cb_prev);
      else         toggles_csrf_off += $countones(dut.u_core.cb ^ cb_prev);
    end
    cb_prev <= dut.u_core.cb;
  end

  always @(posedge clk) begin
    if (tvalid && tready && !load && status == 3'(S_PATCH_GEN)) n_overlap++;
    if (tvalid && !tready && !load) n_backpressure++;
    if (!model_clk_on && status == 3'(S_PATCH_GEN)) n_model_clk_stopped++;
  end

  // ---------------- processor model ----------------
  int images_streamed = 0;
  longint first_byte_cycle [N_IMG];

  task automatic send_byte(input logic [7:0] b, input bit gaps);
    if (gaps) while ($urandom_range(3) == 0) @(negedge clk);
    tdata  = b;
    tvalid = 1'b1;
    do @(posedge clk); while (!tready);
    @(negedge clk);
    tvalid = 1'b0;
  endtask

  task automatic stream_images();
    for (int n = 0; n < N_IMG; n++) begin
      // image 0 is streamed alone, without gaps, for the latency measurement
      if (n == 1) wait (status == 3'(S_FINISHED) || images_done > 0);
      for (int a = 0; a < IMG_XFER_BYTES; a++) begin
        if (a == 0) first_byte_cycle[n] = cycle;
        send_byte(image_byte(n, a), n > 1 && n < 5);
      end
      images_streamed++;
    end
  endtask

  int images_done = 0;
  longint done_cycle [N_IMG];

  task automatic classify_all();
    longint t_start;
    for (int n = 0; n < N_IMG; n++) begin
      wait (images_streamed > n);
      @(negedge clk);
      csrf_en = n[0];
      cg_en   = n[1] | (n == 4);
      if (csrf_en) n_csrf_on++; else n_csrf_off++;
      if (cg_en)   n_cg_on++;   else n_cg_off++;
      start = 1'b1;
      @(posedge clk);
      t_start = cycle;                   // edge that samples start in Idle
      while (!intr_done) @(posedge clk);
      done_cycle[n] = cycle;
      check(cycle - t_start == LATENCY,
            $sformatf("image %0d start-to-interrupt %0d cycles, expected %0d", n, cycle - t_start, LATENCY));
      check(result[3:0] == 4'(ref_y[n]),
            $sformatf("image %0d predicted %0d, expected %0d", n, result[3:0], ref_y[n]));
      check(result[7:4] == lbl[n], $sformatf("image %0d label %0d, expected %0d", n, result[7:4], lbl[n]));
      check(dut.clause_out == ref_c[n], $sformatf("image %0d clause outputs", n));
      for (int i = 0; i < N_CLASSES; i++)
        check(int'($signed(dut.class_sums[i])) == ref_v[n][i],
              $sformatf("image %0d class sum %0d = %0d, expected %0d", n, i, $signed(dut.class_sums[i]), ref_v[n][i]));
      for (int j = 0; j < N_CLAUSES; j++) if (ref_c[n][j]) n_clause_fired++; else n_clause_quiet++;
      if (n == 0)
        check(done_cycle[0] - first_byte_cycle[0] <= PAPER_LAT,
              $sformatf("single-image latency %0d cycles exceeds %0d", done_cycle[0] - first_byte_cycle[0], PAPER_LAT));
      if (n >= 6)
        check(done_cycle[n] - done_cycle[n-1] <= PAPER_PER,
              $sformatf("continuous-mode period %0d cycles exceeds %0d", done_cycle[n] - done_cycle[n-1], PAPER_PER));
      if (n == 0 || n == 6)
        $display("image %0d: latency from first byte %0d cycles, period %0d", n,
                 done_cycle[n] - first_byte_cycle[n], n > 0 ? done_cycle[n] - done_cycle[n-1] : 0);
      @(negedge clk);
      start = 1'b0;
      images_done++;
      @(negedge clk);
    end
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- main ----------------
  initial begin
    reset = 1'b1; start = 1'b0; load = 1'b0; csrf_en = 1'b1; cg_en = 1'b1;
    tdata = '0; tvalid = 1'b0;

    // Workload: ten random 28x28 class templates; each image is the template of
    // its label with about 2 % of the pixels flipped. Clause j belongs to class
    // j % 10: it includes 16 window literals that match that template at a
    // random window position (the pixel where it is 1, its complement where it
    // is 0), plus sometimes a position literal, and gets a positive weight for
    // its class and small random weights elsewhere. Every 16th clause is empty;
    // clauses 0 and 1 carry the extreme weights -128 and 127.
    for (int t = 0; t < N_CLASSES; t++)
      for (int p = 0; p < IMG_DIM*IMG_DIM; p++) tmpl[t][p] = ($urandom_range(99) < 50);
    for (int j = 0; j < N_CLAUSES; j++) begin
      cls = j % N_CLASSES;
      x0 = $urandom_range(N_POS - 1);
      y0 = $urandom_range(N_POS - 1);
      ta[j] = '0;
      if (j % 16 != 5) begin
        for (int q = 0; q < 16; q++) begin
          r = $urandom_range(WIN - 1);
          c = $urandom_range(WIN - 1);
          if (tmpl[cls][(y0 + r)*IMG_DIM + x0 + c]) ta[j][r*WIN + c] = 1'b1;
          else                                      ta[j][N_FEAT + r*WIN + c] = 1'b1;
        end
        if (j % 3 == 0) ta[j][WIN*WIN + THERM_BITS + $urandom_range(THERM_BITS - 1)] = 1'b1;
      end else n_empty++;
      for (int i = 0; i < N_CLASSES; i++)
        wgt[i][j] = (i == cls) ? 8'(20 + $urandom_range(80)) : 8'($urandom_range(60) - 30);
    end
    wgt[0][0] = 8'sh80; wgt[1][1] = 8'sh7f;   // extreme weights
    for (int n = 0; n < N_IMG; n++) begin
      cls = $urandom_range(9);
      for (int p = 0; p < IMG_DIM*IMG_DIM; p++) img[n][p] = tmpl[cls][p] ^ ($urandom_range(99) < 2);
      // every third image carries a wrong label, so label and prediction differ
      lbl[n] = 4'((n % 3 == 2) ? (cls + 3) % 10 : cls);
      reference(n);
    end

    repeat (3) @(negedge clk);
    reset = 1'b0;
    @(negedge clk);

    // Load model mode.
    load = 1'b1;
    @(negedge clk);
    check(status == 3'(S_LOAD_MODEL), "enters Load Model");
    for (int a = 0; a < MODEL_BYTES; a++) send_byte(model_byte(a), a < 200);
    while (!intr_model) @(negedge clk);
    load = 1'b0;
    @(negedge clk);
    @(negedge clk);
    check(status == 3'(S_IDLE), "returns to Idle after model load");
    n_model_load++;
    for (int j = 0; j < N_CLAUSES; j++) check(dut.ta_incl[j] == ta[j], $sformatf("TA actions of clause %0d", j));
    for (int i = 0; i < N_CLASSES; i++)
      for (int j = 0; j < N_CLAUSES; j++)
        if (dut.weight[i][j] != wgt[i][j]) check(1'b0, $sformatf("weight %0d,%0d", i, j));
    checks++;
    model_clk_on = 1'b0;                     // model clock stopped for inference

    fork
      stream_images();
      classify_all();
    join

    check(n_model_load > 0,        "mechanism: model load");
    check(n_overlap > 0,           "mechanism: image streamed during patch generation");
    check(n_backpressure > 0,      "mechanism: back-pressure with both buffers full");
    check(n_csrf_on > 0 && n_csrf_off > 0, "mechanism: CSRF on and off");
    check(n_cg_on > 0 && n_cg_off > 0,     "mechanism: clock gating on and off");
    check(n_empty > 0,             "mechanism: empty clauses");
    check(n_model_clk_stopped > 0, "mechanism: model clock stopped during inference");
    check(n_clause_fired > 0 && n_clause_quiet > 0, "clauses both fired and stayed 0");
    // CSRF must reduce the switching of c_j^b (same number of images each way).
    check(toggles_csrf_on < toggles_csrf_off,
          $sformatf("CSRF toggles %0d not below %0d without it", toggles_csrf_on, toggles_csrf_off));
    $display("c_j^b toggles during patch generation: CSRF on %0d, off %0d (%0d%% fewer)",
             toggles_csrf_on, toggles_csrf_off,
             toggles_csrf_off > 0 ? 100 - (100 * toggles_csrf_on) / toggles_csrf_off : 0);
    begin
      string s = "";
      int n_diff = 0;
      for (int n = 0; n < N_IMG; n++) begin
        s = {s, $sformatf(" %0d(%0d clauses)", ref_y[n], $countones(ref_c[n]))};
        if (n > 0 && ref_y[n] != ref_y[0]) n_diff++;
      end
      $display("predicted classes:%s", s);
      check(n_diff > 0, "stimulus: images predicted as different classes");
    end
    $display("mechanisms: model_load=%0d overlap_bytes=%0d backpressure_cycles=%0d csrf_on=%0d csrf_off=%0d cg_on=%0d cg_off=%0d empty_clauses=%0d model_clk_stopped_cycles=%0d",
             n_model_load, n_overlap, n_backpressure, n_csrf_on, n_csrf_off, n_cg_on, n_cg_off, n_empty, n_model_clk_stopped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
