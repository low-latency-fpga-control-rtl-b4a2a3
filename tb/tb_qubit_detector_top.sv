// tb_qubit_detector_top -- end-to-end test of the qubit detector at its default (full) size.
//
// A Cameralink camera model (29-unit half period, about 17 MHz against the 250 MHz processing
// clock with a 2-unit half period) sends synthetic three-ion 12 x 24 images.  The DDR side is a
// sink with random back-pressure that checks every archived pixel.  Each result on the handshakeless
// port is compared with the reference model of the selected classifier (LUT-MLP or ViT), and its
// latency from the internal img_valid is checked: 5 + 1 cycles for the MLP, 9389 + 1 for the ViT.
// The tx_done -> dnn_valid time, which the paper measures with its probes, is printed per image.
//
// Scenarios and the mechanism each one exercises (every counter must end non-zero):
//   1. MLP mode, six images, random DDR back-pressure             -> mlp_results, ddr_stalls
//   2. one image with DVAL gaps and over-long lines                -> dval_gaps
//   3. a frame that ends after 5 lines, then a good frame          -> short_frames (no result)
//   4. ViT mode: image A, then image B while the ViT is busy       -> vit_results, vit_skips
//      (the ViT also classifies every image in MLP mode, so the test waits for it to go idle
//      before changing dnn_sel)
//      (A is classified correctly although B overwrites the window, B gets no ViT result)
//   5. ViT mode, one more image after the core is idle again
//   6. switch back to MLP mode, one image                           -> sel_switches
//   7. DDR held off for a whole frame                               -> overflows (sticky flag)
// frame_err must never be raised: the receiver only emits tlast on a complete frame.
module tb_qubit_detector_top;
  import qd_pkg::*;
  import tb_ref_pkg::*;

  localparam int H = 12, W = 24, NPIX = H * W;
  localparam int MLP_LAT = 5, VIT_LAT = 9389;

  logic cl_clk = 1'b0, clk = 1'b0;
  logic cl_rst_n = 1'b0, rst_n = 1'b0;
  always #29 cl_clk = ~cl_clk;
  always #2  clk = ~clk;

  logic cl_fval = 1'b0, cl_lval = 1'b0, cl_dval = 1'b0;
  pix_t cl_data = '0;
  logic cl_overflow;
  logic dnn_sel = 1'b0;
  logic [AXIS_W-1:0] ddr_tdata;
  logic ddr_tvalid, ddr_tready, ddr_tlast, ddr_tuser;
  logic dnn_valid;
  logic [2:0] dnn_data;
  logic probe_fval, probe_tx_done, probe_dnn_valid, frame_err, vit_busy, vit_skip;

  qubit_detector_top dut (
    .cl_clk(cl_clk), .cl_rst_n(cl_rst_n), .cl_fval(cl_fval), .cl_lval(cl_lval),
    .cl_dval(cl_dval), .cl_data(cl_data), .cl_overflow(cl_overflow),
    .clk(clk), .rst_n(rst_n), .dnn_sel(dnn_sel),
    .ddr_axis_tdata(ddr_tdata), .ddr_axis_tvalid(ddr_tvalid), .ddr_axis_tready(ddr_tready),
    .ddr_axis_tlast(ddr_tlast), .ddr_axis_tuser(ddr_tuser),
    .dnn_valid(dnn_valid), .dnn_data(dnn_data),
    .probe_fval(probe_fval), .probe_tx_done(probe_tx_done), .probe_dnn_valid(probe_dnn_valid),
    .frame_err(frame_err), .vit_busy(vit_busy), .vit_skip(vit_skip));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int mlp_results = 0, vit_results = 0, vit_skips = 0, ddr_stalls = 0, dval_gaps = 0;
  int short_frames = 0, sel_switches = 0, overflows = 0, frame_errs = 0;

  // ------------------------------------------------ DDR sink
  pix_t ddr_q [$];
  bit   ddr_check = 1'b1, ddr_hold = 1'b0;
  int   ddr_beats = 0;
  always @(negedge clk) ddr_tready <= ddr_hold ? 1'b0 : ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n) begin
    if (ddr_tvalid && !ddr_tready) ddr_stalls++;
    if (ddr_tvalid && ddr_tready && ddr_check) begin
      pix_t e;
      e = (ddr_q.size() > 0) ? ddr_q.pop_front() : pix_t'('1);
      check(ddr_tdata == AXIS_W'(e), $sformatf("DDR beat %0d = %0d, expected %0d", ddr_beats, ddr_tdata, e));
      ddr_beats++;
    end
  end

  // ------------------------------------------------ result monitor
  typedef struct { int label; int lat; string what; } exp_t;
  exp_t exp_q [$];
  int cyc = 0, img_valid_cyc = -1, vit_start_cyc = -1, tx_done_time = 0;
  int pulse_len = 0;
  bit dnn_valid_d = 1'b0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && dut.img_valid) img_valid_cyc = cyc;
    if (rst_n && dut.img_valid && !vit_busy) vit_start_cyc = cyc;
    if (rst_n && vit_skip) vit_skips++;
    if (rst_n && frame_err) frame_errs++;
  end
  always @(posedge cl_clk) if (cl_rst_n && probe_tx_done) tx_done_time = int'($time);

  always @(posedge clk) if (rst_n) begin
    if (dnn_valid && !dnn_valid_d) begin
      if (exp_q.size() == 0) check(0, $sformatf("unexpected result %0d", dnn_data));
      else begin
        exp_t e;
        e = exp_q.pop_front();
        check(int'(dnn_data) == e.label, $sformatf("%s: label %0d, reference %0d", e.what, dnn_data, e.label));
        check(cyc - ((e.lat == MLP_LAT + 1) ? img_valid_cyc : vit_start_cyc) == e.lat,
              $sformatf("%s: %0d cycles from complete image to dnn_valid, expected %0d", e.what,
                        cyc - ((e.lat == MLP_LAT + 1) ? img_valid_cyc : vit_start_cyc), e.lat));
        $display("%s: label %0d, tx_done -> dnn_valid %0d time units", e.what, dnn_data,
                 int'($time) - tx_done_time);
        if (e.lat == MLP_LAT + 1) mlp_results++; else vit_results++;
      end
    end
    if (dnn_valid) pulse_len++;
    if (!dnn_valid && dnn_valid_d) begin
      check(pulse_len == 4, $sformatf("dnn_valid pulse of %0d cycles", pulse_len));
      pulse_len = 0;
    end
    dnn_valid_d <= dnn_valid;
    check(probe_dnn_valid == dnn_valid && probe_fval == cl_fval, "probe outputs follow their signals");
  end

  // ------------------------------------------------ camera model
  task automatic send_frame(input pixarr_t im, input int lines, input bit gaps);
    @(posedge cl_clk) cl_fval <= 1'b1;
    repeat (2) @(posedge cl_clk);
    for (int r = 0; r < lines; r++) begin
      int c;
      c = 0;
      cl_lval <= 1'b1;
      while (c < W + (gaps ? 2 : 0)) begin
        if (gaps && $urandom_range(0, 4) == 0) begin
          cl_dval <= 1'b0;
          cl_data <= 16'hDEAD;
          dval_gaps++;
        end else begin
          cl_dval <= 1'b1;
          cl_data <= (c < W) ? pix_t'(im[r*W + c]) : 16'hBEEF;
          if (c < W) ddr_q.push_back(pix_t'(im[r*W + c]));
          c++;
        end
        @(posedge cl_clk);
      end
      cl_lval <= 1'b0;
      cl_dval <= 1'b0;
      repeat (4) @(posedge cl_clk);
    end
    cl_fval <= 1'b0;
    repeat (6) @(posedge cl_clk);
  endtask

  function automatic int mlp_label(input pixarr_t im);
    int outs [];
    int cls;
    mlp_ref(im, '{256, 100, 100, 100, 10}, 4, 2, 2, 4, 48, 4, 8, outs, cls);
    return cls;
  endfunction

  function automatic int vit_label(input pixarr_t im);
    longint lg [];
    int cls;
    vit_ref(im, H, W, 6, 16, 8, 1, 8, lg, cls);
    return cls;
  endfunction

  task automatic expect_result(input int label, input int lat, input string what);
    exp_t e;
    e.label = label;
    e.lat = lat;
    e.what = what;
    exp_q.push_back(e);
  endtask

  task automatic wait_results();
    int n;
    n = 0;
    while (exp_q.size() > 0 && n < 20000) begin
      @(posedge clk);
      n++;
    end
    check(exp_q.size() == 0, $sformatf("%0d expected results missing", exp_q.size()));
    repeat (10) @(posedge clk);
  endtask

  initial begin
    pixarr_t im, ima, imb;
    int nres;
    check(VIT_LAT == vit_cycles(H, W, 6, 16, 8, 1), "ViT schedule length");
    repeat (3) @(posedge cl_clk);
    cl_rst_n = 1'b1;
    rst_n = 1'b1;
    repeat (3) @(posedge cl_clk);

    // 1. MLP mode
    for (int i = 0; i < 6; i++) begin
      im = make_image(H, W, 3, i, 100 + i);
      expect_result(mlp_label(im), MLP_LAT + 1, $sformatf("MLP image %0d (ions %03b)", i, i[2:0]));
      send_frame(im, H, 1'b0);
    end
    wait_results();

    // 2. DVAL gaps and padded lines
    im = make_image(H, W, 3, 5, 200);
    expect_result(mlp_label(im), MLP_LAT + 1, "MLP image with DVAL gaps");
    send_frame(im, H, 1'b1);
    wait_results();

    // 3. short frame (no result), then a good one
    im = make_image(H, W, 3, 7, 300);
    nres = mlp_results;
    send_frame(im, 5, 1'b0);
    short_frames++;
    repeat (200) @(posedge clk);
    check(mlp_results == nres && !dnn_valid, "no result for a short frame");
    im = make_image(H, W, 3, 2, 301);
    expect_result(mlp_label(im), MLP_LAT + 1, "MLP image after a short frame");
    send_frame(im, H, 1'b0);
    wait_results();

    // 4. ViT mode, second image while the ViT is busy.  The ViT also runs in MLP mode, so wait
    //    until it has finished the earlier images before switching.
    while (vit_busy) @(posedge clk);
    nres = vit_skips;
    dnn_sel = 1'b1;
    sel_switches++;
    ima = make_image(H, W, 3, 6, 400);
    imb = make_image(H, W, 3, 1, 401);
    expect_result(vit_label(ima), VIT_LAT + 1, "ViT image A");
    send_frame(ima, H, 1'b0);
    send_frame(imb, H, 1'b0);
    check(vit_busy, "ViT still busy after image B");
    wait_results();
    check(vit_skips == nres + 1, $sformatf("image B skipped by the ViT (%0d skips)", vit_skips - nres));

    // 5. ViT mode, idle core
    im = make_image(H, W, 3, 3, 500);
    expect_result(vit_label(im), VIT_LAT + 1, "ViT image C");
    send_frame(im, H, 1'b0);
    wait_results();

    // 6. back to MLP
    while (vit_busy) @(posedge clk);
    dnn_sel = 1'b0;
    sel_switches++;
    im = make_image(H, W, 3, 4, 600);
    expect_result(mlp_label(im), MLP_LAT + 1, "MLP image after mode switch");
    send_frame(im, H, 1'b0);
    wait_results();
    repeat (10000) @(posedge clk);   // let the ViT finish image D in the background
    check(exp_q.size() == 0 && !vit_busy, "ViT result of the MLP-mode image is not reported");
    check(!cl_overflow, "no overflow with a draining DDR sink");

    // 7. DDR stalled for a whole frame: receiver FIFO overflows
    ddr_hold = 1'b1;
    ddr_check = 1'b0;
    im = make_image(H, W, 3, 0, 700);
    send_frame(im, H, 1'b0);
    repeat (50) @(posedge clk);
    check(cl_overflow, "overflow flagged when the DDR side stalls");
    if (cl_overflow) overflows++;
    ddr_hold = 1'b0;
    repeat (200) @(posedge clk);

    check(frame_errs == 0, "no frame_err");
    check(ddr_beats == 12 * NPIX + 5 * W, $sformatf("DDR received %0d pixels", ddr_beats));
    $display("mechanisms: mlp_results=%0d vit_results=%0d vit_skips=%0d ddr_stalls=%0d dval_gaps=%0d short_frames=%0d sel_switches=%0d overflows=%0d",
             mlp_results, vit_results, vit_skips, ddr_stalls, dval_gaps, short_frames, sel_switches, overflows);
    check(mlp_results == 9 && vit_results == 2, "result counts");
    check(ddr_stalls > 0 && dval_gaps > 0 && vit_skips > 0 && short_frames > 0 && sel_switches > 0 &&
          overflows > 0, "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
