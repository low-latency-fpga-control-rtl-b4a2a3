// tb_windower -- self-checking test of the image windower at the default 288-pixel image.
//
// Frames of 288 numbered pixels are streamed with random gaps (tuser on the first beat, tlast on
// the last).  Checked: img_valid pulses exactly once per frame, in the cycle after the last beat,
// with the whole image on img[] in row-major order; the image stays put until new pixels arrive;
// a frame ended early by tlast raises frame_err and no img_valid; a tuser in the middle of a
// frame restarts the count so the following complete frame is still recognised.
module tb_windower;
  import qd_pkg::*;

  localparam int NPIX = 288;

  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;

  logic [AXIS_W-1:0] tdata = '0;
  logic tvalid = 1'b0, tlast = 1'b0, tuser = 1'b0, tready;
  pix_t img [NPIX];
  logic img_valid, frame_err;

  windower dut (.clk(clk), .rst_n(rst_n), .s_axis_tdata(tdata), .s_axis_tvalid(tvalid),
                .s_axis_tready(tready), .s_axis_tlast(tlast), .s_axis_tuser(tuser),
                .img(img), .img_valid(img_valid), .frame_err(frame_err));

  int checks = 0, failures = 0;
  int nvalid = 0, nerr = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (img_valid) nvalid++;
    if (frame_err) nerr++;
  end

  // send n beats of frame 'seed'; optionally end with tlast early
  task automatic send(input int seed, input int n, input bit early_last);
    for (int i = 0; i < n; i++) begin
      while ($urandom_range(0, 2) == 0) begin
        tvalid = 1'b0;
        @(negedge clk);
      end
      tvalid = 1'b1;
      tdata  = AXIS_W'(seed * 1000 + i);
      tuser  = (i == 0);
      tlast  = (i == n - 1) && (early_last || n == NPIX);
      @(negedge clk);
      if (i == n - 1 && n == NPIX) begin
        // the cycle right after the last beat
        check(img_valid, $sformatf("frame %0d: img_valid right after the last beat", seed));
        for (int p = 0; p < NPIX; p++)
          check(img[p] == pix_t'(seed * 1000 + p), $sformatf("frame %0d pixel %0d = %0d", seed, p, img[p]));
      end
    end
    tvalid = 1'b0;
    tlast  = 1'b0;
    tuser  = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(tready, "always ready");
    send(1, NPIX, 0);
    repeat (20) @(negedge clk);
    check(!img_valid, "img_valid is a single-cycle pulse");
    for (int p = 0; p < NPIX; p++) check(img[p] == pix_t'(1000 + p), "image held while idle");
    send(2, NPIX, 0);
    send(3, 100, 1);             // early tlast
    @(negedge clk);
    check(nerr == 1, "frame_err for an early tlast");
    send(4, 57, 0);              // aborted frame without tlast, then a new frame with tuser
    send(5, NPIX, 0);
    repeat (3) @(negedge clk);
    check(nvalid == 3, $sformatf("%0d img_valid pulses for 3 complete frames", nvalid));
    check(nerr == 1, "no further frame_err");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
