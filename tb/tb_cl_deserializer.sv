// tb_cl_deserializer -- self-checking test of the Cameralink frame receiver at its default
// 12 x 24 image size, with a 17 MHz camera clock and a 250 MHz stream clock.
//
// A camera model drives FVAL/LVAL/DVAL frames: LVAL follows FVAL, each line carries 24 pixels
// (some lines padded with extra pixels, some with DVAL gaps), lines are separated by idle time.
// Checked: the stream delivers exactly the image's pixels in order, tuser on the first and tlast
// on the last; tx_done pulses once per frame, one camera cycle after the last pixel; a frame cut
// short gives no tx_done and no tlast; random back-pressure loses nothing; holding tready low
// for a whole frame overflows the FIFO and sets the overflow flag.
module tb_cl_deserializer;
  import qd_pkg::*;

  localparam int H = 12, W = 24;

  logic cl_clk = 1'b0, clk = 1'b0;
  always #29 cl_clk = ~cl_clk;   // ~17 MHz
  always #2  clk = ~clk;         // 250 MHz
  logic cl_rst_n = 1'b0, rst_n = 1'b0;

  logic fval = 1'b0, lval = 1'b0, dval = 1'b0;
  pix_t cl_data = '0;
  logic tx_done, overflow;
  logic [AXIS_W-1:0] tdata;
  logic tvalid, tready, tlast, tuser;

  cl_deserializer dut (
    .cl_clk(cl_clk), .cl_rst_n(cl_rst_n), .fval(fval), .lval(lval), .dval(dval), .cl_data(cl_data),
    .tx_done(tx_done), .overflow(overflow), .clk(clk), .rst_n(rst_n),
    .m_axis_tdata(tdata), .m_axis_tvalid(tvalid), .m_axis_tready(tready),
    .m_axis_tlast(tlast), .m_axis_tuser(tuser));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------ stream monitor
  pix_t exp_q [$];
  int   rx_count = 0;
  bit   rand_ready = 1'b1, stall = 1'b0;
  int   tlast_seen = 0, tuser_seen = 0;

  always @(negedge clk) tready <= stall ? 1'b0 : (rand_ready ? ($urandom_range(0, 3) != 0) : 1'b1);

  always @(posedge clk) if (rst_n && tvalid && tready) begin
    pix_t e;
    e = (exp_q.size() > 0) ? exp_q.pop_front() : pix_t'('1);
    check(tdata == AXIS_W'(e), $sformatf("pixel %0d = %0d, expected %0d", rx_count, tdata, e));
    if (tuser) tuser_seen++;
    if (tlast) tlast_seen++;
    rx_count++;
  end

  // ------------------------------------------------ tx_done monitor
  int txd = 0, cl_cyc = 0, txd_cyc = -1, last_pix_cyc = -2;
  always @(posedge cl_clk) begin
    cl_cyc <= cl_cyc + 1;
    if (cl_rst_n && tx_done) begin
      txd++;
      txd_cyc = cl_cyc;
    end
  end

  // ------------------------------------------------ camera model
  task automatic send_frame(input int lines, input int seed, input bit pad, input bit gaps,
                            input bit expect_done);
    @(posedge cl_clk) fval <= 1'b1;
    repeat (2) @(posedge cl_clk);
    for (int r = 0; r < lines; r++) begin
      int c;
      c = 0;
      lval <= 1'b1;
      while (c < W + (pad ? 3 : 0)) begin
        if (gaps && $urandom_range(0, 4) == 0) begin
          dval <= 1'b0;
          cl_data <= 16'hDEAD;
        end else begin
          dval <= 1'b1;
          cl_data <= pix_t'((seed * 1000 + r * W + c) & 16'hFFFF);
          if (c < W) exp_q.push_back(pix_t'((seed * 1000 + r * W + c) & 16'hFFFF));
          c++;
        end
        @(posedge cl_clk);
        if (r == H - 1 && c == W && dval) last_pix_cyc = cl_cyc;
      end
      lval <= 1'b0;
      dval <= 1'b0;
      repeat (5) @(posedge cl_clk);
    end
    fval <= 1'b0;
    repeat (4) @(posedge cl_clk);
    if (expect_done)
      check(txd_cyc == last_pix_cyc + 1,
            $sformatf("tx_done seen at camera cycle %0d, last pixel sampled at %0d", txd_cyc, last_pix_cyc));
  endtask

  initial begin
    int n_before;
    tready = 1'b1;
    repeat (3) @(posedge cl_clk);
    cl_rst_n = 1'b1;
    rst_n = 1'b1;
    repeat (2) @(posedge cl_clk);

    // 1: plain frame, random back-pressure
    send_frame(H, 1, 0, 0, 1);
    repeat (10) @(posedge cl_clk);
    check(rx_count == H*W, $sformatf("frame 1: %0d pixels streamed", rx_count));
    check(txd == 1, $sformatf("frame 1: tx_done pulses = %0d", txd));
    check(tuser_seen == 1 && tlast_seen == 1, "frame 1: one tuser and one tlast");

    // 2: padded lines and DVAL gaps
    send_frame(H, 2, 1, 1, 1);
    repeat (10) @(posedge cl_clk);
    check(rx_count == 2*H*W, $sformatf("frame 2: %0d pixels streamed", rx_count));
    check(txd == 2, $sformatf("frame 2: tx_done pulses = %0d", txd));
    check(tuser_seen == 2 && tlast_seen == 2, "frame 2: tuser/tlast");

    // 3: short frame (FVAL drops after 5 lines): no tx_done, no tlast
    send_frame(5, 3, 0, 0, 0);
    repeat (10) @(posedge cl_clk);
    check(rx_count == 2*H*W + 5*W, $sformatf("frame 3: %0d pixels streamed", rx_count));
    check(txd == 2, "frame 3: no tx_done for a short frame");
    check(tlast_seen == 2 && tuser_seen == 3, "frame 3: tuser but no tlast");
    check(!overflow, "no overflow so far");

    // 4: consumer stalled for a whole frame -> FIFO overflow
    stall = 1'b1;
    exp_q.delete();
    send_frame(H, 4, 0, 0, 1);
    check(overflow, "overflow flagged when the FIFO fills");
    n_before = rx_count;
    exp_q.delete();
    for (int i = 0; i < 16; i++) exp_q.push_back(pix_t'((4 * 1000 + i) & 16'hFFFF));
    stall = 1'b0;
    repeat (10) @(posedge cl_clk);
    check(rx_count - n_before == 16, $sformatf("after overflow the %0d buffered pixels drain", rx_count - n_before));
    check(txd == 3, "frame 4: tx_done still counts the received image");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000) @(posedge cl_clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
