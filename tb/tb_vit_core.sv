// tb_vit_core -- self-checking test of vit_core against the loop-level reference model.
//
// Two instances run side by side: dut3 at the default (three-qubit) configuration
// 12 x 24 pixels, P=6, 8 labels, and dut1 at the one-qubit configuration 10 x 10, P=5, 2 labels.
// Each classifies several synthetic ion images (dark/bright patterns and random backgrounds).
// Checked per image: every output logit, the label, the cycle count from start to out_valid
// against the schedule, that busy is high throughout and that a start while busy is ignored.
// The input image is overwritten with noise right after start: the core must use its own copy.
module tb_vit_core;
  import qd_pkg::*;
  import tb_ref_pkg::*;

  localparam int H3 = 12, W3 = 24, H1 = 10, W1 = 10;

  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;

  int checks = 0, failures = 0;

  pix_t img3 [H3*W3];
  pix_t img1 [H1*W1];
  logic start3 = 1'b0, start1 = 1'b0;
  logic busy3, busy1, v3, v1;
  logic [2:0] cls3;
  logic [0:0] cls1;
  fx_t lg3 [8];
  fx_t lg1 [2];

  vit_core dut3 (.clk(clk), .rst_n(rst_n), .start(start3), .img(img3), .busy(busy3),
                 .out_valid(v3), .out_class(cls3), .out_logits(lg3));

  vit_core #(.IMG_H(H1), .IMG_W(W1), .P(5), .NCLS(2)) dut1 (
    .clk(clk), .rst_n(rst_n), .start(start1), .img(img1), .busy(busy1),
    .out_valid(v1), .out_class(cls1), .out_logits(lg1));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run3(input int mask, input int seed);
    pixarr_t im;
    longint lref [];
    int cref, cyc, exp_cyc;
    im = make_image(H3, W3, 3, mask, seed);
    foreach (img3[i]) img3[i] = pix_t'(im[i]);
    vit_ref(im, H3, W3, 6, 16, 8, 1, 8, lref, cref);
    exp_cyc = vit_cycles(H3, W3, 6, 16, 8, 1);
    @(negedge clk) start3 = 1'b1;
    @(negedge clk) start3 = 1'b0;
    foreach (img3[i]) img3[i] = pix_t'($urandom);  // the core works on its own copy
    cyc = 1;
    // a second start while busy must be ignored
    repeat (5) @(negedge clk);
    cyc += 5;
    start3 = 1'b1;
    @(negedge clk) start3 = 1'b0;
    cyc++;
    check(busy3, "dut3 busy after start");
    while (!v3) begin
      if (!busy3) check(0, "dut3 busy while computing");
      @(negedge clk);
      cyc++;
      if (cyc > 20000) break;
    end
    check(cyc == exp_cyc, $sformatf("dut3 latency %0d cycles, schedule %0d", cyc, exp_cyc));
    for (int j = 0; j < 8; j++)
      check(longint'(lg3[j]) == lref[j], $sformatf("dut3 logit %0d = %0d, ref %0d", j, lg3[j], lref[j]));
    check(int'(cls3) == cref, $sformatf("dut3 label %0d, ref %0d", cls3, cref));
    @(negedge clk);
    check(!v3 && !busy3, "dut3 single-cycle out_valid, idle after");
    $display("three-qubit image mask=%03b: label %0d (ref %0d), %0d cycles", mask[2:0], cls3, cref, cyc);
  endtask

  task automatic run1(input int mask, input int seed);
    pixarr_t im;
    longint lref [];
    int cref, cyc, exp_cyc;
    im = make_image(H1, W1, 1, mask, seed);
    foreach (img1[i]) img1[i] = pix_t'(im[i]);
    vit_ref(im, H1, W1, 5, 16, 8, 1, 2, lref, cref);
    exp_cyc = vit_cycles(H1, W1, 5, 16, 8, 1);
    @(negedge clk) start1 = 1'b1;
    @(negedge clk) start1 = 1'b0;
    foreach (img1[i]) img1[i] = pix_t'($urandom);
    cyc = 1;
    while (!v1) begin
      @(negedge clk);
      cyc++;
      if (cyc > 20000) break;
    end
    check(cyc == exp_cyc, $sformatf("dut1 latency %0d cycles, schedule %0d", cyc, exp_cyc));
    for (int j = 0; j < 2; j++)
      check(longint'(lg1[j]) == lref[j], $sformatf("dut1 logit %0d = %0d, ref %0d", j, lg1[j], lref[j]));
    check(int'(cls1) == cref, $sformatf("dut1 label %0d, ref %0d", cls1, cref));
    $display("one-qubit image bright=%0d: label %0d (ref %0d), %0d cycles", mask & 1, cls1, cref, cyc);
  endtask

  initial begin
    foreach (img3[i]) img3[i] = '0;
    foreach (img1[i]) img1[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run3(3'b000, 11);
    run3(3'b011, 12);
    run3(3'b111, 13);
    run3(3'b101, 14);
    run1(0, 21);
    run1(1, 22);
    run1(1, 23);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
