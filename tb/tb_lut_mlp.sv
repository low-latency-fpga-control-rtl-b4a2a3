// tb_lut_mlp -- self-checking test of the LUT-based MLP at its default size (288-pixel image,
// layers 256/100/100/100/10, F=4, A=2, BETA=2, D=2, 8 labels).
//
// Twelve images (synthetic ion images and random pixel fields that exercise every input code)
// are applied on consecutive clock cycles, one per cycle, to show the full-throughput pipeline.
// Each result must appear exactly 5 cycles after its image and match the reference model, which
// evaluates each neuron's polynomial directly: all 10 last-layer codes and the label are checked,
// and out_valid must be low when no image is in flight.
module tb_lut_mlp;
  import qd_pkg::*;
  import tb_ref_pkg::*;

  localparam int NPIX = 288;
  localparam int NIMG = 12;
  localparam int LAT  = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;

  int checks = 0, failures = 0;

  logic       in_valid = 1'b0;
  pix_t       pix [NPIX];
  logic       out_valid;
  logic [2:0] out_class;
  logic [1:0] out_act [10];

  lut_mlp dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .pix(pix),
               .out_valid(out_valid), .out_class(out_class), .out_act(out_act));

  int ref_outs [NIMG][10];
  int ref_cls  [NIMG];
  pixarr_t imgs [NIMG];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    int layer_n [] = '{256, 100, 100, 100, 10};
    int outs [];
    int c, seen;
    for (int i = 0; i < NIMG; i++) begin
      if (i < 8) imgs[i] = make_image(12, 24, 3, i, 100 + i);
      else begin
        imgs[i] = new[NPIX];
        foreach (imgs[i][p]) imgs[i][p] = $urandom_range(0, 140);
      end
      mlp_ref(imgs[i], layer_n, 4, 2, 2, 4, 48, 4, 8, outs, c);
      for (int o = 0; o < 10; o++) ref_outs[i][o] = outs[o];
      ref_cls[i] = c;
    end
    foreach (pix[p]) pix[p] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!out_valid, "out_valid low after reset");
    fork
      begin
        for (int i = 0; i < NIMG; i++) begin
          foreach (pix[p]) pix[p] = pix_t'(imgs[i][p]);
          in_valid = 1'b1;
          @(negedge clk);
        end
        in_valid = 1'b0;
      end
      begin
        int start_cycle;
        start_cycle = cycle;
        seen = 0;
        repeat (NIMG + LAT + 4) begin
          @(negedge clk);
          if (out_valid) begin
            check(cycle - start_cycle == LAT + seen,
                  $sformatf("image %0d result after %0d cycles, expected %0d", seen,
                            cycle - start_cycle - seen, LAT));
            for (int o = 0; o < 10; o++)
              check(int'(out_act[o]) == ref_outs[seen][o],
                    $sformatf("image %0d output %0d = %0d, ref %0d", seen, o, out_act[o], ref_outs[seen][o]));
            check(int'(out_class) == ref_cls[seen],
                  $sformatf("image %0d label %0d, ref %0d", seen, out_class, ref_cls[seen]));
            seen++;
          end
        end
      end
    join
    check(seen == NIMG, $sformatf("%0d results for %0d images", seen, NIMG));
    for (int i = 0; i < NIMG; i++) begin for (int o = 0; o < 10; o++) $write("%0d", ref_outs[i][o]); $write(" "); end
    for (int i = 0; i < NIMG; i++) $write("%0d ", ref_cls[i]);
    $display("<- reference labels");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
