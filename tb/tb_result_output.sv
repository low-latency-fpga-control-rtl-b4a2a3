// tb_result_output -- self-checking test of the handshakeless result port.
//
// Results are presented as single-cycle in_valid pulses with random labels, spaced so that some
// arrive while the previous pulse is still high.  Checked cycle by cycle against a model:
// dnn_data changes to the new label at the edge after in_valid and holds until the next result;
// dnn_valid is high for exactly PULSE_CYCLES (4) cycles after the last result, and a result that
// arrives during a pulse restarts it.
module tb_result_output;

  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;

  logic       in_valid = 1'b0;
  logic [2:0] in_data = '0;
  logic       dnn_valid;
  logic [2:0] dnn_data;

  result_output dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data),
                     .dnn_valid(dnn_valid), .dnn_data(dnn_data));

  int checks = 0, failures = 0;
  int restarts = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // model
  int left = 0;
  logic [2:0] mdata = '0;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!dnn_valid && dnn_data == 3'd0, "idle after reset");
    for (int cyc = 0; cyc < 400; cyc++) begin
      in_valid = ($urandom_range(0, 6) == 0);
      in_data  = 3'($urandom);
      @(posedge clk);
      if (in_valid) begin
        if (left > 0) restarts++;
        mdata = in_data;
        left = 4;
      end else if (left > 0) left--;
      @(negedge clk);
      check(dnn_data == mdata, $sformatf("cycle %0d: dnn_data %0d, model %0d", cyc, dnn_data, mdata));
      check(dnn_valid == (left > 0), $sformatf("cycle %0d: dnn_valid %0b, model %0d left", cyc, dnn_valid, left));
    end
    check(restarts > 0, "a result arrived during a pulse at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
