// tb_axis_broadcaster -- self-checking test of the two-output AXI-Stream broadcaster.
//
// A source sends 400 numbered beats (tlast every 10th, tuser every 10th starting at 0) with random
// valid gaps; each of the two sinks applies its own random back-pressure.  Checked: each sink
// receives every beat exactly once and in order with its tlast/tuser, the source beat is
// acknowledged only after both sinks took it, and a sink that already took a beat sees tvalid low
// until the other one catches up.  Also counts that both "one sink ahead" cases happened.
module tb_axis_broadcaster;

  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;

  logic [31:0] s_tdata = '0;
  logic        s_tvalid = 1'b0, s_tlast = 1'b0, s_tuser = 1'b0;
  logic        s_tready;
  logic [31:0] m_tdata [2];
  logic [1:0]  m_tvalid, m_tready, m_tlast, m_tuser;

  axis_broadcaster dut (
    .clk(clk), .rst_n(rst_n), .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid),
    .s_axis_tready(s_tready), .s_axis_tlast(s_tlast), .s_axis_tuser(s_tuser),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready),
    .m_axis_tlast(m_tlast), .m_axis_tuser(m_tuser));

  localparam int N = 400;
  int checks = 0, failures = 0;
  int rx [2] = '{0, 0};
  int ahead [2] = '{0, 0};
  bit got [2];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) m_tready <= 2'($urandom_range(0, 3));

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 2; i++) if (s_tvalid && got[i]) begin
      check(!m_tvalid[i], $sformatf("sink %0d masked while the other sink lags", i));
      ahead[i]++;
    end
    for (int i = 0; i < 2; i++) if (m_tvalid[i] && m_tready[i]) begin
      check(m_tdata[i] == 32'(rx[i]) + 32'h1000, $sformatf("sink %0d beat %0d data %0h", i, rx[i], m_tdata[i]));
      check(m_tlast[i] == (rx[i] % 10 == 9) && m_tuser[i] == (rx[i] % 10 == 0),
            $sformatf("sink %0d beat %0d tlast/tuser", i, rx[i]));
      rx[i]++;
      got[i] = 1'b1;
    end
    if (s_tvalid && s_tready) begin
      check(got[0] && got[1], "source acknowledged only when both sinks have the beat");
      got[0] = 1'b0;
      got[1] = 1'b0;
    end
  end

  initial begin
    got[0] = 1'b0;
    got[1] = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < N; b++) begin
      while ($urandom_range(0, 3) == 0) @(negedge clk);
      s_tdata  = 32'(b) + 32'h1000;
      s_tlast  = (b % 10 == 9);
      s_tuser  = (b % 10 == 0);
      s_tvalid = 1'b1;
      @(posedge clk);
      while (!s_tready) @(posedge clk);
      @(negedge clk);
      s_tvalid = 1'b0;
    end
    repeat (5) @(negedge clk);
    check(rx[0] == N && rx[1] == N, $sformatf("sinks received %0d and %0d of %0d beats", rx[0], rx[1], N));
    check(ahead[0] > 0 && ahead[1] > 0, $sformatf("each sink was ahead at least once (%0d, %0d)", ahead[0], ahead[1]));
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
