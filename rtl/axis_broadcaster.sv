// axis_broadcaster -- copies one AXI-Stream onto NUM_M output streams.
//
// Every input beat is offered to all outputs at once.  An output that has taken the beat is
// masked (its tvalid drops) until the remaining outputs have taken it too; the input is acknowledged
// only when every output has the beat, so no output ever sees a beat twice or misses one.  A slow
// output therefore stalls the input (and the other outputs) -- back-pressure is not hidden.
// Purely combinational from input to output, plus one "already taken" bit per output.
// Ports: s_axis_* (input), m_axis_*[i] (output i).  tuser/tlast travel with tdata.
// In the design output 0 feeds the DDR image buffer and output 1 the DNN, as the paper's
// broadcaster does; the acceptance-mask scheme is this design's choice.
module axis_broadcaster #(
  parameter int DATA_W = 32,
  parameter int NUM_M  = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] s_axis_tdata,
  input  logic              s_axis_tvalid,
  output logic              s_axis_tready,
  input  logic              s_axis_tlast,
  input  logic              s_axis_tuser,
  output logic [DATA_W-1:0] m_axis_tdata  [NUM_M],
  output logic [NUM_M-1:0]  m_axis_tvalid,
  input  logic [NUM_M-1:0]  m_axis_tready,
  output logic [NUM_M-1:0]  m_axis_tlast,
  output logic [NUM_M-1:0]  m_axis_tuser
);

  logic [NUM_M-1:0] taken;

  always_comb begin
    s_axis_tready = &(m_axis_tready | taken);
    for (int i = 0; i < NUM_M; i++) begin
      m_axis_tdata[i]  = s_axis_tdata;
      m_axis_tvalid[i] = s_axis_tvalid && !taken[i];
      m_axis_tlast[i]  = s_axis_tlast;
      m_axis_tuser[i]  = s_axis_tuser;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) taken <= '0;
    else if (s_axis_tvalid && s_axis_tready) taken <= '0;
    else taken <= taken | (m_axis_tvalid & m_axis_tready);
  end

  // AXI-Stream rule: once offered, a beat stays offered and unchanged until accepted.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axis_tvalid && !s_axis_tready |=> s_axis_tvalid && $stable(s_axis_tdata))
    else $error("axis_broadcaster: input beat withdrawn or changed before acceptance");

endmodule
