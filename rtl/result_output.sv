// result_output -- handshakeless LVCMOS result port towards the experiment controller.
//
// When the DNN delivers a result (in_valid for one cycle with in_data), dnn_data is registered
// and held until the next result, and dnn_valid is driven high for PULSE_CYCLES cycles starting
// in the same cycle as the new dnn_data (a fresh result restarts the pulse).  There is no
// acknowledge: the receiver samples dnn_data while dnn_valid is high, which keeps the output
// latency to a single register stage.
// Timing: in_valid in cycle t -> dnn_data and dnn_valid change at the edge ending cycle t;
// dnn_valid stays high for cycles t+1 .. t+PULSE_CYCLES.
// Follows the paper: registered DNN_data plus a DNN_valid pulse, no handshake.  Own choice:
// the pulse width (long enough for a slower controller to sample it).
module result_output #(
  parameter int DATA_W       = 3,
  parameter int PULSE_CYCLES = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [DATA_W-1:0] in_data,
  output logic              dnn_valid,
  output logic [DATA_W-1:0] dnn_data
);

  logic [15:0] left;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left      <= '0;
      dnn_valid <= 1'b0;
      dnn_data  <= '0;
    end else if (in_valid) begin
      dnn_data  <= in_data;
      dnn_valid <= 1'b1;
      left      <= 16'(PULSE_CYCLES - 1);
    end else if (left != '0) begin
      left <= left - 16'd1;
    end else begin
      dnn_valid <= 1'b0;
    end
  end

  initial assert (PULSE_CYCLES >= 1) else $error("result_output: PULSE_CYCLES must be >= 1");

endmodule
