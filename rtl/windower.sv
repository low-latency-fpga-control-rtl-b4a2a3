// windower -- assembles the pixel stream into a complete image for the DNN.
//
// Each accepted AXI-Stream beat (low PIX_W bits of tdata) is shifted into an IMG_PIX-long shift
// register, so that after a whole frame img[0] holds the first pixel of the first line and
// img[IMG_PIX-1] the last pixel (row-major).  The beat flagged by tuser restarts the pixel count
// (start of frame).  When the IMG_PIX-th pixel of a frame is shifted in, img_valid pulses for one
// cycle in the following cycle, with the whole image on img[]; the image then stays unchanged until
// the next pixel arrives.  A tlast that does not coincide with the IMG_PIX-th pixel pulses
// frame_err and restarts the count.  The windower never back-pressures (s_axis_tready = 1).
// Follows the paper: a shift register that assembles the full image from the stream and hands it
// to the next stage, working in pipeline with the Cameralink receiver.  Own choices: the
// tuser/tlast framing, the error pulse and the always-ready input.
module windower
  import qd_pkg::*;
#(
  parameter int IMG_PIX = 288
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [AXIS_W-1:0] s_axis_tdata,
  input  logic              s_axis_tvalid,
  output logic              s_axis_tready,
  input  logic              s_axis_tlast,
  input  logic              s_axis_tuser,
  output pix_t              img [IMG_PIX],
  output logic              img_valid,
  output logic              frame_err
);

  logic [31:0] cnt;   // pixels of the current frame already in the window
  wire         beat = s_axis_tvalid && s_axis_tready;
  wire [31:0]  cnt_here = s_axis_tuser ? 32'd0 : cnt;  // index of this beat's pixel
  wire         full_now = (int'(cnt_here) == IMG_PIX - 1);

  assign s_axis_tready = 1'b1;

  always_ff @(posedge clk) begin
    if (beat) begin
      for (int i = 0; i < IMG_PIX - 1; i++) img[i] <= img[i+1];
      img[IMG_PIX-1] <= s_axis_tdata[PIX_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      img_valid <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      img_valid <= 1'b0;
      frame_err <= 1'b0;
      if (beat) begin
        if (full_now) begin
          cnt       <= '0;
          img_valid <= 1'b1;
        end else if (s_axis_tlast) begin
          cnt       <= '0;
          frame_err <= 1'b1;
        end else begin
          cnt <= cnt_here + 32'd1;
        end
      end
    end
  end

endmodule
