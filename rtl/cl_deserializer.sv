// cl_deserializer -- Cameralink frame receiver: turns the camera's FVAL/LVAL/DVAL/pixel words
// into an AXI-Stream of pixels in the processing clock domain and flags a complete image.
//
// Camera side (cl_clk, the Cameralink pixel clock): a rising edge of FVAL opens a frame (pixels
// are taken from the next cycle on, as LVAL follows FVAL).  Within the frame every cycle with LVAL and DVAL high carries one pixel; the first IMG_W pixels of each
// line are taken, lines are counted on the falling edge of LVAL, and the first IMG_H lines make
// the image (the camera is the master and may pad lines, which are dropped).  Each accepted pixel
// is written into a dual-clock FIFO together with a start-of-frame flag (first pixel) and an
// end-of-frame flag (pixel IMG_H*IMG_W).  When pixel IMG_H*IMG_W has been written, tx_done pulses
// high for one cl_clk cycle (registered, one cycle after that pixel).  FVAL falling closes the
// frame; a frame cut short never raises tx_done or the end-of-frame flag.
// Stream side (clk): m_axis_tdata carries the pixel zero-extended to AXIS_W bits, tuser marks the
// first pixel of a frame, tlast the last one, with normal valid/ready flow control.  A pixel that
// finds the FIFO full is lost and sets the sticky overflow flag (cleared by cl_rst_n).
//
// Follows the paper: FVAL detection, H rows of W pixels per LVAL, pixel counting against the
// predefined resolution, tx_done, FIFO buffering, AXI-Stream master output.  Own choices: DVAL
// qualification, line padding handling, the FIFO depth and structure, tuser/tlast framing and the
// overflow flag.
module cl_deserializer
  import qd_pkg::*;
#(
  parameter int IMG_H      = 12,
  parameter int IMG_W      = 24,
  parameter int FIFO_DEPTH = 16
) (
  // Cameralink side
  input  logic              cl_clk,
  input  logic              cl_rst_n,
  input  logic              fval,
  input  logic              lval,
  input  logic              dval,
  input  pix_t              cl_data,
  output logic              tx_done,
  output logic              overflow,
  // AXI-Stream side
  input  logic              clk,
  input  logic              rst_n,
  output logic [AXIS_W-1:0] m_axis_tdata,
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  output logic              m_axis_tlast,
  output logic              m_axis_tuser
);

  localparam int NPIX = IMG_H * IMG_W;

  logic        fval_q, lval_q, in_frame;
  logic [15:0] col, row;
  logic [31:0] pix_cnt;

  wire frame_start = fval && !fval_q;
  wire take = in_frame && fval && lval && dval && (int'(col) < IMG_W) && (int'(row) < IMG_H);
  wire is_first = (pix_cnt == 32'd0);
  wire is_last  = (int'(pix_cnt) == NPIX - 1);

  logic fifo_full;

  always_ff @(posedge cl_clk or negedge cl_rst_n) begin
    if (!cl_rst_n) begin
      fval_q   <= 1'b0;
      lval_q   <= 1'b0;
      in_frame <= 1'b0;
      col      <= '0;
      row      <= '0;
      pix_cnt  <= '0;
      tx_done  <= 1'b0;
      overflow <= 1'b0;
    end else begin
      fval_q  <= fval;
      lval_q  <= lval;
      tx_done <= 1'b0;
      if (frame_start) begin
        in_frame <= 1'b1;
        col      <= '0;
        row      <= '0;
        pix_cnt  <= '0;
      end else if (!fval) begin
        in_frame <= 1'b0;
      end
      if (!frame_start && in_frame) begin
        if (lval_q && !lval) begin       // end of a line
          col <= '0;
          if (int'(row) < IMG_H) row <= row + 16'd1;
        end else if (take) begin
          col     <= col + 16'd1;
          pix_cnt <= pix_cnt + 32'd1;
          tx_done <= is_last;
          if (fifo_full) overflow <= 1'b1;
        end
      end
    end
  end

  logic [PIX_W+1:0] rd_word;
  logic             fifo_empty;

  async_fifo #(.W(PIX_W + 2), .DEPTH(FIFO_DEPTH)) u_fifo (
    .wr_clk  (cl_clk),
    .wr_rst_n(cl_rst_n),
    .wr_en   (take),
    .wr_data ({is_first, is_last, cl_data}),
    .full    (fifo_full),
    .rd_clk  (clk),
    .rd_rst_n(rst_n),
    .rd_en   (m_axis_tready),
    .rd_data (rd_word),
    .empty   (fifo_empty)
  );

  assign m_axis_tvalid = !fifo_empty;
  assign m_axis_tdata  = AXIS_W'(rd_word[PIX_W-1:0]);
  assign m_axis_tlast  = rd_word[PIX_W];
  assign m_axis_tuser  = rd_word[PIX_W+1];

endmodule
