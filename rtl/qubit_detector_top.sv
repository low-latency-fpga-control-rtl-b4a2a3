// qubit_detector_top -- FPGA trapped-ion qubit-state detector: EMCCD camera in, qubit states out.
//
// Dataflow (one image per camera trigger):
//   Cameralink (FVAL/LVAL/DVAL/pixel, camera clock)
//     -> cl_deserializer : frame/line framing, pixel count, tx_done, dual-clock FIFO
//     -> axis_broadcaster: stream 0 -> ddr_axis_* ports (image archive in DDR, external IP)
//                          stream 1 -> windower (full image in a shift register)
//     -> lut_mlp  (5-cycle LUT network)   } both classify every complete image
//     -> vit_core (sequential transformer)}
//     -> result_output   : handshakeless dnn_valid pulse + dnn_data (qubit-state label)
// dnn_sel chooses which classifier drives the result port (0 = LUT-MLP, 1 = ViT); it should be
// changed only between images.  FVAL, tx_done and dnn_valid are copied to probe outputs so that
// the trigger-to-result latency can be measured outside the chip.
// Clock domains: cl_clk (camera pixel clock, 17 MHz in the reference setup) for the Cameralink
// inputs, tx_done and cl_overflow; clk (250 MHz) for everything else.  Resets are asynchronous,
// active low, one per domain.
// Timing: tx_done pulses one cl_clk cycle after the last pixel is received; that pixel reaches
// the windower a few clk cycles later; MLP results appear 5 clk cycles after the image is
// complete, ViT results 9389 clk cycles after (defaults), and dnn_valid rises one cycle later.
//
// Follows the paper: the receive -> broadcast -> {DDR, DNN} -> handshakeless output structure,
// the probe signals and both DNN accelerators with the paper's sizes.  The paper builds either
// the MLP or the ViT into the FPGA; instantiating both behind a result selector is this design's
// choice, as are the default image size (the three-qubit 12 x 24 image), vit_skip (an image that
// arrives while the ViT is busy is not classified by it) and the frame error outputs.
module qubit_detector_top
  import qd_pkg::*;
#(
  parameter int          IMG_H          = 12,
  parameter int          IMG_W          = 24,
  parameter int          NCLS           = 8,
  parameter int          FIFO_DEPTH     = 16,
  parameter int          PULSE_CYCLES   = 4,
  parameter int          MLP_NUM_LAYERS = 5,
  parameter int unsigned MLP_LAYER_N [MLP_NUM_LAYERS] = '{256, 100, 100, 100, 10},
  parameter int          MLP_F          = 4,
  parameter int          MLP_A          = 2,
  parameter int          MLP_BETA       = 2,
  parameter int          MLP_POLY_D     = 2,
  parameter int          VIT_P          = 6,
  parameter int          VIT_D          = 16,
  parameter int          VIT_NH         = 8,
  parameter int          VIT_NL         = 1,
  parameter int          VIT_LANES      = 16,
  localparam int         CLS_W          = (NCLS > 1) ? $clog2(NCLS) : 1
) (
  // Cameralink, camera pixel clock domain
  input  logic              cl_clk,
  input  logic              cl_rst_n,
  input  logic              cl_fval,
  input  logic              cl_lval,
  input  logic              cl_dval,
  input  pix_t              cl_data,
  output logic              cl_overflow,
  // processing clock domain
  input  logic              clk,
  input  logic              rst_n,
  input  logic              dnn_sel,
  // image stream towards the DDR buffer
  output logic [AXIS_W-1:0] ddr_axis_tdata,
  output logic              ddr_axis_tvalid,
  input  logic              ddr_axis_tready,
  output logic              ddr_axis_tlast,
  output logic              ddr_axis_tuser,
  // result port to the experiment controller
  output logic              dnn_valid,
  output logic [CLS_W-1:0]  dnn_data,
  // latency probes and status
  output logic              probe_fval,
  output logic              probe_tx_done,
  output logic              probe_dnn_valid,
  output logic              frame_err,
  output logic              vit_busy,
  output logic              vit_skip
);

  localparam int IMG_PIX = IMG_H * IMG_W;

  // ------------------------------------------------------------ Cameralink receiver
  logic [AXIS_W-1:0] rx_tdata;
  logic              rx_tvalid, rx_tready, rx_tlast, rx_tuser;
  logic              tx_done;

  cl_deserializer #(.IMG_H(IMG_H), .IMG_W(IMG_W), .FIFO_DEPTH(FIFO_DEPTH)) u_rx (
    .cl_clk       (cl_clk),
    .cl_rst_n     (cl_rst_n),
    .fval         (cl_fval),
    .lval         (cl_lval),
    .dval         (cl_dval),
    .cl_data      (cl_data),
    .tx_done      (tx_done),
    .overflow     (cl_overflow),
    .clk          (clk),
    .rst_n        (rst_n),
    .m_axis_tdata (rx_tdata),
    .m_axis_tvalid(rx_tvalid),
    .m_axis_tready(rx_tready),
    .m_axis_tlast (rx_tlast),
    .m_axis_tuser (rx_tuser)
  );

  // ------------------------------------------------------------ broadcaster
  logic [AXIS_W-1:0] bc_tdata [2];
  logic [1:0]        bc_tvalid, bc_tready, bc_tlast, bc_tuser;

  axis_broadcaster #(.DATA_W(AXIS_W), .NUM_M(2)) u_bcast (
    .clk          (clk),
    .rst_n        (rst_n),
    .s_axis_tdata (rx_tdata),
    .s_axis_tvalid(rx_tvalid),
    .s_axis_tready(rx_tready),
    .s_axis_tlast (rx_tlast),
    .s_axis_tuser (rx_tuser),
    .m_axis_tdata (bc_tdata),
    .m_axis_tvalid(bc_tvalid),
    .m_axis_tready(bc_tready),
    .m_axis_tlast (bc_tlast),
    .m_axis_tuser (bc_tuser)
  );

  assign ddr_axis_tdata  = bc_tdata[0];
  assign ddr_axis_tvalid = bc_tvalid[0];
  assign bc_tready[0]    = ddr_axis_tready;
  assign ddr_axis_tlast  = bc_tlast[0];
  assign ddr_axis_tuser  = bc_tuser[0];

  // ------------------------------------------------------------ windower
  pix_t img [IMG_PIX];
  logic img_valid;

  windower #(.IMG_PIX(IMG_PIX)) u_win (
    .clk          (clk),
    .rst_n        (rst_n),
    .s_axis_tdata (bc_tdata[1]),
    .s_axis_tvalid(bc_tvalid[1]),
    .s_axis_tready(bc_tready[1]),
    .s_axis_tlast (bc_tlast[1]),
    .s_axis_tuser (bc_tuser[1]),
    .img          (img),
    .img_valid    (img_valid),
    .frame_err    (frame_err)
  );

  // ------------------------------------------------------------ classifiers
  logic             mlp_valid, vit_valid;
  logic [CLS_W-1:0] mlp_class, vit_class;
  logic [MLP_BETA-1:0] mlp_act [int'(MLP_LAYER_N[MLP_NUM_LAYERS-1])];
  fx_t              vit_logits [NCLS];

  lut_mlp #(
    .IMG_PIX(IMG_PIX), .NUM_LAYERS(MLP_NUM_LAYERS), .LAYER_N(MLP_LAYER_N), .F(MLP_F), .A(MLP_A),
    .BETA(MLP_BETA), .POLY_D(MLP_POLY_D), .NCLS(NCLS)
  ) u_mlp (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (img_valid),
    .pix      (img),
    .out_valid(mlp_valid),
    .out_class(mlp_class),
    .out_act  (mlp_act)
  );

  vit_core #(
    .IMG_H(IMG_H), .IMG_W(IMG_W), .P(VIT_P), .D(VIT_D), .NH(VIT_NH), .NL(VIT_NL), .NCLS(NCLS),
    .LANES(VIT_LANES)
  ) u_vit (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (img_valid),
    .img       (img),
    .busy      (vit_busy),
    .out_valid (vit_valid),
    .out_class (vit_class),
    .out_logits(vit_logits)
  );

  assign vit_skip = img_valid && vit_busy;

  // ------------------------------------------------------------ result port
  result_output #(.DATA_W(CLS_W), .PULSE_CYCLES(PULSE_CYCLES)) u_out (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (dnn_sel ? vit_valid : mlp_valid),
    .in_data  (dnn_sel ? vit_class : mlp_class),
    .dnn_valid(dnn_valid),
    .dnn_data (dnn_data)
  );

  assign probe_fval      = cl_fval;
  assign probe_tx_done   = tx_done;
  assign probe_dnn_valid = dnn_valid;

endmodule
