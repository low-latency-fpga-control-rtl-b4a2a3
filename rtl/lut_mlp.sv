// lut_mlp -- LUT-based multilayer perceptron qubit classifier (PolyLUT-Add style).
//
// The whole image (IMG_PIX pixels, row-major) is first reduced to BETA-bit codes by a uniform
// input quantiser, code = clamp((pixel - IN_OFFSET) >> IN_SHIFT, 0, 2^BETA-1).  Then NUM_LAYERS
// layers of lut_neuron truth tables follow (default 256, 100, 100, 100, 10 neurons).  Every
// neuron reads A*F codes of the previous layer through a fixed sparse connection map, so a layer
// is nothing but table look-ups and wiring.  One register stage sits behind each layer, which
// gives a fixed latency of NUM_LAYERS clock cycles (5 cycles = 20 ns at 250 MHz) and a new image
// can be accepted every cycle.  The class is the index of the largest of the first NCLS outputs of
// the last layer (lowest index wins a tie); it is registered together with the last layer.
//
// Timing: in_valid with pix[] in cycle t -> out_valid, out_class, out_act[] in cycle t+NUM_LAYERS.
//
// Follows the paper: 5 layers of 256/100/100/100/10 neurons, BETA=2, F=4, D=2, A=2, LUT-only
// neurons (no DSP, no BRAM), 5-cycle latency.  Own choices: the input quantiser, one register per
// layer, argmax over the first NCLS outputs (2^qubits labels), hash-derived stand-in
// connectivity and weights (qd_pkg) standing in for a trained model.
module lut_mlp
  import qd_pkg::*;
#(
  parameter int          IMG_PIX    = 288,
  parameter int          NUM_LAYERS = 5,
  parameter int unsigned LAYER_N [NUM_LAYERS] = '{256, 100, 100, 100, 10},
  parameter int          F          = 4,
  parameter int          A          = 2,
  parameter int          BETA       = 2,
  parameter int          POLY_D     = 2,
  parameter int          SUB_SHIFT  = 4,
  parameter int          IN_OFFSET  = 48,
  parameter int          IN_SHIFT   = 4,
  parameter int          NCLS       = 8,
  localparam int         NOUT       = int'(LAYER_N[NUM_LAYERS-1]),
  localparam int         CLS_W      = (NCLS > 1) ? $clog2(NCLS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  pix_t             pix [IMG_PIX],
  output logic             out_valid,
  output logic [CLS_W-1:0] out_class,
  output logic [BETA-1:0]  out_act [NOUT]
);

  function automatic int max_width();
    int m;
    m = IMG_PIX;
    for (int l = 0; l < NUM_LAYERS; l++) if (int'(LAYER_N[l]) > m) m = int'(LAYER_N[l]);
    return m;
  endfunction
  localparam int MAXN = max_width();

  // ------------------------------------------------------------------ input quantiser
  logic [BETA-1:0] qin [IMG_PIX];
  always_comb begin
    for (int p = 0; p < IMG_PIX; p++) begin
      if (int'(pix[p]) <= IN_OFFSET)
        qin[p] = '0;
      else if (((int'(pix[p]) - IN_OFFSET) >> IN_SHIFT) >= (1 << BETA) - 1)
        qin[p] = '1;
      else
        qin[p] = BETA'((int'(pix[p]) - IN_OFFSET) >> IN_SHIFT);
    end
  end

  // ------------------------------------------------------------------ LUT layers
  logic [BETA-1:0] nout [NUM_LAYERS][MAXN];  // combinational neuron outputs
  logic [BETA-1:0] act  [NUM_LAYERS][MAXN];  // registered layer outputs

  for (genvar l = 0; l < NUM_LAYERS; l++) begin : g_layer
    localparam int NPREV = (l == 0) ? IMG_PIX : int'(LAYER_N[(l == 0) ? 0 : l-1]);
    for (genvar n = 0; n < MAXN; n++) begin : g_neuron
      if (n < int'(LAYER_N[l])) begin : g_on
        logic [A*F*BETA-1:0] xin;
        for (genvar i = 0; i < A*F; i++) begin : g_in
          localparam int SRC = qd_pkg::mlp_conn(l, n, i, NPREV);
          if (l == 0) begin : g_src_pix
            assign xin[i*BETA +: BETA] = qin[SRC];
          end else begin : g_src_act
            assign xin[i*BETA +: BETA] = act[l-1][SRC];
          end
        end
        lut_neuron #(
          .LAYER(l), .INDEX(n), .F(F), .A(A), .BETA(BETA), .POLY_D(POLY_D), .SUB_SHIFT(SUB_SHIFT)
        ) u_neuron (
          .x(xin),
          .y(nout[l][n])
        );
      end else begin : g_off
        assign nout[l][n] = '0;
      end
    end
  end

  // ------------------------------------------------------------------ class decision
  logic [CLS_W-1:0] best_cls;
  always_comb begin
    best_cls = '0;
    for (int c = 1; c < NCLS; c++)
      if (nout[NUM_LAYERS-1][c] > nout[NUM_LAYERS-1][best_cls]) best_cls = CLS_W'(c);
  end

  // ------------------------------------------------------------------ pipeline registers
  logic [NUM_LAYERS-1:0] vld;

  always_ff @(posedge clk) begin
    for (int l = 0; l < NUM_LAYERS; l++) act[l] <= nout[l];
    out_class <= best_cls;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[NUM_LAYERS-2:0], in_valid};
  end

  assign out_valid = vld[NUM_LAYERS-1];
  always_comb for (int o = 0; o < NOUT; o++) out_act[o] = act[NUM_LAYERS-1][o];

  initial begin
    assert (NCLS <= NOUT) else $error("lut_mlp: NCLS exceeds the last layer width");
    assert (NUM_LAYERS >= 2) else $error("lut_mlp: at least two layers are required");
  end

endmodule
