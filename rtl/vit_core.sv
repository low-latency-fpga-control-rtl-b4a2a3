// vit_core -- Vision Transformer qubit classifier (patch embedding, transformer layers, head).
//
// Model (per image of IMG_H x IMG_W pixels, patch size P, N = IMG_H*IMG_W/P^2 patches,
// T = N+1 tokens, latent size D, NH heads, NL layers, NCLS labels):
//   z0       = [x_class ; x_p^1 E ; ... ; x_p^N E] + E_pos
//   per head : Q = z W_Q, K = z W_K, V = z W_V,  A = softmax(Q K^T / sqrt(D)) V
//   z1       = W_O [A_1 .. A_NH] + b_O + z                     (MSA plus shortcut s1)
//   z        = ReLU(Linear(BN(z1))) + z1                       (shortcut s2)
//   y        = Linear(BN(z_L^0)),  label = argmax y            (class token only)
// All values are Q8.8 (16-bit, 8 fraction bits).  Every product sum is kept in a 48-bit
// accumulator, shifted right by 8 (arithmetic, i.e. truncation towards minus infinity), offset
// by its bias or shortcut and then saturated to 16 bits once.  Batch norm is applied in its
// inference form y = x*scale + shift.
//
// Datapath: one array of LANES multiply-accumulate units.  Every step of the model is cast as a
// set of dot products that share an inner index k; lane j produces output element j, one k per
// clock, so a K-long dot product for up to LANES outputs takes K cycles and is written back in
// its last cycle.  A state machine walks through the model: CLS, EMB (per patch, K=P^2),
// per layer { per head { QKV (3*T rows, K=D), per query row { SCORE (K=D), EXP (1), DIV (33),
// NORM (1), AV (K=T) } }, WO (K=NH*D), BN1 (K=1), LIN1 (K=D) }, BNF (K=1), OUT (K=D), MAX (1).
// The number of lanes plays the role of the HLS reuse factor: LANES multipliers are time-shared
// over all matrix-vector products (reuse factor = D*D/LANES for a D x D layer).
// Softmax: subtract the row maximum, exp(x) = 2^(x*log2 e) using a 16-entry 2^(i/16) table and a
// shift, sum, one reciprocal 2^32/sum by a 33-cycle restoring divider, and one multiply per
// element, giving probabilities in Q8.8.
//
// Timing: start (one cycle, ignored while busy) copies img[] into an internal image register, so
// the source may change img[] right after the start cycle.  With start high in cycle t,
// out_valid is high in cycle t + latency, where latency is
//   4 + N*P^2 + NL*(NH*(3*T*D + T*(D + 35 + T)) + T*(NH*D + 1 + D)) + D,
// i.e. 9389 cycles for the 12x24 / P=6 image and 5005 for 10x10 / P=5 (L=1, H=8, D=16).
//
// Follows the paper: the equations above, L=1, H=8, D=16, P=6 (P=5 for the one-qubit image),
// ReLU instead of SiLU, batch norm instead of layer norm, the two shortcuts, class-token head and
// max, 16-bit fixed point with 8 fraction bits, the 32-bit pixel stream and windowed input.
// Own choices: the shared lane array and its schedule (the paper's design is HLS-generated with
// per-layer reuse factors), the W_O head-merge projection (the paper's MSA output must be
// D wide but it gives no merge rule), bias-free Q/K/V and patch embedding as in its equations,
// the pixel-to-Q8.8 conversion (raw count read as Q8.8, saturated), the exp/reciprocal method,
// saturation instead of wrap-around, and hash-derived stand-in parameters from qd_pkg.
module vit_core
  import qd_pkg::*;
#(
  parameter int IMG_H = 12,
  parameter int IMG_W = 24,
  parameter int P     = 6,
  parameter int D     = 16,
  parameter int NH    = 8,
  parameter int NL    = 1,
  parameter int NCLS  = 8,
  parameter int LANES = 16,
  localparam int IMG_PIX = IMG_H * IMG_W,
  localparam int NP      = (IMG_H / P) * (IMG_W / P),
  localparam int T       = NP + 1,
  localparam int PP      = P * P,
  localparam int HD      = NH * D,
  localparam int CLS_W   = (NCLS > 1) ? $clog2(NCLS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  pix_t             img [IMG_PIX],
  output logic             busy,
  output logic             out_valid,
  output logic [CLS_W-1:0] out_class,
  output fx_t              out_logits [NCLS]
);

  localparam int INV_SQRT = inv_sqrt_q8(D);
  localparam int PIX_AW   = (IMG_PIX > 1) ? $clog2(IMG_PIX) : 1;

  // ------------------------------------------------------------------ parameter ROMs
  fx_t rom_e    [PP][D];
  fx_t rom_pos  [T][D];
  fx_t rom_cls  [D];
  fx_t rom_qkv  [NL][3][NH][D][D];
  fx_t rom_wo   [NL][HD][D];
  fx_t rom_bo   [NL][D];
  fx_t rom_g1   [NL][D];
  fx_t rom_be1  [NL][D];
  fx_t rom_w1   [NL][D][D];
  fx_t rom_bl1  [NL][D];
  fx_t rom_gf   [D];
  fx_t rom_bef  [D];
  fx_t rom_wout [D][NCLS];
  fx_t rom_bout [NCLS];
  logic [PIX_AW-1:0] pmap [NP][PP];  // patch n, element k -> pixel index (row-major image)

  initial begin
    for (int k = 0; k < PP; k++) for (int j = 0; j < D; j++) rom_e[k][j] = vit_param(TID_E, k*D + j);
    for (int t = 0; t < T; t++) for (int j = 0; j < D; j++) rom_pos[t][j] = vit_param(TID_POS, t*D + j);
    for (int j = 0; j < D; j++) rom_cls[j] = vit_param(TID_CLS, j);
    for (int l = 0; l < NL; l++) begin
      for (int m = 0; m < 3; m++) for (int h = 0; h < NH; h++)
        for (int k = 0; k < D; k++) for (int j = 0; j < D; j++)
          rom_qkv[l][m][h][k][j] = vit_param(TID_QKV, (((l*3 + m)*NH + h)*D + k)*D + j);
      for (int k = 0; k < HD; k++) for (int j = 0; j < D; j++)
        rom_wo[l][k][j] = vit_param(TID_WO, (l*HD + k)*D + j);
      for (int k = 0; k < D; k++) for (int j = 0; j < D; j++)
        rom_w1[l][k][j] = vit_param(TID_W1, (l*D + k)*D + j);
      for (int j = 0; j < D; j++) begin
        rom_bo[l][j]  = vit_param(TID_BO,  l*D + j);
        rom_g1[l][j]  = vit_param(TID_G1,  l*D + j);
        rom_be1[l][j] = vit_param(TID_BE1, l*D + j);
        rom_bl1[l][j] = vit_param(TID_BL1, l*D + j);
      end
    end
    for (int j = 0; j < D; j++) begin
      rom_gf[j]  = vit_param(TID_GF, j);
      rom_bef[j] = vit_param(TID_BEF, j);
    end
    for (int k = 0; k < D; k++) for (int j = 0; j < NCLS; j++) rom_wout[k][j] = vit_param(TID_WOUT, k*NCLS + j);
    for (int j = 0; j < NCLS; j++) rom_bout[j] = vit_param(TID_BOUT, j);
    for (int n = 0; n < NP; n++)
      for (int k = 0; k < PP; k++)
        pmap[n][k] = PIX_AW'(((n / (IMG_W/P))*P + k / P) * IMG_W + (n % (IMG_W/P))*P + k % P);
  end

  // ------------------------------------------------------------------ activation buffers
  pix_t img_q [IMG_PIX]; // image captured at start
  fx_t z    [T][D];    // layer input / output tokens
  fx_t z1   [T][D];    // MSA + s1
  fx_t bnv  [T][D];    // BN(z1)
  fx_t qm   [T][D];
  fx_t km   [T][D];
  fx_t vm   [T][D];
  fx_t om   [T][HD];   // concatenated head outputs
  fx_t sc   [T];       // scaled scores of the current query row
  fx_t pr   [T];       // softmax probabilities of the current row
  fx_t fz   [D];       // BN of the final class token
  logic [16:0] ex [T]; // exp values, Q1.16
  logic [23:0] esum;

  // ------------------------------------------------------------------ control
  typedef enum logic [3:0] {
    S_IDLE, S_CLS, S_EMB, S_QKV, S_SCORE, S_EXP, S_DIV, S_NORM, S_AV,
    S_WO, S_BN1, S_LIN1, S_BNF, S_OUT, S_MAX
  } state_t;

  state_t      state;
  logic [15:0] kk;     // inner (dot-product) index
  logic [15:0] tok;    // token / query row
  logic [7:0]  hd;     // head
  logic [1:0]  mat;    // 0 = Q, 1 = K, 2 = V
  logic [7:0]  lyr;    // transformer layer
  logic [5:0]  div_i;
  logic [32:0] div_rem;
  logic [32:0] recip;

  logic [15:0] k_len;
  always_comb begin
    unique case (state)
      S_EMB:                     k_len = 16'(PP);
      S_QKV, S_SCORE, S_LIN1, S_OUT: k_len = 16'(D);
      S_AV:                      k_len = 16'(T);
      S_WO:                      k_len = 16'(HD);
      default:                   k_len = 16'd1;
    endcase
  end
  wire last_k = (kk == k_len - 16'd1);

  function automatic int cl(input int j, input int n);
    return (j < n) ? j : 0;
  endfunction

  function automatic fx_t pix_fx(input pix_t p);
    return (p > pix_t'(FX_MAX)) ? fx_t'(FX_MAX) : fx_t'(p);
  endfunction

  // ------------------------------------------------------------------ operand selection
  fx_t  opa [LANES];
  fx_t  opb [LANES];
  acc_t acc [LANES];
  acc_t sum [LANES];
  acc_t shf [LANES];   // sum >>> 8

  always_comb begin
    for (int j = 0; j < LANES; j++) begin
      opa[j] = '0;
      opb[j] = '0;
      unique case (state)
        S_EMB: if (j < D) begin
          opa[j] = pix_fx(img_q[pmap[cl(int'(tok) - 1, NP)][cl(int'(kk), PP)]]);
          opb[j] = rom_e[cl(int'(kk), PP)][cl(j, D)];
        end
        S_QKV: if (j < D) begin
          opa[j] = z[cl(int'(tok), T)][cl(int'(kk), D)];
          opb[j] = rom_qkv[cl(int'(lyr), NL)][cl(int'(mat), 3)][cl(int'(hd), NH)][cl(int'(kk), D)][cl(j, D)];
        end
        S_SCORE: if (j < T) begin
          opa[j] = qm[cl(int'(tok), T)][cl(int'(kk), D)];
          opb[j] = km[cl(j, T)][cl(int'(kk), D)];
        end
        S_AV: if (j < D) begin
          opa[j] = pr[cl(int'(kk), T)];
          opb[j] = vm[cl(int'(kk), T)][cl(j, D)];
        end
        S_WO: if (j < D) begin
          opa[j] = om[cl(int'(tok), T)][cl(int'(kk), HD)];
          opb[j] = rom_wo[cl(int'(lyr), NL)][cl(int'(kk), HD)][cl(j, D)];
        end
        S_BN1: if (j < D) begin
          opa[j] = z1[cl(int'(tok), T)][cl(j, D)];
          opb[j] = rom_g1[cl(int'(lyr), NL)][cl(j, D)];
        end
        S_LIN1: if (j < D) begin
          opa[j] = bnv[cl(int'(tok), T)][cl(int'(kk), D)];
          opb[j] = rom_w1[cl(int'(lyr), NL)][cl(int'(kk), D)][cl(j, D)];
        end
        S_BNF: if (j < D) begin
          opa[j] = z[0][cl(j, D)];
          opb[j] = rom_gf[cl(j, D)];
        end
        S_OUT: if (j < NCLS) begin
          opa[j] = fz[cl(int'(kk), D)];
          opb[j] = rom_wout[cl(int'(kk), D)][cl(j, NCLS)];
        end
        default: ;
      endcase
      sum[j] = ((kk == '0) ? acc_t'(0) : acc[j]) + acc_t'(opa[j]) * acc_t'(opb[j]);
      shf[j] = sum[j] >>> FX_FRAC;
    end
  end

  // ------------------------------------------------------------------ softmax helpers
  fx_t         row_max;
  logic [16:0] ex_c [T];
  logic [23:0] esum_c;

  function automatic logic [16:0] exp_q16(input fx_t x, input fx_t mx);
    int d, y, ip, sh;
    logic [16:0] tv;
    d  = int'(x) - int'(mx);           // <= 0
    y  = (d * LOG2E_Q8) >>> FX_FRAC;   // x*log2(e), Q8.8, <= 0
    ip = y >>> FX_FRAC;                // floor of the exponent
    sh = -ip;
    tv = exp2_frac(4'((y & 255) >> 4));
    return (sh > 16) ? 17'd0 : (tv >> sh);
  endfunction

  always_comb begin
    row_max = sc[0];
    for (int j = 1; j < T; j++) if (sc[j] > row_max) row_max = sc[j];
    esum_c = '0;
    for (int j = 0; j < T; j++) begin
      ex_c[j] = exp_q16(sc[j], row_max);
      esum_c  = esum_c + 24'(ex_c[j]);
    end
  end

  logic [32:0] div_try;
  assign div_try = {div_rem[31:0], (div_i == 6'd32)};

  // ------------------------------------------------------------------ class decision
  logic [CLS_W-1:0] best;
  always_comb begin
    best = '0;
    for (int c = 1; c < NCLS; c++) if (out_logits[c] > out_logits[best]) best = CLS_W'(c);
  end

  // ------------------------------------------------------------------ sequencer and datapath
  always_ff @(posedge clk) begin
    if (state == S_IDLE && start) img_q <= img;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      kk        <= '0;
      tok       <= '0;
      hd        <= '0;
      mat       <= '0;
      lyr       <= '0;
      div_i     <= '0;
      div_rem   <= '0;
      recip     <= '0;
      esum      <= '0;
      for (int c = 0; c < NCLS; c++) out_logits[c] <= '0;
      out_valid <= 1'b0;
      out_class <= '0;
    end else begin
      out_valid <= 1'b0;
      for (int j = 0; j < LANES; j++) acc[j] <= sum[j];
      if (state != S_IDLE && state != S_EXP && state != S_DIV && state != S_NORM &&
          state != S_CLS && state != S_MAX)
        kk <= last_k ? '0 : kk + 16'd1;

      unique case (state)
        S_IDLE: if (start) begin
          state <= S_CLS;
          kk    <= '0;
        end

        S_CLS: begin
          for (int j = 0; j < D; j++)
            z[0][j] <= sat_fx(acc_t'(rom_cls[j]) + acc_t'(rom_pos[0][j]));
          tok   <= 16'd1;
          state <= S_EMB;
        end

        S_EMB: if (last_k) begin
          for (int j = 0; j < D; j++)
            z[cl(int'(tok), T)][j] <= sat_fx(shf[j] + acc_t'(rom_pos[cl(int'(tok), T)][j]));
          if (int'(tok) == NP) begin
            tok <= '0; hd <= '0; mat <= '0; lyr <= '0;
            state <= S_QKV;
          end else tok <= tok + 16'd1;
        end

        S_QKV: if (last_k) begin
          for (int j = 0; j < D; j++) begin
            if (mat == 2'd0) qm[cl(int'(tok), T)][j] <= sat_fx(shf[j]);
            if (mat == 2'd1) km[cl(int'(tok), T)][j] <= sat_fx(shf[j]);
            if (mat == 2'd2) vm[cl(int'(tok), T)][j] <= sat_fx(shf[j]);
          end
          if (int'(tok) == T - 1) begin
            tok <= '0;
            if (mat == 2'd2) begin
              mat   <= '0;
              state <= S_SCORE;
            end else mat <= mat + 2'd1;
          end else tok <= tok + 16'd1;
        end

        S_SCORE: if (last_k) begin
          for (int j = 0; j < T; j++)
            sc[j] <= sat_fx((shf[j] * acc_t'(INV_SQRT)) >>> FX_FRAC);
          state <= S_EXP;
        end

        S_EXP: begin
          for (int j = 0; j < T; j++) ex[j] <= ex_c[j];
          esum    <= esum_c;
          div_i   <= 6'd32;
          div_rem <= '0;
          recip   <= '0;
          state   <= S_DIV;
        end

        // recip = floor(2^32 / esum), one quotient bit per cycle (bits 32 down to 0)
        S_DIV: begin
          if (div_try >= {9'd0, esum}) begin
            div_rem <= div_try - {9'd0, esum};
            recip   <= {recip[31:0], 1'b1};
          end else begin
            div_rem <= div_try;
            recip   <= {recip[31:0], 1'b0};
          end
          if (div_i == 6'd0) state <= S_NORM;
          else div_i <= div_i - 6'd1;
        end

        S_NORM: begin
          for (int j = 0; j < T; j++)
            pr[j] <= fx_t'((50'(ex[j]) * 50'(recip)) >> 24);
          state <= S_AV;
        end

        S_AV: if (last_k) begin
          for (int j = 0; j < D; j++)
            om[cl(int'(tok), T)][cl(int'(hd)*D + j, HD)] <= sat_fx(shf[j]);
          if (int'(tok) == T - 1) begin
            tok <= '0;
            if (int'(hd) == NH - 1) begin
              hd    <= '0;
              state <= S_WO;
            end else begin
              hd    <= hd + 8'd1;
              state <= S_QKV;
            end
          end else begin
            tok   <= tok + 16'd1;
            state <= S_SCORE;
          end
        end

        S_WO: if (last_k) begin
          for (int j = 0; j < D; j++)
            z1[cl(int'(tok), T)][j] <= sat_fx(shf[j] + acc_t'(rom_bo[cl(int'(lyr), NL)][j])
                                              + acc_t'(z[cl(int'(tok), T)][j]));
          if (int'(tok) == T - 1) begin
            tok   <= '0;
            state <= S_BN1;
          end else tok <= tok + 16'd1;
        end

        S_BN1: begin
          for (int j = 0; j < D; j++)
            bnv[cl(int'(tok), T)][j] <= sat_fx(shf[j] + acc_t'(rom_be1[cl(int'(lyr), NL)][j]));
          if (int'(tok) == T - 1) begin
            tok   <= '0;
            state <= S_LIN1;
          end else tok <= tok + 16'd1;
        end

        S_LIN1: if (last_k) begin
          for (int j = 0; j < D; j++) begin
            automatic fx_t lin = sat_fx(shf[j] + acc_t'(rom_bl1[cl(int'(lyr), NL)][j]));
            automatic fx_t rel = (lin < 0) ? fx_t'(0) : lin;
            z[cl(int'(tok), T)][j] <= sat_fx(acc_t'(rel) + acc_t'(z1[cl(int'(tok), T)][j]));
          end
          if (int'(tok) == T - 1) begin
            tok <= '0;
            if (int'(lyr) == NL - 1) state <= S_BNF;
            else begin
              lyr   <= lyr + 8'd1;
              state <= S_QKV;
            end
          end else tok <= tok + 16'd1;
        end

        S_BNF: begin
          for (int j = 0; j < D; j++) fz[j] <= sat_fx(shf[j] + acc_t'(rom_bef[j]));
          state <= S_OUT;
        end

        S_OUT: if (last_k) begin
          for (int j = 0; j < NCLS; j++)
            out_logits[j] <= sat_fx(shf[j] + acc_t'(rom_bout[j]));
          state <= S_MAX;
        end

        S_MAX: begin
          out_class <= best;
          out_valid <= 1'b1;
          state     <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  initial begin
    assert (IMG_H % P == 0 && IMG_W % P == 0) else $error("vit_core: image not a multiple of P");
    assert (LANES >= D && LANES >= T && LANES >= NCLS) else $error("vit_core: LANES too small");
  end

endmodule
