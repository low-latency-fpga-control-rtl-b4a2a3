// qd_pkg -- shared types, constants and constant functions of the qubit-detection FPGA design.
//
// Holds what several modules (and their testbenches) must agree on:
//   * pixel and AXI-Stream widths of the camera datapath,
//   * the Q8.8 fixed-point type of the Vision Transformer (16-bit word, 8 fraction bits, as
//     ap_fixed<16,8> in the reference implementation) with its saturation helper,
//   * the 2^(i/16) table used by the softmax exponential,
//   * deterministic stand-in model parameters.  No trained weights exist in this source, so
//     every weight, bias and LUT-MLP connection is derived from a 32-bit integer hash of its
//     tensor id and index.  The hardware is identical for trained parameters: replace the bodies
//     of vit_param(), mlp_weight(), mlp_bias() and mlp_conn() with tables of trained values.
// Nothing here holds state; all functions are pure and usable in constant expressions.
package qd_pkg;

  // ---------------------------------------------------------------- camera / stream widths
  localparam int unsigned PIX_W  = 16;  // one EMCCD pixel (Cameralink base, 16-bit mode)
  localparam int unsigned AXIS_W = 32;  // AXI-Stream tdata width into the DNN (32-bit x)

  typedef logic [PIX_W-1:0] pix_t;
  typedef int unsigned u32_t;

  // ---------------------------------------------------------------- ViT fixed point
  localparam int unsigned FX_W    = 16;
  localparam int unsigned FX_FRAC = 8;
  typedef logic signed [FX_W-1:0] fx_t;

  // Accumulator wide enough for 128 products of two 16-bit words.
  localparam int unsigned ACC_W = 48;
  typedef logic signed [ACC_W-1:0] acc_t;

  localparam int signed FX_MAX = 32767;
  localparam int signed FX_MIN = -32768;

  // log2(e) in Q8.8, used to turn exp(x) into 2^(x*log2 e).
  localparam int signed LOG2E_Q8 = 369;

  function automatic fx_t sat_fx(input acc_t v);
    if (v > acc_t'(FX_MAX)) return fx_t'(FX_MAX);
    if (v < acc_t'(FX_MIN)) return fx_t'(FX_MIN);
    return fx_t'(v);
  endfunction

  // 2^(i/16) for i = 0..15 in Q1.16 (65536 = 1.0).
  function automatic logic [16:0] exp2_frac(input logic [3:0] i);
    case (i)
      4'd0:  return 17'd65536;
      4'd1:  return 17'd68438;
      4'd2:  return 17'd71468;
      4'd3:  return 17'd74632;
      4'd4:  return 17'd77936;
      4'd5:  return 17'd81386;
      4'd6:  return 17'd84990;
      4'd7:  return 17'd88752;
      4'd8:  return 17'd92682;
      4'd9:  return 17'd96785;
      4'd10: return 17'd101070;
      4'd11: return 17'd105545;
      4'd12: return 17'd110218;
      4'd13: return 17'd115098;
      4'd14: return 17'd120194;
      default: return 17'd125515;
    endcase
  endfunction

  // round(256 / sqrt(d)) in Q8.8: the attention scale 1/sqrt(d).
  function automatic int inv_sqrt_q8(input int d);
    int best, s;
    longint err, best_err;
    best = 1;
    best_err = 64'sd1 << 40;
    for (s = 1; s <= 512; s++) begin
      err = longint'(s) * s * d - 65536;
      if (err < 0) err = -err;
      if (err < best_err) begin
        best_err = err;
        best = s;
      end
    end
    return best;
  endfunction

  // ---------------------------------------------------------------- stand-in model parameters
  function automatic int unsigned hash32(input int unsigned x);
    int unsigned h;
    h = x ^ 32'h9E37_79B9;
    h = h ^ (h >> 16);
    h = h * 32'h7FEB_352D;
    h = h ^ (h >> 15);
    h = h * 32'h846C_A68B;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // ViT tensor ids (flat, row-major index inside each tensor; see vit_core for the shapes).
  localparam int TID_E    = 1;   // [P*P][D] patch embedding matrix E
  localparam int TID_POS  = 2;   // [N+1][D] position embedding E_pos
  localparam int TID_CLS  = 3;   // [D] class token x_class
  localparam int TID_QKV  = 4;   // [L][3][H][D][D] W_Q, W_K, W_V per head
  localparam int TID_WO   = 5;   // [L][H*D][D] head-merge projection
  localparam int TID_BO   = 6;   // [L][D]
  localparam int TID_G1   = 7;   // [L][D] BN scale (folded gamma/sqrt(var))
  localparam int TID_BE1  = 8;   // [L][D] BN shift (folded beta - mean*scale)
  localparam int TID_W1   = 9;   // [L][D][D] transformer Linear
  localparam int TID_BL1  = 10;  // [L][D]
  localparam int TID_GF   = 11;  // [D] final BN scale
  localparam int TID_BEF  = 12;  // [D] final BN shift
  localparam int TID_WOUT = 13;  // [D][C] classifier Linear
  localparam int TID_BOUT = 14;  // [C]

  // Q8.8 parameter: weights and biases in [-0.25, 0.25); BN scales near 1.0.
  function automatic fx_t vit_param(input int tid, input int idx);
    int v;
    v = int'(hash32(u32_t'(tid) * 32'd1000003 + u32_t'(idx)) % 128) - 64;
    if (tid == TID_G1 || tid == TID_GF) v = v + 256;
    return fx_t'(v);
  endfunction

  // LUT-MLP: source node of input 'i' (0..A*F-1) of neuron 'n' in layer 'l' (n_prev sources).
  function automatic int mlp_conn(input int l, input int n, input int i, input int n_prev);
    return int'(hash32(32'hC0FFEE + u32_t'(l) * 32'd65599 + u32_t'(n) * 32'd131
                       + u32_t'(i)) % u32_t'(n_prev));
  endfunction

  // LUT-MLP: weight of monomial 'term' of sub-neuron 'a' (integer, -7..7).
  function automatic int mlp_weight(input int l, input int n, input int a, input int term);
    return int'(hash32(32'h5EED_0000 + u32_t'(l) * 32'd1000003 + u32_t'(n) * 32'd1009
                       + u32_t'(a) * 32'd101 + u32_t'(term)) % 15) - 7;
  endfunction

  // LUT-MLP: adder bias of neuron 'n' (integer, -1..2).
  function automatic int mlp_bias(input int l, input int n);
    return int'(hash32(32'hB1A5_0000 + u32_t'(l) * 32'd7919 + u32_t'(n)) % 4) - 1;
  endfunction

endpackage
