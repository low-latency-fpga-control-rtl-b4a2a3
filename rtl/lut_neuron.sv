// lut_neuron -- one PolyLUT-Add neuron of the LUT-based MLP, realised purely as truth tables.
//
// The neuron sees A*F inputs of BETA bits each, split into A groups ("sub-neurons") of F inputs.
// Each sub-neuron evaluates a degree-POLY_D polynomial of its F inputs
// (for F=2, D=2: w1*x1 + w2*x1^2 + w3*x1*x2 + ...), quantises the sum to BETA+1 signed bits, and
// an adder combines the A sub-neuron codes with a bias and applies a quantised ReLU to BETA bits.
// None of this arithmetic exists in hardware: at elaboration every sub-neuron is tabulated over all
// 2^(BETA*F) input codes and the adder over all 2^(A*(BETA+1)) code combinations, giving
// A + 1 decoupled truth tables, i.e. O(A*2^(BETA*F) + 2^(A*(BETA+1))) table entries instead of
// O(2^(A*BETA*F)).  The module is purely combinational: table look-up, then a second look-up.
//
// Follows the paper: fan-in F, word length BETA, polynomial degree D, A sub-neurons, the
// sub-neuron/adder table split and the table-size formula.  Own choices: sub-neuron
// quantisation = arithmetic shift by SUB_SHIFT then clamp to BETA+1 signed bits; adder activation
// = clamp(sum + bias, 0, 2^BETA-1); integer stand-in weights from qd_pkg (polynomial weights of
// a trained model would go there).  Monomial order: 1, x_0..x_{F-1}, then x_i*x_j for i <= j.
//
// Ports: x = A*F packed BETA-bit codes (input i at bits [i*BETA +: BETA]; inputs a*F..a*F+F-1
// feed sub-neuron a); y = BETA-bit output code.
module lut_neuron #(
  parameter int LAYER     = 0,
  parameter int INDEX     = 0,
  parameter int F         = 4,
  parameter int A         = 2,
  parameter int BETA      = 2,
  parameter int POLY_D    = 2,
  parameter int SUB_SHIFT = 4
) (
  input  logic [A*F*BETA-1:0] x,
  output logic [BETA-1:0]     y
);

  localparam int SUB_IN  = BETA * F;
  localparam int SUB_ENT = 1 << SUB_IN;
  localparam int SUB_OW  = BETA + 1;
  localparam int ADD_IN  = A * SUB_OW;
  localparam int ADD_ENT = 1 << ADD_IN;

  localparam int NTERM = (POLY_D >= 2) ? 1 + F + F*(F+1)/2 : 1 + F;

  // Sub-neuron a for the F input codes packed in e:
  //   s = w[0] + sum_i w[1+i]*x_i + sum_{i<=j} w[..]*x_i*x_j,  code = clamp(s >>> SUB_SHIFT).
  function automatic logic [A*SUB_ENT*SUB_OW-1:0] build_sub();
    logic [A*SUB_ENT*SUB_OW-1:0] t;
    int w [NTERM];
    int xv [F];
    int s, term, q;
    logic [31:0] v;
    t = '0;
    for (int a = 0; a < A; a++) begin
      for (int m = 0; m < NTERM; m++) w[m] = qd_pkg::mlp_weight(LAYER, INDEX, a, m);
      for (int e = 0; e < SUB_ENT; e++) begin
        for (int i = 0; i < F; i++) xv[i] = (e >> (i * BETA)) & ((1 << BETA) - 1);
        s = w[0];
        term = 1;
        for (int i = 0; i < F; i++) begin
          s += w[term] * xv[i];
          term++;
        end
        if (POLY_D >= 2)
          for (int i = 0; i < F; i++)
            for (int j = i; j < F; j++) begin
              s += w[term] * xv[i] * xv[j];
              term++;
            end
        q = s >>> SUB_SHIFT;
        if (q > (1 << BETA) - 1) q = (1 << BETA) - 1;
        if (q < -(1 << BETA)) q = -(1 << BETA);
        v = 32'(q);
        t[(a*SUB_ENT + e)*SUB_OW +: SUB_OW] = v[SUB_OW-1:0];
      end
    end
    return t;
  endfunction

  function automatic logic [ADD_ENT*BETA-1:0] build_add();
    logic [ADD_ENT*BETA-1:0] t;
    int s, c;
    t = '0;
    for (int e = 0; e < ADD_ENT; e++) begin
      s = qd_pkg::mlp_bias(LAYER, INDEX);
      for (int a = 0; a < A; a++) begin
        c = (e >> (a * SUB_OW)) & ((1 << SUB_OW) - 1);
        if (c >= (1 << BETA)) c = c - (1 << SUB_OW);  // sign-extend the BETA+1 bit code
        s += c;
      end
      if (s < 0) s = 0;
      if (s > (1 << BETA) - 1) s = (1 << BETA) - 1;
      t[e*BETA +: BETA] = BETA'(s);
    end
    return t;
  endfunction

  localparam logic [A*SUB_ENT*SUB_OW-1:0] SUB_TBL = build_sub();
  localparam logic [ADD_ENT*BETA-1:0]     ADD_TBL = build_add();

  logic [ADD_IN-1:0] sub_codes;

  always_comb begin
    for (int a = 0; a < A; a++)
      sub_codes[a*SUB_OW +: SUB_OW] =
        SUB_TBL[(a*SUB_ENT + int'(x[a*SUB_IN +: SUB_IN]))*SUB_OW +: SUB_OW];
    y = ADD_TBL[int'(sub_codes)*BETA +: BETA];
  end

endmodule
