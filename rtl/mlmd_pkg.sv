// mlmd_pkg: number formats, weight encoding and shared helpers of the
// machine-learning molecular-dynamics (MLMD) engine.
//
// Every datapath value (features, activations, biases, forces, positions,
// velocities, integration coefficients) is a signed 13-bit fixed-point number
// with 1 sign bit, 2 integer bits and 10 fractional bits (Q2.10), as the
// design is specified. Weights are not stored as numbers: each weight is a
// sign s in {-1,0,+1} and K = 3 power-of-two exponents n1..n3, so that
// w = s * (2^n1 + 2^n2 + 2^n3) and a product becomes three shifts and an add.
//
// Own choices (not fixed by the specification): exponents are 5-bit two's
// complement, a positive exponent is a left shift and a negative one a right
// shift; the code -16 (EXP_NONE) marks an unused power-of-two term (the
// quantiser produces such terms when |w| is already matched by fewer powers).
// Sums inside a neuron are kept in 32 bits (ACC_W) so no partial sum can wrap.
package mlmd_pkg;

  localparam int unsigned DATA_W  = 13;  // Q2.10 word
  localparam int unsigned FRAC_W  = 10;  // fractional bits
  localparam int unsigned K_SHIFT = 3;   // power-of-two terms per weight
  localparam int unsigned EXP_W   = 5;   // exponent field width
  localparam int unsigned ACC_W   = 32;  // neuron accumulator width
  localparam int unsigned CFG_W   = 2 + K_SHIFT * EXP_W;  // 17-bit parameter word
  localparam int unsigned CFG_ADDR_W = 8;                 // word address inside a layer
  localparam int unsigned LAYER_SEL_W = 3;                // layer select of the config bus

  typedef logic signed [DATA_W-1:0] fx_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic signed [EXP_W-1:0]  exp_t;

  // Weight sign s(w) of the quantiser: +1, 0 or -1.
  typedef enum logic [1:0] {
    SGN_ZERO = 2'b00,
    SGN_POS  = 2'b01,
    SGN_NEG  = 2'b11
  } sign_e;

  // One stored weight: {s, n[2], n[1], n[0]}, 17 bits.
  typedef struct packed {
    sign_e                    s;
    logic [K_SHIFT-1:0][EXP_W-1:0] n;
  } shift_param_t;

  // Host write targets of the integrator's state and coefficients.
  typedef enum logic [1:0] {
    ST_POS = 2'd0,  // position component r
    ST_VEL = 2'd1,  // velocity component v
    ST_KV  = 2'd2,  // per-atom velocity gain dt/m_i
    ST_DT  = 2'd3   // position gain dt (shared by all atoms)
  } st_sel_e;

  localparam exp_t EXP_NONE = exp_t'(5'b10000);  // -16: term absent

  localparam fx_t  FX_MAX = fx_t'({1'b0, {(DATA_W-1){1'b1}}});
  localparam fx_t  FX_MIN = fx_t'({1'b1, {(DATA_W-1){1'b0}}});

  // Saturate a wide signed value into the Q2.10 range.
  function automatic fx_t sat_fx(input acc_t x);
    if (x > acc_t'(FX_MAX))      return FX_MAX;
    else if (x < acc_t'(FX_MIN)) return FX_MIN;
    else                         return fx_t'(x);
  endfunction

endpackage
