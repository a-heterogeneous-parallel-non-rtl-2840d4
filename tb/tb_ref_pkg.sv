// tb_ref_pkg: reference arithmetic for the testbenches, written
// independently of the RTL: integer multiplies and floor divisions in 64-bit
// arithmetic instead of shifts, and the weight quantiser of the training
// scheme (w_q = s * sum of K powers of two, with the basis
// Q(w) = 2^ceil(log2(|w|/1.5)) applied greedily to the remainder).
package tb_ref_pkg;

  localparam int FRAC = 10;
  localparam int ONE  = 1 << FRAC;
  localparam int KS   = 3;
  localparam int NONE = -16;

  function automatic longint floor_div(input longint x, input longint d);
    longint q;
    q = x / d;
    if ((x % d) != 0 && x < 0) q = q - 1;
    return q;
  endfunction

  function automatic longint sat13(input longint x);
    if (x > 4095)  return 4095;
    if (x < -4096) return -4096;
    return x;
  endfunction

  // One power-of-two term x * 2^n, floor-rounded for n < 0.
  function automatic longint pterm(input longint x, input int n);
    longint p2;
    if (n == NONE) return 0;
    if (n >= 0) begin
      p2 = 1;
      for (int i = 0; i < n; i++) p2 = p2 * 2;
      return x * p2;
    end
    p2 = 1;
    for (int i = 0; i < -n; i++) p2 = p2 * 2;
    return floor_div(x, p2);
  endfunction

  // Shift-unit product: sgn in {-1,0,1}.
  function automatic longint ref_su(input longint a, input int sgn, input int n0, input int n1, input int n2);
    return sgn * (pterm(a, n0) + pterm(a, n1) + pterm(a, n2));
  endfunction

  // Activation phi on a value with 10 fractional bits.
  function automatic longint ref_phi(input longint q);
    longint t;
    if (q >= 2 * ONE)  return ONE;
    if (q <= -2 * ONE) return -ONE;
    t = q * (q < 0 ? -q : q);
    return q - floor_div(t, 4 * ONE);
  endfunction

  // 17-bit stored weight word {s[1:0], n2, n1, n0}.
  function automatic logic [16:0] wword(input int sgn, input int n0, input int n1, input int n2);
    logic [1:0] s;
    s = (sgn > 0) ? 2'b01 : (sgn < 0) ? 2'b11 : 2'b00;
    return {s, 5'(n2), 5'(n1), 5'(n0)};
  endfunction

  // Quantise a real weight to sign and K exponents.
  // Terms smaller than 2^-15 are dropped (exponent NONE).
  typedef struct { int sgn; int n[KS]; } qw_t;

  function automatic qw_t quantise(input real w);
    qw_t  r;
    real  rem, qv;
    int   e;
    r.sgn = (w > 0.0) ? 1 : (w < 0.0) ? -1 : 0;
    rem   = (w < 0.0) ? -w : w;
    for (int k = 0; k < KS; k++) begin
      if (rem <= 0.0 || r.sgn == 0) begin
        r.n[k] = NONE;
      end else begin
        e = int'($ceil($ln(rem / 1.5) / $ln(2.0)));
        if (e > 15) e = 15;
        if (e < -15) begin
          r.n[k] = NONE;
          rem    = 0.0;
        end else begin
          r.n[k] = e;
          qv     = 2.0 ** e;
          rem    = (rem - qv > 0.0) ? rem - qv : 0.0;
        end
      end
    end
    return r;
  endfunction

  // Reference model of the whole multiplication-less MLP (up to 4 layers of
  // up to 8 neurons). sz[0] is the input width, sz[l] the width of layer l.
  class RefMlp;
    int     nl;
    int     sz [5];
    int     sg [4][8][8];
    int     ex [4][8][8][KS];
    longint bb [4][8];
    int     n_sat;    // activations evaluated in the saturated region
    int     n_mid;    // activations evaluated in the polynomial region
    int     n_left;   // stored terms that are left shifts

    function new(input int n_in, input int n_hid, input int n_hl, input int n_out);
      nl    = n_hl + 1;
      sz[0] = n_in;
      for (int l = 1; l <= n_hl; l++) sz[l] = n_hid;
      sz[nl] = n_out;
      n_sat = 0; n_mid = 0; n_left = 0;
    endfunction

    // Random real weights in [-wmax, wmax], quantised; biases in [-0.5, 0.5].
    function void rand_init(input real wmax);
      qw_t q;
      real w;
      for (int l = 0; l < nl; l++)
        for (int j = 0; j < sz[l+1]; j++) begin
          for (int k = 0; k < sz[l]; k++) begin
            w = wmax * (2.0 * real'($urandom_range(0, 100000)) / 100000.0 - 1.0);
            if ($urandom_range(0, 15) == 0) w = 0.0;
            q = quantise(w);
            sg[l][j][k] = q.sgn;
            for (int t = 0; t < KS; t++) begin
              ex[l][j][k][t] = q.n[t];
              if (q.n[t] > 0) n_left++;
            end
          end
          bb[l][j] = longint'($urandom_range(0, 1024)) - 512;
        end
    endfunction

    // Word number i of layer l's parameter memory (address i).
    function logic [16:0] cfg_word(input int l, input int j, input int k);
      if (k == sz[l]) return 17'(bb[l][j]) & 17'h1fff;
      return wword(sg[l][j][k], ex[l][j][k][0], ex[l][j][k][1], ex[l][j][k][2]);
    endfunction

    function void eval(input longint f[8], output longint o[8]);
      longint a [8];
      longint x [8];
      longint q;
      for (int k = 0; k < 8; k++) a[k] = (k < sz[0]) ? f[k] : 0;
      for (int l = 0; l < nl; l++) begin
        for (int j = 0; j < 8; j++) x[j] = 0;
        for (int j = 0; j < sz[l+1]; j++) begin
          q = bb[l][j];
          for (int k = 0; k < sz[l]; k++)
            q += ref_su(a[k], sg[l][j][k], ex[l][j][k][0], ex[l][j][k][1], ex[l][j][k][2]);
          if (q >= 2 * ONE || q <= -2 * ONE) n_sat++; else n_mid++;
          x[j] = ref_phi(q);
        end
        a = x;
      end
      o = a;
    endfunction
  endclass

endpackage
