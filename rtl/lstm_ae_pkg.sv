// lstm_ae_pkg -- types, arithmetic and sizing rules shared by the LSTM
// autoencoder accelerator.
//
// Number format: every value on every stream is a 32-bit two's-complement
// fixed-point number with 24 fractional bits (Q8.24), as in the reference
// implementation of the design. A product of two Q8.24 numbers is formed at
// full 64-bit precision, shifted right arithmetically by 24 (truncation
// towards minus infinity) and the low 32 bits are kept (wrap-around, no
// saturation). Sums wrap likewise. Rounding and overflow modes are this
// design's choice; the format itself is the paper's.
//
// Activations: sigmoid and tanh are piecewise-linear. The segments are this
// design's choice (the paper only says "piecewise linear"): the classic
// four-segment shift-and-add sigmoid
//   |x| >= 5      : 1
//   2.375<=|x|<5  : |x|/32 + 0.84375
//   1  <= |x| <2.375 : |x|/8 + 0.625
//   0  <= |x| < 1 : |x|/4 + 0.5
// mirrored as 1-y for negative x, and tanh(x) = 2*sigmoid(2x) - 1, clamped
// to +-1 for |x| >= 4.
//
// Sizing: an LSTM-AE named F{F}-D{D} has D layers whose feature sizes halve
// from F down to F>>(D/2) and double back to F. Layer i maps a vector of
// LX_i = dim(i) elements onto a hidden state of LH_i = dim(i+1) elements.
// The reuse factors follow the paper's dataflow-balancing rule: every layer
// gets the per-timestep latency of the widest layer m,
//   LH_i*(RH_i+1) = LH_m*(RH_m+1)                  (RH_i, exact here)
//   RX_i = LH_i*RH_i/LX_i, rounded down, at least 1
// and the number of parallel multipliers is M = ceil(4*LH/R).
// Rounding RX down (the paper's formula can give e.g. 1.5) keeps the input
// MVM no slower than the recurrent one, so the balance is preserved.
package lstm_ae_pkg;

  localparam int DATA_W = 32;
  localparam int FRAC_W = 24;

  typedef logic signed [DATA_W-1:0] fix_t;

  // One element k of the four gate pre-activation vectors (i, f, g, o).
  typedef struct packed {
    fix_t i;
    fix_t f;
    fix_t g;
    fix_t o;
  } gates_t;

  localparam fix_t FIX_ONE  = fix_t'(32'sd1 <<< FRAC_W);

  // Q8.24 multiply: full product, arithmetic shift, wrap to 32 bits.
  function automatic fix_t fx_mul(fix_t a, fix_t b);
    logic signed [2*DATA_W-1:0] p;
    p = 64'(a) * 64'(b);
    return fix_t'(p >>> FRAC_W);
  endfunction

  // Piecewise-linear sigmoid (see header).
  function automatic fix_t pwl_sigmoid(fix_t x);
    logic signed [DATA_W:0] ax;   // one extra bit so |-2^31| fits
    logic signed [DATA_W:0] y;
    ax = (x < 0) ? -33'(x) : 33'(x);
    if (ax >= 33'sd83886080)           // 5.0
      y = 33'(FIX_ONE);
    else if (ax >= 33'sd39845888)      // 2.375
      y = (ax >>> 5) + 33'sd14155776;  // + 0.84375
    else if (ax >= 33'sd16777216)      // 1.0
      y = (ax >>> 3) + 33'sd10485760;  // + 0.625
    else
      y = (ax >>> 2) + 33'sd8388608;   // + 0.5
    if (x < 0)
      y = 33'(FIX_ONE) - y;
    return fix_t'(y);
  endfunction

  // Piecewise-linear tanh via tanh(x) = 2*sigmoid(2x) - 1.
  function automatic fix_t pwl_tanh(fix_t x);
    if (x >= 32'sd67108864)            // 4.0
      return FIX_ONE;
    else if (x <= -32'sd67108864)
      return -FIX_ONE;
    else
      return (pwl_sigmoid(x <<< 1) <<< 1) - FIX_ONE;
  endfunction

  // ---- dataflow sizing -------------------------------------------------
  // Feature size at point k (0..D) of an F{F}-D{D} autoencoder.
  function automatic int ae_dim(int F, int D, int k);
    int half;
    half = D / 2;
    if (k <= half) return F >> k;
    else           return F >> (D - k);
  endfunction

  function automatic int layer_lx(int F, int D, int i);
    return ae_dim(F, D, i);
  endfunction

  function automatic int layer_lh(int F, int D, int i);
    return ae_dim(F, D, i + 1);
  endfunction

  // Widest hidden state, i.e. LH of the bottleneck layer m.
  function automatic int max_lh(int F, int D);
    int m;
    m = 0;
    for (int i = 0; i < D; i++)
      if (layer_lh(F, D, i) > m) m = layer_lh(F, D, i);
    return m;
  endfunction

  // Balanced per-timestep latency Lat_t_m = LH_m*RH_m + LH_m.
  function automatic int lat_t_m(int F, int D, int RHM);
    return max_lh(F, D) * (RHM + 1);
  endfunction

  // RH_i = (LH_m - LH_i)/LH_i + (LH_m/LH_i)*RH_m
  function automatic int layer_rh(int F, int D, int RHM, int i);
    int lh;
    lh = layer_lh(F, D, i);
    return (lat_t_m(F, D, RHM) - lh) / lh;
  endfunction

  // RX_i = (LH_i/LX_i)*RH_i, rounded down, at least 1
  function automatic int layer_rx(int F, int D, int RHM, int i);
    int r;
    r = (layer_lh(F, D, i) * layer_rh(F, D, RHM, i)) / layer_lx(F, D, i);
    return (r < 1) ? 1 : r;
  endfunction

  // Parallel multipliers for a reuse factor R: M = ceil(4*LH/R)
  function automatic int lanes(int LH, int R);
    return (4 * LH + R - 1) / R;
  endfunction

  // MVM latency per timestep, Eqs. X_t = LX*RX + LH and H_t = LH*RH + LH
  function automatic int mvm_lat(int L, int R, int LH);
    return L * R + LH;
  endfunction

endpackage
