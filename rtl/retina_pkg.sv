// retina_pkg: types, constants and arithmetic helpers shared by every stage of
// the digital retina.
//
// All signals of the retina datapath are 19-bit two's-complement fixed-point
// numbers with 10 fractional bits (range -256 .. +255.999, LSB = 1/1024).
// The 19-bit width is the datapath width reported for the design; the
// 10 fractional bits are inferred from the quantised parameter values it
// reports (0.008 -> 0.0078 = 8/1024, 0.1 -> 0.0996 = 102/1024,
// 0.05 -> 0.0498 = 51/1024). Coefficients, kernel taps and thresholds use the
// same format so a single multiplier shape serves everywhere. Every stage
// saturates its result to the 19-bit range instead of wrapping.
//
// retina_cfg_t gathers every run-time parameter of the model (filter
// coefficients, kernels, weights, nonlinearity and neuron constants) so the
// retina is reconfigurable without resynthesis. RETINA_CFG_DEFAULT holds the
// primate parameter set; values the model does not fix (pixel pitch, the
// high-pass weights, refractory length) are this design's choices and are
// marked as such below.
package retina_pkg;

  localparam int unsigned FX_W    = 19;   // datapath width
  localparam int unsigned FX_FRAC = 10;   // fractional bits
  localparam int unsigned PIX_W   = 8;    // luminance input width
  localparam int unsigned RT_W    = 8;    // refractory counter width (time steps)

  typedef logic signed [FX_W-1:0] fx_t;

  localparam fx_t FX_MAX = fx_t'({1'b0, {(FX_W-1){1'b1}}});
  localparam fx_t FX_MIN = fx_t'({1'b1, {(FX_W-1){1'b0}}});
  localparam fx_t FX_ONE = fx_t'(1 << FX_FRAC);

  // Wide intermediate used for products and sums before saturation.
  typedef logic signed [2*FX_W+8-1:0] acc_t;

  // Saturate a wide value to the 19-bit datapath.
  function automatic fx_t fx_sat(input acc_t v);
    if (v > acc_t'(FX_MAX))      return FX_MAX;
    else if (v < acc_t'(FX_MIN)) return FX_MIN;
    else                         return fx_t'(v);
  endfunction

  // Full-precision product of two fixed-point values, rescaled to 10
  // fractional bits (arithmetic shift, i.e. rounds toward minus infinity).
  function automatic acc_t fx_mul_w(input fx_t a, input fx_t b);
    acc_t p;
    p = acc_t'(a) * acc_t'(b);
    return p >>> FX_FRAC;
  endfunction

  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    return fx_sat(fx_mul_w(a, b));
  endfunction

  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    return fx_sat(acc_t'(a) + acc_t'(b));
  endfunction

  function automatic fx_t fx_sub(input fx_t a, input fx_t b);
    return fx_sat(acc_t'(a) - acc_t'(b));
  endfunction

  // exp(-x) for x >= 0 in the 10-fractional-bit format. The integer part k
  // of x selects exp(-k) from a small table (zero beyond k = 7, below one
  // LSB); the fractional part f < 1 uses the fourth-order series
  //   exp(-f) ~ 1 - f + f^2/2 - f^3/6 + f^4/24   (error < 0.7 % at f -> 1).
  // Negative x is treated as 0.
  function automatic fx_t fx_exp_neg(input fx_t x);
    acc_t f, f2, f3, f4, s;
    int   k;
    fx_t  ek;
    if (x <= 0) return FX_ONE;
    k  = int'(x) >>> FX_FRAC;
    f  = acc_t'(x) & acc_t'((1 << FX_FRAC) - 1);
    f2 = (f * f) >>> FX_FRAC;
    f3 = (f2 * f) >>> FX_FRAC;
    f4 = (f3 * f) >>> FX_FRAC;
    s  = acc_t'(FX_ONE) - f + (f2 >>> 1) - (f3 / 6) + (f4 / 24);
    case (k)
      0:       ek = 19'sd1024;
      1:       ek = 19'sd377;   // round(1024 * exp(-1))
      2:       ek = 19'sd139;
      3:       ek = 19'sd51;
      4:       ek = 19'sd19;
      5:       ek = 19'sd7;
      6:       ek = 19'sd3;
      7:       ek = 19'sd1;
      default: ek = 19'sd0;
    endcase
    return fx_sat((acc_t'(ek) * s) >>> FX_FRAC);
  endfunction

  typedef fx_t [0:8]  kern3_t;   // 3x3 kernel, row-major, [0] = top-left
  typedef fx_t [0:24] kern5_t;   // 5x5 kernel, row-major, [0] = top-left

  // Run-time configuration of the whole retina.
  typedef struct packed {
    // OPL (centre / surround)
    kern3_t      k1;        // G_C, 3x3 centre spatial kernel
    kern5_t      k2;        // G_S, 5x5 surround spatial kernel
    fx_t         a1, b1;    // E_tauC low-pass
    fx_t         a2, b2;    // T_w,tau high-pass (b2 = omega * (1 + a2))
    fx_t         a3, b3;    // E_tauS low-pass
    fx_t         lambda_opl;
    fx_t         omega_opl;
    // Bipolar contrast gain control
    kern5_t      k3;        // G_A, 5x5 amacrine spatial kernel
    fx_t         a4, b4;    // E_A low-pass on V_Bip^2 (b4 carries lambda_A)
    fx_t         g0_a;      // inert leak g0_A
    fx_t         step;      // integration step used in exp(-step * g_A)
    fx_t         input_amp; // E_inf = input_amp * I_OPL
    // Ganglion input current
    fx_t         a5, b5;    // T_G high-pass (b5 = omega_G * (1 + a5))
    logic        xi_on;     // 1: ON cell (xi = +1), 0: OFF cell (xi = -1)
    fx_t         lambda_g;
    fx_t         i0_g;
    fx_t         v0_g;
    // LIF spiking layer
    fx_t         g_l;       // leak
    fx_t         tau;       // time-step length
    fx_t         v_th;      // firing threshold
    logic [RT_W-1:0] refr;  // refractory period in time steps
  } retina_cfg_t;

  // Gaussian kernels, weights normalised to a sum of 1024 (= 1.0):
  //   w(dy,dx) = round(1024 * exp(-(dy^2+dx^2)/(2 sigma^2)) / sum), centre
  //   tap adjusted so the taps add up to exactly 1024.
  // sigma in pixels assumes 10 pixels per degree of visual angle:
  //   sigma_C = 0.05 deg -> 0.5 px, sigma_S = 0.15 deg -> 1.5 px,
  //   sigma_A = 0.05 deg -> 0.5 px (sigma_A uses the 3x3 taps inside 5x5).
  localparam kern3_t K_SIGMA_05_3 = '{
    19'sd12, 19'sd86, 19'sd12,
    19'sd86, 19'sd632, 19'sd86,
    19'sd12, 19'sd86, 19'sd12};
  localparam kern5_t K_SIGMA_15_5 = '{
    19'sd15, 19'sd29, 19'sd36, 19'sd29, 19'sd15,
    19'sd29, 19'sd56, 19'sd70, 19'sd56, 19'sd29,
    19'sd36, 19'sd70, 19'sd84, 19'sd70, 19'sd36,
    19'sd29, 19'sd56, 19'sd70, 19'sd56, 19'sd29,
    19'sd15, 19'sd29, 19'sd36, 19'sd29, 19'sd15};
  localparam kern5_t K_SIGMA_05_5 = '{
    19'sd0, 19'sd0,  19'sd0,   19'sd0,  19'sd0,
    19'sd0, 19'sd12, 19'sd86,  19'sd12, 19'sd0,
    19'sd0, 19'sd86, 19'sd632, 19'sd86, 19'sd0,
    19'sd0, 19'sd12, 19'sd86,  19'sd12, 19'sd0,
    19'sd0, 19'sd0,  19'sd0,   19'sd0,  19'sd0};

  // Low-pass coefficients for one time step of 1 ms:
  //   a = -round(1024 * exp(-dt/tau)), b = 1024 + a (unity DC gain).
  //   tau = 10 ms -> a = -927, b = 97;  tau = 5 ms -> -838, 186;
  //   tau = 20 ms -> -974, 50.
  localparam retina_cfg_t RETINA_CFG_DEFAULT = '{
    k1:         K_SIGMA_05_3,
    k2:         K_SIGMA_15_5,
    a1:         -19'sd927, b1: 19'sd97,          // tau_C = 10 ms
    a2:         -19'sd927, b2: 19'sd78,          // tau_U = 10 ms, omega = 0.8
    a3:         -19'sd927, b3: 19'sd97,          // tau_S = 10 ms
    lambda_opl: 19'sd1024,                       // 1
    omega_opl:  19'sd512,                        // 0.5
    k3:         K_SIGMA_05_5,
    a4:         -19'sd838, b4: 19'sd0,           // tau_A = 5 ms, lambda_A = 0
    g0_a:       19'sd51200,                      // 50
    step:       19'sd1,                          // 1/1024 ~ 0.001
    input_amp:  19'sd1024,                       // 1
    a5:         -19'sd974, b5: 19'sd50,          // tau_G = 20 ms, omega = 1
    xi_on:      1'b1,
    lambda_g:   19'sd5120,                       // 5
    i0_g:       19'sd8,                          // 0.0078
    v0_g:       19'sd0,                          // 0
    g_l:        19'sd102,                        // 0.0996
    tau:        19'sd1024,                       // 1 (one time step)
    v_th:       19'sd1024,                       // 1
    refr:       8'd2
  };

endpackage
