// opl_layer: outer plexiform layer of the retina, the centre-surround
// spatio-temporal filter that turns luminance into the OPL current.
//
//   centre    C = T_{w,tau_U} * E_tauC * G_C * L
//   surround  S = E_tauS * G_S * C
//   output    I_OPL = lambda_OPL * (C - omega_OPL * S)
//
// Dataflow, one pixel per clock at most:
//   L (8-bit luminance) -> conv2d 3x3 (K1, G_C) -> iir_lpf (a1,b1, E_tauC)
//     -> iir_hpf (a2,b2, T_w,tau) = C -> conv2d 5x5 (K2, G_S)
//     -> iir_lpf (a3,b3, E_tauS) = S.
// The 5x5 surround filter also returns the window-centre pixel, i.e. C at
// the same pixel as its filtered output; that copy is held one clock to meet
// S and the two are combined. Because the surround is a further low-pass of
// the centre, it responds later than the centre: the delayed, blurred
// inhibition that makes the filter a non-separable band-pass (edge and motion
// detector).
//
// Interface: pix_valid/pix_data, raster order, frames back to back. Output
// streams I_OPL with out_valid/out_sof in raster order; C and S are brought
// out for observation. Latency: (W+1) + 2(W+1) pixels of spatial lag
// through the two window filters; I_OPL of pixel (0,0) appears 8 clocks
// after input pixel 3(W+1) is presented.
//
// The order of operations follows the OPL pseudo-code; lambda_OPL and
// omega_OPL are applied as in the OPL equation (the pseudo-code writes
// C - S, the special case lambda = omega = 1). Luminance is an integer
// (value = pixel code). As in the original design, the 3x3 centre filter
// keeps raw 8-bit luminance in its two 128 x 8-bit line RAMs; its output is
// already in the 10-fractional-bit datapath format.
module opl_layer
  import retina_pkg::*;
#(
  parameter int unsigned W = 128,
  parameter int unsigned H = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pix_valid,
  input  logic [PIX_W-1:0] pix_data,
  input  retina_cfg_t cfg,
  output logic        out_valid,
  output logic        out_sof,
  output fx_t         i_opl,
  output fx_t         center,
  output fx_t         surround
);

  localparam int unsigned NPIX = W * H;

  logic gc_v, gc_sof, lc_v, lc_sof, c_v, c_sof, gs_v, gs_sof, s_v, s_sof;
  fx_t  gc_d, gc_ctr, lc_d, c_d, gs_d, gs_ctr, s_d, c_q;

  conv2d #(.N(3), .W(W), .H(H), .DW(PIX_W), .IN_FRAC(0), .IN_SIGNED(1'b0)) u_gc (
    .clk, .rst_n, .in_valid(pix_valid), .in_data(pix_data), .kern(cfg.k1),
    .out_valid(gc_v), .out_sof(gc_sof), .out_data(gc_d), .out_center(gc_ctr));

  iir_lpf #(.NPIX(NPIX)) u_ec (
    .clk, .rst_n, .in_valid(gc_v), .in_data(gc_d), .coef_a(cfg.a1), .coef_b(cfg.b1),
    .out_valid(lc_v), .out_sof(lc_sof), .out_data(lc_d));

  iir_hpf #(.NPIX(NPIX)) u_tw (
    .clk, .rst_n, .in_valid(lc_v), .in_data(lc_d), .coef_a(cfg.a2), .coef_b(cfg.b2),
    .out_valid(c_v), .out_sof(c_sof), .out_data(c_d));

  conv2d #(.N(5), .W(W), .H(H)) u_gs (
    .clk, .rst_n, .in_valid(c_v), .in_data(c_d), .kern(cfg.k2),
    .out_valid(gs_v), .out_sof(gs_sof), .out_data(gs_d), .out_center(gs_ctr));

  iir_lpf #(.NPIX(NPIX)) u_es (
    .clk, .rst_n, .in_valid(gs_v), .in_data(gs_d), .coef_a(cfg.a3), .coef_b(cfg.b3),
    .out_valid(s_v), .out_sof(s_sof), .out_data(s_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_q       <= '0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      i_opl     <= '0;
      center    <= '0;
      surround  <= '0;
    end else begin
      if (gs_v) c_q <= gs_ctr;
      out_valid <= s_v;
      if (s_v) begin
        out_sof  <= s_sof;
        center   <= c_q;
        surround <= s_d;
        i_opl    <= fx_mul(cfg.lambda_opl, fx_sub(c_q, fx_mul(cfg.omega_opl, s_d)));
      end
    end
  end

  // Unused by the OPL itself: the sof flags of the inner stages and the
  // unfiltered centre of the 3x3 window.
  logic unused;
  assign unused = ^{gc_sof, lc_sof, c_sof, gs_sof, gc_ctr};

endmodule
