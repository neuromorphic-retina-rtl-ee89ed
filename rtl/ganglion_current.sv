// ganglion_current: inner plexiform layer, the excitatory current driving a
// ganglion cell, I_Gang = N(xi * T_G * V_Bip).
//
// V_Bip is first high-pass filtered in time (T_G, an iir_hpf with its own
// frame memory, coefficients a5/b5), then multiplied by xi = +1 for an ON
// cell or -1 for an OFF cell, and finally passed through the static
// rectifying nonlinearity
//   N(x) = i0_G + lambda_G (x - v0_G)                   for x >  v0_G
//   N(x) = i0_G^2 / (i0_G - lambda_G (x - v0_G))        for x <= v0_G
// which is linear above the threshold v0_G and decays smoothly towards zero
// below it (continuous, with slope lambda_G, at x = v0_G). The second branch
// is the form used by the ganglion pseudo-code (i0 * i0 in the numerator).
//
// The division is a combinational unsigned divide of the 20-fractional-bit
// numerator i0_G^2 by the 10-fractional-bit denominator, giving a
// 10-fractional-bit quotient. A non-positive denominator (only possible with
// a non-positive i0_G or lambda_G) gives zero. Selecting ON/OFF with one
// configuration bit and dividing in one cycle are this design's choices.
//
// Interface: in_valid/in_data = V_Bip in raster order, one pixel per clock
// at most. out_valid/out_data = I_Gang two clocks later, out_sof marks
// pixel 0.
module ganglion_current
  import retina_pkg::*;
#(
  parameter int unsigned NPIX = 128 * 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  fx_t         in_data,
  input  retina_cfg_t cfg,
  output logic        out_valid,
  output logic        out_sof,
  output fx_t         out_data
);

  logic h_v, h_sof;
  fx_t  h, x, d, n;
  acc_t lin, den, num;

  iir_hpf #(.NPIX(NPIX)) u_tg (
    .clk, .rst_n, .in_valid(in_valid), .in_data(in_data),
    .coef_a(cfg.a5), .coef_b(cfg.b5),
    .out_valid(h_v), .out_sof(h_sof), .out_data(h));

  always_comb begin
    x   = cfg.xi_on ? h : fx_sub('0, h);
    d   = fx_sub(x, cfg.v0_g);
    lin = fx_mul_w(cfg.lambda_g, d);
    num = acc_t'(cfg.i0_g) * acc_t'(cfg.i0_g);   // 20 fractional bits
    den = acc_t'(cfg.i0_g) - lin;                 // 10 fractional bits
    if (x > cfg.v0_g)  n = fx_sat(acc_t'(cfg.i0_g) + lin);
    else if (den <= 0) n = '0;
    else               n = fx_sat(num / den);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= h_v;
      if (h_v) begin
        out_sof  <= h_sof;
        out_data <= n;
      end
    end
  end

endmodule
