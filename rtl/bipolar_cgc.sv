// bipolar_cgc: bipolar layer with contrast gain control.
//
// Each bipolar cell integrates the OPL current against a shunting leak g_A
// that grows with recent local contrast:
//   C dV_Bip/dt = I_OPL - g_A V_Bip,  g_A = G_A * E_A * Q(V_Bip),
//   Q(V) = g0_A + lambda_A V^2.
// Per pixel and frame (time step) the layer computes, with prev_* the
// pixel's values from the previous frame:
//   g_A   = g0_A + prev_E_A
//   att   = exp(-step * g_A)
//   E_inf = input_amp * I_OPL
//   V_Bip = (prev_V_Bip - E_inf) * att + E_inf     (exact exponential step)
//   E_A'  = prev_V_Bip^2 * b4 - prev_E_A * a4      (IIR low-pass of Q)
//   E_A   = G_A (5x5 kernel K3) applied to the E_A' frame
// V_Bip is kept in one frame memory and written back in place. E_A' is
// streamed through a 5x5 window filter of the same register-bank design as
// the OPL surround filter; its output, which lags by two rows and two pixels,
// is written in raster order into a second frame memory and read back as
// prev_E_A in the next frame. Strong local contrast therefore raises g_A,
// which both speeds up and attenuates the bipolar response.
//
// lambda_A enters through b4 (b4 = lambda_A (1 + a4)); with the primate
// parameter set lambda_A = 0 and the loop is open. exp() uses the
// table-plus-series approximation of retina_pkg::fx_exp_neg; the order of
// operations follows the bipolar pseudo-code.
//
// Interface: in_valid/in_data = I_OPL, one pixel per clock at most, raster
// order. out_valid/out_data = V_Bip one clock later, out_sof marks pixel 0.
// g_a is the conductance used for the current output pixel (observation).
module bipolar_cgc
  import retina_pkg::*;
#(
  parameter int unsigned W = 128,
  parameter int unsigned H = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  fx_t         in_data,
  input  retina_cfg_t cfg,
  output logic        out_valid,
  output logic        out_sof,
  output fx_t         out_data,
  output fx_t         g_a
);

  localparam int unsigned NPIX = W * H;

  fx_t  prev_v, prev_ea, ga, att, e_inf, v_new, ea_raw, ea_sp, ea_ctr;
  logic sof, sof_ea, ea_v, ea_sof;

  pixel_state_mem #(.NPIX(NPIX), .WIDTH(FX_W)) u_v (
    .clk, .rst_n, .rd_step(in_valid), .rd_prev(prev_v), .rd_sof(sof),
    .wr_step(in_valid), .wr_data(v_new));

  pixel_state_mem #(.NPIX(NPIX), .WIDTH(FX_W)) u_ea (
    .clk, .rst_n, .rd_step(in_valid), .rd_prev(prev_ea), .rd_sof(sof_ea),
    .wr_step(ea_v), .wr_data(ea_sp));

  always_comb begin
    ga     = fx_add(cfg.g0_a, prev_ea);
    att    = fx_exp_neg(fx_mul(cfg.step, ga));
    e_inf  = fx_mul(cfg.input_amp, in_data);
    v_new  = fx_add(fx_mul(fx_sub(prev_v, e_inf), att), e_inf);
    ea_raw = fx_sat(fx_mul_w(fx_mul(prev_v, prev_v), cfg.b4) - fx_mul_w(prev_ea, cfg.a4));
  end

  conv2d #(.N(5), .W(W), .H(H)) u_ga (
    .clk, .rst_n, .in_valid(in_valid), .in_data(ea_raw), .kern(cfg.k3),
    .out_valid(ea_v), .out_sof(ea_sof), .out_data(ea_sp), .out_center(ea_ctr));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_data  <= '0;
      g_a       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_sof  <= sof;
        out_data <= v_new;
        g_a      <= ga;
      end
    end
  end

  logic unused;
  assign unused = ^{sof_ea, ea_sof, ea_ctr};

endmodule
