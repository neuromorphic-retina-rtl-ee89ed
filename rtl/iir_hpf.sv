// iir_hpf: per-pixel temporal high-pass filter T_{w,tau} = delta - w * E_tau.
//
// The filter subtracts a weighted low-pass copy of the signal from the signal
// itself. For the pixel arriving now:
//   Z(n) = b * X(n) - a * Z(n-1)       (weighted low-pass, state in RAM)
//   out  = X(n) - Z(n)
// With a = -exp(-dt/tau) and b = w * (1 + a) the low-pass branch has DC gain
// w, so w = 1 removes the sustained part completely (phasic, transient
// response) and w < 1 leaves a fraction 1 - w of it (tonic, sustained
// response). The weight w is folded into b rather than multiplied
// separately; that and the truncate-and-saturate arithmetic are this
// design's choices.
//
// Interface and timing are those of iir_lpf: one pixel per clock at most in
// raster order, result one clock later, state zero in the first frame.
module iir_hpf
  import retina_pkg::*;
#(
  parameter int unsigned NPIX = 128 * 128
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  in_data,
  input  fx_t  coef_a,
  input  fx_t  coef_b,
  output logic out_valid,
  output logic out_sof,
  output fx_t  out_data
);

  fx_t  z_prev, z;
  logic sof;

  pixel_state_mem #(.NPIX(NPIX), .WIDTH(FX_W)) u_state (
    .clk     (clk),
    .rst_n   (rst_n),
    .rd_step (in_valid),
    .rd_prev (z_prev),
    .rd_sof  (sof),
    .wr_step (in_valid),
    .wr_data (z)
  );

  always_comb z = fx_sat(fx_mul_w(coef_b, in_data) - fx_mul_w(coef_a, z_prev));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_sof  <= sof;
        out_data <= fx_sub(in_data, z);
      end
    end
  end

endmodule
