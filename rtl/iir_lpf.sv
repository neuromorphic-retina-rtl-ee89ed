// iir_lpf: per-pixel first-order temporal low-pass filter E_tau.
//
// Every pixel of the frame is its own filter. For the pixel arriving now,
//   Y(n) = b * X(n) - a * Y(n-1)
// where Y(n-1) is the same pixel's output in the previous frame, held in a
// 128x128 frame memory that the output is written back into. With
// a = -exp(-dt/tau) and b = 1 + a this is the discrete form of the
// exponential kernel exp(-t/tau)/tau with unit DC gain. a and b are run-time
// inputs in the 19-bit, 10-fractional-bit format.
//
// Interface: in_valid/in_data carry one pixel per clock at most in raster
// order, first pixel after reset = pixel 0. out_valid/out_data follow one
// clock later, out_sof marks pixel 0. The state reads as zero during the
// first frame after reset. Products are truncated to 10 fractional bits and
// the result saturates; these are this design's choices.
module iir_lpf
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

  fx_t  y_prev, y;
  logic sof;

  pixel_state_mem #(.NPIX(NPIX), .WIDTH(FX_W)) u_state (
    .clk     (clk),
    .rst_n   (rst_n),
    .rd_step (in_valid),
    .rd_prev (y_prev),
    .rd_sof  (sof),
    .wr_step (in_valid),
    .wr_data (y)
  );

  always_comb y = fx_sat(fx_mul_w(coef_b, in_data) - fx_mul_w(coef_a, y_prev));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_sof  <= sof;
        out_data <= y;
      end
    end
  end

endmodule
