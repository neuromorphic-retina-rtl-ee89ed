// retina_top: the digital retina, a streaming model of the primate retina
// from photoreceptors to spiking ganglion cells.
//
// A 128x128 luminance video enters one pixel per clock in raster order and
// leaves as one spike bit per pixel per frame. Each frame is one time step of
// the model. Four layers are chained, each a fixed-function pipeline stage
// with its own frame memories for per-pixel state:
//   opl_layer         centre-surround spatio-temporal filter with luminance
//                     adaptation (high-pass at the photoreceptor) -> I_OPL
//   bipolar_cgc       bipolar integration with contrast gain control -> V_Bip
//   ganglion_current  temporal high-pass, ON/OFF sign, rectifying
//                     nonlinearity -> I_Gang
//   lif_neuron        leaky integrate-and-fire spike generation
// Every model parameter is a run-time input (cfg), so the same hardware can
// model ON or OFF, phasic or tonic cells and other parameter sets.
//
// Interface: pix_valid/pix_data, raster order, frames back to back; the
// first pixel after reset is pixel (0,0) of frame 0. A pixel may arrive every
// clock. Outputs are raster-order streams with valid and start-of-frame
// flags. Latency: the spatial filters of the OPL delay the stream by
// 3(W+1) pixels (387 for W = 128); the last rows of a frame come out while the
// first rows of the next frame go in. With continuous input, the spike of
// pixel (0,0) appears 12 clocks after input pixel 3(W+1) is presented, i.e.
// 399 clocks after pixel (0,0) for W = 128. The original FPGA build reports
// 413 clocks; the register depth here is this design's own. The
// intermediate layer outputs are brought out for observation.
module retina_top
  import retina_pkg::*;
#(
  parameter int unsigned W = 128,
  parameter int unsigned H = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  retina_cfg_t cfg,
  input  logic        pix_valid,
  input  logic [PIX_W-1:0] pix_data,
  // OPL layer
  output logic        opl_valid,
  output fx_t         opl_center,
  output fx_t         opl_surround,
  output fx_t         i_opl,
  // bipolar layer
  output logic        bip_valid,
  output fx_t         v_bip,
  output fx_t         g_a,
  // ganglion input current
  output logic        gang_valid,
  output fx_t         i_gang,
  // spiking output
  output logic        spk_valid,
  output logic        spk_sof,
  output logic        spike,
  output fx_t         vm
);

  localparam int unsigned NPIX = W * H;

  logic opl_sof, bip_sof, gang_sof;

  opl_layer #(.W(W), .H(H)) u_opl (
    .clk, .rst_n, .pix_valid, .pix_data, .cfg,
    .out_valid(opl_valid), .out_sof(opl_sof), .i_opl(i_opl),
    .center(opl_center), .surround(opl_surround));

  bipolar_cgc #(.W(W), .H(H)) u_bip (
    .clk, .rst_n, .in_valid(opl_valid), .in_data(i_opl), .cfg,
    .out_valid(bip_valid), .out_sof(bip_sof), .out_data(v_bip), .g_a(g_a));

  ganglion_current #(.NPIX(NPIX)) u_gang (
    .clk, .rst_n, .in_valid(bip_valid), .in_data(v_bip), .cfg,
    .out_valid(gang_valid), .out_sof(gang_sof), .out_data(i_gang));

  lif_neuron #(.NPIX(NPIX)) u_lif (
    .clk, .rst_n, .in_valid(gang_valid), .in_data(i_gang), .cfg,
    .out_valid(spk_valid), .out_sof(spk_sof), .spike(spike), .vm(vm));

  logic unused;
  assign unused = ^{opl_sof, bip_sof, gang_sof};

endmodule
