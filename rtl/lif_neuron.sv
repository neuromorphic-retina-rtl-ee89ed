// lif_neuron: spiking ganglion cell layer, one leaky integrate-and-fire
// neuron per pixel.
//
// Each neuron integrates the ganglion current, C dV_m/dt = I_Gang - g_L V_m,
// once per frame (one time step per frame):
//   V_m  <- V_m + (I_Gang - g_L * V_m) * tau
//   rt   <- rt - 1;  V_m <- 0 while rt >= 1 (refractory)
//   spike = V_m > V_th
//   rt   <- max(rt, 0)
//   on a spike: V_m <- 0 and rt <- refr
// This is the spiking pseudo-code step for step. Loading rt with refr on a
// spike is this design's addition: the pseudo-code counts rt down but never
// sets it, while the text holds V_m at zero during a refractory period.
// With this rule V_m is zero for refr time steps counted from the spike.
// V_m (19 bits) and rt (8 bits) of every pixel share one frame memory word.
//
// Interface: in_valid/in_data = I_Gang in raster order, one pixel per clock
// at most. out_valid/spike one clock later, with the updated membrane
// potential on vm for observation; out_sof marks pixel 0.
module lif_neuron
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
  output logic        spike,
  output fx_t         vm
);

  typedef struct packed {
    logic [RT_W-1:0] rt;
    fx_t             vm;
  } lif_state_t;

  lif_state_t st_prev, st_new;
  logic       sof, fire;

  pixel_state_mem #(.NPIX(NPIX), .WIDTH($bits(lif_state_t))) u_state (
    .clk, .rst_n, .rd_step(in_valid), .rd_prev(st_prev), .rd_sof(sof),
    .wr_step(in_valid), .wr_data(st_new));

  always_comb begin
    fx_t             v;
    logic [RT_W-1:0] r;
    v = fx_add(st_prev.vm, fx_mul(fx_sub(in_data, fx_mul(cfg.g_l, st_prev.vm)), cfg.tau));
    r = (st_prev.rt == '0) ? '0 : st_prev.rt - 1'b1;   // decrement, clamp at 0
    if (r != '0) v = '0;                                // refractory: hold at 0
    fire = (v > cfg.v_th);
    if (fire) begin
      v = '0;
      r = cfg.refr;
    end
    st_new.vm = v;
    st_new.rt = r;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      spike     <= 1'b0;
      vm        <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_sof <= sof;
        spike   <= fire;
        vm      <= st_new.vm;
      end
    end
  end

endmodule
