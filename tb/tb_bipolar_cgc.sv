// tb_bipolar_cgc: self-checking test of the bipolar layer with contrast gain
// control.
//
// An 8x6 frame of OPL currents is streamed for 16 frames with random idle
// cycles: a low-contrast phase followed by a high-contrast phase. The
// feedback gain b4 is non-zero so the amacrine conductance g_A rises above
// its resting value g0_A where the local contrast is high. V_Bip and g_A of
// every pixel are compared with the frame-level reference model, whose
// E_A state passes through the same zero-padded 5x5 spatial filter. The
// integration step is large enough that exp(-step * g_A) exercises both the
// table and the series part of the exponential. The test fails if g_A never
// rose above g0_A (no gain control happened). Output latency: one clock.
module tb_bipolar_cgc;
  import retina_pkg::*;
  import retina_ref_pkg::*;

  localparam int W = 8, H = 6, NPIX = W * H, NF = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  retina_cfg_t cfg;
  logic in_valid = 0;
  fx_t  in_data = '0;
  logic out_valid, out_sof;
  fx_t  out_data, g_a;

  bipolar_cgc #(.W(W), .H(H)) dut (.clk, .rst_n, .in_valid, .in_data, .cfg,
    .out_valid, .out_sof, .out_data, .g_a);

  int checks = 0, failures = 0;
  int n_gain = 0, n_k1 = 0;
  longint exp_v [$], exp_g [$];
  bit     exp_s [$];

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_v.size() == 0) begin
      failures++;
      $display("unexpected output");
    end else begin
      longint ev, eg;
      bit es;
      ev = exp_v.pop_front();
      eg = exp_g.pop_front();
      es = exp_s.pop_front();
      if (longint'(out_data) != ev || longint'(g_a) != eg || out_sof != es) begin
        failures++;
        if (failures < 10) $display("output %0d: V %0d g %0d, want %0d %0d", checks, out_data, g_a, ev, eg);
      end
    end
  end

  initial begin
    retina_cfg_t c;
    frame_t v, ea, iopl, vout;
    c = RETINA_CFG_DEFAULT;
    c.b4   = 19'sd60;
    c.step = 19'sd30;          // step * g0_A ~ 1.46
    cfg <= c;
    v  = zeros(NPIX);
    ea = zeros(NPIX);
    iopl = new [NPIX];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < NF; f++) begin
      int amp;
      amp = (f < NF / 2) ? 2000 : 60000;
      foreach (iopl[i]) iopl[i] = $signed($urandom_range(0, 2 * amp)) - amp;
      foreach (iopl[i]) begin
        longint g;
        g = sat(c.g0_a + ea[i]);
        exp_g.push_back(g);
        if (g > c.g0_a) n_gain++;
        if (sat(mulw(c.step, g)) >= 2048) n_k1++;
      end
      vout = bipolar(iopl, W, H, c, v, ea);
      foreach (iopl[i]) begin
        exp_v.push_back(vout[i]);
        exp_s.push_back(i == 0);
        while ($urandom_range(0, 3) == 0) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1;
        in_data  <= fx_t'(iopl[i]);
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (3) @(posedge clk);
    checks += 3;
    if (exp_v.size() != 0) begin failures++; $display("%0d outputs missing", exp_v.size()); end
    if (n_gain == 0) begin failures++; $display("g_A never rose above g0_A"); end
    if (n_k1 == 0)   begin failures++; $display("exp() never used its table beyond exp(-1)"); end
    $display("pixels with raised g_A %0d, with step*g_A >= 2: %0d", n_gain, n_k1);
    // latency check
    begin
      frame_t z = zeros(NPIX);
      longint g;
      g = sat(c.g0_a + ea[0]);
      exp_g.push_back(g);
      vout = bipolar(z, W, H, c, v, ea);
      exp_v.push_back(vout[0]);
      exp_s.push_back(1'b1);
    end
    in_valid <= 1; in_data <= '0;
    @(posedge clk);
    in_valid <= 0;
    #1;
    checks++;
    if (!out_valid) begin failures++; $display("latency is not one clock"); end
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
