// tb_retina_full: the digital retina at its full 128x128 frame size, with
// every module parameter at its default, taken through a complete operation: 40
// frames of a chirp-like stimulus (dark-bright-dark, then alternating with
// rising frequency, plus a drifting bright bar), streamed as an ON cell with
// random idle cycles and again as an OFF cell with a pixel on every clock.
// Every I_OPL, V_Bip, g_A, I_Gang and spike value of all 128x128 pixels is
// compared with the frame-level reference model. The same mechanisms as in
// the reduced-size test are counted (spikes, refractory steps, both
// branches of the ganglion nonlinearity, raised g_A, frame overlap) and must
// each occur. As in the reduced-size test, a few run-time settings leave
// their defaults so that 40 frames show every mechanism: contrast-gain
// feedback on (b4) for the ON run, a larger i0_G and a faster ganglion
// high-pass (a5, b5). Rate: in the continuous run successive spike frames
// must start exactly 16384 clocks apart (one pixel per clock, so 200
// frames/s needs a 3.3 MHz clock). Latency: the spike of pixel (0,0) must
// leave 12 clocks after pixel 387 = 3(128+1) entered.
module tb_retina_full;
  import retina_pkg::*;
  import retina_ref_pkg::*;

  localparam int W = 128, H = 128, NPIX = W * H, NF = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  retina_cfg_t cfg;
  logic       pix_valid = 0;
  logic [7:0] pix_data = '0;
  logic       opl_valid, bip_valid, gang_valid, spk_valid, spk_sof, spike;
  fx_t        opl_center, opl_surround, i_opl, v_bip, g_a, i_gang, vm;

  retina_top dut (.clk, .rst_n, .cfg, .pix_valid, .pix_data,
    .opl_valid, .opl_center, .opl_surround, .i_opl, .bip_valid, .v_bip, .g_a,
    .gang_valid, .i_gang, .spk_valid, .spk_sof, .spike, .vm);

  int checks = 0, failures = 0, cyc = 0;
  int n_spk [2] = '{0, 0};
  int n_refr = 0, n_lin = 0, n_rect = 0, n_gain = 0, n_overlap = 0;
  // throughput: in the continuous run, consecutive frames leave W*H clocks apart
  bit cont_run = 0;
  int last_sof = -1, n_rate = 0;
  int n_opl = 0, n_bip = 0, n_gang = 0, n_spkout = 0;
  longint q_opl [$], q_bip [$], q_g [$], q_gang [$], q_spk [$];

  always @(posedge clk) cyc <= cyc + 1;

  task automatic cmp(string what, ref longint q [$], input longint got, ref int n);
    n++;
    if (q.size() == 0) return;          // beyond the checked frames
    begin
      longint e;
      e = q.pop_front();
      checks++;
      if (got != e) begin
        failures++;
        if (failures < 12) $display("%s output %0d: got %0d want %0d", what, n - 1, got, e);
      end
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (opl_valid)  cmp("I_OPL", q_opl, longint'(i_opl), n_opl);
    if (bip_valid) begin
      if (q_g.size() != 0) begin
        longint eg;
        eg = q_g.pop_front();
        checks++;
        if (longint'(g_a) != eg) begin failures++; $display("g_A got %0d want %0d", g_a, eg); end
        if (g_a > cfg.g0_a) n_gain++;
      end
      cmp("V_Bip", q_bip, longint'(v_bip), n_bip);
    end
    if (gang_valid) cmp("I_Gang", q_gang, longint'(i_gang), n_gang);
    if (spk_valid) begin
      cmp("spike", q_spk, longint'(spike), n_spkout);
      if (spike) n_spk[cfg.xi_on]++;
      checks++;
      if (spk_sof != ((n_spkout - 1) % NPIX == 0)) begin failures++; $display("spk_sof wrong"); end
      if (spk_sof && cont_run) begin
        if (last_sof >= 0) begin
          checks++;
          n_rate++;
          if (cyc - last_sof != NPIX) begin
            failures++;
            $display("frame period %0d clocks, want %0d", cyc - last_sof, NPIX);
          end
        end
        last_sof = cyc;
      end
    end
    // a new frame entering while the previous one still leaves the OPL
    if (pix_valid && opl_valid && dut.u_opl.u_gs.pos_r >= RW'(H - 2)) n_overlap++;
  end

  localparam int RW = $clog2(H) + 1;

  function automatic int lum_at(int f, int i);
    int g, bar;
    if (f < 5)        g = 30;
    else if (f < 20)  g = 200;
    else if (f < 30)  g = 20;
    else              g = (((f - 30) / (1 + (NF - f) / 4)) % 2) ? 180 : 50;
    bar = ((i % W) == (f % W)) ? 50 : 0;
    return g + bar;
  endfunction

  task automatic run(bit on, bit gaps);
    retina_cfg_t c;
    opl_state_t st;
    frame_t lum, lfx, iopl, vb, ig, spk, cc, ss, v, ea, hg, vmm, rt;
    c = RETINA_CFG_DEFAULT;
    c.xi_on = on;
    c.b4    = on ? 19'sd40 : 19'sd0;
    c.i0_g  = 19'sd80;
    c.a5    = -19'sd700;       // faster T_G (about 2.6 time steps)
    c.b5    = 19'sd324;
    cfg <= c;
    st.lc = zeros(NPIX); st.hc = zeros(NPIX); st.ls = zeros(NPIX);
    v = zeros(NPIX); ea = zeros(NPIX); hg = zeros(NPIX); vmm = zeros(NPIX); rt = zeros(NPIX);
    lum = new [NPIX];
    lfx = new [NPIX];
    rst_n <= 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f <= NF; f++) begin
      foreach (lum[i]) begin
        lum[i] = lum_at(f, i);
        lfx[i] = lum[i] * 1024;
      end
      if (f < NF) begin
        iopl = opl(lfx, W, H, c, st, cc, ss);
        foreach (iopl[i]) begin
          q_opl.push_back(iopl[i]);
          q_g.push_back(sat(c.g0_a + ea[i]));
        end
        vb = bipolar(iopl, W, H, c, v, ea);
        foreach (vb[i]) q_bip.push_back(vb[i]);
        begin
          frame_t h2 = new [NPIX];
          frame_t hh;
          foreach (h2[i]) h2[i] = hg[i];
          hh = hpf(vb, h2, c.a5, c.b5);
          foreach (hh[i]) begin
            longint x;
            x = on ? hh[i] : -hh[i];
            if (x > c.v0_g) n_lin++; else n_rect++;
          end
        end
        ig = ganglion(vb, c, hg);
        foreach (ig[i]) q_gang.push_back(ig[i]);
        foreach (rt[i]) if (rt[i] > 1) n_refr++;
        spk = lif(ig, c, vmm, rt);
        foreach (spk[i]) q_spk.push_back(spk[i]);
      end
      foreach (lum[i]) begin
        if (gaps) while ($urandom_range(0, 4) == 0) begin pix_valid <= 0; @(posedge clk); end
        pix_valid <= 1;
        pix_data  <= 8'(lum[i]);
        @(posedge clk);
      end
    end
    pix_valid <= 0;
    repeat (20) @(posedge clk);
    checks++;
    if (q_opl.size() + q_bip.size() + q_gang.size() + q_spk.size() != 0) begin
      failures++;
      $display("outputs missing: %0d %0d %0d %0d", q_opl.size(), q_bip.size(), q_gang.size(), q_spk.size());
    end
    q_opl.delete(); q_bip.delete(); q_g.delete(); q_gang.delete(); q_spk.delete();
    n_opl = 0; n_bip = 0; n_gang = 0; n_spkout = 0;
  endtask

  initial begin
    int t_in, t_out;
    run(1'b1, 1'b1);
    cont_run = 1;
    run(1'b0, 1'b0);
    cont_run = 0;
    // latency, pixels on every clock
    rst_n <= 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    t_in = -1; t_out = -1;
    fork
      for (int i = 0; i < 4 * W; i++) begin
        pix_valid <= 1;
        pix_data  <= 8'(i);
        @(posedge clk);
        if (i == 3 * (W + 1)) t_in = cyc;
      end
      while (t_out < 0) begin
        @(posedge clk);
        if (spk_valid) t_out = cyc;
      end
    join
    pix_valid <= 0;
    checks++;
    if (t_out - t_in != 12) begin failures++; $display("latency %0d clocks", t_out - t_in); end

    $display("ON spikes %0d, OFF spikes %0d, refractory steps %0d", n_spk[1], n_spk[0], n_refr);
    $display("nonlinearity linear %0d rectifying %0d, raised g_A %0d, frame overlap %0d",
             n_lin, n_rect, n_gain, n_overlap);
    $display("frame periods checked %0d", n_rate);
    checks += 8;
    if (n_rate == 0)    begin failures++; $display("frame period never measured"); end
    if (n_spk[1] == 0)  begin failures++; $display("no ON spike"); end
    if (n_spk[0] == 0)  begin failures++; $display("no OFF spike"); end
    if (n_refr == 0)    begin failures++; $display("no refractory step"); end
    if (n_lin == 0)     begin failures++; $display("linear branch never taken"); end
    if (n_rect == 0)    begin failures++; $display("rectifying branch never taken"); end
    if (n_gain == 0)    begin failures++; $display("contrast gain control never raised g_A"); end
    if (n_overlap == 0) begin failures++; $display("frames never overlapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
