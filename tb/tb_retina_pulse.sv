// tb_retina_pulse: the pulse and impulse workloads of the digital retina at a
// reduced frame size (8x6), run through retina_top and compared bit for bit
// with the frame-level reference model.
//
// 1. Impulse: one bright frame on a dark background. The centre signal C of
//    the middle pixel (the photoreceptor response) must rise, then undershoot
//    below its resting value because of the partial high-pass (omega < 1),
//    the biphasic impulse response expected of a cone.
// 2. Tonic and phasic cells: a long luminance pulse (dark, bright for 200
//    time steps, dark again) is applied twice, once with the ganglion
//    high-pass weight omega_G = 1 (phasic, b5 = a5 + 1024) and once with
//    omega_G = 0.5 (tonic, b5 halved). The ON spikes of the middle pixel are
//    counted in the first and in the last 50 steps of the pulse: the phasic
//    cell must fire after the onset and fall silent, the tonic cell must keep
//    firing to the end of the pulse.
// Every other parameter keeps its default value. The input runs with a pixel
// on every clock; one extra frame at the end pushes the last rows out.
module tb_retina_pulse;
  import retina_pkg::*;
  import retina_ref_pkg::*;

  localparam int W = 8, H = 6, NPIX = W * H;
  localparam int MID = (H / 2) * W + W / 2;     // middle pixel

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  retina_cfg_t cfg = RETINA_CFG_DEFAULT;
  logic       pix_valid = 0;
  logic [7:0] pix_data = '0;
  logic       opl_valid, bip_valid, gang_valid, spk_valid, spk_sof, spike;
  fx_t        opl_center, opl_surround, i_opl, v_bip, g_a, i_gang, vm;

  retina_top #(.W(W), .H(H)) dut (.clk, .rst_n, .cfg, .pix_valid, .pix_data,
    .opl_valid, .opl_center, .opl_surround, .i_opl, .bip_valid, .v_bip, .g_a,
    .gang_valid, .i_gang, .spk_valid, .spk_sof, .spike, .vm);

  int checks = 0, failures = 0;
  longint q_c [$], q_opl [$], q_spk [$];
  int n_c = 0, n_opl = 0, n_spk = 0;
  longint c_mid [$];                 // C of the middle pixel, one per frame
  bit     s_mid [$];                 // spike of the middle pixel, one per frame

  task automatic cmp(string what, ref longint q [$], input longint got, input int n);
    longint e;
    if (q.size() == 0) return;
    e = q.pop_front();
    checks++;
    if (got != e) begin
      failures++;
      if (failures < 12) $display("%s output %0d: got %0d want %0d", what, n, got, e);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (opl_valid) begin
      if (q_c.size() != 0 && n_c % NPIX == MID) c_mid.push_back(longint'(opl_center));
      cmp("C", q_c, longint'(opl_center), n_c);
      cmp("I_OPL", q_opl, longint'(i_opl), n_opl);
      n_c++;
      n_opl++;
    end
    if (spk_valid) begin
      if (q_spk.size() != 0 && n_spk % NPIX == MID) s_mid.push_back(spike);
      cmp("spike", q_spk, longint'(spike), n_spk);
      n_spk++;
    end
  end

  // runs nf frames of luminance lum_of(f) through the DUT and the reference
  task automatic run(retina_cfg_t c, int nf, int kind);
    opl_state_t st;
    frame_t lfx, iopl, vb, ig, spk, cc, ss, v, ea, hg, vmm, rt;
    int l;
    cfg <= c;
    st.lc = zeros(NPIX); st.hc = zeros(NPIX); st.ls = zeros(NPIX);
    v = zeros(NPIX); ea = zeros(NPIX); hg = zeros(NPIX); vmm = zeros(NPIX); rt = zeros(NPIX);
    lfx = new [NPIX];
    c_mid.delete(); s_mid.delete();
    n_c = 0; n_opl = 0; n_spk = 0;
    rst_n <= 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f <= nf; f++) begin
      if (kind == 0) l = (f == 10) ? 200 : 20;                       // impulse
      else           l = (f >= 20 && f < 220) ? 120 : 20;            // pulse
      foreach (lfx[i]) lfx[i] = l * 1024;
      if (f < nf) begin
        iopl = opl(lfx, W, H, c, st, cc, ss);
        foreach (iopl[i]) begin
          q_c.push_back(cc[i]);
          q_opl.push_back(iopl[i]);
        end
        vb  = bipolar(iopl, W, H, c, v, ea);
        ig  = ganglion(vb, c, hg);
        spk = lif(ig, c, vmm, rt);
        foreach (spk[i]) q_spk.push_back(spk[i]);
      end
      for (int i = 0; i < NPIX; i++) begin
        pix_valid <= 1;
        pix_data  <= 8'(l);
        @(posedge clk);
      end
    end
    pix_valid <= 0;
    repeat (20) @(posedge clk);
    checks++;
    if (q_c.size() + q_opl.size() + q_spk.size() != 0) begin
      failures++;
      $display("outputs missing: %0d %0d %0d", q_c.size(), q_opl.size(), q_spk.size());
    end
    q_c.delete(); q_opl.delete(); q_spk.delete();
  endtask

  function automatic int count_spikes(int from, int to);
    int n = 0;
    for (int f = from; f < to && f < s_mid.size(); f++) n += s_mid[f];
    return n;
  endfunction

  initial begin
    retina_cfg_t c;
    longint rest, peak, low;
    int ph_on, ph_late, to_on, to_late;

    // 1. impulse response of the centre signal
    c = RETINA_CFG_DEFAULT;
    run(c, 60, 0);
    rest = c_mid[9]; peak = rest; low = rest;
    for (int f = 10; f < c_mid.size(); f++) begin
      if (c_mid[f] > peak) peak = c_mid[f];
      if (c_mid[f] < low)  low  = c_mid[f];
    end
    $display("impulse: C rest %0d, peak %0d, undershoot %0d", rest, peak, low);
    checks += 2;
    if (!(peak > rest)) begin failures++; $display("centre signal did not rise"); end
    if (!(low < rest))  begin failures++; $display("centre signal did not undershoot"); end

    // 2. phasic cell, omega_G = 1
    c = RETINA_CFG_DEFAULT;
    c.b5 = c.a5 + 19'sd1024;
    run(c, 300, 1);
    ph_on   = count_spikes(20, 70);
    ph_late = count_spikes(170, 220);

    // 3. tonic cell, omega_G = 0.5
    c = RETINA_CFG_DEFAULT;
    c.b5 = (c.a5 + 19'sd1024) >>> 1;
    run(c, 300, 1);
    to_on   = count_spikes(20, 70);
    to_late = count_spikes(170, 220);

    $display("phasic: %0d spikes after onset, %0d at end of pulse", ph_on, ph_late);
    $display("tonic:  %0d spikes after onset, %0d at end of pulse", to_on, to_late);
    checks += 4;
    if (ph_on == 0)        begin failures++; $display("phasic cell did not fire"); end
    if (ph_late != 0)      begin failures++; $display("phasic cell kept firing"); end
    if (to_on == 0)        begin failures++; $display("tonic cell did not fire"); end
    if (to_late == 0)      begin failures++; $display("tonic cell stopped firing"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
