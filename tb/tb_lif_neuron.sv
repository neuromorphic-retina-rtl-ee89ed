// tb_lif_neuron: self-checking test of the LIF spiking layer.
//
// 30 frames of a 6x4 array of neurons receive random ganglion currents
// (some pixels strong, some weak, some negative), streamed with random idle
// cycles. Every spike bit and membrane value is compared with the
// frame-level reference model. The test counts spikes, steps spent in the
// refractory period and sub-threshold steps, and fails if any never
// occurred. A change of the refractory length mid-run is included. The
// output must follow its input by one clock.
module tb_lif_neuron;
  import retina_pkg::*;
  import retina_ref_pkg::*;

  localparam int W = 6, H = 4, NPIX = W * H, NF = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  retina_cfg_t cfg;
  logic in_valid = 0;
  fx_t  in_data = '0;
  logic out_valid, out_sof, spike;
  fx_t  vm;

  lif_neuron #(.NPIX(NPIX)) dut (.clk, .rst_n, .in_valid, .in_data, .cfg,
    .out_valid, .out_sof, .spike, .vm);

  int checks = 0, failures = 0;
  int n_spike = 0, n_refr = 0, n_sub = 0;
  longint exp_spk [$], exp_vm [$];
  bit     exp_sof [$];

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_spk.size() == 0) begin
      failures++;
      $display("unexpected output");
    end else begin
      longint es, ev;
      bit     eo;
      es = exp_spk.pop_front();
      ev = exp_vm.pop_front();
      eo = exp_sof.pop_front();
      if (longint'(spike) != es || longint'(vm) != ev || out_sof != eo) begin
        failures++;
        if (failures < 10) $display("got spike %0b vm %0d, want %0d %0d", spike, vm, es, ev);
      end
    end
  end

  initial begin
    retina_cfg_t c;
    frame_t st_vm, st_rt, ig, spk;
    int t_in;
    c = RETINA_CFG_DEFAULT;
    c.g_l  = 19'sd102;
    c.tau  = 19'sd1024;
    c.v_th = 19'sd1024;
    c.refr = 8'd3;
    cfg <= c;
    st_vm = zeros(NPIX);
    st_rt = zeros(NPIX);
    ig    = new [NPIX];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < NF; f++) begin
      if (f == NF / 2) begin
        c.refr = 8'd1;
        cfg <= c;
      end
      foreach (ig[i]) ig[i] = (i % 3 == 0) ? 400 + $urandom_range(0, 300)
                            : (i % 3 == 1) ? $urandom_range(0, 120)
                            : -longint'($urandom_range(0, 5000));
      begin
        frame_t rt_before = new [NPIX];
        foreach (rt_before[i]) rt_before[i] = st_rt[i];
        spk = lif(ig, c, st_vm, st_rt);
        foreach (ig[i]) begin
          if (spk[i] != 0)          n_spike++;
          else if (rt_before[i] > 1) n_refr++;
          else                      n_sub++;
        end
      end
      foreach (ig[i]) begin
        exp_spk.push_back(spk[i]);
        exp_vm.push_back(st_vm[i]);
        exp_sof.push_back(i == 0);
        while ($urandom_range(0, 3) == 0) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1;
        in_data  <= fx_t'(ig[i]);
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (3) @(posedge clk);
    checks += 4;
    if (exp_spk.size() != 0) begin failures++; $display("%0d outputs missing", exp_spk.size()); end
    if (n_spike == 0) begin failures++; $display("no spike"); end
    if (n_refr == 0)  begin failures++; $display("no refractory step"); end
    if (n_sub == 0)   begin failures++; $display("no sub-threshold step"); end
    $display("spikes %0d refractory steps %0d sub-threshold %0d", n_spike, n_refr, n_sub);
    // one-clock latency
    exp_spk.push_back(0); exp_vm.push_back(0); exp_sof.push_back(1);
    in_valid <= 1; in_data <= '0;
    @(posedge clk);
    in_valid <= 0;
    #1;
    checks++;
    if (!out_valid) begin failures++; $display("latency is not one clock"); end
    begin
      // the reference for this pixel: zero input
      frame_t one = new [NPIX];
      foreach (one[i]) one[i] = 0;
      spk = lif(one, c, st_vm, st_rt);
      exp_spk[0] = spk[0];
      exp_vm[0]  = st_vm[0];
    end
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
