// tb_ganglion_current: self-checking test of the ganglion input current
// I_Gang = N(xi * T_G * V_Bip).
//
// 30 frames of 20 pixels of random bipolar potentials are streamed with
// random idle cycles; the first half runs as an ON cell (xi = +1), the
// second half as an OFF cell (xi = -1). Each output is compared with the
// frame-level reference model (high-pass state, sign, both branches of the
// nonlinearity with its division). The test counts how often the linear and
// the rectifying branch were taken for ON and for OFF and fails if one never
// was. The output must follow its input by two clocks.
module tb_ganglion_current;
  import retina_pkg::*;
  import retina_ref_pkg::*;

  localparam int NPIX = 20, NF = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  retina_cfg_t cfg;
  logic in_valid = 0;
  fx_t  in_data = '0;
  logic out_valid, out_sof;
  fx_t  out_data;

  ganglion_current #(.NPIX(NPIX)) dut (.clk, .rst_n, .in_valid, .in_data, .cfg,
    .out_valid, .out_sof, .out_data);

  int checks = 0, failures = 0;
  int n_lin [2] = '{0, 0};
  int n_rect [2] = '{0, 0};
  longint exp_q [$];
  bit     sof_q [$];

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin
      failures++;
      $display("unexpected output");
    end else begin
      longint e;
      bit s;
      e = exp_q.pop_front();
      s = sof_q.pop_front();
      if (longint'(out_data) != e || out_sof != s) begin
        failures++;
        if (failures < 10) $display("output %0d: got %0d want %0d", checks, out_data, e);
      end
    end
  end

  initial begin
    retina_cfg_t c;
    frame_t st, vb, ig;
    int t_in, t_out;
    c = RETINA_CFG_DEFAULT;
    c.a5 = -19'sd800;
    c.b5 = 19'sd224;          // omega = 1
    c.i0_g = 19'sd300;        // large enough that the division branch is visible
    c.v0_g = 19'sd100;
    c.lambda_g = 19'sd5120;
    cfg <= c;
    st = zeros(NPIX);
    vb = new [NPIX];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < NF; f++) begin
      if (f == NF / 2) begin
        // let the pipeline drain: a configuration change reaches each stage
        // when that stage next works
        in_valid <= 0;
        repeat (3) @(posedge clk);
        c.xi_on = 1'b0;
        cfg <= c;
      end
      foreach (vb[i]) vb[i] = $signed($urandom_range(0, 40000)) - 20000;
      begin
        frame_t hh, st2;
        st2 = new [NPIX];
        foreach (st2[i]) st2[i] = st[i];
        hh = hpf(vb, st2, c.a5, c.b5);
        foreach (hh[i]) begin
          longint x;
          x = c.xi_on ? hh[i] : -hh[i];
          if (x > c.v0_g) n_lin[c.xi_on]++;
          else            n_rect[c.xi_on]++;
        end
      end
      ig = ganglion(vb, c, st);
      foreach (vb[i]) begin
        exp_q.push_back(ig[i]);
        sof_q.push_back(i == 0);
        while ($urandom_range(0, 3) == 0) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1;
        in_data  <= fx_t'(vb[i]);
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d outputs missing", exp_q.size()); end
    for (int k = 0; k < 2; k++) begin
      checks += 2;
      if (n_lin[k] == 0)  begin failures++; $display("linear branch never taken, xi_on=%0d", k); end
      if (n_rect[k] == 0) begin failures++; $display("rectifying branch never taken, xi_on=%0d", k); end
    end
    $display("ON: linear %0d rectified %0d; OFF: linear %0d rectified %0d",
             n_lin[1], n_rect[1], n_lin[0], n_rect[0]);
    // latency: one pixel, output two clocks later
    begin
      frame_t one = new [NPIX];
      foreach (one[i]) one[i] = 0;
      ig = ganglion(one, c, st);
      exp_q.push_back(ig[0]);
      sof_q.push_back(1'b1);
    end
    in_valid <= 1; in_data <= '0;
    @(posedge clk);
    in_valid <= 0;
    @(posedge clk);
    #1;
    checks++;
    if (!out_valid) begin failures++; $display("latency is not two clocks"); end
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
