// tb_opl_layer: self-checking test of the outer plexiform layer.
//
// Seven 10x8 luminance frames (random pixels over a moving bright bar) are
// streamed with random idle cycles, followed by one more frame that pushes
// the last rows out of the window filters. The centre C, the surround S and
// I_OPL = lambda (C - omega S) of the first seven frames are compared with
// the frame-level reference model. A second run with a pixel on every clock
// checks the latency: the I_OPL of pixel (0,0) must appear 8 clocks after
// pixel 3(W+1) went in.
module tb_opl_layer;
  import retina_pkg::*;
  import retina_ref_pkg::*;

  localparam int W = 10, H = 8, NPIX = W * H, NF = 7;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  retina_cfg_t cfg;
  logic       pix_valid = 0;
  logic [7:0] pix_data = '0;
  logic       out_valid, out_sof;
  fx_t        i_opl, center, surround;

  opl_layer #(.W(W), .H(H)) dut (.clk, .rst_n, .pix_valid, .pix_data, .cfg,
    .out_valid, .out_sof, .i_opl, .center, .surround);

  int checks = 0, failures = 0, n_out = 0;
  int cyc = 0;
  bit run1 = 1;
  longint exp_i [$], exp_c [$], exp_s [$];

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && run1 && out_valid) begin
    n_out++;
    if (exp_i.size() != 0) begin
      longint ei, ec, es;
      ei = exp_i.pop_front();
      ec = exp_c.pop_front();
      es = exp_s.pop_front();
      checks++;
      if (longint'(i_opl) != ei || longint'(center) != ec || longint'(surround) != es ||
          out_sof != ((n_out - 1) % NPIX == 0)) begin
        failures++;
        if (failures < 10)
          $display("output %0d: I %0d C %0d S %0d, want %0d %0d %0d",
                   n_out - 1, i_opl, center, surround, ei, ec, es);
      end
    end
  end

  initial begin
    retina_cfg_t c;
    opl_state_t st;
    frame_t lum, y, cc, ss;
    int t_in, t_out;
    c = RETINA_CFG_DEFAULT;
    cfg <= c;
    st.lc = zeros(NPIX);
    st.hc = zeros(NPIX);
    st.ls = zeros(NPIX);
    lum = new [NPIX];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f <= NF; f++) begin
      foreach (lum[i]) lum[i] = ((i % W) == f || (i % W) == f + 1) ? 250 : $urandom_range(0, 60);
      if (f < NF) begin
        frame_t lfx = new [NPIX];
        foreach (lfx[i]) lfx[i] = lum[i] * 1024;   // integer luminance, 10 fractional bits
        y = opl(lfx, W, H, c, st, cc, ss);
        foreach (y[i]) begin
          exp_i.push_back(y[i]);
          exp_c.push_back(cc[i]);
          exp_s.push_back(ss[i]);
        end
      end
      foreach (lum[i]) begin
        while ($urandom_range(0, 3) == 0) begin pix_valid <= 0; @(posedge clk); end
        pix_valid <= 1;
        pix_data  <= 8'(lum[i]);
        @(posedge clk);
      end
    end
    pix_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_i.size() != 0) begin failures++; $display("%0d outputs missing", exp_i.size()); end

    // latency with one pixel per clock
    run1 = 0;
    rst_n <= 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    t_in = -1;
    t_out = -1;
    fork
      for (int i = 0; i < 4 * W; i++) begin
        pix_valid <= 1;
        pix_data  <= 8'(i);
        @(posedge clk);
        if (i == 3 * (W + 1)) t_in = cyc;
      end
      while (t_out < 0) begin
        @(posedge clk);
        if (out_valid) t_out = cyc;
      end
    join
    pix_valid <= 0;
    checks++;
    if (t_out - t_in != 8) begin failures++; $display("latency %0d clocks", t_out - t_in); end
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
