// tb_conv2d: self-checking test of the streaming N x N convolver, for the
// 3x3 (centre) and 5x5 (surround / amacrine) window sizes at once.
//
// Both instances get the same stream of random 19-bit pixels for four small
// back-to-back frames (W=10, H=7) with random idle cycles, and random signed
// kernels. Every output of the first three frames is compared with a direct
// zero-padded convolution computed here from the stored frames, together
// with the window-centre output and the start-of-frame flag. A second run
// with no idle cycles checks the latency: the output of pixel (0,0) must
// appear two clocks after the input of pixel P*W+P. A third instance is
// built as the OPL centre filter is: 3x3 on unsigned 8-bit integer samples
// (the low byte of the same stream), whose output and centre must equal the
// 19-bit convolution of those bytes scaled by 1024.
module tb_conv2d;
  import retina_pkg::*;

  localparam int W = 10, H = 7, NF = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0;
  fx_t  in_data  = '0;
  fx_t [0:8]  k3;
  fx_t [0:24] k5;
  logic ov3, os3, ov5, os5;
  fx_t  od3, oc3, od5, oc5;
  logic ov8, os8;
  fx_t  od8, oc8;

  conv2d #(.N(3), .W(W), .H(H)) dut3 (.clk, .rst_n, .in_valid, .in_data, .kern(k3),
    .out_valid(ov3), .out_sof(os3), .out_data(od3), .out_center(oc3));
  conv2d #(.N(5), .W(W), .H(H)) dut5 (.clk, .rst_n, .in_valid, .in_data, .kern(k5),
    .out_valid(ov5), .out_sof(os5), .out_data(od5), .out_center(oc5));
  conv2d #(.N(3), .W(W), .H(H), .DW(8), .IN_FRAC(0), .IN_SIGNED(1'b0)) dut8 (.clk, .rst_n,
    .in_valid, .in_data(in_data[7:0]), .kern(k3),
    .out_valid(ov8), .out_sof(os8), .out_data(od8), .out_center(oc8));

  int checks = 0, failures = 0;
  int frames [NF][H][W];
  int n3 = 0, n5 = 0, n8 = 0;
  int cyc = 0;
  bit gaps = 1;

  always @(posedge clk) cyc <= cyc + 1;

  // byte = 1: the samples are the unsigned low bytes, scaled by 1024
  function automatic int pix(int f, int r, int c, bit byte_in);
    return byte_in ? (frames[f][r][c] & 255) * 1024 : frames[f][r][c];
  endfunction

  function automatic int ref_conv(int n, int f, int r, int c, bit byte_in = 0);
    longint s = 0;
    int p = n / 2;
    for (int dy = 0; dy < n; dy++)
      for (int dx = 0; dx < n; dx++) begin
        int rr = r - p + dy, cc = c - p + dx;
        longint w = (n == 3) ? longint'(k3[dy*n+dx]) : longint'(k5[dy*n+dx]);
        if (rr >= 0 && rr < H && cc >= 0 && cc < W) s += w * pix(f, rr, cc, byte_in);
      end
    s = s >>> 10;
    if (s > 262143) s = 262143;
    if (s < -262144) s = -262144;
    return int'(s);
  endfunction

  task automatic check_out(int n, int idx, fx_t d, fx_t ctr, logic sof, bit byte_in = 0);
    int f = idx / (W*H), r = (idx % (W*H)) / W, c = idx % W;
    if (f >= NF - 1) return;
    checks++;
    if (int'(d) != ref_conv(n, f, r, c, byte_in) || int'(ctr) != pix(f, r, c, byte_in) ||
        sof != (r == 0 && c == 0)) begin
      failures++;
      if (failures < 10)
        $display("N=%0d%s f%0d (%0d,%0d): got %0d ctr %0d sof %0b, want %0d ctr %0d",
                 n, byte_in ? " 8-bit" : "", f, r, c, d, ctr, sof,
                 ref_conv(n, f, r, c, byte_in), pix(f, r, c, byte_in));
    end
  endtask

  always @(posedge clk) if (rst_n && gaps) begin
    if (ov3) begin check_out(3, n3, od3, oc3, os3); n3++; end
    if (ov5) begin check_out(5, n5, od5, oc5, os5); n5++; end
    if (ov8) begin check_out(3, n8, od8, oc8, os8, 1'b1); n8++; end
  end

  initial begin
    for (int i = 0; i < 9; i++)  k3[i] = fx_t'($signed($urandom_range(0, 2047)) - 1024);
    for (int i = 0; i < 25; i++) k5[i] = fx_t'($signed($urandom_range(0, 2047)) - 1024);
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) frames[f][r][c] = $signed($urandom_range(0, 262143)) - 131072;
    // one saturating window: large equal pixels and large taps
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) frames[1][r+2][c+3] = 200000;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          while ($urandom_range(0, 3) == 0) begin
            in_valid <= 0;
            @(posedge clk);
          end
          in_valid <= 1;
          in_data  <= fx_t'(frames[f][r][c]);
          @(posedge clk);
        end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (n3 != NF*W*H - (W+1) || n5 != NF*W*H - (2*W+2) || n8 != n3) begin
      failures++;
      $display("output counts %0d %0d %0d", n3, n5, n8);
    end

    // latency run, continuous input
    gaps = 0;
    rst_n <= 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    begin
      int t_in3 = -1, t_in5 = -1, t_out3 = -1, t_out5 = -1;
      fork
        for (int i = 0; i < 3*W; i++) begin
          in_valid <= 1;
          in_data  <= fx_t'(i);
          @(posedge clk);
          if (i == W + 1)   t_in3 = cyc;
          if (i == 2*W + 2) t_in5 = cyc;
        end
        begin
          while (t_out3 < 0 || t_out5 < 0) begin
            @(posedge clk);
            if (ov3 && t_out3 < 0) t_out3 = cyc;
            if (ov5 && t_out5 < 0) t_out5 = cyc;
          end
        end
      join
      in_valid <= 0;
      checks += 2;
      if (t_out3 - t_in3 != 2) begin failures++; $display("3x3 latency %0d", t_out3 - t_in3); end
      if (t_out5 - t_in5 != 2) begin failures++; $display("5x5 latency %0d", t_out5 - t_in5); end
    end
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
