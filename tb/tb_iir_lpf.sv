// tb_iir_lpf: self-checking test of the per-pixel temporal low-pass filter Y(n) = b X(n) - a Y(n-1).
//
// A small frame (NPIX = 12) is streamed for 40 frames with random idle
// cycles. Part of the run uses a constant input per pixel (step response),
// the rest random values. Each output is compared with a per-pixel model
// kept here, which starts at rest (zero state) and follows the same
// truncate-and-saturate arithmetic. Coefficients are changed between the two
// halves. The output must appear one clock after its input.
module tb_iir_lpf;
  import retina_pkg::*;

  localparam int NPIX = 12, NF = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0;
  fx_t  in_data = '0, coef_a, coef_b;
  logic out_valid, out_sof;
  fx_t  out_data;

  iir_lpf #(.NPIX(NPIX)) dut (.clk, .rst_n, .in_valid, .in_data, .coef_a, .coef_b,
    .out_valid, .out_sof, .out_data);

  int checks = 0, failures = 0;
  longint state [NPIX];
  int ca, cb;
  int exp_q [$];
  bit sof_q [$];

  function automatic longint sat(longint v);
    if (v > 262143) return 262143;
    if (v < -262144) return -262144;
    return v;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output");
      end else begin
        int e;
        bit s;
        e = exp_q.pop_front();
        s = sof_q.pop_front();
        if (int'(out_data) != e || out_sof != s) begin
          failures++;
          if (failures < 10) $display("got %0d sof %0b want %0d sof %0b", out_data, out_sof, e, s);
        end
      end
    end
  end

  initial begin
    for (int i = 0; i < NPIX; i++) state[i] = 0;
    ca = -927; cb = 97;
    coef_a <= fx_t'(ca); coef_b <= fx_t'(cb);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < NF; f++) begin
      if (f == NF/2) begin
        ca = -700; cb = 300;
        coef_a <= fx_t'(ca); coef_b <= fx_t'(cb);
      end
      for (int p = 0; p < NPIX; p++) begin
        int x;
        longint y;
        x = (f < NF/2) ? (p - 5) * 20000 : $signed($urandom_range(0, 262143)) - 131072;
        y = sat(((longint'(cb) * x) >>> 10) - ((longint'(ca) * state[p]) >>> 10));
        state[p] = y;
        while ($urandom_range(0, 2) == 0) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1;
        in_data  <= fx_t'(x);
        exp_q.push_back(int'(y));
        sof_q.push_back(p == 0);
        @(posedge clk);
        // latency: the result is registered on the next edge
      end
    end
    in_valid <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d outputs missing", exp_q.size()); end
    // latency check: input sampled at one edge, out_valid seen set after it
    begin
      longint y;
      y = sat(0 - ((longint'(ca) * state[0]) >>> 10));
      exp_q.push_back(int'(y));
      sof_q.push_back(1'b1);
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
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
