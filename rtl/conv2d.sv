// conv2d: streaming N x N spatial convolution (Gaussian smoothing G_C, G_S,
// G_A of the retina).
//
// Structure. Two parts, as in the classic line-buffer convolver: an N x N
// register bank that holds the current window, and a multiplier-and-adder
// unit that forms sum(w_i * a_i) over it. The bottom window row is a chain of
// N registers fed directly by the incoming pixel; the other N-1 rows are
// loaded from N-1 line RAMs (W words each) that hold the previous N-1 image
// rows. The pixel leaving the last register of the input chain is written
// into the RAM of its row; rows rotate through the RAMs (row r goes to RAM
// r mod (N-1)), so for N=3 the two RAMs work ping-pong (even/odd rows) and for
// N=5 four RAMs hold rows 0,4,8.. / 1,5,9.. / 2,6,10.. / 3,7,11... A rotating
// select picks which RAM feeds which window row. This follows the register
// bank drawings for the 3x3 (R0..R8, RAM A/B) and 5x5 (R0..R24, RAM A..D)
// filters.
//
// Zero padding. The pixel stream runs continuously from frame to frame. The
// window centred on pixel (r,c) is complete when pixel (r+P, c+P) arrives
// (P = N/2), so the output lags the input by P*W+P pixels; the last P rows of
// a frame are pushed out by the first pixels of the next frame. Taps whose
// row or column lies outside the frame are replaced by zero at the adder
// input, which is the control-unit-selected zero of the original design.
//
// Interface. in_valid/in_data: one pixel per clock at most, raster order,
// frames back to back with no blanking required; the first pixel after reset
// is pixel (0,0). Output: out_valid/out_data for pixel (r,c) in raster
// order, out_center = the unfiltered input pixel at (r,c) (the window
// centre, used by the OPL to align the centre signal with the surround),
// out_sof marks pixel (0,0). Timing: out_valid follows the step that
// completes the window by two clocks.
//
// Sample format. The register bank and line RAMs hold DW-bit samples with
// IN_FRAC fractional bits, signed or not (IN_SIGNED). The default is the
// 19-bit datapath format. The OPL centre filter sets DW = 8, unsigned,
// IN_FRAC = 0, so its two line RAMs are 128 x 8 bits and hold raw
// luminance, as in the original design. The products carry IN_FRAC + 10
// fractional bits; the sum is shifted right by IN_FRAC and saturated to the
// datapath format, and out_center is the centre sample in that format.
//
// Design choices (not fixed by the original description): the RAM read is
// prefetched one cycle ahead so a block RAM with registered output can be
// used; the output truncates and saturates.
module conv2d
  import retina_pkg::*;
#(
  parameter int unsigned N = 3,      // window size (3 or 5)
  parameter int unsigned W = 128,    // frame width
  parameter int unsigned H = 128,    // frame height
  parameter int unsigned DW = FX_W,  // stored sample width
  parameter int unsigned IN_FRAC = FX_FRAC,  // fractional bits of a sample
  parameter bit          IN_SIGNED = 1'b1,   // samples are two's complement
  localparam int unsigned P  = N / 2,
  localparam int unsigned NR = N - 1  // number of line RAMs
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [DW-1:0]    in_data,
  input  fx_t [0:N*N-1]    kern,       // row-major, [0] = top-left tap
  output logic             out_valid,
  output logic             out_sof,
  output fx_t              out_data,
  output fx_t              out_center
);

  localparam int unsigned CW   = $clog2(W);
  localparam int unsigned RW   = $clog2(H) + 1;
  localparam int unsigned RGW  = (NR > 1) ? $clog2(NR) : 1;
  localparam int unsigned LAG  = P * W + P;
  localparam int unsigned LAGW = $clog2(LAG + 1) + 1;

  // ---------------------------------------------------------------- input side
  logic [CW-1:0]  in_col;
  logic [RGW-1:0] in_ring;            // ring index of the incoming row
  logic [LAGW-1:0] seen;              // pixels seen, saturating at LAG
  logic [CW-1:0]  rd_addr;
  typedef logic [DW-1:0] samp_t;
  samp_t          ram_q [NR];

  samp_t win [N][N];                  // [row k][col j], j = 0 newest

  // sample -> wide signed value
  function automatic acc_t ext(input samp_t v);
    if (IN_SIGNED) return acc_t'(signed'(v));
    else           return acc_t'({1'b0, v});
  endfunction

  function automatic logic [RGW-1:0] ring_add(input logic [RGW-1:0] a, input int unsigned b);
    return RGW'((int'(a) + b) % NR);
  endfunction

  logic           wr_first_cols;
  logic [CW-1:0]  wr_addr;
  logic [RGW-1:0] wr_ring;

  always_comb begin
    if (in_valid) rd_addr = (in_col == CW'(W - 1)) ? '0 : in_col + 1'b1;
    else          rd_addr = in_col;
    // Pixel leaving the input chain: (row, col - N), possibly of the previous row.
    wr_first_cols = (int'(in_col) < int'(N));
    wr_addr = wr_first_cols ? CW'(int'(W) + int'(in_col) - int'(N))
                            : CW'(int'(in_col) - int'(N));
    wr_ring = wr_first_cols ? ring_add(in_ring, NR - 1) : in_ring;
  end

  for (genvar g = 0; g < NR; g++) begin : g_line
    sdp_ram #(.DEPTH(W), .WIDTH(DW)) u_line (
      .clk     (clk),
      .we      (in_valid && (wr_ring == RGW'(g))),
      .wr_addr (wr_addr),
      .wr_data (win[N-1][N-1]),
      .rd_addr (rd_addr),
      .rd_data (ram_q[g])
    );
  end

  // ------------------------------------------------------ register bank shift
  logic           win_valid;
  logic           seen_started;       // a first valid window has been formed
  logic [RW-1:0]  pos_r;
  logic [CW-1:0]  pos_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_col    <= '0;
      in_ring   <= '0;
      seen      <= '0;
      win_valid <= 1'b0;
      pos_r     <= '0;
      pos_c     <= '0;
      for (int k = 0; k < N; k++)
        for (int j = 0; j < N; j++) win[k][j] <= '0;
    end else begin
      win_valid <= 1'b0;
      if (in_valid) begin
        // shift every window row by one column, load the new column
        for (int k = 0; k < N; k++)
          for (int j = N - 1; j > 0; j--) win[k][j] <= win[k][j-1];
        for (int k = 0; k < NR; k++) win[k][0] <= ram_q[ring_add(in_ring, k)];
        win[N-1][0] <= in_data;

        if (in_col == CW'(W - 1)) begin
          in_col  <= '0;
          in_ring <= ring_add(in_ring, 1);
        end else begin
          in_col <= in_col + 1'b1;
        end

        if (int'(seen) >= int'(LAG)) begin
          win_valid <= 1'b1;
          // the window now centres on the pixel after the previous one
          if (seen_started) begin
            if (pos_c == CW'(W - 1)) begin
              pos_c <= '0;
              pos_r <= (pos_r == RW'(H - 1)) ? '0 : pos_r + 1'b1;
            end else begin
              pos_c <= pos_c + 1'b1;
            end
          end
        end else begin
          seen <= seen + 1'b1;
        end
      end
    end
  end

  // pos_r/pos_c hold the centre of the current window; the first valid window
  // centres on (0,0), later ones advance by one pixel.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                   seen_started <= 1'b0;
    else if (in_valid && int'(seen) >= int'(LAG)) seen_started <= 1'b1;
  end

  // --------------------------------------------------- multiplier and adder
  acc_t sum;
  always_comb begin
    sum = '0;
    for (int k = 0; k < N; k++) begin
      for (int j = 0; j < N; j++) begin
        int rr, cc;
        rr = int'(pos_r) - int'(P) + k;
        cc = int'(pos_c) + int'(P) - j;
        if (rr >= 0 && rr < int'(H) && cc >= 0 && cc < int'(W))
          sum += acc_t'(kern[k*N + (N-1-j)]) * ext(win[k][j]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_sof    <= 1'b0;
      out_data   <= '0;
      out_center <= '0;
    end else begin
      out_valid <= win_valid;
      if (win_valid) begin
        out_sof    <= (pos_r == '0) && (pos_c == '0);
        out_data   <= fx_sat(sum >>> IN_FRAC);
        out_center <= fx_sat(ext(win[P][P]) <<< (FX_FRAC - IN_FRAC));
      end
    end
  end

endmodule
