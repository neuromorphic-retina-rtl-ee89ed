// pixel_state_mem: one frame of per-pixel state for the temporal filters and
// neurons of the retina (the "previous frame output" RAM of each IIR filter).
//
// Pixels arrive in raster order, one per rd_step pulse. A read counter walks
// the frame and presents the stored state of the pixel now arriving on
// rd_prev in the same cycle as its rd_step. This is done with a block RAM
// whose synchronous read is issued one cycle early (the address of the next
// pixel is read whenever the current one is consumed), so no extra pipeline
// stage is needed. A separate write counter stores wr_data at consecutive
// pixel addresses on each wr_step pulse; an in-place filter ties wr_step to
// rd_step, while the bipolar layer writes its spatially filtered state with
// a lag of a few rows.
//
// Until the read counter has completed its first frame, rd_prev reads as
// zero: the state of every filter starts at rest after reset without having
// to clear the RAM. rd_sof is high while the current pixel is pixel 0.
// NPIX must be at least 2.
module pixel_state_mem #(
  parameter int unsigned NPIX  = 128 * 128,
  parameter int unsigned WIDTH = 19,
  localparam int unsigned AW   = $clog2(NPIX)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rd_step,
  output logic [WIDTH-1:0] rd_prev,
  output logic             rd_sof,
  input  logic             wr_step,
  input  logic [WIDTH-1:0] wr_data
);

  logic [AW-1:0]    rd_cnt, rd_next, rd_addr, wr_cnt;
  logic             first_frame;
  logic [WIDTH-1:0] q;

  always_comb begin
    rd_next = (rd_cnt == AW'(NPIX - 1)) ? '0 : rd_cnt + 1'b1;
    rd_addr = rd_step ? rd_next : rd_cnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_cnt      <= '0;
      wr_cnt      <= '0;
      first_frame <= 1'b1;
    end else begin
      if (rd_step) begin
        rd_cnt <= rd_next;
        if (rd_cnt == AW'(NPIX - 1)) first_frame <= 1'b0;
      end
      if (wr_step) wr_cnt <= (wr_cnt == AW'(NPIX - 1)) ? '0 : wr_cnt + 1'b1;
    end
  end

  sdp_ram #(.DEPTH(NPIX), .WIDTH(WIDTH)) u_ram (
    .clk     (clk),
    .we      (wr_step),
    .wr_addr (wr_cnt),
    .wr_data (wr_data),
    .rd_addr (rd_addr),
    .rd_data (q)
  );

  assign rd_prev = first_frame ? '0 : q;
  assign rd_sof  = (rd_cnt == '0);

endmodule
