// sdp_ram: simple dual-port RAM, one write port and one read port on the same
// clock. Used for the line buffers of the spatial filters (128 words) and for
// the per-pixel state memories of the temporal filters (128x128 words).
//
// The read is synchronous: rd_data shows mem[rd_addr] one clock after rd_addr
// is presented, which maps onto FPGA block RAM. Reading and writing the same
// address in one cycle returns the old contents. The array is not reset;
// every user masks the contents until it has written them.
module sdp_ram #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned WIDTH = 19,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
