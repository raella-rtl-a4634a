// input_buffer: the IMA's 2kB input buffer.
//
// Holds the 8b inputs that the IMA's four crossbars reuse between crossbar
// cycles (4 x 512 rows = 2048 inputs). Organised as BYTES/LINE_W lines of
// LINE_W bytes with one write port (from the tile network) and one read
// port (to the IMA input network); the read data appears one clock after
// rd_en. Size from the paper; the line organisation and port widths are
// this design's choice.
module input_buffer
  import raella_pkg::*;
#(
  parameter int unsigned BYTES  = 2048,
  parameter int unsigned LINE_W = 16,
  localparam int unsigned LINES = BYTES / LINE_W,
  localparam int unsigned AW    = $clog2(LINES)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  act_t          wdata [LINE_W],
  input  logic          rd_en,
  input  logic [AW-1:0] raddr,
  output act_t          rdata [LINE_W]
);
  act_t mem [LINES][LINE_W];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (rd_en) rdata <= mem[raddr];
  end
endmodule
