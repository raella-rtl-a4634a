// edram_buffer: the tile's 64kB eDRAM buffer for 8b inputs and outputs.
//
// BYTES/LINE_W lines of LINE_W bytes. Port A writes a line with per-byte
// enables (whole lines from the network, single bytes from the quantizer);
// port B reads a line, data one clock after rd_en. A read and a write of the
// same line in one clock return the old data. Refresh is not modelled (the
// paper notes data is consumed faster than the refresh period). Size from
// the paper; organisation and ports are this design's choice.
module edram_buffer
  import raella_pkg::*;
#(
  parameter int unsigned BYTES  = 65536,
  parameter int unsigned LINE_W = 16,
  localparam int unsigned LINES = BYTES / LINE_W,
  localparam int unsigned AW    = $clog2(LINES)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [LINE_W-1:0] wbe,
  input  act_t              wdata [LINE_W],
  input  logic              rd_en,
  input  logic [AW-1:0]     raddr,
  output act_t              rdata [LINE_W]
);
  act_t mem [LINES][LINE_W];
  always_ff @(posedge clk) begin
    if (we)
      for (int b = 0; b < LINE_W; b++)
        if (wbe[b]) mem[waddr][b] <= wdata[b];
    if (rd_en) rdata <= mem[raddr];
  end
endmodule
