// tb_raella_tile: end-to-end tile test at reduced size (2 IMAs, 32x16
// crossbars, small buffers); see tile_test_body.svh for the flow.
module tb_raella_tile;
  localparam int NUM_IMA = 2, ROWS = 32, COLS = 16, ENTRIES = 8, LOAD_W = 4;
  localparam int EDRAM_BYTES = 1024, CHANNELS = 64;
  localparam int CYC = 32;
  initial begin
    #50000000;
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
  `include "tile_test_body.svh"
  raella_tile #(.NUM_IMA(NUM_IMA), .ROWS(ROWS), .COLS(COLS), .ENTRIES(ENTRIES), .LOAD_W(LOAD_W),
                .IB_BYTES(128), .EDRAM_BYTES(EDRAM_BYTES), .CHANNELS(CHANNELS)) dut (.*);
endmodule
