// tb_raella_tile_full: the same end-to-end flow with the tile at its default
// size (8 IMAs of four 512x512 crossbars, 64kB eDRAM, 8192 channels).
module tb_raella_tile_full;
  localparam int NUM_IMA = 8, ROWS = 512, COLS = 512, ENTRIES = 256, LOAD_W = 16;
  localparam int EDRAM_BYTES = 65536, CHANNELS = 8192;
  localparam int CYC = 130;
  initial begin
    #2000000000;
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
  `include "tile_test_body.svh"
  raella_tile dut (.*);
endmodule
