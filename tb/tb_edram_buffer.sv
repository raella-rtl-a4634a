// tb_edram_buffer: full-line and single-byte writes with byte enables over
// the whole 64kB, random read-back, and read-during-write of the same line
// (old data).
module tb_edram_buffer;
  import raella_pkg::*;
  localparam int LINE_W = 16, LINES = 4096;
  logic clk = 0, we = 0, rd_en = 0;
  logic [11:0] waddr = '0, raddr = '0;
  logic [LINE_W-1:0] wbe = '0;
  act_t wdata [LINE_W], rdata [LINE_W];
  int mdl [LINES][LINE_W];
  edram_buffer #(.BYTES(65536), .LINE_W(LINE_W)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int l = 0; l < LINES; l++) begin
      waddr = 12'(l); wbe = '1;
      for (int b = 0; b < LINE_W; b++) begin mdl[l][b] = $urandom_range(0, 255); wdata[b] = act_t'(mdl[l][b]); end
      @(negedge clk) we = 1;
      @(negedge clk) we = 0;
    end
    for (int i = 0; i < 2000; i++) begin
      int a, wa;
      int old [LINE_W];
      a = $urandom_range(0, LINES - 1);
      wa = (i % 4 == 0) ? a : $urandom_range(0, LINES - 1);
      for (int b = 0; b < LINE_W; b++) old[b] = mdl[a][b];
      waddr = 12'(wa); wbe = LINE_W'($urandom());
      for (int b = 0; b < LINE_W; b++) begin
        wdata[b] = act_t'($urandom_range(0, 255));
        if (wbe[b]) mdl[wa][b] = int'(wdata[b]);
      end
      raddr = 12'(a); rd_en = 1; we = 1;
      @(negedge clk) rd_en = 0; we = 0;
      for (int b = 0; b < LINE_W; b++) check(int'(rdata[b]) == old[b], $sformatf("line %0d byte %0d", a, b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
