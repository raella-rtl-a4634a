// tb_input_buffer: writes random lines, reads them back in random order and
// checks the data and the one-clock read latency.
module tb_input_buffer;
  import raella_pkg::*;
  localparam int LINE_W = 16, LINES = 128;
  logic clk = 0, we = 0, rd_en = 0;
  logic [6:0] waddr = '0, raddr = '0;
  act_t wdata [LINE_W], rdata [LINE_W];
  int mdl [LINES][LINE_W];
  input_buffer #(.BYTES(2048), .LINE_W(LINE_W)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int l = 0; l < LINES; l++) begin
      waddr = 7'(l);
      for (int b = 0; b < LINE_W; b++) begin mdl[l][b] = $urandom_range(0, 255); wdata[b] = act_t'(mdl[l][b]); end
      @(negedge clk) we = 1;
      @(negedge clk) we = 0;
    end
    for (int i = 0; i < 300; i++) begin
      int a;
      a = $urandom_range(0, LINES - 1);
      raddr = 7'(a); rd_en = 1;
      if (i % 3 == 0) begin   // simultaneous write elsewhere
        waddr = 7'((a + 1) % LINES);
        for (int b = 0; b < LINE_W; b++) begin mdl[(a + 1) % LINES][b] = $urandom_range(0, 255); wdata[b] = act_t'(mdl[(a + 1) % LINES][b]); end
        we = 1;
      end
      @(negedge clk) rd_en = 0; we = 0;
      for (int b = 0; b < LINE_W; b++) check(int'(rdata[b]) == mdl[a][b], $sformatf("line %0d byte %0d", a, b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
