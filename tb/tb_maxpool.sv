// tb_maxpool: streams random windows of random length and checks the
// maximum and the one-clock output latency.
module tb_maxpool;
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0, in_last = 0, out_valid;
  logic [7:0] in_data = '0, out_data;
  maxpool dut (.*);
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
    @(negedge clk) rst_n = 1;
    for (int w = 0; w < 200; w++) begin
      int len, mx;
      len = $urandom_range(1, 9); mx = -1;
      for (int j = 0; j < len; j++) begin
        int v;
        v = $urandom_range(0, 255);
        if (v > mx) mx = v;
        in_valid = 1; in_first = (j == 0); in_last = (j == len - 1); in_data = 8'(v);
        @(negedge clk);
        in_valid = 0;
        if (j < len - 1) check(!out_valid, "early output");
      end
      in_first = 0; in_last = 0;
      check(out_valid && int'(out_data) == mx, $sformatf("max %0d expected %0d", out_data, mx));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
