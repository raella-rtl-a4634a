// tb_center_correct: programs random centers and checks
// out = psum + center * sum (mod 2^16) for random requests, including the
// paper's worked example (center 13, inputs 4,2,1, offset part 3 -> 94).
module tb_center_correct;
  import raella_pkg::*;
  import raella_ref_pkg::*;
  logic clk = 0, rst_n = 0, c_we = 0, in_valid = 0, out_valid;
  logic [1:0] c_xbar = '0, in_xbar = '0;
  logic [7:0] c_addr = '0, in_filter = '0, c_val = '0;
  logic signed [15:0] in_psum = '0, out_psum;
  logic [16:0] in_sum = '0;
  int ctr [4][256];
  center_correct #(.NUM_XBAR(4), .ENTRIES(256), .PSUM_W(16), .SUM_W(17)) dut (.*);
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
    for (int x = 0; x < 4; x++)
      for (int e = 0; e < 256; e++) begin
        ctr[x][e] = $urandom_range(1, 255);
        if (x == 0 && e == 0) ctr[x][e] = 13;
        c_xbar = 2'(x); c_addr = 8'(e); c_val = 8'(ctr[x][e]); c_we = 1;
        @(negedge clk) c_we = 0;
      end
    for (int i = 0; i < 400; i++) begin
      int x, f, p, s;
      x = $urandom_range(0, 3); f = $urandom_range(0, 255);
      p = int'($urandom_range(0, 65535)) - 32768; s = $urandom_range(0, 130560);
      if (i == 0) begin x = 0; f = 0; p = 3; s = 7; end
      in_xbar = 2'(x); in_filter = 8'(f); in_psum = 16'(p); in_sum = 17'(s); in_valid = 1;
      @(negedge clk) in_valid = 0;
      check(out_valid, "out_valid missing");
      check(int'(out_psum) == wrap16(p + ctr[x][f] * s), $sformatf("x%0d f%0d: %0d expected %0d", x, f, out_psum, wrap16(p + ctr[x][f] * s)));
      if (i == 0) check(out_psum == 16'sd94, "worked example");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
