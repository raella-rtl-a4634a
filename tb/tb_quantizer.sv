// tb_quantizer: programs random FP16 scales/biases and checks
// clamp(floor(psum*scale+bias)) against a real-number reference, with and
// without ReLU, and the two-clock latency.
module tb_quantizer;
  import raella_pkg::*;
  import raella_ref_pkg::*;
  localparam int CH = 64;
  logic clk = 0, rst_n = 0, q_we = 0, in_valid = 0, in_relu = 0, out_valid;
  logic [5:0] q_addr = '0, in_ch = '0;
  logic [31:0] q_data = '0;
  logic signed [15:0] in_psum = '0;
  logic [15:0] in_tag = '0, out_tag;
  logic [7:0] out_q;
  bit [15:0] sc [CH], bi [CH];
  quantizer #(.CHANNELS(CH), .PSUM_W(16), .TAG_W(16)) dut (.*);
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
    for (int c = 0; c < CH; c++) begin
      // scale in [2^-14, 2^-2), bias in [-64, 64)
      sc[c] = {1'b0, 5'($urandom_range(1, 13)), 10'($urandom())};
      bi[c] = {1'($urandom()), 5'($urandom_range(0, 20)), 10'($urandom())};
      q_addr = 6'(c); q_data = {sc[c], bi[c]}; q_we = 1;
      @(negedge clk) q_we = 0;
    end
    for (int i = 0; i < 500; i++) begin
      int c, p, e;
      bit r;
      c = $urandom_range(0, CH - 1); p = int'($urandom_range(0, 65535)) - 32768; r = 1'($urandom());
      in_ch = 6'(c); in_psum = 16'(p); in_relu = r; in_tag = 16'(i); in_valid = 1;
      @(negedge clk) in_valid = 0;
      check(!out_valid, "result after one clock");
      @(negedge clk);
      e = quant_ref(p, sc[c], bi[c], r);
      check(out_valid && out_tag == 16'(i), "valid/tag");
      check(int'(out_q) == e, $sformatf("ch %0d psum %0d relu %0d: %0d expected %0d", c, p, r, out_q, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
