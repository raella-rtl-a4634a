// tb_input_sum: applies random add/subtract bundles and clears, and checks
// the running sum after each against an integer model.
module tb_input_sum;
  import raella_pkg::*;
  localparam int LOAD_W = 4;
  logic clk = 0, rst_n = 0, clr = 0, upd = 0;
  act_t add_val [LOAD_W], sub_val [LOAD_W];
  logic [16:0] sum;
  input_sum #(.LOAD_W(LOAD_W), .SUM_W(17)) dut (.*);
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
    int mdl, rows [32];
    for (int i = 0; i < LOAD_W; i++) begin add_val[i] = '0; sub_val[i] = '0; end
    for (int r = 0; r < 32; r++) rows[r] = 0;
    mdl = 0;
    @(negedge clk) rst_n = 1;
    check(sum == 0, "not zero after reset");
    for (int i = 0; i < 500; i++) begin
      int base;
      base = $urandom_range(0, 7) * LOAD_W;
      // replace LOAD_W rows: add the new values, subtract the ones replaced
      for (int k = 0; k < LOAD_W; k++) begin
        sub_val[k] = act_t'(rows[base + k]);
        rows[base + k] = $urandom_range(0, 255);
        add_val[k] = act_t'(rows[base + k]);
      end
      upd = 1;
      if (i % 97 == 50) begin clr = 1; end
      @(negedge clk);
      upd = 0;
      if (clr) begin
        for (int r = 0; r < 32; r++) rows[r] = 0;
        clr = 0;
      end
      mdl = 0;
      for (int r = 0; r < 32; r++) mdl += rows[r];
      check(int'(sum) == mdl, $sformatf("sum %0d expected %0d", sum, mdl));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
