// tb_crossbar_2t2r: programs random 2T2R levels, drives random pulse
// patterns, and checks every held column sum against
// sum(pulses * (w+ - w-)); also checks that `sample` clears the integrators.
module tb_crossbar_2t2r;
  import raella_pkg::*;
  localparam int ROWS = 16, COLS = 8;
  logic clk = 0;
  logic prog_en = 0;
  logic [$clog2(ROWS)-1:0] prog_row = '0;
  dev_t prog_wp [COLS], prog_wn [COLS];
  logic [ROWS-1:0] pulse = '0;
  logic sample = 0;
  int col_sum [COLS];
  int checks = 0, failures = 0;
  int wp [ROWS][COLS], wn [ROWS][COLS];

  crossbar_2t2r #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_sum [COLS];
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        int v;
        bit neg;
        v = $urandom_range(0, 15);
        neg = 1'($urandom_range(0, 1));
        wp[r][c] = neg ? 0 : v;
        wn[r][c] = neg ? v : 0;
        prog_wp[c] = dev_t'(wp[r][c]);
        prog_wn[c] = dev_t'(wn[r][c]);
      end
      prog_row = r[$clog2(ROWS)-1:0];
      @(negedge clk) prog_en = 1;
      @(negedge clk) prog_en = 0;
    end
    @(negedge clk) sample = 1;   // clear the integrators
    @(negedge clk) sample = 0;
    for (int trial = 0; trial < 30; trial++) begin
      for (int c = 0; c < COLS; c++) exp_sum[c] = 0;
      for (int t = 0; t < 15; t++) begin
        pulse = ROWS'($urandom());
        for (int r = 0; r < ROWS; r++)
          if (pulse[r]) for (int c = 0; c < COLS; c++) exp_sum[c] += wp[r][c] - wn[r][c];
        @(negedge clk);
        pulse = '0;
        @(negedge clk);
      end
      sample = 1;
      @(negedge clk) sample = 0;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (col_sum[c] != exp_sum[c]) begin
          failures++;
          $display("FAIL trial %0d col %0d: %0d expected %0d", trial, c, col_sum[c], exp_sum[c]);
        end
      end
    end
    // With no pulses the next sample must read zero.
    @(negedge clk) sample = 1;
    @(negedge clk) sample = 0;
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if (col_sum[c] != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
