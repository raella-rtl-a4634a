// tb_xbar_unit: programs a small crossbar with random 2T2R levels and a
// random weight slicing, loads random inputs, runs speculation + recovery
// and checks every psum against an exact reference (column sums per input
// slice, 7b saturation, speculation/recovery rules, shift+add). Also checks
// the operation latency (12 crossbar cycles), the in_old values returned
// while loading, and that both speculation outcomes occur.
module tb_xbar_unit;
  import raella_pkg::*;
  import raella_ref_pkg::*;
  localparam int ROWS = 32, COLS = 16, NUM_ADC = 4, ENTRIES = 8, LOAD_W = 4;
  localparam int CYC = 32;     // max(COLS/NUM_ADC, 30) + 2

  logic clk = 0, rst_n = 0;
  logic prog_en = 0; logic [$clog2(ROWS)-1:0] prog_row = '0;
  dev_t prog_wp [COLS], prog_wn [COLS];
  logic cfg_we = 0; wslicing_t cfg_wslicing;
  logic in_we = 0; logic [$clog2(ROWS)-1:0] in_row = '0;
  act_t in_data [LOAD_W], in_old [LOAD_W];
  logic start = 0, busy, done;
  logic [$clog2(ENTRIES)-1:0] rd_addr = '0;
  logic signed [15:0] rd_psum;
  logic [MAX_WSL-1:0] rd_flags;
  logic [15:0] stat_spec_fail, stat_rec_conv;
  int checks = 0, failures = 0;

  xbar_unit #(.ROWS(ROWS), .COLS(COLS), .NUM_ADC(NUM_ADC), .ENTRIES(ENTRIES),
              .PSUM_W(16), .LOAD_W(LOAD_W)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wp [ROWS][COLS], wn [ROWS][COLS], inp [ROWS];
  int tot_fail = 0, tot_clean = 0;

  initial begin
    int n, wl [8], exp_psum [ENTRIES], nf, nr, lat;
    for (int c = 0; c < COLS; c++) begin prog_wp[c] = '0; prog_wn[c] = '0; end
    for (int i = 0; i < LOAD_W; i++) in_data[i] = '0;
    cfg_wslicing = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 12; trial++) begin
      int maxlev;
      // slicing: alternate 4b-2b-2b, 4b-4b and 2b x4
      case (trial % 3)
        0: begin n = 3; wl[0] = 4; wl[1] = 2; wl[2] = 0; end
        1: begin n = 2; wl[0] = 4; wl[1] = 0; end
        default: begin n = 4; wl[0] = 6; wl[1] = 4; wl[2] = 2; wl[3] = 0; end
      endcase
      cfg_wslicing.n_slices = 4'(n);
      for (int k = 0; k < 8; k++) cfg_wslicing.lsb[k] = 3'(k < n ? wl[k] : 0);
      @(negedge clk) cfg_we = 1;
      @(negedge clk) cfg_we = 0;
      maxlev = (trial < 4) ? 1 : (trial < 8) ? 3 : 15;
      for (int r = 0; r < ROWS; r++) begin
        for (int c = 0; c < COLS; c++) begin
          int v; bit ng;
          v = $urandom_range(0, maxlev); ng = $urandom_range(0, 1);
          wp[r][c] = ng ? 0 : v; wn[r][c] = ng ? v : 0;
          prog_wp[c] = dev_t'(wp[r][c]); prog_wn[c] = dev_t'(wn[r][c]);
        end
        prog_row = r[$clog2(ROWS)-1:0];
        @(negedge clk) prog_en = 1;
        @(negedge clk) prog_en = 0;
      end
      // load inputs, checking the old values returned
      for (int r0 = 0; r0 < ROWS; r0 += LOAD_W) begin
        in_row = r0[$clog2(ROWS)-1:0];
        #1;
        for (int i = 0; i < LOAD_W; i++)
          check(trial == 0 || int'(in_old[i]) == inp[r0 + i], "in_old mismatch");
        for (int i = 0; i < LOAD_W; i++) begin
          inp[r0 + i] = (trial < 4) ? $urandom_range(0, 3) :
                        (i % 2 == 0) ? $urandom_range(0, 255) : $urandom_range(0, 31);
          in_data[i] = act_t'(inp[r0 + i]);
        end
        @(negedge clk) in_we = 1;
        @(negedge clk) in_we = 0;
      end
      // reference
      for (int e = 0; e < ENTRIES; e++) exp_psum[e] = 0;
      nf = 0; nr = 0;
      for (int c = 0; c < COLS; c++) begin
        int cs [11];
        int f, k;
        for (int s = 0; s < 11; s++) begin
          cs[s] = 0;
          for (int r = 0; r < ROWS; r++) cs[s] += in_slice(inp[r], s) * (wp[r][c] - wn[r][c]);
        end
        f = c / n; k = c % n;
        if (f < ENTRIES) exp_psum[f] += col_contrib(cs, wl[k], nf, nr);
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      check(lat == 12 * CYC, $sformatf("latency %0d expected %0d", lat, 12 * CYC));
      @(negedge clk);
      check(!busy, "busy after done");
      for (int e = 0; e < ENTRIES; e++) begin
        rd_addr = e[$clog2(ENTRIES)-1:0];
        @(negedge clk);
        check(int'(rd_psum) == wrap16(exp_psum[e]),
              $sformatf("trial %0d psum[%0d]=%0d expected %0d", trial, e, rd_psum, wrap16(exp_psum[e])));
      end
      check(int'(stat_spec_fail) == nf, $sformatf("spec fails %0d expected %0d", stat_spec_fail, nf));
      check(int'(stat_rec_conv) == nr, $sformatf("recovery converts %0d expected %0d", stat_rec_conv, nr));
      if (nf > 0) tot_fail++; else tot_clean++;
    end
    check(tot_fail > 0, "no run had a failed speculation");
    check(tot_clean > 0, "no run was free of failed speculations");
    $display("runs with failed speculation: %0d, without: %0d", tot_fail, tot_clean);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
