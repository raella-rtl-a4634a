// tb_ima: programs two crossbars of a reduced-size IMA with different
// Center+Offset encoded weights (4b-4b and 4b-2b-2b slicings), writes the
// input buffer, multicasts one feed to both crossbars, runs them together
// and checks every corrected psum (offset psum + center * input sum)
// against the exact reference. A second feed replaces part of the inputs of
// crossbar 1 only, exercising the running input sum's subtract path.
module tb_ima;
  import raella_pkg::*;
  import raella_ref_pkg::*;
  localparam int ROWS = 32, COLS = 16, ENTRIES = 8, LOAD_W = 4, IBB = 128;
  localparam int CYC = 32;

  logic clk = 0, rst_n = 0;
  logic prog_en = 0, cfg_we = 0, c_we = 0, ib_we = 0, feed_start = 0, run_start = 0, rd_valid = 0;
  logic [1:0] prog_xbar = '0, cfg_xbar = '0, c_xbar = '0, rd_xbar = '0;
  logic [$clog2(ROWS)-1:0] prog_row = '0, feed_row = '0;
  dev_t prog_wp [COLS], prog_wn [COLS];
  wslicing_t cfg_wslicing;
  logic [2:0] c_addr = '0, rd_filter = '0;
  logic [7:0] c_val = '0;
  logic [4:0] ib_waddr = '0, feed_src = '0;
  act_t ib_wdata [LOAD_W];
  logic [3:0] feed_mask = '0, run_mask = '0, xbar_busy;
  logic [5:0] feed_lines = '0;
  logic feed_busy, out_valid;
  logic signed [15:0] out_psum;
  logic [15:0] stat_spec_fail, stat_rec_conv;

  ima #(.NUM_XBAR(4), .ROWS(ROWS), .COLS(COLS), .NUM_ADC(4), .ENTRIES(ENTRIES), .PSUM_W(16),
        .LOAD_W(LOAD_W), .IB_BYTES(IBB)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
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

  int wt [2][ENTRIES][ROWS], phi [2][ENTRIES], inp [2][ROWS];
  int nsl [2] = '{2, 3};
  int hi_t [2][3] = '{'{7, 3, 0}, '{7, 3, 1}};
  int lo_t [2][3] = '{'{4, 0, 0}, '{4, 2, 0}};

  task automatic check_xbar(int x);
    int sum_i, nf, nr;
    sum_i = 0; nf = 0; nr = 0;
    for (int r = 0; r < ROWS; r++) sum_i += inp[x][r];
    for (int f = 0; f < COLS / nsl[x] && f < ENTRIES; f++) begin
      int acc;
      acc = phi[x][f] * sum_i;
      for (int k = 0; k < nsl[x]; k++) begin
        int cs [11];
        for (int s = 0; s < 11; s++) begin
          cs[s] = 0;
          for (int r = 0; r < ROWS; r++) begin
            int wp, wn;
            offset_slice(wt[x][f][r], phi[x][f], hi_t[x][k], lo_t[x][k], wp, wn);
            cs[s] += in_slice(inp[x][r], s) * (wp - wn);
          end
        end
        acc += col_contrib(cs, lo_t[x][k], nf, nr);
      end
      rd_xbar = 2'(x); rd_filter = 3'(f); rd_valid = 1;
      @(negedge clk) rd_valid = 0;
      @(negedge clk);
      check(out_valid && int'(out_psum) == wrap16(acc),
            $sformatf("xbar %0d filter %0d: %0d expected %0d", x, f, out_psum, wrap16(acc)));
    end
  endtask

  initial begin
    int lat;
    for (int c = 0; c < COLS; c++) begin prog_wp[c] = '0; prog_wn[c] = '0; end
    for (int b = 0; b < LOAD_W; b++) ib_wdata[b] = '0;
    cfg_wslicing = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int x = 0; x < 2; x++) begin
      cfg_xbar = 2'(x);
      cfg_wslicing.n_slices = 4'(nsl[x]);
      for (int k = 0; k < 8; k++) cfg_wslicing.lsb[k] = 3'(k < nsl[x] ? lo_t[x][k] : 0);
      @(negedge clk) cfg_we = 1;
      @(negedge clk) cfg_we = 0;
      for (int f = 0; f < ENTRIES; f++) begin
        int m;
        m = $urandom_range(40, 220);
        for (int r = 0; r < ROWS; r++) wt[x][f][r] = m + int'($urandom_range(0, 30)) - 15;
        phi[x][f] = m;
        c_xbar = 2'(x); c_addr = 3'(f); c_val = 8'(m);
        @(negedge clk) c_we = 1;
        @(negedge clk) c_we = 0;
      end
      for (int r = 0; r < ROWS; r++) begin
        for (int c = 0; c < COLS; c++) begin
          int f, k, wp, wn;
          f = c / nsl[x]; k = c % nsl[x]; wp = 0; wn = 0;
          if (f < ENTRIES) offset_slice(wt[x][f][r], phi[x][f], hi_t[x][k], lo_t[x][k], wp, wn);
          prog_wp[c] = dev_t'(wp); prog_wn[c] = dev_t'(wn);
        end
        prog_xbar = 2'(x); prog_row = 5'(r);
        @(negedge clk) prog_en = 1;
        @(negedge clk) prog_en = 0;
      end
    end
    // input buffer: lines 0..7 = vector A, lines 8..9 = replacement block
    for (int l = 0; l < 10; l++) begin
      for (int b = 0; b < LOAD_W; b++) begin
        int v;
        v = $urandom_range(0, 255) >> $urandom_range(0, 3);
        ib_wdata[b] = act_t'(v);
        if (l < 8) begin inp[0][l * LOAD_W + b] = v; inp[1][l * LOAD_W + b] = v; end
        else inp[1][(l - 8) * LOAD_W + b] = v;    // applied later to xbar 1 only
      end
      ib_waddr = 5'(l);
      @(negedge clk) ib_we = 1;
      @(negedge clk) ib_we = 0;
    end
    // multicast feed of vector A to crossbars 0 and 1
    feed_mask = 4'b0011; feed_src = 5'd0; feed_row = '0; feed_lines = 6'd8;
    @(negedge clk) feed_start = 1;
    @(negedge clk) feed_start = 0;
    lat = 1;
    while (feed_busy) begin @(negedge clk); lat++; end
    check(lat == 10, $sformatf("feed took %0d clocks", lat));
    // xbar 1 gets the replacement block in a second feed
    feed_mask = 4'b0010; feed_src = 5'd8; feed_row = '0; feed_lines = 6'd2;
    @(negedge clk) feed_start = 1;
    @(negedge clk) feed_start = 0;
    while (feed_busy) @(negedge clk);
    run_mask = 4'b0011;
    @(negedge clk) run_start = 1;
    @(negedge clk) run_start = 0;
    lat = 1;
    while (xbar_busy != 0) begin @(negedge clk); lat++; end
    check(lat == 12 * CYC + 1, $sformatf("run took %0d clocks", lat));
    check_xbar(0);
    check_xbar(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
