// tb_psum_unit: drives column sweeps of all eleven input slots with random
// ADC codes (saturated ones included) under random weight slicings, and
// checks psums, speculation flags, ADC power gating and the event counts
// against a column-by-column reference.
module tb_psum_unit;
  import raella_pkg::*;
  import raella_ref_pkg::*;
  localparam int COLS = 24, NUM_ADC = 4, ENTRIES = 16, PSUM_W = 16;
  localparam int GROUPS = COLS / NUM_ADC;

  logic clk = 0, rst_n = 0, clear = 0;
  wslicing_t wcfg;
  logic req_valid = 0, req_first = 0;
  in_slice_t req_slice;
  logic [NUM_ADC-1:0] adc_en;
  logic code_valid = 0;
  adc_code_t code [NUM_ADC];
  logic [$clog2(ENTRIES)-1:0] rd_addr = '0;
  logic signed [PSUM_W-1:0] rd_psum;
  logic [MAX_WSL-1:0] rd_flags;
  logic [$clog2(NUM_ADC+1)-1:0] ev_spec_fail, ev_rec_conv;
  int checks = 0, failures = 0;

  psum_unit #(.COLS(COLS), .NUM_ADC(NUM_ADC), .ENTRIES(ENTRIES), .PSUM_W(PSUM_W)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ev_fail_seen = 0, ev_rec_seen = 0;
  always @(posedge clk) begin
    ev_fail_seen += int'(ev_spec_fail);
    ev_rec_seen  += int'(ev_rec_conv);
  end

  initial begin
    int cs [COLS][11];
    int n, wl [8];
    int exp_psum [ENTRIES];
    bit failed [COLS];
    int nf, nr;
    for (int l = 0; l < NUM_ADC; l++) code[l] = '0;
    req_slice = '0;
    wcfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 60; trial++) begin
      int bits_left;
      // Random slicing of 8 bits into n slices of 1..4 bits, MSB slice first.
      n = 0; bits_left = 8;
      while (bits_left > 0) begin
        int w;
        w = $urandom_range(1, (bits_left < 4) ? bits_left : 4);
        bits_left -= w;
        wl[n] = bits_left;
        n++;
      end
      if (trial == 0) begin n = 8; for (int k = 0; k < 8; k++) wl[k] = 7 - k; end
      wcfg.n_slices = 4'(n);
      for (int k = 0; k < 8; k++) wcfg.lsb[k] = 3'(k < n ? wl[k] : 0);
      for (int c = 0; c < COLS; c++)
        for (int s = 0; s < 11; s++)
          cs[c][s] = ($urandom_range(0, 9) == 0) ? int'($urandom_range(0, 400)) - 200
                                                 : int'($urandom_range(0, 100)) - 50;
      // Reference.
      for (int e = 0; e < ENTRIES; e++) exp_psum[e] = 0;
      nf = 0; nr = 0;
      for (int c = 0; c < COLS; c++) begin
        int f, k, v;
        f = c / n; k = c % n;
        v = col_contrib(cs[c], wl[k], nf, nr);
        if (f < ENTRIES) exp_psum[f] += v;
      end
      ev_fail_seen = 0; ev_rec_seen = 0;
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      for (int s = 0; s < 11; s++) begin
        req_slice.spec  = slot_spec(s);
        req_slice.lsb   = 3'(slot_lsb(s));
        req_slice.width = 3'(slot_width(s));
        if (slot_spec(s)) for (int c = 0; c < COLS; c++) failed[c] = 0;
        for (int g = 0; g < GROUPS; g++) begin
          req_valid = 1;
          req_first = (g == 0);
          #1;
          for (int l = 0; l < NUM_ADC; l++) begin
            int c;
            bit exp_en;
            c = g * NUM_ADC + l;
            exp_en = (c / n < ENTRIES) && (slot_spec(s) ||
                     (clamp7(cs[c][slot_group(s)]) == 63 || clamp7(cs[c][slot_group(s)]) == -64));
            check(adc_en[l] == exp_en, $sformatf("adc_en slot %0d col %0d", s, c));
          end
          @(negedge clk);
          req_valid = 0;
          code_valid = 1;
          for (int l = 0; l < NUM_ADC; l++) code[l] = adc_code_t'(clamp7(cs[g * NUM_ADC + l][s]));
          @(negedge clk);
          code_valid = 0;
          req_valid = 0;
        end
      end
      for (int e = 0; e < ENTRIES; e++) begin
        rd_addr = e[$clog2(ENTRIES)-1:0];
        @(negedge clk);
        check(int'(rd_psum) == wrap16(exp_psum[e]),
              $sformatf("trial %0d n=%0d psum[%0d]=%0d expected %0d", trial, n, e, rd_psum, wrap16(exp_psum[e])));
      end
      check(ev_fail_seen == nf, $sformatf("spec fails %0d expected %0d", ev_fail_seen, nf));
      check(ev_rec_seen == nr, $sformatf("recovery converts %0d expected %0d", ev_rec_seen, nr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
