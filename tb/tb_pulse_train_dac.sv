// tb_pulse_train_dac: checks that every row emits exactly as many pulses as
// its slice value, that pulses are one clock wide with a gap, that a
// conversion takes 30 clocks, and that the MSB is sent first.
module tb_pulse_train_dac;
  import raella_pkg::*;
  localparam int ROWS = 8;
  logic clk = 0, rst_n = 0, start = 0;
  dev_t slice [ROWS];
  logic [ROWS-1:0] pulse;
  logic busy, done;
  int checks = 0, failures = 0;

  pulse_train_dac #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt [ROWS];
    int first_pulse [ROWS];
    int cycles;
    for (int r = 0; r < ROWS; r++) slice[r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      for (int r = 0; r < ROWS; r++) begin
        slice[r] = dev_t'($urandom_range(0, 15));
        cnt[r] = 0;
        first_pulse[r] = -1;
      end
      if (trial == 0) for (int r = 0; r < ROWS; r++) slice[r] = dev_t'(r * 2 + (r > 3 ? 0 : 1));
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cycles = 0;
      while (busy) begin
        for (int r = 0; r < ROWS; r++)
          if (pulse[r]) begin
            cnt[r]++;
            if (first_pulse[r] < 0) first_pulse[r] = cycles;
          end
        check(!(pulse != 0 && cycles % 2 == 1), "pulse on an odd tick");
        if (done) check(cycles == 29, $sformatf("done at tick %0d", cycles));
        cycles++;
        @(negedge clk);
      end
      check(cycles == 30, $sformatf("conversion took %0d clocks", cycles));
      for (int r = 0; r < ROWS; r++) begin
        check(cnt[r] == int'(slice[r]), $sformatf("row %0d: %0d pulses for %0d", r, cnt[r], slice[r]));
        // MSB first: a value with bit 3 set pulses at tick 0.
        if (slice[r][3]) check(first_pulse[r] == 0, "bit 3 not sent first");
        else if (slice[r][2]) check(first_pulse[r] == 16, "bit 2 not at tick 16");
      end
      check(pulse == '0, "pulses after the conversion");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
