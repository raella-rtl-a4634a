// crossbar_2t2r: behavioural model of a ROWS x COLS 2T2R ReRAM crossbar with
// its column current buffers and sample+hold circuits (analog, not
// synthesizable as such).
//
// Every cell holds two 4b conductance levels: w+ in the ReRAM tied to +Vread
// and w- in the ReRAM tied to -Vread (Center+Offset encoding programs one of
// them to zero). A DAC pulse on a row makes every cell of the row add w+ and
// subtract w- from its column, so a column integrates
// sum_rows(pulses * (w+ - w-)) = (W+ - W-) * I for the input slice.
// `sample` copies the integrated sums into the hold stage (`col_sum`) and
// clears the integrators for the next slice.
//
// Interface: programming is one row per clock (prog_en, prog_row and the
// w+/w- levels of all columns); pulses come from pulse_train_dac.
// Analog column sums are carried as integers in units of one
// level x one pulse, i.e. the ADC's step. Noise, IR drop and device
// variation are not modelled. The row-wide programming port is this
// design's choice.
module crossbar_2t2r
  import raella_pkg::*;
#(
  parameter int unsigned ROWS = 512,
  parameter int unsigned COLS = 512
) (
  input  logic                    clk,
  input  logic                    prog_en,
  input  logic [$clog2(ROWS)-1:0] prog_row,
  input  dev_t                    prog_wp [COLS],
  input  dev_t                    prog_wn [COLS],
  input  logic [ROWS-1:0]         pulse,
  input  logic                    sample,
  output int                      col_sum [COLS]
);

  dev_t gp [ROWS][COLS];   // positive ReRAM levels
  dev_t gn [ROWS][COLS];   // negative ReRAM levels
  int   integ [COLS];      // charge integrated on each column

  always_ff @(posedge clk) begin
    if (prog_en) begin
      for (int c = 0; c < COLS; c++) begin
        gp[prog_row][c] <= prog_wp[c];
        gn[prog_row][c] <= prog_wn[c];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (sample) begin
      for (int c = 0; c < COLS; c++) begin
        col_sum[c] <= integ[c];
        integ[c]   <= 0;
      end
    end else if (|pulse) begin
      for (int c = 0; c < COLS; c++) begin
        int acc;
        acc = integ[c];
        for (int r = 0; r < ROWS; r++)
          if (pulse[r]) acc = acc + int'(gp[r][c]) - int'(gn[r][c]);
        integ[c] <= acc;
      end
    end
  end

endmodule
