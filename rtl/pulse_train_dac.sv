// pulse_train_dac: the 4b pulse-train DACs that drive the crossbar rows.
//
// Each row has a 1b flip-flop and an AND gate; one global sequencer shared
// by all rows loads the rows' input-slice bits one at a time, most
// significant first, and gates the global pulse clock with each flip-flop.
// Bit 3 is held for eight pulses, bit 2 for four, bit 1 for two and bit 0 for
// one, so a row emits as many pulses as the value of its slice (0..15).
// A slice narrower than 4b is presented zero-extended (it uses the lowest
// 2^N-1 levels), so the sequence always takes the full time.
//
// Timing: one clock is one 1ns pulse slot; a pulse is one clock high and one
// clock low, so a conversion lasts DAC_TICKS = 30 clocks. `start` loads bit 3
// into the flip-flops; pulses appear in the 30 clocks that follow, `done`
// pulses in the last of them. `slice` must stay stable while `busy`.
// The FF+AND structure and the 8/4/2/1 pulse counts follow the paper; the
// start/busy/done handshake is this design's choice.
module pulse_train_dac
  import raella_pkg::*;
#(
  parameter int unsigned ROWS = 512
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  dev_t            slice [ROWS],
  output logic [ROWS-1:0] pulse,
  output logic            busy,
  output logic            done
);

  logic [4:0]      tick;      // 0..29 within the conversion
  logic [1:0]      bit_sel;   // bit held in the row flip-flops
  logic [ROWS-1:0] row_ff;    // the per-row 1b flip-flops

  // Next bit to load at the end of each pulse group.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      tick    <= '0;
      bit_sel <= 2'd3;
      row_ff  <= '0;
    end else if (start) begin
      busy    <= 1'b1;
      tick    <= '0;
      bit_sel <= 2'd3;
      for (int r = 0; r < ROWS; r++) row_ff[r] <= slice[r][3];
    end else if (busy) begin
      tick <= tick + 5'd1;
      // Groups: ticks 0-15 bit 3, 16-23 bit 2, 24-27 bit 1, 28-29 bit 0.
      if (tick == 5'd15 || tick == 5'd23 || tick == 5'd27) begin
        bit_sel <= bit_sel - 2'd1;
        for (int r = 0; r < ROWS; r++) row_ff[r] <= slice[r][bit_sel - 2'd1];
      end
      if (tick == 5'(DAC_TICKS - 1)) busy <= 1'b0;
    end
  end

  // Global pulse clock: high on even ticks while converting.
  logic pclk;
  assign pclk = busy & ~tick[0];
  // Per-row AND gate.
  assign pulse = row_ff & {ROWS{pclk}};
  assign done  = busy && (tick == 5'(DAC_TICKS - 1));

endmodule
