// psum_unit: shift+add, psum buffer and speculation flags of one crossbar.
//
// The ADCs sweep the columns NUM_ADC at a time, in column order. Column c
// holds weight slice k of weight filter f, counted with the layer's weight
// slicing: filter f owns columns f*n .. f*n+n-1 for n slices per weight.
// Each ADC code is shifted left by (LSB of weight slice k + LSB of the input
// slice) and added into the 16b psum of filter f.
//
// Speculation: in a speculative slot every column is converted. A code equal
// to -64 or 63 means the ADC saturated: the psum is left unchanged and the
// filter's flag bit k is set (speculation failed). Otherwise flag bit k is
// cleared and the code is added. In a recovery slot only columns whose flag
// is set are converted (the others' ADCs are power-gated via `adc_en`);
// their codes are added even if saturated again (accepted fidelity loss).
//
// Buffer: ENTRIES entries of PSUM_W-bit psum + MAX_WSL flag bits (256 x 24b
// = 768B). `clear` zeroes it at the start of an operation; psums wrap
// modulo 2^PSUM_W.
//
// Timing: request stage (req_*) gives the column group and slot; `adc_en`
// answers in the same clock; codes arrive one clock later (code_valid) and
// are accumulated on the following edge. Read port: one clock latency.
// The rules above follow the paper; the flag polarity (1 = failed), the
// column-to-filter order and the wrap-around are this design's choices.
module psum_unit
  import raella_pkg::*;
#(
  parameter int unsigned COLS    = 512,
  parameter int unsigned NUM_ADC = 4,
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned PSUM_W  = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  wslicing_t                  wcfg,
  // request stage
  input  logic                       req_valid,
  input  logic                       req_first,   // first group of a sweep
  input  in_slice_t                  req_slice,
  output logic [NUM_ADC-1:0]         adc_en,
  // code stage (one clock after the request)
  input  logic                       code_valid,
  input  adc_code_t                  code [NUM_ADC],
  // read port
  input  logic [$clog2(ENTRIES)-1:0] rd_addr,
  output logic signed [PSUM_W-1:0]   rd_psum,
  output logic [MAX_WSL-1:0]         rd_flags,
  // events of the clock's code stage
  output logic [$clog2(NUM_ADC+1)-1:0] ev_spec_fail,
  output logic [$clog2(NUM_ADC+1)-1:0] ev_rec_conv
);

  localparam int unsigned FW = $clog2(COLS) + 1;

  logic signed [PSUM_W-1:0] psum  [ENTRIES];
  logic [MAX_WSL-1:0]       flags [ENTRIES];

  // Column -> (filter, slice) counters for lane 0 of the next group.
  logic [FW-1:0] f_next;
  logic [3:0]    k_next;
  logic [FW-1:0] f_lane [NUM_ADC];
  logic [3:0]    k_lane [NUM_ADC];
  logic [FW-1:0] f_after;
  logic [3:0]    k_after;

  always_comb begin
    logic [FW-1:0] f;
    logic [3:0]    k;
    f = req_first ? '0 : f_next;
    k = req_first ? '0 : k_next;
    for (int l = 0; l < NUM_ADC; l++) begin
      f_lane[l] = f;
      k_lane[l] = k;
      if (k + 4'd1 >= wcfg.n_slices) begin
        k = '0;
        f = f + FW'(1);
      end else begin
        k = k + 4'd1;
      end
    end
    f_after = f;
    k_after = k;
  end

  always_comb begin
    for (int l = 0; l < NUM_ADC; l++) begin
      if (!req_valid || f_lane[l] >= FW'(ENTRIES)) adc_en[l] = 1'b0;
      else if (req_slice.spec) adc_en[l] = 1'b1;
      else adc_en[l] = flags[f_lane[l][$clog2(ENTRIES)-1:0]][k_lane[l][2:0]];
    end
  end

  // Code stage registers.
  logic [$clog2(ENTRIES)-1:0] f_b [NUM_ADC];
  logic [2:0]                 k_b [NUM_ADC];
  logic [NUM_ADC-1:0]         en_b;
  in_slice_t                  slice_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_next  <= '0;
      k_next  <= '0;
      en_b    <= '0;
      slice_b <= '0;
      for (int l = 0; l < NUM_ADC; l++) begin
        f_b[l] <= '0;
        k_b[l] <= '0;
      end
    end else begin
      en_b <= adc_en;
      if (req_valid) begin
        f_next  <= f_after;
        k_next  <= k_after;
        slice_b <= req_slice;
        for (int l = 0; l < NUM_ADC; l++) begin
          f_b[l] <= f_lane[l][$clog2(ENTRIES)-1:0];
          k_b[l] <= k_lane[l][2:0];
        end
      end
    end
  end

  // Per-lane decision and shifted contribution.
  logic [NUM_ADC-1:0]       sat, add;
  logic signed [PSUM_W-1:0] contrib [NUM_ADC];
  always_comb begin
    for (int l = 0; l < NUM_ADC; l++) begin
      logic [3:0] sh;
      sat[l] = (code[l] == adc_code_t'(ADC_MIN)) || (code[l] == adc_code_t'(ADC_MAX));
      add[l] = code_valid && en_b[l] && (slice_b.spec ? !sat[l] : 1'b1);
      sh     = {1'b0, wcfg.lsb[k_b[l]]} + {1'b0, slice_b.lsb};
      contrib[l] = PSUM_W'(signed'(code[l])) <<< sh;
    end
  end

  // Lanes that hit the same filter are merged before the write.
  logic [NUM_ADC-1:0]       lead;
  logic signed [PSUM_W-1:0] merged [NUM_ADC];
  always_comb begin
    for (int l = 0; l < NUM_ADC; l++) begin
      lead[l]   = 1'b1;
      merged[l] = '0;
      for (int m = 0; m < l; m++)
        if (f_b[m] == f_b[l]) lead[l] = 1'b0;
      for (int m = 0; m < NUM_ADC; m++)
        if (f_b[m] == f_b[l] && add[m]) merged[l] = merged[l] + contrib[m];
    end
  end

  always_ff @(posedge clk) begin
    if (clear) begin
      for (int e = 0; e < ENTRIES; e++) begin
        psum[e]  <= '0;
        flags[e] <= '0;
      end
    end else if (code_valid) begin
      for (int l = 0; l < NUM_ADC; l++) begin
        if (lead[l]) psum[f_b[l]] <= psum[f_b[l]] + merged[l];
        if (en_b[l] && slice_b.spec) flags[f_b[l]][k_b[l]] <= sat[l];
      end
    end
    rd_psum  <= psum[rd_addr];
    rd_flags <= flags[rd_addr];
  end

  always_comb begin
    ev_spec_fail = '0;
    ev_rec_conv  = '0;
    for (int l = 0; l < NUM_ADC; l++) begin
      if (code_valid && en_b[l] &&  slice_b.spec && sat[l]) ev_spec_fail = ev_spec_fail + 1'b1;
      if (code_valid && en_b[l] && !slice_b.spec)           ev_rec_conv  = ev_rec_conv + 1'b1;
    end
  end


  // A group must never be requested while the buffer is being cleared.
  assert property (@(posedge clk) disable iff (!rst_n) clear |-> !code_valid)
    else $error("psum_unit: clear during accumulation");


endmodule
