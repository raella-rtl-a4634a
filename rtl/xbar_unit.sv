// xbar_unit: one RAELLA crossbar with its drivers, converters and psum logic.
//
// Contents: a row input register (one 8b activation per row), the
// pulse-train DACs, the 2T2R crossbar (behavioural), NUM_ADC 7b ADCs that
// share the COLS columns, and the psum unit (shift+add, 768B psum buffer,
// speculation flags).
//
// Operation: `start` runs one dot product of the stored input vector with
// every weight filter of the crossbar, using Dynamic Input Slicing: eleven
// input slices (speculate bits 3..0, recover bits 0..3, speculate 5..4,
// recover 4, 5, speculate 7..6, recover 6, 7). The crossbar cycle is a
// two-stage pipeline: while the DACs drive slice t into the crossbar, the
// ADCs convert the held column sums of slice t-1. An operation therefore
// takes 12 crossbar cycles (11 slices plus one pipeline fill).
//
// Timing: one clock is one ADC conversion slot. A crossbar cycle is
// CYC = max(COLS/NUM_ADC, 30) + 2 clocks: the column sweep (128 clocks at
// full size, the paper's 100ns ADC stage) plus two clocks of ADC and
// accumulate latency; the DAC stage (30 clocks) hides under it. `done`
// pulses 12*CYC clocks after `start`; psums are then read through rd_addr
// (one clock latency) until the next `start`.
// Input loading (in_we) writes LOAD_W consecutive rows per clock and returns
// the values being replaced on in_old, so the IMA can keep a running input
// sum. Loading and programming must not overlap a run.
module xbar_unit
  import raella_pkg::*;
#(
  parameter int unsigned ROWS    = 512,
  parameter int unsigned COLS    = 512,
  parameter int unsigned NUM_ADC = 4,
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned PSUM_W  = 16,
  parameter int unsigned LOAD_W  = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // programming
  input  logic                       prog_en,
  input  logic [$clog2(ROWS)-1:0]    prog_row,
  input  dev_t                       prog_wp [COLS],
  input  dev_t                       prog_wn [COLS],
  input  logic                       cfg_we,
  input  wslicing_t                  cfg_wslicing,
  // input vector loading
  input  logic                       in_we,
  input  logic [$clog2(ROWS)-1:0]    in_row,
  input  act_t                       in_data [LOAD_W],
  output act_t                       in_old  [LOAD_W],
  // run
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  // psum read
  input  logic [$clog2(ENTRIES)-1:0] rd_addr,
  output logic signed [PSUM_W-1:0]   rd_psum,
  output logic [MAX_WSL-1:0]         rd_flags,
  // per-operation statistics (valid after done)
  output logic [15:0]                stat_spec_fail,
  output logic [15:0]                stat_rec_conv
);

  localparam int unsigned GROUPS = COLS / NUM_ADC;
  localparam int unsigned CYC    = ((GROUPS > DAC_TICKS) ? GROUPS : DAC_TICKS) + 2;
  localparam int unsigned N_CYC  = N_SLOTS + 1;

  // ---------------------------------------------------------------- inputs
  act_t      in_reg [ROWS];
  wslicing_t wcfg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) in_reg[r] <= '0;
      wcfg <= '{n_slices: 4'd2, lsb: '0};
    end else begin
      if (in_we)
        for (int i = 0; i < LOAD_W; i++)
          if (int'(in_row) + i < ROWS) in_reg[int'(in_row) + i] <= in_data[i];
      if (cfg_we) wcfg <= cfg_wslicing;
    end
  end

  always_comb
    for (int i = 0; i < LOAD_W; i++)
      in_old[i] = (int'(in_row) + i < ROWS) ? in_reg[int'(in_row) + i] : '0;

  // ------------------------------------------------------------ sequencer
  logic [3:0]                cyc_idx;  // crossbar cycle 0..11
  logic [$clog2(CYC)-1:0]    clk_idx;  // clock within the crossbar cycle
  logic                      running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      cyc_idx <= '0;
      clk_idx <= '0;
    end else if (start && !running) begin
      running <= 1'b1;
      cyc_idx <= '0;
      clk_idx <= '0;
    end else if (running) begin
      if (clk_idx == $clog2(CYC)'(CYC - 1)) begin
        clk_idx <= '0;
        if (cyc_idx == 4'(N_CYC - 1)) running <= 1'b0;
        else cyc_idx <= cyc_idx + 4'd1;
      end else begin
        clk_idx <= clk_idx + 1'b1;
      end
    end
  end

  assign busy = running;
  assign done = running && (cyc_idx == 4'(N_CYC - 1)) && (clk_idx == $clog2(CYC)'(CYC - 1));

  // Slice driven by the DACs in this crossbar cycle and slice being converted.
  in_slice_t dac_slice, adc_slice;
  assign dac_slice = slot_slice(int'(cyc_idx));
  assign adc_slice = slot_slice(int'(cyc_idx) - 1);

  logic cyc_start;
  assign cyc_start = running && (clk_idx == '0);

  // ------------------------------------------------------------ DAC + array
  dev_t            dac_in [ROWS];
  logic [ROWS-1:0] pulse;
  logic            dac_busy, dac_done;

  always_comb
    for (int r = 0; r < ROWS; r++)
      dac_in[r] = take_slice(in_reg[r], dac_slice.lsb, dac_slice.width);

  pulse_train_dac #(.ROWS(ROWS)) u_dac (
    .clk, .rst_n,
    .start (cyc_start && (cyc_idx < 4'(N_SLOTS))),
    .slice (dac_in),
    .pulse, .busy(dac_busy), .done(dac_done)
  );

  int col_sum [COLS];
  crossbar_2t2r #(.ROWS(ROWS), .COLS(COLS)) u_xbar (
    .clk, .prog_en, .prog_row, .prog_wp, .prog_wn,
    .pulse, .sample(cyc_start), .col_sum
  );

  // ------------------------------------------------------------- ADC sweep
  // The sample at cycle 0 only clears the integrators; the held sums of
  // cycle t (t >= 1) belong to slice t-1.
  // Group g of the sweep is requested at clock g+1 of the cycle (the held
  // sums are valid from clock 1).
  logic                         req_valid, req_first;
  logic [$clog2(GROUPS+1)-1:0]  grp;
  assign grp       = ($clog2(GROUPS+1))'(clk_idx - 1'b1);
  assign req_valid = running && (cyc_idx != '0) && (clk_idx >= 1) &&
                     (clk_idx <= $clog2(CYC)'(GROUPS));
  assign req_first = req_valid && (clk_idx == 1);

  logic [NUM_ADC-1:0] adc_en, adc_valid;
  adc_code_t          code [NUM_ADC];
  for (genvar l = 0; l < NUM_ADC; l++) begin : g_adc
    int vin;
    assign vin = (int'(grp) < GROUPS) ? col_sum[int'(grp) * NUM_ADC + l] : 0;
    adc_7b u_adc (.clk, .en(adc_en[l]), .vin, .code(code[l]), .valid(adc_valid[l]));
  end

  logic code_valid;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) code_valid <= 1'b0;
    else        code_valid <= req_valid;

  logic [$clog2(NUM_ADC+1)-1:0] ev_spec_fail, ev_rec_conv;

  psum_unit #(.COLS(COLS), .NUM_ADC(NUM_ADC), .ENTRIES(ENTRIES), .PSUM_W(PSUM_W)) u_psum (
    .clk, .rst_n,
    .clear     (start && !running),
    .wcfg,
    .req_valid, .req_first, .req_slice(adc_slice), .adc_en,
    .code_valid, .code,
    .rd_addr, .rd_psum, .rd_flags,
    .ev_spec_fail, .ev_rec_conv
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_spec_fail <= '0;
      stat_rec_conv  <= '0;
    end else if (start && !running) begin
      stat_spec_fail <= '0;
      stat_rec_conv  <= '0;
    end else begin
      stat_spec_fail <= stat_spec_fail + 16'(ev_spec_fail);
      stat_rec_conv  <= stat_rec_conv  + 16'(ev_rec_conv);
    end
  end

  // The DAC stage must finish inside one crossbar cycle.
  assert property (@(posedge clk) disable iff (!rst_n) cyc_start |-> !dac_busy)
    else $error("xbar_unit: DAC stage overran the crossbar cycle");
  assert property (@(posedge clk) disable iff (!rst_n) running |-> !(in_we || prog_en))
    else $error("xbar_unit: load or program during a run");

endmodule
