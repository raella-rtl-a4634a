// ima: In-Situ Multiply Accumulate unit -- four crossbars sharing an input
// buffer, an input network and the Center+Offset correction.
//
// Data path: the tile writes inputs into the 2kB input buffer. A feed
// command streams `feed_lines` buffer lines (LOAD_W inputs each) into the
// row input registers of the crossbars selected by `feed_mask`; a mask
// with several bits set multicasts the same inputs. While feeding, each
// selected crossbar's running input sum adds the new inputs and subtracts
// the ones they replace. `run_start` starts the crossbars in `run_mask`;
// each runs speculation + recovery on its own and raises its bit of
// `xbar_busy` meanwhile. Read-out: (rd_valid, rd_xbar, rd_filter) returns the
// corrected psum  offset psum + center * input sum  two clocks later on
// (out_valid, out_psum).
//
// Timing: a feed ends feed_lines + 2 clocks after feed_start (feed_busy is
// high meanwhile). Organisation (4 crossbars, 2kB buffer, one input sum per
// crossbar, a center buffer and multiply unit per IMA) follows the paper;
// the command ports are this design's choice.
module ima
  import raella_pkg::*;
#(
  parameter int unsigned NUM_XBAR = 4,
  parameter int unsigned ROWS     = 512,
  parameter int unsigned COLS     = 512,
  parameter int unsigned NUM_ADC  = 4,
  parameter int unsigned ENTRIES  = 256,
  parameter int unsigned PSUM_W   = 16,
  parameter int unsigned LOAD_W   = 16,
  parameter int unsigned IB_BYTES = 2048,
  localparam int unsigned XW      = $clog2(NUM_XBAR),
  localparam int unsigned IBAW    = $clog2(IB_BYTES / LOAD_W),
  localparam int unsigned SUM_W   = $clog2(ROWS * 255 + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // programming
  input  logic                       prog_en,
  input  logic [XW-1:0]              prog_xbar,
  input  logic [$clog2(ROWS)-1:0]    prog_row,
  input  dev_t                       prog_wp [COLS],
  input  dev_t                       prog_wn [COLS],
  input  logic                       cfg_we,
  input  logic [XW-1:0]              cfg_xbar,
  input  wslicing_t                  cfg_wslicing,
  input  logic                       c_we,
  input  logic [XW-1:0]              c_xbar,
  input  logic [$clog2(ENTRIES)-1:0] c_addr,
  input  logic [W_W-1:0]             c_val,
  // input buffer write
  input  logic                       ib_we,
  input  logic [IBAW-1:0]            ib_waddr,
  input  act_t                       ib_wdata [LOAD_W],
  // feed crossbars from the input buffer
  input  logic                       feed_start,
  input  logic [NUM_XBAR-1:0]        feed_mask,
  input  logic [IBAW-1:0]            feed_src,
  input  logic [$clog2(ROWS)-1:0]    feed_row,
  input  logic [IBAW:0]              feed_lines,
  output logic                       feed_busy,
  // run
  input  logic                       run_start,
  input  logic [NUM_XBAR-1:0]        run_mask,
  output logic [NUM_XBAR-1:0]        xbar_busy,
  // read-out
  input  logic                       rd_valid,
  input  logic [XW-1:0]              rd_xbar,
  input  logic [$clog2(ENTRIES)-1:0] rd_filter,
  output logic                       out_valid,
  output logic signed [PSUM_W-1:0]   out_psum,
  // statistics of the last run, summed over the crossbars
  output logic [15:0]                stat_spec_fail,
  output logic [15:0]                stat_rec_conv
);

  // ----------------------------------------------------------- input buffer
  logic            ib_rd;
  logic [IBAW-1:0] ib_raddr;
  act_t            ib_rdata [LOAD_W];

  input_buffer #(.BYTES(IB_BYTES), .LINE_W(LOAD_W)) u_ib (
    .clk, .we(ib_we), .waddr(ib_waddr), .wdata(ib_wdata),
    .rd_en(ib_rd), .raddr(ib_raddr), .rdata(ib_rdata)
  );

  // ------------------------------------------------------- feed sequencer
  logic [IBAW:0]             f_left;
  logic [NUM_XBAR-1:0]       f_mask;
  logic                      wr_pending;     // buffer data arrives this clock
  logic [$clog2(ROWS)-1:0]   f_row, wr_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_left     <= '0;
      f_mask     <= '0;
      ib_raddr   <= '0;
      f_row      <= '0;
      wr_row     <= '0;
      wr_pending <= 1'b0;
    end else begin
      wr_pending <= ib_rd;
      wr_row     <= f_row;
      if (feed_start && f_left == '0) begin
        f_left   <= feed_lines;
        f_mask   <= feed_mask;
        ib_raddr <= feed_src;
        f_row    <= feed_row;
      end else if (ib_rd) begin
        f_left   <= f_left - 1'b1;
        ib_raddr <= ib_raddr + 1'b1;
        f_row    <= f_row + ($clog2(ROWS))'(LOAD_W);
      end
    end
  end
  assign ib_rd     = (f_left != '0);
  assign feed_busy = (f_left != '0) || wr_pending;

  // ------------------------------------------------------------- crossbars
  logic signed [PSUM_W-1:0] x_psum  [NUM_XBAR];
  logic [MAX_WSL-1:0]       x_flags [NUM_XBAR];
  logic [SUM_W-1:0]         x_sum   [NUM_XBAR];
  logic [15:0]              x_sf    [NUM_XBAR];
  logic [15:0]              x_rc    [NUM_XBAR];

  for (genvar x = 0; x < NUM_XBAR; x++) begin : g_xbar
    act_t old_vals [LOAD_W];
    logic we;
    assign we = wr_pending && f_mask[x];

    xbar_unit #(.ROWS(ROWS), .COLS(COLS), .NUM_ADC(NUM_ADC), .ENTRIES(ENTRIES),
                .PSUM_W(PSUM_W), .LOAD_W(LOAD_W)) u_xu (
      .clk, .rst_n,
      .prog_en      (prog_en && prog_xbar == XW'(x)),
      .prog_row, .prog_wp, .prog_wn,
      .cfg_we       (cfg_we && cfg_xbar == XW'(x)),
      .cfg_wslicing,
      .in_we        (we),
      .in_row       (wr_row),
      .in_data      (ib_rdata),
      .in_old       (old_vals),
      .start        (run_start && run_mask[x]),
      .busy         (xbar_busy[x]),
      .done         (),
      .rd_addr      (rd_filter),
      .rd_psum      (x_psum[x]),
      .rd_flags     (x_flags[x]),
      .stat_spec_fail (x_sf[x]),
      .stat_rec_conv  (x_rc[x])
    );

    input_sum #(.LOAD_W(LOAD_W), .SUM_W(SUM_W)) u_sum (
      .clk, .rst_n, .clr(1'b0), .upd(we),
      .add_val(ib_rdata), .sub_val(old_vals), .sum(x_sum[x])
    );
  end

  // --------------------------------------------------- center correction
  logic                       rd_v1;
  logic [XW-1:0]              rd_x1;
  logic [$clog2(ENTRIES)-1:0] rd_f1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_v1 <= 1'b0;
      rd_x1 <= '0;
      rd_f1 <= '0;
    end else begin
      rd_v1 <= rd_valid;
      rd_x1 <= rd_xbar;
      rd_f1 <= rd_filter;
    end
  end

  center_correct #(.NUM_XBAR(NUM_XBAR), .ENTRIES(ENTRIES), .PSUM_W(PSUM_W), .SUM_W(SUM_W)) u_cc (
    .clk, .rst_n, .c_we, .c_xbar, .c_addr, .c_val,
    .in_valid (rd_v1), .in_xbar(rd_x1), .in_filter(rd_f1),
    .in_psum  (x_psum[rd_x1]), .in_sum(x_sum[rd_x1]),
    .out_valid, .out_psum
  );

  always_comb begin
    stat_spec_fail = '0;
    stat_rec_conv  = '0;
    for (int x = 0; x < NUM_XBAR; x++) begin
      stat_spec_fail = stat_spec_fail + x_sf[x];
      stat_rec_conv  = stat_rec_conv  + x_rc[x];
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) feed_start |-> !feed_busy)
    else $error("ima: feed started while a feed is in progress");

endmodule
