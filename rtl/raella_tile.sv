// raella_tile: one RAELLA tile -- eight IMAs (32 crossbars of 512x512 2T2R),
// the 64kB eDRAM buffer, the 32kB quantization table with quantize +
// activation, a max-pool unit, the tile's in/out networks, and a command
// sequencer.
//
// How it works: weights, per-layer weight slicings, filter centers and
// quantization parameters are programmed once through the programming
// ports. Inference is then driven by commands (tile_cmd_t, one at a time,
// cmd_valid/cmd_ready): LOAD_IB copies eDRAM lines into the input buffers of
// the IMAs in ima_mask (multicast); FEED moves input-buffer lines into the
// rows of the selected crossbars and updates their running input sums; RUN
// starts the crossbars (3 speculative + 8 recovery input slices each) and
// waits for all of them; DRAIN reads `count` corrected psums of one crossbar,
// quantizes them for consecutive output channels and writes the 8b results
// to consecutive eDRAM bytes; POOL max-pools eDRAM bytes; SEND streams eDRAM
// lines to the on-chip network. The network side also writes eDRAM lines
// (net_in_*) whenever DRAIN/POOL are not writing.
//
// Timing: LOAD_IB takes count+1 clocks, FEED count+2, RUN 12 crossbar
// cycles, DRAIN count+5, POOL count*win+3, SEND two clocks per line plus
// network back-pressure. The IMA count, buffer sizes and the dataflow
// stages follow the paper; the command set stands in for the paper's
// program-time pattern generators and is this design's choice, as are the
// port widths. The shared router is outside the tile.
module raella_tile
  import raella_pkg::*;
#(
  parameter int unsigned NUM_IMA  = 8,
  parameter int unsigned NUM_XBAR = 4,
  parameter int unsigned ROWS     = 512,
  parameter int unsigned COLS     = 512,
  parameter int unsigned NUM_ADC  = 4,
  parameter int unsigned ENTRIES  = 256,
  parameter int unsigned PSUM_W   = 16,
  parameter int unsigned LOAD_W   = 16,
  parameter int unsigned IB_BYTES = 2048,
  parameter int unsigned EDRAM_BYTES = 65536,
  parameter int unsigned CHANNELS = 8192,
  localparam int unsigned IW      = $clog2(NUM_IMA),
  localparam int unsigned XW      = $clog2(NUM_XBAR),
  localparam int unsigned EAW     = $clog2(EDRAM_BYTES / LOAD_W),
  localparam int unsigned IBAW    = $clog2(IB_BYTES / LOAD_W),
  localparam int unsigned CW      = $clog2(CHANNELS)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // commands
  input  logic                       cmd_valid,
  input  tile_cmd_t                  cmd,
  output logic                       cmd_ready,
  output logic                       busy,
  // programming
  input  logic                       prog_en,
  input  logic [IW-1:0]              prog_ima,
  input  logic [XW-1:0]              prog_xbar,
  input  logic [$clog2(ROWS)-1:0]    prog_row,
  input  dev_t                       prog_wp [COLS],
  input  dev_t                       prog_wn [COLS],
  input  logic                       cfg_we,
  input  logic [IW-1:0]              cfg_ima,
  input  logic [XW-1:0]              cfg_xbar,
  input  wslicing_t                  cfg_wslicing,
  input  logic                       c_we,
  input  logic [IW-1:0]              c_ima,
  input  logic [XW-1:0]              c_xbar,
  input  logic [$clog2(ENTRIES)-1:0] c_addr,
  input  logic [W_W-1:0]             c_val,
  input  logic                       q_we,
  input  logic [CW-1:0]              q_addr,
  input  logic [31:0]                q_data,
  // on-chip network (router side)
  input  logic                       net_in_valid,
  output logic                       net_in_ready,
  input  logic [EAW-1:0]             net_in_addr,
  input  act_t                       net_in_data [LOAD_W],
  output logic                       net_out_valid,
  input  logic                       net_out_ready,
  output act_t                       net_out_data [LOAD_W],
  // statistics of the last RUN
  output logic [15:0]                stat_spec_fail,
  output logic [15:0]                stat_rec_conv
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_FEED, S_RUN, S_DRAIN, S_POOL, S_SEND, S_WAIT}
    state_t;

  state_t    state;
  tile_cmd_t c;           // command being executed
  logic [15:0] n_iss, n_ret, n_out;   // issue / return / output counters
  logic [3:0]  j_iss;                 // POOL window index
  logic [15:0] pool_base;             // POOL: byte address of element 0 of output n_iss

  // ----------------------------------------------------------------- eDRAM
  logic             e_we, e_rd;
  logic [EAW-1:0]   e_waddr, e_raddr;
  logic [LOAD_W-1:0] e_wbe;
  act_t             e_wdata [LOAD_W];
  act_t             e_rdata [LOAD_W];

  edram_buffer #(.BYTES(EDRAM_BYTES), .LINE_W(LOAD_W)) u_edram (
    .clk, .we(e_we), .waddr(e_waddr), .wbe(e_wbe), .wdata(e_wdata),
    .rd_en(e_rd), .raddr(e_raddr), .rdata(e_rdata)
  );

  // ------------------------------------------------------------------ IMAs
  logic                     ib_we;
  logic [IBAW-1:0]          ib_waddr;
  logic                     feed_go, run_go, rd_go;
  logic [NUM_IMA-1:0]       i_feed_busy, i_out_valid;
  logic [NUM_IMA-1:0][NUM_XBAR-1:0] i_xbar_busy;
  logic signed [PSUM_W-1:0] i_out_psum [NUM_IMA];
  logic [15:0]              i_sf [NUM_IMA];
  logic [15:0]              i_rc [NUM_IMA];

  for (genvar i = 0; i < NUM_IMA; i++) begin : g_ima
    ima #(.NUM_XBAR(NUM_XBAR), .ROWS(ROWS), .COLS(COLS), .NUM_ADC(NUM_ADC),
          .ENTRIES(ENTRIES), .PSUM_W(PSUM_W), .LOAD_W(LOAD_W), .IB_BYTES(IB_BYTES)) u_ima (
      .clk, .rst_n,
      .prog_en    (prog_en && prog_ima == IW'(i)), .prog_xbar, .prog_row, .prog_wp, .prog_wn,
      .cfg_we     (cfg_we && cfg_ima == IW'(i)), .cfg_xbar, .cfg_wslicing,
      .c_we       (c_we && c_ima == IW'(i)), .c_xbar, .c_addr, .c_val,
      .ib_we      (ib_we && c.ima_mask[i]), .ib_waddr, .ib_wdata(e_rdata),
      .feed_start (feed_go && c.ima_mask[i]),
      .feed_mask  (c.xbar_mask),
      .feed_src   (IBAW'(c.src)),
      .feed_row   (($clog2(ROWS))'(c.dst)),
      .feed_lines ((IBAW+1)'(c.count)),
      .feed_busy  (i_feed_busy[i]),
      .run_start  (run_go && c.ima_mask[i]),
      .run_mask   (c.xbar_mask),
      .xbar_busy  (i_xbar_busy[i]),
      .rd_valid   (rd_go && c.ima == IW'(i)),
      .rd_xbar    (XW'(c.xbar)),
      .rd_filter  (($clog2(ENTRIES))'(n_iss)),
      .out_valid  (i_out_valid[i]),
      .out_psum   (i_out_psum[i]),
      .stat_spec_fail (i_sf[i]),
      .stat_rec_conv  (i_rc[i])
    );
  end

  always_comb begin
    stat_spec_fail = '0;
    stat_rec_conv  = '0;
    for (int i = 0; i < NUM_IMA; i++) begin
      stat_spec_fail = stat_spec_fail + i_sf[i];
      stat_rec_conv  = stat_rec_conv  + i_rc[i];
    end
  end

  // ------------------------------------------------------------- quantizer
  logic             qo_valid;
  logic [7:0]       qo_q;
  logic [15:0]      qo_tag;
  logic             qi_valid;
  assign qi_valid = (state == S_DRAIN) && i_out_valid[c.ima];

  quantizer #(.CHANNELS(CHANNELS), .PSUM_W(PSUM_W), .TAG_W(16)) u_quant (
    .clk, .rst_n, .q_we, .q_addr, .q_data,
    .in_valid (qi_valid),
    .in_ch    (CW'(c.channel) + CW'(n_ret)),
    .in_psum  (i_out_psum[c.ima]),
    .in_relu  (c.relu),
    .in_tag   (c.dst + n_ret),
    .out_valid(qo_valid), .out_q(qo_q), .out_tag(qo_tag)
  );

  // --------------------------------------------------------------- maxpool
  logic        mp_in_valid, mp_first, mp_last, mp_out_valid;
  logic [7:0]  mp_in, mp_out;
  logic [3:0]  rd_byte;         // byte lane of the read in flight
  logic        rd_first, rd_last, rd_pool;

  assign mp_in_valid = rd_pool;
  assign mp_first    = rd_first;
  assign mp_last     = rd_last;
  assign mp_in       = e_rdata[rd_byte];

  maxpool u_pool (
    .clk, .rst_n, .in_valid(mp_in_valid), .in_first(mp_first), .in_last(mp_last),
    .in_data(mp_in), .out_valid(mp_out_valid), .out_data(mp_out)
  );

  // ------------------------------------------------------ eDRAM port muxes
  logic        ctl_write;
  logic [15:0] ctl_byte_addr;
  logic [7:0]  ctl_byte;
  always_comb begin
    ctl_write     = 1'b0;
    ctl_byte_addr = '0;
    ctl_byte      = '0;
    if (state == S_DRAIN && qo_valid) begin
      ctl_write = 1'b1; ctl_byte_addr = qo_tag; ctl_byte = qo_q;
    end else if (state == S_POOL && mp_out_valid) begin
      ctl_write = 1'b1; ctl_byte_addr = c.dst + n_out; ctl_byte = mp_out;
    end
  end

  assign net_in_ready = !(state == S_DRAIN || state == S_POOL);

  always_comb begin
    if (ctl_write) begin
      e_we    = 1'b1;
      e_waddr = EAW'(ctl_byte_addr >> $clog2(LOAD_W));
      e_wbe   = LOAD_W'(1) << ctl_byte_addr[$clog2(LOAD_W)-1:0];
      for (int b = 0; b < LOAD_W; b++) e_wdata[b] = ctl_byte;
    end else begin
      e_we    = net_in_valid && net_in_ready;
      e_waddr = net_in_addr;
      e_wbe   = '1;
      e_wdata = net_in_data;
    end
  end

  // Read-address generation by state.
  logic [15:0] pool_addr;
  assign pool_addr = pool_base + 16'(j_iss) * c.stride;
  logic send_hold;    // SEND: line waiting for the network

  always_comb begin
    e_rd    = 1'b0;
    e_raddr = '0;
    case (state)
      S_LOAD: begin e_rd = (n_iss < c.count); e_raddr = EAW'(c.src + n_iss); end
      S_POOL: begin e_rd = (n_iss < c.count); e_raddr = EAW'(pool_addr >> $clog2(LOAD_W)); end
      S_SEND: begin e_rd = (n_iss < c.count) && !send_hold && !net_out_valid;
                    e_raddr = EAW'(c.src + n_iss); end
      default: ;
    endcase
  end

  // ------------------------------------------------------------- sequencer
  logic load_pending;
  logic send_pending;
  assign ib_we   = load_pending;
  assign feed_go = (state == S_FEED) && (n_iss == '0);
  assign run_go  = (state == S_RUN)  && (n_iss == '0);
  assign rd_go   = (state == S_DRAIN) && (n_iss < c.count);
  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c <= '0;
      n_iss <= '0; n_ret <= '0; n_out <= '0; j_iss <= '0; pool_base <= '0;
      load_pending <= 1'b0; ib_waddr <= '0;
      rd_pool <= 1'b0; rd_first <= 1'b0; rd_last <= 1'b0; rd_byte <= '0;
      send_pending <= 1'b0; send_hold <= 1'b0; net_out_valid <= 1'b0;
      for (int b = 0; b < LOAD_W; b++) net_out_data[b] <= '0;
    end else begin
      load_pending <= 1'b0;
      rd_pool      <= 1'b0;
      send_pending <= 1'b0;
      case (state)
        S_IDLE: if (cmd_valid) begin
          c <= cmd;
          n_iss <= '0; n_ret <= '0; n_out <= '0; j_iss <= '0;
          pool_base <= cmd.src;
          send_hold <= 1'b0;
          case (cmd.op)
            OP_LOAD_IB: state <= S_LOAD;
            OP_FEED:    state <= S_FEED;
            OP_RUN:     state <= S_RUN;
            OP_DRAIN:   state <= S_DRAIN;
            OP_POOL:    state <= S_POOL;
            OP_SEND:    state <= S_SEND;
            default:    state <= S_IDLE;
          endcase
        end
        S_LOAD: begin
          if (n_iss < c.count) begin
            n_iss        <= n_iss + 16'd1;
            load_pending <= 1'b1;
            ib_waddr     <= IBAW'(c.dst + n_iss);
          end else if (!load_pending) state <= S_IDLE;
        end
        S_FEED: begin
          n_iss <= 16'd1;
          if (n_iss != '0 && !(|i_feed_busy)) state <= S_IDLE;
        end
        S_RUN: begin
          n_iss <= 16'd1;
          if (n_iss != '0 && !(|i_xbar_busy)) state <= S_IDLE;
        end
        S_DRAIN: begin
          if (n_iss < c.count) n_iss <= n_iss + 16'd1;
          if (qi_valid) n_ret <= n_ret + 16'd1;
          if (qo_valid) begin
            n_out <= n_out + 16'd1;
            if (n_out + 16'd1 == c.count) state <= S_IDLE;
          end
        end
        S_POOL: begin
          if (n_iss < c.count) begin
            rd_pool  <= 1'b1;
            rd_first <= (j_iss == '0);
            rd_last  <= (j_iss == c.win - 4'd1);
            rd_byte  <= pool_addr[$clog2(LOAD_W)-1:0];
            if (j_iss == c.win - 4'd1) begin
              j_iss     <= '0;
              n_iss     <= n_iss + 16'd1;
              pool_base <= pool_base + 16'd1;
            end else begin
              j_iss <= j_iss + 4'd1;
            end
          end
          if (mp_out_valid) begin
            n_out <= n_out + 16'd1;
            if (n_out + 16'd1 == c.count) state <= S_IDLE;
          end
        end
        S_SEND: begin
          if (e_rd) begin
            n_iss        <= n_iss + 16'd1;
            send_pending <= 1'b1;
            send_hold    <= 1'b1;
          end
          if (send_pending) begin
            net_out_valid <= 1'b1;
            net_out_data  <= e_rdata;
          end
          if (net_out_valid && net_out_ready) begin
            net_out_valid <= 1'b0;
            send_hold     <= 1'b0;
            if (n_iss == c.count) state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_DRAIN) |-> (c.count <= 16'(ENTRIES)))
    else $error("raella_tile: DRAIN count exceeds the psum buffer");

endmodule
