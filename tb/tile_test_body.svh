// Body shared by tb_raella_tile (reduced size) and tb_raella_tile_full
// (default size). The including module defines the localparams ROWS, COLS,
// ENTRIES, LOAD_W, NUM_IMA, CYC and instantiates the tile as `dut`.
//
// Flow: choose 8b weights for one layer, compute each filter's center with
// the Center+Offset cost function (sum over slices of 2^lsb * (column sum of
// slices)^4), program the 4b-2b-2b offset slices into IMA 0 / crossbar 0,
// then LOAD_IB (multicast to every IMA), FEED, RUN, DRAIN (quantize with
// ReLU), POOL and SEND. Every output byte is compared with a reference that
// models the 7b ADC saturation and the speculation/recovery rules exactly.
// A second pass replaces a few inputs only (input reuse) and repeats.

  import raella_pkg::*;
  import raella_ref_pkg::*;

  localparam int N_SL  = 3;                 // 4b-2b-2b slicing
  localparam int NFILT = (COLS / N_SL < ENTRIES) ? COLS / N_SL : ENTRIES;
  localparam int OUTB  = ROWS;              // eDRAM byte address of outputs (after the inputs)
  localparam int POOLB = OUTB + 256;        // pooled outputs

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  tile_cmd_t cmd;
  logic prog_en = 0, cfg_we = 0, c_we = 0, q_we = 0;
  logic [$clog2(NUM_IMA)-1:0] prog_ima = '0, cfg_ima = '0, c_ima = '0;
  logic [1:0] prog_xbar = '0, cfg_xbar = '0, c_xbar = '0;
  logic [$clog2(ROWS)-1:0] prog_row = '0;
  dev_t prog_wp [COLS], prog_wn [COLS];
  wslicing_t cfg_wslicing;
  logic [$clog2(ENTRIES)-1:0] c_addr = '0;
  logic [7:0] c_val = '0;
  logic [$clog2(CHANNELS)-1:0] q_addr = '0;
  logic [31:0] q_data = '0;
  logic net_in_valid = 0, net_in_ready;
  logic [$clog2(EDRAM_BYTES / LOAD_W)-1:0] net_in_addr = '0;
  act_t net_in_data [LOAD_W];
  logic net_out_valid, net_out_ready = 0;
  act_t net_out_data [LOAD_W];
  logic [15:0] stat_spec_fail, stat_rec_conv;

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // mechanism counters
  int n_spec_fail = 0, n_rec_conv = 0, n_multicast = 0, n_backpressure = 0;
  int n_relu_clamp = 0, n_pool = 0, n_reuse_sub = 0, n_exact = 0;

  int wt   [NFILT][ROWS];
  int phi  [NFILT];
  int inp  [ROWS];
  bit [15:0] qs [NFILT], qb [NFILT];
  int hi_t [N_SL] = '{7, 3, 1};
  int lo_t [N_SL] = '{4, 2, 0};
  byte unsigned edram_img [];

  function automatic int dslice(int x, int hi, int lo);
    int m;
    m = ((x < 0 ? -x : x) >> lo) & ((1 << (hi - lo + 1)) - 1);
    return (x < 0) ? -m : m;
  endfunction

  function automatic int best_center(int f);
    longint best_cost, cost;
    int best;
    best = 1; best_cost = -1;
    for (int p = 1; p < 256; p++) begin
      cost = 0;
      for (int k = 0; k < N_SL; k++) begin
        longint s;
        s = 0;
        for (int r = 0; r < ROWS; r++) s += dslice(wt[f][r] - p, hi_t[k], lo_t[k]);
        cost += (longint'(1) << lo_t[k]) * s * s * s * s;
      end
      if (best_cost < 0 || cost < best_cost) begin best_cost = cost; best = p; end
    end
    return best;
  endfunction

  task automatic issue(tile_cmd_t c_in, output int clocks);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c_in; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    clocks = 1;
    while (busy) begin
      // random network back-pressure during SEND
      net_out_ready = ($urandom_range(0, 2) != 0);
      if (net_out_valid && !net_out_ready) n_backpressure++;
      @(negedge clk);
      clocks++;
    end
  endtask

  // Capture SEND traffic.
  act_t sent [$];
  always @(posedge clk)
    if (net_out_valid && net_out_ready)
      for (int b = 0; b < LOAD_W; b++) sent.push_back(net_out_data[b]);

  function automatic tile_cmd_t mk(tile_op_t op);
    tile_cmd_t c;
    c = '0;
    c.op = op;
    return c;
  endfunction

  task automatic one_pass(int pass);
    int exp_psum [NFILT];
    int exp_q [NFILT];
    int nf, nr, clocks, sum_i;
    tile_cmd_t c;
    // --- reference
    sum_i = 0;
    for (int r = 0; r < ROWS; r++) sum_i += inp[r];
    nf = 0; nr = 0;
    for (int f = 0; f < NFILT; f++) begin
      int acc, dot, nf0;
      nf0 = nf;
      acc = phi[f] * sum_i;
      dot = 0;
      for (int r = 0; r < ROWS; r++) dot += wt[f][r] * inp[r];
      for (int k = 0; k < N_SL; k++) begin
        int cs [11];
        for (int s = 0; s < 11; s++) begin
          cs[s] = 0;
          for (int r = 0; r < ROWS; r++) begin
            int wp, wn;
            offset_slice(wt[f][r], phi[f], hi_t[k], lo_t[k], wp, wn);
            cs[s] += in_slice(inp[r], s) * (wp - wn);
          end
        end
        acc += col_contrib(cs, lo_t[k], nf, nr);
      end
      exp_psum[f] = wrap16(acc);
      if (nf == nf0) begin
        // no failed speculation: Center+Offset must give the exact product
        check(exp_psum[f] == wrap16(dot), "reference: center+offset not exact");
        n_exact++;
      end
      exp_q[f] = quant_ref(exp_psum[f], qs[f], qb[f], 1'b1);
      if (exp_q[f] == 0) n_relu_clamp++;
    end
    // --- inputs into eDRAM through the network port (only changed lines on pass 1)
    for (int l = 0; l < ROWS / LOAD_W; l++) begin
      net_in_addr = ($bits(net_in_addr))'(l);
      for (int b = 0; b < LOAD_W; b++) net_in_data[b] = act_t'(inp[l * LOAD_W + b]);
      net_in_valid = 1;
      @(negedge clk);
      while (!net_in_ready) @(negedge clk);
      net_in_valid = 0;
    end
    // --- LOAD_IB multicast to all IMAs
    c = mk(OP_LOAD_IB); c.ima_mask = 8'((1 << NUM_IMA) - 1); c.src = 0; c.dst = 0;
    c.count = 16'(ROWS / LOAD_W);
    issue(c, clocks);
    if (NUM_IMA > 1) n_multicast++;
    check(clocks <= ROWS / LOAD_W + 3, $sformatf("LOAD_IB took %0d clocks", clocks));
    // --- FEED crossbar 0 of IMA 0 (all rows on pass 0, first two lines on pass 1)
    c = mk(OP_FEED); c.ima_mask = 8'd1; c.xbar_mask = 4'b0001; c.src = 0; c.dst = 0;
    c.count = 16'((pass == 0) ? ROWS / LOAD_W : 2);
    issue(c, clocks);
    // --- RUN
    c = mk(OP_RUN); c.ima_mask = 8'd1; c.xbar_mask = 4'b0001;
    issue(c, clocks);
    check(clocks >= 12 * CYC && clocks <= 12 * CYC + 4,
          $sformatf("RUN took %0d clocks, expected 12 crossbar cycles = %0d", clocks, 12 * CYC));
    check(int'(stat_spec_fail) == nf, $sformatf("spec fails %0d expected %0d", stat_spec_fail, nf));
    check(int'(stat_rec_conv) == nr, $sformatf("recovery converts %0d expected %0d", stat_rec_conv, nr));
    n_spec_fail += int'(stat_spec_fail);
    n_rec_conv  += int'(stat_rec_conv);
    // --- DRAIN with ReLU
    c = mk(OP_DRAIN); c.ima = 3'd0; c.xbar = 2'd0; c.count = 16'(NFILT); c.channel = '0;
    c.dst = 16'(OUTB); c.relu = 1'b1;
    issue(c, clocks);
    check(clocks <= NFILT + 8, $sformatf("DRAIN took %0d clocks", clocks));
    // --- POOL: out[o] = max(q[o], q[o + NFILT/2])
    c = mk(OP_POOL); c.src = 16'(OUTB); c.dst = 16'(POOLB); c.count = 16'(NFILT / 2);
    c.stride = 16'(NFILT / 2); c.win = 4'd2;
    issue(c, clocks);
    n_pool++;
    // --- SEND the output and pooled regions
    sent.delete();
    c = mk(OP_SEND); c.src = 16'(OUTB / LOAD_W); c.count = 16'(512 / LOAD_W);
    issue(c, clocks);
    check(sent.size() == 512, $sformatf("sent %0d bytes", sent.size()));
    if (sent.size() == 512) begin
      for (int f = 0; f < NFILT; f++)
        check(int'(sent[f]) == exp_q[f], $sformatf("pass %0d filter %0d: q=%0d expected %0d (psum %0d)",
                                                   pass, f, sent[f], exp_q[f], exp_psum[f]));
      for (int o = 0; o < NFILT / 2; o++) begin
        int m;
        m = (exp_q[o] > exp_q[o + NFILT / 2]) ? exp_q[o] : exp_q[o + NFILT / 2];
        check(int'(sent[256 + o]) == m, $sformatf("pool %0d", o));
      end
    end
  endtask

  initial begin
    for (int c = 0; c < COLS; c++) begin prog_wp[c] = '0; prog_wn[c] = '0; end
    for (int b = 0; b < LOAD_W; b++) net_in_data[b] = '0;
    cmd = '0; cfg_wslicing = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // weights: bell-shaped around a per-filter mean
    for (int f = 0; f < NFILT; f++) begin
      int mean;
      mean = $urandom_range(60, 200);
      for (int r = 0; r < ROWS; r++) begin
        int v;
        v = mean + int'($urandom_range(0, 40)) + int'($urandom_range(0, 40)) - 40;
        wt[f][r] = (v < 0) ? 0 : (v > 255) ? 255 : v;
      end
      phi[f] = best_center(f);
      qs[f] = {1'b0, 5'($urandom_range(3, 8)), 10'($urandom())};
      qb[f] = {1'($urandom()), 5'($urandom_range(0, 18)), 10'($urandom())};
    end
    // program slicing, centers, quantization table, weights
    cfg_wslicing.n_slices = 4'(N_SL);
    for (int k = 0; k < N_SL; k++) cfg_wslicing.lsb[k] = 3'(lo_t[k]);
    @(negedge clk) cfg_we = 1;
    @(negedge clk) cfg_we = 0;
    for (int f = 0; f < NFILT; f++) begin
      c_addr = ($bits(c_addr))'(f); c_val = 8'(phi[f]); c_we = 1;
      q_addr = ($bits(q_addr))'(f); q_data = {qs[f], qb[f]}; q_we = 1;
      @(negedge clk);
      c_we = 0; q_we = 0;
    end
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        int f, k, wp, wn;
        f = c / N_SL; k = c % N_SL;
        wp = 0; wn = 0;
        if (f < NFILT) offset_slice(wt[f][r], phi[f], hi_t[k], lo_t[k], wp, wn);
        prog_wp[c] = dev_t'(wp); prog_wn[c] = dev_t'(wn);
      end
      prog_row = ($bits(prog_row))'(r);
      @(negedge clk) prog_en = 1;
      @(negedge clk) prog_en = 0;
    end
    // pass 0: right-skewed inputs (sparse high-order bits), a few large ones
    for (int r = 0; r < ROWS; r++)
      inp[r] = ($urandom_range(0, 7) == 0) ? $urandom_range(128, 255)
                                           : ($urandom_range(0, 255) >> $urandom_range(1, 4));
    one_pass(0);
    // pass 1: replace the first 2*LOAD_W inputs only (reused inputs elsewhere)
    for (int r = 0; r < 2 * LOAD_W; r++) begin
      if (inp[r] != 0) n_reuse_sub++;
      inp[r] = $urandom_range(0, 255);
    end
    one_pass(1);

    $display("mechanisms: spec_fail=%0d rec_conv=%0d exact_filters=%0d multicast=%0d backpressure=%0d relu_clamp=%0d pool=%0d reuse_sub=%0d",
             n_spec_fail, n_rec_conv, n_exact, n_multicast, n_backpressure, n_relu_clamp, n_pool, n_reuse_sub);
    check(n_spec_fail > 0, "no failed speculation happened");
    check(n_rec_conv > 0, "no recovery conversion happened");
    check(n_exact > 0, "no filter without speculation failure");
    check(n_multicast > 0, "no multicast");
    check(n_backpressure > 0, "no network back-pressure");
    check(n_relu_clamp > 0, "ReLU never clamped");
    check(n_pool > 0, "no pooling");
    check(n_reuse_sub > 0, "input sum never subtracted a reused input");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
