// tb_cutie_scheduler: runs cutie_scheduler through a four-layer inference
// (2D layer, 2D layer with 2x2 max pooling, a TCN layer reading the TCN
// memory with dilation 3, a layer pushing into the TCN memory), started once
// by the start pulse and once by the external trigger. Observed events are
// compared with lists worked out here from the layer descriptors: the
// weight-memory addresses and buffer loads, every activation/TCN memory
// fetch (row, column, time base), the line buffer shifts and zero columns,
// the window count, every write-back address, the OCU enables, and the
// cycle count from start to done: sum over layers of 4 + H*(W+2) + 3.
module tb_cutie_scheduler;
  import cutie_pkg::*;
  localparam int unsigned NO = 8;
  localparam int unsigned FM = 64;
  localparam int unsigned NLAY = 4;

  logic clk = 0, rst_n = 0, start = 0, ext_trig = 0, trig_en = 0;
  logic [4:0] num_layers = 5'(NLAY);
  logic [3:0] cfg_idx;
  layer_cfg_t cfgs [16];
  layer_cfg_t cfg;
  logic busy, done, wm_rd_en, wb_load, am_rd_en, am_rd_buf, tm_rd_en, src_tcn;
  logic [NO-1:0] ocu_en;
  logic [5:0] wm_rd_addr;
  logic [1:0] wb_idx;
  logic signed [7:0] am_rd_row;
  logic [5:0] am_rd_col, wr_row, wr_col;
  logic [6:0] am_rd_h;
  logic signed [6:0] tm_rd_base;
  logic [5:0] tm_rd_stride, tm_seq_len;
  logic lb_shift, lb_zero, win_valid, row_odd, col_odd, wr_en, tcn_push, wr_buf;
  pool_e pool;
  logic [4:0] pool_idx;
  int checks = 0, failures = 0;

  assign cfg = cfgs[cfg_idx];

  cutie_scheduler #(.NO(NO), .FM(FM), .TS(24), .WD(64), .NL(16)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .ext_trig_i(ext_trig), .trig_en_i(trig_en),
    .num_layers_i(num_layers), .cfg_idx_o(cfg_idx), .cfg_i(cfg), .busy_o(busy), .done_o(done),
    .ocu_en_o(ocu_en), .wm_rd_en_o(wm_rd_en), .wm_rd_addr_o(wm_rd_addr), .wb_load_o(wb_load),
    .wb_idx_o(wb_idx), .am_rd_en_o(am_rd_en), .am_rd_buf_o(am_rd_buf), .am_rd_row_o(am_rd_row),
    .am_rd_col_o(am_rd_col), .am_rd_h_o(am_rd_h), .tm_rd_en_o(tm_rd_en),
    .tm_rd_base_o(tm_rd_base), .tm_rd_stride_o(tm_rd_stride), .tm_seq_len_o(tm_seq_len),
    .src_tcn_o(src_tcn), .lb_shift_o(lb_shift), .lb_zero_o(lb_zero), .win_valid_o(win_valid),
    .pool_o(pool), .row_odd_o(row_odd), .col_odd_o(col_odd), .pool_idx_o(pool_idx),
    .wr_en_o(wr_en), .tcn_push_o(tcn_push), .wr_buf_o(wr_buf), .wr_row_o(wr_row),
    .wr_col_o(wr_col));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // observed and expected event strings
  string obs [$], exp_ev [$];
  int n_shift, n_zero, n_win, exp_shift, exp_zero, exp_win, cycles;
  bit en_bad;

  always @(posedge clk) if (rst_n) begin
    if (busy) cycles++;
    if (wm_rd_en) obs.push_back($sformatf("W%0d", wm_rd_addr));
    if (wb_load) obs.push_back($sformatf("L%0d", wb_idx));
    if (am_rd_en) obs.push_back($sformatf("A%0d:%0d,%0d,%0d", am_rd_buf, am_rd_row, am_rd_col, am_rd_h));
    if (tm_rd_en) obs.push_back($sformatf("T%0d,%0d,%0d", tm_rd_base, tm_rd_stride, tm_seq_len));
    if (wr_en) obs.push_back($sformatf("O%0d:%0d,%0d", wr_buf, wr_row, wr_col));
    if (tcn_push) obs.push_back("P");
    if (lb_shift) n_shift++;
    if (lb_shift && lb_zero) n_zero++;
    if (win_valid) n_win++;
    if (busy && !wm_rd_en) for (int i = 0; i < NO; i++)
      if (ocu_en[i] != (i < int'(cfg.n_oc))) en_bad = 1;
  end

  function automatic layer_cfg_t mk(int w, int h, pool_e p, bit ib, bit ob, bit st, bit dt,
                                    int noc, int wb, int d, int L);
    layer_cfg_t c;
    c = '0;
    c.in_w = 7'(w); c.in_h = 7'(h); c.pool = p; c.in_buf = ib; c.out_buf = ob;
    c.src_tcn = st; c.dst_tcn = dt; c.n_oc = 7'(noc); c.wbase = 6'(wb);
    c.dilation = 5'(d); c.seq_len = 5'(L);
    return c;
  endfunction

  int exp_cycles;
  task automatic build_expected();
    exp_ev.delete(); exp_shift = 0; exp_zero = 0; exp_win = 0; exp_cycles = 0;
    for (int l = 0; l < NLAY; l++) begin
      layer_cfg_t c;
      int W, H;
      c = cfgs[l];
      W = c.src_tcn ? int'(c.dilation) : int'(c.in_w);
      H = c.src_tcn ? (int'(c.seq_len) + int'(c.dilation) - 1) / int'(c.dilation) : int'(c.in_h);
      exp_cycles += 4 + H * (W + 2) + 3;
      for (int k = 0; k < 4; k++) exp_ev.push_back($sformatf("W%0d", int'(c.wbase) + k));
      for (int k = 0; k < 4; k++) exp_ev.push_back($sformatf("L%0d", k));
      for (int r = 0; r < H; r++)
        for (int f = 0; f < W + 2; f++) begin
          int col;
          col = f - 1;
          exp_shift++;
          if (col < 0 || col >= W) exp_zero++;
          else if (c.src_tcn)
            exp_ev.push_back($sformatf("T%0d,%0d,%0d", (r-1)*int'(c.dilation) + col, c.dilation, c.seq_len));
          else
            exp_ev.push_back($sformatf("A%0d:%0d,%0d,%0d", c.in_buf, r-1, col, H));
          if (f >= 2) begin
            int oc;
            oc = f - 2;
            exp_win++;
            // write-back, three cycles after the fetch: emitted in order
            if (c.pool == POOL_NONE || (r % 2 == 1 && oc % 2 == 1)) begin
              if (c.dst_tcn) exp_ev.push_back("P");
              else if (c.pool == POOL_NONE) exp_ev.push_back($sformatf("O%0d:%0d,%0d", c.out_buf, r, oc));
              else exp_ev.push_back($sformatf("O%0d:%0d,%0d", c.out_buf, r/2, oc/2));
            end
          end
        end
    end
  endtask

  // fetches and write-backs overlap in time; compare each kind in order
  task automatic compare_kind(string k);
    string o [$], e [$];
    foreach (obs[i])    if (obs[i].substr(0, 0) == k) o.push_back(obs[i]);
    foreach (exp_ev[i]) if (exp_ev[i].substr(0, 0) == k) e.push_back(exp_ev[i]);
    checks++;
    if (o.size() != e.size()) begin
      failures++;
      $display("%s events: %0d observed, %0d expected", k, o.size(), e.size());
    end else foreach (o[i]) begin
      checks++;
      if (o[i] != e[i]) begin
        failures++;
        if (failures < 10) $display("event %0d: got %s exp %s", i, o[i], e[i]);
      end
    end
  endtask

  task automatic run_and_check(bit use_trig);
    int t0, t_done;
    obs.delete(); n_shift = 0; n_zero = 0; n_win = 0; cycles = 0; en_bad = 0;
    build_expected();
    @(negedge clk);
    if (use_trig) begin trig_en = 1; ext_trig = 1; end else start = 1;
    @(negedge clk);
    start = 0; ext_trig = 0;
    t0 = 0;
    while (!done) begin @(posedge clk); #1; t0++; end
    @(negedge clk);
    checks++;
    // busy rises one edge after the trigger; done pulses in the last busy cycle
    if (cycles != exp_cycles) begin
      failures++; $display("cycles %0d exp %0d", cycles, exp_cycles);
    end
    checks++; if (busy) failures++;
    compare_kind("W"); compare_kind("L"); compare_kind("A"); compare_kind("T");
    compare_kind("O"); compare_kind("P");
    checks += 4;
    if (n_shift != exp_shift) begin failures++; $display("shifts %0d exp %0d", n_shift, exp_shift); end
    if (n_zero != exp_zero) begin failures++; $display("zero cols %0d exp %0d", n_zero, exp_zero); end
    if (n_win != exp_win) begin failures++; $display("windows %0d exp %0d", n_win, exp_win); end
    if (en_bad) begin failures++; $display("OCU enables wrong"); end
  endtask

  initial begin
    for (int i = 0; i < 16; i++) cfgs[i] = '0;
    cfgs[0] = mk(5, 4, POOL_NONE, 0, 1, 0, 0, 8, 0, 1, 1);
    cfgs[1] = mk(6, 5, POOL_MAX,  1, 0, 0, 0, 5, 4, 1, 1);
    cfgs[2] = mk(0, 0, POOL_NONE, 0, 1, 1, 0, 3, 8, 3, 8);
    cfgs[3] = mk(3, 3, POOL_NONE, 1, 0, 0, 1, 8, 12, 1, 1);
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_and_check(0);
    run_and_check(1);
    // trigger line ignored when not enabled
    @(negedge clk); trig_en = 0; ext_trig = 1; @(negedge clk); ext_trig = 0;
    checks++; if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
