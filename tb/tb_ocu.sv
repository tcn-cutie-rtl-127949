// tb_ocu: streams random windows and kernels (with many zeros) in raster
// order over small maps through an ocu, without pooling, with 2x2 max and
// 2x2 sum pooling. The expected pre-activation of every window is the
// signed dot product of the two trit vectors, computed here; the expected
// pooled value is the max or sum of the four. At the output cycle (one
// clock after the window) the thresholds are set just at, below or above
// the expected value, so the returned trit pins the exact value. Also
// checks that nothing comes out with en_i low or valid_i low.
module tb_ocu;
  import cutie_pkg::*;
  localparam int unsigned NC = 96;
  localparam int unsigned NT = 9 * NC;
  localparam int unsigned FM = 64;

  logic clk = 0, rst_n = 0, en = 0, valid = 0, row_odd = 0, col_odd = 0;
  logic [2*NT-1:0] window = '0, weights = '0;
  pool_e pool = POOL_NONE;
  logic [4:0] pool_idx = '0;
  logic signed [13:0] thr_lo = '0, thr_hi = '0;
  logic out_valid;
  trit_t out_trit;
  int checks = 0, failures = 0;
  int n_pos = 0, n_neg = 0, n_zero = 0;

  ocu #(.NC(NC), .SW(14), .FM(FM)) dut (
    .clk_i(clk), .rst_ni(rst_n), .en_i(en), .valid_i(valid), .window_i(window),
    .weights_i(weights), .pool_i(pool), .row_odd_i(row_odd), .col_odd_i(col_odd),
    .pool_idx_i(pool_idx), .thr_lo_i(thr_lo), .thr_hi_i(thr_hi),
    .out_valid_o(out_valid), .out_trit_o(out_trit));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [1:0] rt(int density);
    int x;
    x = $urandom_range(0, 99);
    if (x >= density) return 2'b00;
    return $urandom_range(0, 1) ? 2'b01 : 2'b11;
  endfunction

  function automatic int tv(logic [1:0] t);
    return !t[0] ? 0 : (t[1] ? -1 : 1);
  endfunction

  // sets the thresholds around v and returns the trit that must come out
  function automatic logic [1:0] pick_thr(int v);
    case ($urandom_range(0, 2))
      0: begin thr_hi = 14'(v);     thr_lo = 14'(v - 50); return 2'b01; end
      1: begin thr_hi = 14'(v + 1); thr_lo = 14'(v);      return 2'b00; end
      default: begin thr_hi = 14'(v + 40); thr_lo = 14'(v + 1); return 2'b11; end
    endcase
  endfunction

  task automatic run_map(pool_e p, int W, int H, int density);
    int vals [8][8];
    bit exp_emit;
    int exp_v;
    logic [1:0] exp_t;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        int dot;
        @(negedge clk);
        // check the previous window's output
        dot = 0;
        for (int i = 0; i < NT; i++) begin
          window[2*i +: 2]  = rt(density);
          weights[2*i +: 2] = rt(density);
          dot += tv(window[2*i +: 2]) * tv(weights[2*i +: 2]);
        end
        vals[r][c] = dot;
        valid = 1; pool = p; row_odd = r[0]; col_odd = c[0]; pool_idx = 5'(c / 2);
        // output of this window is visible after the next rising edge
        @(posedge clk); #1;
        exp_emit = (p == POOL_NONE) || (r[0] && c[0]);
        if (p == POOL_NONE) exp_v = dot;
        else if (p == POOL_MAX) begin
          exp_v = vals[r-1][c-1];
          if (exp_emit) begin
            if (vals[r-1][c] > exp_v) exp_v = vals[r-1][c];
            if (vals[r][c-1] > exp_v) exp_v = vals[r][c-1];
            if (vals[r][c] > exp_v) exp_v = vals[r][c];
          end
        end else if (exp_emit)
          exp_v = vals[r-1][c-1] + vals[r-1][c] + vals[r][c-1] + vals[r][c];
        exp_t = exp_emit ? pick_thr(exp_v) : 2'b00;
        #1;
        checks++;
        if (out_valid != exp_emit || out_trit != exp_t) begin
          failures++;
          if (failures < 10) $display("pool %0d r%0d c%0d: valid %b trit %b exp %b/%b (v=%0d)",
                                      p, r, c, out_valid, out_trit, exp_emit, exp_t, exp_v);
        end
        if (exp_emit) begin
          if (exp_t == 2'b01) n_pos++; else if (exp_t == 2'b11) n_neg++; else n_zero++;
        end
      end
    @(negedge clk);
    valid = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    en = 1;
    run_map(POOL_NONE, 6, 3, 30);
    run_map(POOL_NONE, 3, 2, 100);
    run_map(POOL_MAX, 6, 4, 40);
    run_map(POOL_SUM, 5, 4, 60);
    run_map(POOL_MAX, 8, 6, 100);
    run_map(POOL_SUM, 8, 2, 100);
    // idle: no valid, or disabled unit
    @(negedge clk); valid = 0;
    @(posedge clk); #2; checks++; if (out_valid) failures++;
    @(negedge clk); valid = 1; en = 0; pool = POOL_NONE;
    @(posedge clk); #2; checks++; if (out_valid || out_trit != 2'b00) failures++;
    @(negedge clk); valid = 0;
    checks++;
    if (n_pos == 0 || n_neg == 0 || n_zero == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
