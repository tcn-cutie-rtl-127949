// cutie_scheduler: the layer sequencer of the accelerator.
//
// An inference starts on start_i (configuration register) or on ext_trig_i
// when trig_en_i is set (interrupt line from the I/O peripherals). Layers
// 0..num_layers_i-1 then run one after the other, each in three phases:
//   LOADW  4 cycles: weight-memory words wbase..wbase+3 are read in all OCUs
//          and, one cycle later, loaded into the weight buffers (kernel rows
//          0..2, then the thresholds).
//   RUN    H*(W+2) cycles: for every output row r and feed step f = 0..W+1
//          one pixel column (rows r-1..r+1, column f-1) is fetched; columns
//          -1 and W are zero padding. From f = 2 on, the line buffer holds the
//          window centred on (r, f-2).
//   DRAIN  3 cycles until the last window has been written.
// When the last layer ends, done_o pulses for one cycle (the interrupt that
// wakes the host) and busy_o falls.
//
// Input from the activation memory (src_tcn = 0) is a W x H map. Input from
// the TCN memory (src_tcn = 1) is the 1D sequence x[0..L-1] wrapped into a
// 2D map of width W = D (dilation) and height H = ceil(L/D), pixel (r, c)
// being x[r*D + c]; the column fetch for (r-1..r+1, c) reads time steps
// (r-1)*D + c + {0, D, 2D}, so a 3x3 kernel whose middle column holds the
// 1D kernel computes the dilated convolution with no stalls and no data
// reordering. Out-of-range time steps read as zero (causal padding).
//
// Pipeline (fetch at cycle t): t+1 memory data, decompressed, shifted into
// the line buffer; t+2 window in the line buffer, OCUs compute and register;
// t+3 pooling, threshold, compression and write-back. Write-back goes to the
// activation memory half out_buf at (r, c), or at (r/2, c/2) with 2x2
// pooling where only odd-row odd-column windows write, or is pushed into
// the TCN memory when dst_tcn is set (used for the per-inference feature
// vector of a 2D network feeding the TCN part).
//
// ocu_en_o enables only the first n_oc units while busy: the clock enables
// that stand for the hierarchical clock gating of idle OCUs.
//
// Follows the paper: layer-by-layer operation, trigger by register or I/O
// interrupt, a completion interrupt, the 1D-dilated to 2D mapping, clock
// gating of idle OCUs. The phase lengths, padding, pooling order and
// write-back addressing are this design's own.
module cutie_scheduler
  import cutie_pkg::*;
#(
  parameter int unsigned NO  = N_OCU,
  parameter int unsigned FM  = FM_MAX,
  parameter int unsigned TS  = TCN_STEPS,
  parameter int unsigned WD  = W_DEPTH,
  parameter int unsigned NL  = MAX_LAYERS,
  localparam int unsigned RW = $clog2(FM),
  localparam int unsigned LW = $clog2(NL),
  localparam int unsigned TW = $clog2(TS) + 2,
  localparam int unsigned AW = $clog2(WD),
  localparam int unsigned PI = (FM/2 > 1) ? $clog2(FM/2) : 1
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  start_i,
  input  logic                  ext_trig_i,
  input  logic                  trig_en_i,
  input  logic [LW:0]           num_layers_i,
  output logic [LW-1:0]         cfg_idx_o,
  input  layer_cfg_t            cfg_i,
  output logic                  busy_o,
  output logic                  done_o,
  output logic [NO-1:0]         ocu_en_o,
  // weight memories / buffers
  output logic                  wm_rd_en_o,
  output logic [AW-1:0]         wm_rd_addr_o,
  output logic                  wb_load_o,
  output logic [1:0]            wb_idx_o,
  // activation memory read
  output logic                  am_rd_en_o,
  output logic                  am_rd_buf_o,
  output logic signed [RW+1:0]  am_rd_row_o,
  output logic [RW-1:0]         am_rd_col_o,
  output logic [RW:0]           am_rd_h_o,
  // TCN memory read
  output logic                  tm_rd_en_o,
  output logic signed [TW-1:0]  tm_rd_base_o,
  output logic [TW-2:0]         tm_rd_stride_o,
  output logic [TW-2:0]         tm_seq_len_o,
  output logic                  src_tcn_o,
  // line buffer (t+1)
  output logic                  lb_shift_o,
  output logic                  lb_zero_o,
  // OCUs (t+2)
  output logic                  win_valid_o,
  output pool_e                 pool_o,
  output logic                  row_odd_o,
  output logic                  col_odd_o,
  output logic [PI-1:0]         pool_idx_o,
  // write-back (t+3)
  output logic                  wr_en_o,
  output logic                  tcn_push_o,
  output logic                  wr_buf_o,
  output logic [RW-1:0]         wr_row_o,
  output logic [RW-1:0]         wr_col_o
);
  typedef enum logic [1:0] {S_IDLE, S_LOADW, S_RUN, S_DRAIN} state_e;

  typedef struct packed {
    logic          valid;
    logic          zero;
    logic          win;
    logic [RW-1:0] r;
    logic [RW-1:0] c;
  } meta_t;

  state_e        state_q;
  logic [LW-1:0] layer_q;
  logic [1:0]    cnt_q;
  logic [RW-1:0] r_q;
  logic [RW:0]   f_q;
  meta_t         m0, m1_q, m2_q, m3_q;

  layer_cfg_t cfg;
  assign cfg       = cfg_i;
  assign cfg_idx_o = layer_q;

  // geometry of the current layer's input map
  logic [RW:0] w_eff, h_eff;
  always_comb begin
    if (cfg.src_tcn) begin
      w_eff = (RW+1)'(cfg.dilation);
      h_eff = (cfg.dilation == 0) ? '0 :
              (RW+1)'((int'(cfg.seq_len) + int'(cfg.dilation) - 1) / int'(cfg.dilation));
    end else begin
      w_eff = (RW+1)'(cfg.in_w);
      h_eff = (RW+1)'(cfg.in_h);
    end
  end

  logic trigger;
  assign trigger = start_i || (trig_en_i && ext_trig_i);

  // fetch of the current step
  int col;
  always_comb begin
    col = int'(f_q) - 1;
    m0       = '0;
    m0.valid = (state_q == S_RUN);
    m0.zero  = (col < 0) || (col >= int'(w_eff));
    m0.win   = (f_q >= 2);
    m0.r     = r_q;
    m0.c     = RW'(int'(f_q) - 2);

    am_rd_en_o  = m0.valid && !m0.zero && !cfg.src_tcn;
    am_rd_buf_o = cfg.in_buf;
    am_rd_row_o = (RW+2)'(int'(r_q) - 1);
    am_rd_col_o = RW'(col);
    am_rd_h_o   = h_eff;

    tm_rd_en_o     = m0.valid && !m0.zero && cfg.src_tcn;
    tm_rd_base_o   = TW'((int'(r_q) - 1) * int'(cfg.dilation) + col);
    tm_rd_stride_o = (TW-1)'(cfg.dilation);
    tm_seq_len_o   = (TW-1)'(cfg.seq_len);
    src_tcn_o      = cfg.src_tcn;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= S_IDLE;
      layer_q   <= '0;
      cnt_q     <= '0;
      r_q       <= '0;
      f_q       <= '0;
      done_o    <= 1'b0;
      wb_load_o <= 1'b0;
      wb_idx_o  <= '0;
      m1_q      <= '0;
      m2_q      <= '0;
      m3_q      <= '0;
    end else begin
      done_o    <= 1'b0;
      wb_load_o <= (state_q == S_LOADW);
      wb_idx_o  <= cnt_q;
      m1_q      <= m0;
      m2_q      <= m1_q;
      m3_q      <= m2_q;
      case (state_q)
        S_IDLE: if (trigger) begin
          layer_q <= '0;
          cnt_q   <= '0;
          if (num_layers_i == 0) done_o  <= 1'b1;
          else                   state_q <= S_LOADW;
        end
        S_LOADW: begin
          cnt_q <= cnt_q + 2'd1;
          if (cnt_q == 2'd3) begin
            r_q <= '0;
            f_q <= '0;
            state_q <= (h_eff == 0 || w_eff == 0) ? S_DRAIN : S_RUN;
          end
        end
        S_RUN: begin
          if (f_q == w_eff + 1) begin
            f_q <= '0;
            r_q <= r_q + 1'b1;
            if ((RW+1)'(r_q) == h_eff - 1) begin
              state_q <= S_DRAIN;
              cnt_q   <= '0;
            end
          end else begin
            f_q <= f_q + 1'b1;
          end
        end
        S_DRAIN: begin
          cnt_q <= cnt_q + 2'd1;
          if (cnt_q == 2'd2) begin
            cnt_q <= '0;
            if ((LW+1)'(layer_q) + 1 < num_layers_i) begin
              layer_q <= layer_q + 1'b1;
              state_q <= S_LOADW;
            end else begin
              state_q <= S_IDLE;
              done_o  <= 1'b1;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy_o       = (state_q != S_IDLE);
  assign wm_rd_en_o   = (state_q == S_LOADW);
  assign wm_rd_addr_o = AW'(cfg.wbase) + AW'(cnt_q);

  always_comb begin
    for (int i = 0; i < NO; i++) ocu_en_o[i] = busy_o && (i < int'(cfg.n_oc));
  end

  // stage t+1
  assign lb_shift_o = m1_q.valid;
  assign lb_zero_o  = m1_q.zero;

  // stage t+2
  assign win_valid_o = m2_q.valid && m2_q.win;
  assign pool_o      = cfg.pool;
  assign row_odd_o   = m2_q.r[0];
  assign col_odd_o   = m2_q.c[0];
  assign pool_idx_o  = PI'(m2_q.c >> 1);

  // stage t+3
  logic emit;
  assign emit       = m3_q.valid && m3_q.win &&
                      (cfg.pool == POOL_NONE || (m3_q.r[0] && m3_q.c[0]));
  assign wr_en_o    = emit && !cfg.dst_tcn;
  assign tcn_push_o = emit &&  cfg.dst_tcn;
  assign wr_buf_o   = cfg.out_buf;
  assign wr_row_o   = (cfg.pool == POOL_NONE) ? m3_q.r : (m3_q.r >> 1);
  assign wr_col_o   = (cfg.pool == POOL_NONE) ? m3_q.c : (m3_q.c >> 1);

  // a layer may not read and write the same storage
  a_no_tcn_loop: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (state_q == S_RUN) |-> !(cfg.src_tcn && cfg.dst_tcn));
  a_no_buf_clash: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (state_q == S_RUN && !cfg.src_tcn && !cfg.dst_tcn) |-> (cfg.in_buf != cfg.out_buf));
endmodule
