// tcn_cutie: top level of the TCN-CUTIE ternary neural network accelerator.
//
// A completely unrolled datapath: one output channel compute unit (OCU) per
// output channel (N_CH = 96), each with its own weight memory and weight
// buffer, all fed every cycle with the same full 3x3xN_CH activation window
// from the line buffer. Activations come either from the activation memory
// (2D convolution layers) or from the TCN memory, which keeps the last 24
// feature vectors and serves dilated 1D convolutions mapped onto 2D ones.
// The 96 ternary OCU outputs are compressed (192 -> 160 bits) and written
// back to the activation memory or pushed into the TCN memory.
//
// Interfaces: an APB control port (cutie_ctrl_regs: layer descriptors,
// start, status), a 32-bit request/grant data port for the SoC
// (cutie_data_port: memory fill and result read-back, idle only), an
// external trigger input and the completion interrupt irq_o (one-cycle
// pulse). One window is processed per clock; a layer on a W x H map takes
// 4 + H*(W+2) + 3 cycles (see cutie_scheduler).
//
// Follows the paper's block diagram: memories, decompressors, line buffer,
// weight memories and buffers, OCUs, compressor, TCN memory with its
// 24-to-3 multiplexer, and the multiplexers between them. This design's
// own: the control and data port protocols, the scheduling details, the
// encodings described in the sub-modules. The SoC around it (core,
// interconnect, clock and power domains) is not part of this RTL.
module tcn_cutie
  import cutie_pkg::*;
#(
  parameter int unsigned NC = N_CH,        // channels = number of OCUs
  parameter int unsigned FM = FM_MAX,      // largest map side
  parameter int unsigned TS = TCN_STEPS,   // TCN memory depth
  parameter int unsigned WD = W_DEPTH,     // weight memory words per OCU
  parameter int unsigned NL = MAX_LAYERS,  // layer descriptors
  localparam int unsigned PW = 8*cbytes(NC),
  localparam int unsigned WW = 3 * PW,
  localparam int unsigned PL = (PW + 31) / 32,
  localparam int unsigned WL = (WW + 31) / 32,
  localparam int unsigned RW = $clog2(FM),
  localparam int unsigned LW = $clog2(NL),
  localparam int unsigned TW = $clog2(TS) + 2,
  localparam int unsigned AW = $clog2(WD),
  localparam int unsigned PI = (FM/2 > 1) ? $clog2(FM/2) : 1,
  localparam int unsigned NT = 9 * NC
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  // control port (APB)
  input  logic         psel_i,
  input  logic         penable_i,
  input  logic         pwrite_i,
  input  logic [11:0]  paddr_i,
  input  logic [31:0]  pwdata_i,
  output logic [31:0]  prdata_o,
  output logic         pready_o,
  output logic         pslverr_o,
  // data port
  input  logic         dreq_i,
  output logic         dgnt_o,
  input  logic         dwe_i,
  input  logic [19:0]  daddr_i,
  input  logic [31:0]  dwdata_i,
  output logic         drvalid_o,
  output logic [31:0]  drdata_o,
  // events
  input  logic         ext_trig_i,
  output logic         irq_o
);
  // ---------------- control
  logic          start, tcn_clear, trig_en, busy, done;
  logic [LW:0]   num_layers;
  logic [LW-1:0] cfg_idx;
  layer_cfg_t    cfg;

  cutie_ctrl_regs #(.NL(NL)) i_regs (
    .clk_i, .rst_ni,
    .psel_i, .penable_i, .pwrite_i, .paddr_i, .pwdata_i,
    .prdata_o, .pready_o, .pslverr_o,
    .start_o (start), .tcn_clear_o (tcn_clear), .num_layers_o (num_layers),
    .trig_en_o (trig_en), .cfg_idx_i (cfg_idx), .cfg_o (cfg),
    .busy_i (busy), .done_i (done)
  );

  logic [NC-1:0]        ocu_en;
  logic                 wm_rd_en, wb_load;
  logic [AW-1:0]        wm_rd_addr;
  logic [1:0]           wb_idx;
  logic                 s_am_rd_en, s_am_rd_buf;
  logic signed [RW+1:0] s_am_rd_row;
  logic [RW-1:0]        s_am_rd_col;
  logic [RW:0]          s_am_rd_h;
  logic                 tm_rd_en, src_tcn;
  logic signed [TW-1:0] tm_rd_base;
  logic [TW-2:0]        tm_rd_stride, tm_seq_len;
  logic                 lb_shift, lb_zero;
  logic                 win_valid, row_odd, col_odd;
  pool_e                pool;
  logic [PI-1:0]        pool_idx;
  logic                 s_wr_en, s_tcn_push, s_wr_buf;
  logic [RW-1:0]        s_wr_row, s_wr_col;

  cutie_scheduler #(.NO(NC), .FM(FM), .TS(TS), .WD(WD), .NL(NL)) i_sched (
    .clk_i, .rst_ni,
    .start_i (start), .ext_trig_i, .trig_en_i (trig_en), .num_layers_i (num_layers),
    .cfg_idx_o (cfg_idx), .cfg_i (cfg), .busy_o (busy), .done_o (done),
    .ocu_en_o (ocu_en),
    .wm_rd_en_o (wm_rd_en), .wm_rd_addr_o (wm_rd_addr),
    .wb_load_o (wb_load), .wb_idx_o (wb_idx),
    .am_rd_en_o (s_am_rd_en), .am_rd_buf_o (s_am_rd_buf), .am_rd_row_o (s_am_rd_row),
    .am_rd_col_o (s_am_rd_col), .am_rd_h_o (s_am_rd_h),
    .tm_rd_en_o (tm_rd_en), .tm_rd_base_o (tm_rd_base), .tm_rd_stride_o (tm_rd_stride),
    .tm_seq_len_o (tm_seq_len), .src_tcn_o (src_tcn),
    .lb_shift_o (lb_shift), .lb_zero_o (lb_zero),
    .win_valid_o (win_valid), .pool_o (pool), .row_odd_o (row_odd), .col_odd_o (col_odd),
    .pool_idx_o (pool_idx),
    .wr_en_o (s_wr_en), .tcn_push_o (s_tcn_push), .wr_buf_o (s_wr_buf),
    .wr_row_o (s_wr_row), .wr_col_o (s_wr_col)
  );

  assign irq_o = done;

  // ---------------- SoC data port
  logic                 d_am_rd_en, d_am_rd_buf, d_am_wr_en, d_am_wr_buf, d_tm_push;
  logic signed [RW+1:0] d_am_rd_row;
  logic [RW-1:0]        d_am_rd_col, d_am_wr_row, d_am_wr_col;
  logic [RW:0]          d_am_rd_h;
  logic [PW-1:0]        d_am_wr_data, d_tm_data;
  logic [PL-1:0]        d_am_wr_strb;
  logic [NC-1:0]        wm_wr_en;
  logic [AW-1:0]        wm_wr_addr;
  logic [WW-1:0]        wm_wr_data;
  logic [WL-1:0]        wm_wr_strb;
  logic [2:0][PW-1:0]   am_rd_data, tm_rd_data;

  cutie_data_port #(.NO(NC), .FM(FM), .WD(WD), .PW(PW)) i_dport (
    .clk_i, .rst_ni, .busy_i (busy),
    .req_i (dreq_i), .gnt_o (dgnt_o), .we_i (dwe_i), .addr_i (daddr_i), .wdata_i (dwdata_i),
    .rvalid_o (drvalid_o), .rdata_o (drdata_o),
    .am_rd_en_o (d_am_rd_en), .am_rd_buf_o (d_am_rd_buf), .am_rd_row_o (d_am_rd_row),
    .am_rd_col_o (d_am_rd_col), .am_rd_h_o (d_am_rd_h), .am_rd_pix_i (am_rd_data[1]),
    .am_wr_en_o (d_am_wr_en), .am_wr_buf_o (d_am_wr_buf), .am_wr_row_o (d_am_wr_row),
    .am_wr_col_o (d_am_wr_col), .am_wr_data_o (d_am_wr_data), .am_wr_strb_o (d_am_wr_strb),
    .tm_push_o (d_tm_push), .tm_data_o (d_tm_data),
    .wm_wr_en_o (wm_wr_en), .wm_wr_addr_o (wm_wr_addr), .wm_wr_data_o (wm_wr_data),
    .wm_wr_strb_o (wm_wr_strb)
  );

  // ---------------- write-back path: OCU trits -> compressor
  logic [2*NC-1:0] ocu_trits;
  logic [PW-1:0]   out_pixel;

  trit_compressor #(.N(NC)) i_compr (.trits_i (ocu_trits), .packed_o (out_pixel));

  // ---------------- activation memory (SoC port when idle)
  activation_memory #(.FM(FM), .PW(PW)) i_act_mem (
    .clk_i, .rst_ni,
    .rd_en_i   (busy ? s_am_rd_en  : d_am_rd_en),
    .rd_buf_i  (busy ? s_am_rd_buf : d_am_rd_buf),
    .rd_row_i  (busy ? s_am_rd_row : d_am_rd_row),
    .rd_col_i  (busy ? s_am_rd_col : d_am_rd_col),
    .rd_h_i    (busy ? s_am_rd_h   : d_am_rd_h),
    .rd_data_o (am_rd_data),
    .wr_en_i   (busy ? s_wr_en  : d_am_wr_en),
    .wr_buf_i  (busy ? s_wr_buf : d_am_wr_buf),
    .wr_row_i  (busy ? s_wr_row : d_am_wr_row),
    .wr_col_i  (busy ? s_wr_col : d_am_wr_col),
    .wr_data_i (busy ? out_pixel : d_am_wr_data),
    .wr_strb_i (busy ? {PL{1'b1}} : d_am_wr_strb)
  );

  // ---------------- TCN memory
  tcn_memory #(.DEPTH(TS), .PW(PW)) i_tcn_mem (
    .clk_i, .rst_ni,
    .clear_i     (tcn_clear),
    .push_i      (busy ? s_tcn_push : d_tm_push),
    .push_data_i (busy ? out_pixel  : d_tm_data),
    .rd_en_i     (tm_rd_en),
    .rd_base_i   (tm_rd_base),
    .rd_stride_i (tm_rd_stride),
    .seq_len_i   (tm_seq_len),
    .rd_data_o   (tm_rd_data)
  );

  // ---------------- source multiplexer, decompressors, line buffer
  logic [2:0][PW-1:0]   src_col;
  logic [2:0][2*NC-1:0] dec_col;
  logic [2*NT-1:0]      window;

  assign src_col = src_tcn ? tm_rd_data : am_rd_data;

  for (genvar k = 0; k < 3; k++) begin : g_dec
    trit_decompressor #(.N(NC)) i_dec (.packed_i (src_col[k]), .trits_o (dec_col[k]));
  end

  linebuffer #(.NC(NC)) i_lb (
    .clk_i, .rst_ni, .shift_i (lb_shift), .zero_i (lb_zero), .col_i (dec_col),
    .window_o (window)
  );

  // ---------------- OCU array
  for (genvar o = 0; o < NC; o++) begin : g_ocu
    logic [WW-1:0]        wm_data;
    logic [2*NT-1:0]      weights;
    logic signed [SUM_W-1:0] thr_lo, thr_hi;
    logic                 out_valid;

    weight_memory #(.DEPTH(WD), .WW(WW)) i_wmem (
      .clk_i,
      .rd_en_i (wm_rd_en), .rd_addr_i (wm_rd_addr), .rd_data_o (wm_data),
      .wr_en_i (wm_wr_en[o]), .wr_addr_i (wm_wr_addr), .wr_data_i (wm_wr_data),
      .wr_strb_i (wm_wr_strb)
    );

    weight_buffer #(.NC(NC), .SW(SUM_W)) i_wbuf (
      .clk_i, .rst_ni, .load_i (wb_load), .idx_i (wb_idx), .data_i (wm_data),
      .weights_o (weights), .thr_lo_o (thr_lo), .thr_hi_o (thr_hi)
    );

    ocu #(.NC(NC), .SW(SUM_W), .FM(FM)) i_ocu (
      .clk_i, .rst_ni, .en_i (ocu_en[o]),
      .valid_i (win_valid), .window_i (window), .weights_i (weights),
      .pool_i (pool), .row_odd_i (row_odd), .col_odd_i (col_odd), .pool_idx_i (pool_idx),
      .thr_lo_i (thr_lo), .thr_hi_i (thr_hi),
      .out_valid_o (out_valid), .out_trit_o (ocu_trits[2*o +: 2])
    );
  end
endmodule
