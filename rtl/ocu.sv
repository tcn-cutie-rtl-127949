// ocu: output channel compute unit. One OCU exists per output channel; it
// computes its channel for one full 3x3xN_CH window every cycle.
//
// Compute stage: the window and the kernel (both 9*N_CH trits, 1728 bits)
// are multiplied trit by trit. A product of two trits is nonzero when both
// are nonzero and negative when their signs differ. Two sums count the +1
// and the -1 products, and their difference is the SUM_W-bit (14-bit)
// pre-activation. It is stored in the unit's single pipeline register
// together with the valid flag and the pooling position.
//
// Output stage (after the register): optional 2x2 pooling, then the
// threshold. Pooling runs on the stream of windows in raster order: a value
// at an even column is held; at the odd column it is combined (max, or sum
// for average pooling) with the held one; on even rows that pair goes to a
// row buffer entry (column / 2); on odd rows it is combined with that entry
// and emitted. The result v gives the trit +1 if v >= thr_hi_i, -1 if
// v < thr_lo_i and 0 otherwise. out_valid_o/out_trit_o are combinational
// from the pipeline register, so a window entering at cycle t leaves at t+1.
//
// en_i is the unit's clock enable: units beyond the layer's output channel
// count hold their state and output 0. It stands for the hierarchical clock
// gating of idle OCUs; a netlist would put a clock gate here.
//
// Follows the paper: 1728-bit ternary multiply, summation, a 14-bit
// difference, one pipeline stage, then pooling and threshold giving 2 bits.
// This design's choices: the +1/-1 counts, the streaming 2x2 pooling with a
// row buffer, the threshold rule, and the enable.
module ocu
  import cutie_pkg::*;
#(
  parameter int unsigned NC = N_CH,
  parameter int unsigned SW = SUM_W,
  parameter int unsigned FM = FM_MAX,
  localparam int unsigned NT = 9 * NC,                 // trits per window
  localparam int unsigned PI = (FM/2 > 1) ? $clog2(FM/2) : 1
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  en_i,
  // compute stage
  input  logic                  valid_i,
  input  logic [2*NT-1:0]       window_i,
  input  logic [2*NT-1:0]       weights_i,
  input  pool_e                 pool_i,
  input  logic                  row_odd_i,
  input  logic                  col_odd_i,
  input  logic [PI-1:0]         pool_idx_i,
  // output stage
  input  logic signed [SW-1:0]  thr_lo_i,
  input  logic signed [SW-1:0]  thr_hi_i,
  output logic                  out_valid_o,
  output trit_t                 out_trit_o
);
  // ternary multipliers, bitwise on the interleaved {sign, nonzero} codes:
  // bit 2i of nz is set when both trits are nonzero, bit 2i of sx when
  // their signs differ (odd bits are cleared by the mask).
  localparam logic [2*NT-1:0] EVEN = {NT{2'b01}};
  logic [2*NT-1:0] nz, sx, p_pos, p_neg;
  assign nz    = window_i & weights_i & EVEN;
  assign sx    = (window_i ^ weights_i) >> 1;
  assign p_pos = nz & ~sx;
  assign p_neg = nz &  sx;

  logic signed [SW-1:0] sum_d;
  assign sum_d = SW'($countones(p_pos)) - SW'($countones(p_neg));

  // the single pipeline stage
  logic signed [SW-1:0] sum_q;
  logic                 valid_q, row_odd_q, col_odd_q;
  logic [PI-1:0]        idx_q;
  pool_e                pool_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sum_q     <= '0;
      valid_q   <= 1'b0;
      row_odd_q <= 1'b0;
      col_odd_q <= 1'b0;
      idx_q     <= '0;
      pool_q    <= POOL_NONE;
    end else if (en_i) begin
      valid_q <= valid_i;
      if (valid_i) begin
        sum_q     <= sum_d;
        row_odd_q <= row_odd_i;
        col_odd_q <= col_odd_i;
        idx_q     <= pool_idx_i;
        pool_q    <= pool_i;
      end
    end else begin
      valid_q <= 1'b0;
    end
  end

  // pooling
  function automatic logic signed [SW-1:0] combine(input pool_e p,
      input logic signed [SW-1:0] a, input logic signed [SW-1:0] b);
    if (p == POOL_MAX) return (a > b) ? a : b;
    else               return a + b;
  endfunction

  logic signed [SW-1:0] hold_q;
  logic signed [SW-1:0] rowbuf_q [FM/2 > 0 ? FM/2 : 1];
  logic signed [SW-1:0] pair, value;
  logic                 emit;

  always_comb begin
    pair  = combine(pool_q, hold_q, sum_q);
    value = sum_q;
    emit  = 1'b0;
    if (valid_q) begin
      if (pool_q == POOL_NONE) begin
        emit = 1'b1;
      end else if (col_odd_q && row_odd_q) begin
        emit  = 1'b1;
        value = combine(pool_q, rowbuf_q[idx_q], pair);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      hold_q <= '0;
    end else if (valid_q && pool_q != POOL_NONE && !col_odd_q) begin
      hold_q <= sum_q;
    end
  end

  always_ff @(posedge clk_i) begin
    if (valid_q && pool_q != POOL_NONE && col_odd_q && !row_odd_q)
      rowbuf_q[idx_q] <= pair;
  end

  // threshold
  assign out_valid_o = emit;
  always_comb begin
    if (!emit)                out_trit_o = T_ZERO;
    else if (value >= thr_hi_i) out_trit_o = T_POS;
    else if (value <  thr_lo_i) out_trit_o = T_NEG;
    else                      out_trit_o = T_ZERO;
  end
endmodule
