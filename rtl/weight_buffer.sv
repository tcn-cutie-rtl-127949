// weight_buffer: the weight buffer with its decompressor, next to each
// output channel compute unit. It keeps the decompressed 3x3xN_CH ternary
// kernel of the running layer (1728 bits for 96 channels) and the two
// thresholds of the unit, so the weight memory is read only four times per
// layer and not once per window.
//
// Loading: with load_i high, data_i (one 480-bit weight memory word) is
// stored according to idx_i. For idx_i = 0, 1, 2 the word holds kernel row
// idx_i as three compressed pixel vectors (columns 0, 1, 2, each 160 bits,
// column 0 in the low bits); they are decompressed and stored. For idx_i = 3
// bits [13:0] give the low threshold and bits [27:14] the high threshold,
// both signed. Outputs are the register contents, in the same bit layout as
// the line buffer window.
//
// Follows the paper: a weight buffer with a decompressor per OCU. This
// design's choices: the word layout, and keeping the thresholds here.
module weight_buffer
  import cutie_pkg::*;
#(
  parameter int unsigned NC = N_CH,
  parameter int unsigned SW = SUM_W,
  localparam int unsigned PW = 8*cbytes(NC)
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic                      load_i,
  input  logic [1:0]                idx_i,
  input  logic [3*PW-1:0]           data_i,
  output logic [9*2*NC-1:0]         weights_o,
  output logic signed [SW-1:0]      thr_lo_o,
  output logic signed [SW-1:0]      thr_hi_o
);
  logic [2:0][2*NC-1:0] row_d;

  for (genvar c = 0; c < 3; c++) begin : g_dec
    trit_decompressor #(.N(NC)) i_dec (
      .packed_i (data_i[PW*c +: PW]),
      .trits_o  (row_d[c])
    );
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      weights_o <= '0;
      thr_lo_o  <= '0;
      thr_hi_o  <= '0;
    end else if (load_i) begin
      if (idx_i == 2'd3) begin
        thr_lo_o <= data_i[SW-1:0];
        thr_hi_o <= data_i[2*SW-1:SW];
      end else begin
        weights_o[2*NC*3*idx_i +: 3*2*NC] <= row_d;
      end
    end
  end
endmodule
