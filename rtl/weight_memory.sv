// weight_memory: the weight store of one output channel compute unit. It
// holds DEPTH words of WW bits (480 in the main configuration: three
// compressed pixel vectors, one row of a 3x3x96 kernel). A layer occupies
// four consecutive words: kernel rows 0, 1, 2 and a word whose low 28 bits
// hold the two 14-bit thresholds of the OCU (see weight_buffer). Reads are
// synchronous with one cycle of latency; writes come from the SoC data port
// in 32-bit lanes selected by wr_strb_i.
//
// Follows the paper: one weight memory per OCU, 480-bit read width. This
// design's choices: the depth (64 words, 16 layers), the layer layout with a
// threshold word, and the lane strobes. A chip would use an SRAM macro.
module weight_memory
  import cutie_pkg::*;
#(
  parameter int unsigned DEPTH = W_DEPTH,
  parameter int unsigned WW    = 3 * 8*cbytes(N_CH),
  localparam int unsigned LANES = (WW + 31) / 32,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk_i,
  input  logic              rd_en_i,
  input  logic [AW-1:0]     rd_addr_i,
  output logic [WW-1:0]     rd_data_o,
  input  logic              wr_en_i,
  input  logic [AW-1:0]     wr_addr_i,
  input  logic [WW-1:0]     wr_data_i,
  input  logic [LANES-1:0]  wr_strb_i
);
  logic [WW-1:0] mem_q [DEPTH];

  logic [32*LANES-1:0] mask_w;
  logic [WW-1:0]       mask;

  // lane strobes as a bit mask
  always_comb begin
    for (int l = 0; l < LANES; l++) mask_w[32*l +: 32] = {32{wr_strb_i[l]}};
    mask = mask_w[WW-1:0];
  end

  always_ff @(posedge clk_i) begin
    if (wr_en_i) mem_q[wr_addr_i] <= (mem_q[wr_addr_i] & ~mask) | (wr_data_i & mask);
    if (rd_en_i) rd_data_o <= mem_q[rd_addr_i];
  end
endmodule
