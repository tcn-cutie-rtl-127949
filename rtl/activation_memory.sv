// activation_memory: storage for compressed feature maps of up to
// FM_MAX x FM_MAX pixels (64 x 64), each pixel one compressed vector of
// N_CH trits (160 bits), in two halves ("buffers") so that one layer reads
// its input map from one half while its output map is written to the other.
//
// Rows are spread over three banks by row mod 3, so any three vertically
// adjacent rows sit in three different banks. A read names the top row of a
// column (rd_row_i, which may be -1) and the column, and returns the three
// pixels (top first, 480 bits), one pixel column of a 3x3 window per cycle,
// so the line buffer never waits for data. Rows outside 0..rd_h_i-1 read as
// zero (the zero padding at the top and bottom of the map). Read data is
// registered: it appears the cycle after rd_en_i. One pixel can be written
// per cycle, with 32-bit lane strobes so the SoC data port can fill a pixel
// word by word. Bank b holds row r (r mod 3 = b) at address
// {buf, r div 3, col}.
//
// Follows the paper: capacity (64x64 pixels of 96 channels) and the 480-bit
// read width. This design's choices: the two halves, the row-mod-3 banking,
// the lane strobes and the padding rule. A chip would build the banks from
// SRAM macros; here they are arrays.
module activation_memory
  import cutie_pkg::*;
#(
  parameter int unsigned FM    = FM_MAX,
  parameter int unsigned PW    = 8*cbytes(N_CH),
  localparam int unsigned LANES = (PW + 31) / 32,
  localparam int unsigned RW    = $clog2(FM),          // row / column index width
  localparam int unsigned RB    = (FM + 2) / 3,        // rows per bank and half
  localparam int unsigned BD    = 2 * RB * FM          // bank depth
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // read port
  input  logic                    rd_en_i,
  input  logic                    rd_buf_i,
  input  logic signed [RW+1:0]    rd_row_i,   // top row of the three
  input  logic [RW-1:0]           rd_col_i,
  input  logic [RW:0]             rd_h_i,     // map height, rows at or past it read 0
  output logic [2:0][PW-1:0]      rd_data_o,
  // write port
  input  logic                    wr_en_i,
  input  logic                    wr_buf_i,
  input  logic [RW-1:0]           wr_row_i,
  input  logic [RW-1:0]           wr_col_i,
  input  logic [PW-1:0]           wr_data_i,
  input  logic [LANES-1:0]        wr_strb_i
);
  logic [PW-1:0] bank_q [3][BD];

  function automatic int unsigned baddr(input logic b, input int unsigned row,
                                        input int unsigned col);
    return (int'(b) * RB + row / 3) * FM + col;
  endfunction

  // write (lane strobes as a bit mask)
  logic [32*LANES-1:0] mask_w;
  logic [PW-1:0]       mask;
  logic [1:0]          wbank;
  int unsigned         waddr;
  always_comb begin
    for (int l = 0; l < LANES; l++) mask_w[32*l +: 32] = {32{wr_strb_i[l]}};
    mask  = mask_w[PW-1:0];
    wbank = 2'(int'(wr_row_i) % 3);
    waddr = baddr(wr_buf_i, int'(wr_row_i), int'(wr_col_i));
  end

  always_ff @(posedge clk_i) begin
    if (wr_en_i)
      bank_q[wbank][waddr] <= (bank_q[wbank][waddr] & ~mask) | (wr_data_i & mask);
  end

  // read: every bank reads the row of the three that maps to it
  logic [PW-1:0] bdata_q [3];
  logic [1:0]    sel_q   [3];
  logic [2:0]    vld_q;

  always_ff @(posedge clk_i) begin
    if (rd_en_i) begin
      for (int k = 0; k < 3; k++) begin
        int r;
        r = int'(rd_row_i) + k;
        if (r >= 0 && r < int'(FM)) bdata_q[r % 3] <= bank_q[r % 3][baddr(rd_buf_i, r, int'(rd_col_i))];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vld_q <= '0;
      for (int k = 0; k < 3; k++) sel_q[k] <= '0;
    end else if (rd_en_i) begin
      for (int k = 0; k < 3; k++) begin
        int r;
        r = int'(rd_row_i) + k;
        vld_q[k] <= (r >= 0) && (r < int'(rd_h_i)) && (r < int'(FM));
        sel_q[k] <= 2'((r + 3) % 3);
      end
    end
  end

  always_comb begin
    for (int k = 0; k < 3; k++)
      rd_data_o[k] = vld_q[k] ? bdata_q[sel_q[k]] : '0;
  end
endmodule
