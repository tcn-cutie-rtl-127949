// linebuffer: holds the last three pixel columns fed to it and presents them
// as one full 3x3xN_CH ternary activation window (1728 bits for 96 channels)
// to all output channel compute units at once.
//
// Each cycle with shift_i high, the decompressed column col_i (three pixels,
// top first) enters on the right and the leftmost column drops out. With
// zero_i also high a zero column enters instead (the left and right zero
// padding of the map). Because the activation memory delivers a whole column
// per cycle, the window advances by one pixel every cycle along a row and
// never stalls. Window layout: trit (row, col, ch) sits at bits
// 2*((row*3 + col)*N_CH + ch) +: 2, row 0 the top row and col 0 the oldest
// (leftmost) column. The window is the register output, valid the cycle
// after the shift.
//
// Follows the paper: a buffer between the decompressor and the OCUs with a
// 1728-bit window output, added to avoid data access stalls. This design's
// choices: it holds three columns (not whole lines), since the memory already
// delivers three rows per read, and the bit layout.
module linebuffer
  import cutie_pkg::*;
#(
  parameter int unsigned NC = N_CH
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic                    shift_i,
  input  logic                    zero_i,
  input  logic [2:0][2*NC-1:0]    col_i,
  output logic [9*2*NC-1:0]       window_o
);
  logic [2:0][2:0][2*NC-1:0] cols_q;  // [col][row]

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cols_q <= '0;
    end else if (shift_i) begin
      cols_q[0] <= cols_q[1];
      cols_q[1] <= cols_q[2];
      cols_q[2] <= zero_i ? '0 : col_i;
    end
  end

  always_comb begin
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        window_o[2*NC*(r*3+c) +: 2*NC] = cols_q[c][r];
  end
endmodule
