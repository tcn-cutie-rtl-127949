// tb_linebuffer: shifts random decompressed columns (and zero columns) into
// linebuffer, keeps the last three here, and checks every trit of the
// 3x3x96 window at bit 2*((row*3+col)*96+ch), col 0 being the oldest column.
// Also checks that the window holds when shift_i is low.
module tb_linebuffer;
  import cutie_pkg::*;
  localparam int unsigned NC = 96;

  logic clk = 0, rst_n = 0, shift = 0, zero = 0;
  logic [2:0][2*NC-1:0] col = '0;
  logic [9*2*NC-1:0] window;
  logic [2:0][2*NC-1:0] ref_cols [3];   // [col][row]
  int checks = 0, failures = 0;

  linebuffer #(.NC(NC)) dut (.clk_i(clk), .rst_ni(rst_n), .shift_i(shift), .zero_i(zero),
                             .col_i(col), .window_o(window));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        for (int ch = 0; ch < NC; ch++) begin
          checks++;
          if (window[2*((r*3+c)*NC+ch) +: 2] != ref_cols[c][r][2*ch +: 2]) begin
            failures++;
            if (failures < 10) $display("r%0d c%0d ch%0d mismatch", r, c, ch);
          end
        end
  endtask

  initial begin
    for (int c = 0; c < 3; c++) ref_cols[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 60; i++) begin
      @(negedge clk);
      shift = ($urandom_range(0, 3) != 0);
      zero  = ($urandom_range(0, 4) == 0);
      for (int r = 0; r < 3; r++)
        for (int w = 0; w < 2*NC; w += 32) col[r][w +: 32] = $urandom;
      @(negedge clk);
      if (shift) begin
        ref_cols[0] = ref_cols[1];
        ref_cols[1] = ref_cols[2];
        ref_cols[2] = zero ? '0 : col;
      end
      shift = 0;
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
