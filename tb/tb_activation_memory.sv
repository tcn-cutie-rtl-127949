// tb_activation_memory: fills part of both halves of activation_memory
// with random pixels (whole-pixel and single-lane writes), keeps a reference
// copy here, then reads random columns (top row -1..63, random map height)
// and checks the three returned pixels: the referenced pixel for rows inside
// 0..height-1, zero for the others, one cycle after the read.
module tb_activation_memory;
  import cutie_pkg::*;
  localparam int unsigned FM = 64;
  localparam int unsigned PW = 160;
  localparam int unsigned PL = 5;
  localparam int unsigned NCOL = 6;   // columns used by the test
  localparam int unsigned RW = 6;

  logic clk = 0, rst_n = 0;
  logic rd_en = 0, rd_buf = 0, wr_en = 0, wr_buf = 0;
  logic signed [RW+1:0] rd_row = '0;
  logic [RW-1:0] rd_col = '0, wr_row = '0, wr_col = '0;
  logic [RW:0] rd_h = '0;
  logic [2:0][PW-1:0] rd_data;
  logic [PW-1:0] wr_data = '0;
  logic [PL-1:0] wr_strb = '0;
  int checks = 0, failures = 0;

  logic [PW-1:0] ref_mem [2][FM][NCOL];

  activation_memory #(.FM(FM), .PW(PW)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .rd_en_i(rd_en), .rd_buf_i(rd_buf), .rd_row_i(rd_row), .rd_col_i(rd_col), .rd_h_i(rd_h),
    .rd_data_o(rd_data),
    .wr_en_i(wr_en), .wr_buf_i(wr_buf), .wr_row_i(wr_row), .wr_col_i(wr_col),
    .wr_data_i(wr_data), .wr_strb_i(wr_strb));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [PW-1:0] rand_vec();
    logic [PW-1:0] v;
    for (int i = 0; i < PW; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  task automatic write(int b, int r, int c, logic [PW-1:0] d, logic [PL-1:0] s);
    @(negedge clk);
    wr_en = 1; wr_buf = b[0]; wr_row = RW'(r); wr_col = RW'(c); wr_data = d; wr_strb = s;
    @(negedge clk);
    wr_en = 0;
    for (int l = 0; l < PL; l++)
      if (s[l]) ref_mem[b][r][c][32*l +: 32] = d[32*l +: 32];
  endtask

  task automatic read_check(int b, int top, int c, int h);
    @(negedge clk);
    rd_en = 1; rd_buf = b[0]; rd_row = (RW+2)'(top); rd_col = RW'(c); rd_h = (RW+1)'(h);
    @(negedge clk);
    rd_en = 0;
    for (int k = 0; k < 3; k++) begin
      logic [PW-1:0] e;
      int r;
      r = top + k;
      e = (r >= 0 && r < h) ? ref_mem[b][r][c] : '0;
      checks++;
      if (rd_data[k] != e) begin
        failures++;
        if (failures < 10) $display("buf %0d row %0d col %0d: mismatch", b, r, c);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < FM; r++)
        for (int c = 0; c < NCOL; c++)
          write(b, r, c, rand_vec(), '1);
    // single-lane updates
    repeat (200) write($urandom_range(0, 1), $urandom_range(0, FM-1), $urandom_range(0, NCOL-1),
                       rand_vec(), PL'(1) << $urandom_range(0, PL-1));
    repeat (600) read_check($urandom_range(0, 1), $urandom_range(0, FM) - 1,
                            $urandom_range(0, NCOL-1), $urandom_range(1, FM));
    // every top row of a full-height map
    for (int t = -1; t < int'(FM) - 1; t++) read_check(1, t, 2, FM);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
