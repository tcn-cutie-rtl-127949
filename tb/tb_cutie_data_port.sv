// tb_cutie_data_port: drives 32-bit requests into cutie_data_port and checks
// the decoded memory accesses against the address map: activation memory
// writes (half, row, column, lane strobe, data), reads (top row = row-1 and
// lane selection of the returned middle pixel one cycle later), TCN memory
// lane staging and the push on the last lane, weight memory writes (one-hot
// OCU enable, word, lane), and that nothing is granted while busy.
module tb_cutie_data_port;
  import cutie_pkg::*;
  localparam int unsigned NO = 96;
  localparam int unsigned PW = 160;

  logic clk = 0, rst_n = 0, busy = 0;
  logic req = 0, we = 0;
  logic [19:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic gnt, rvalid;
  logic am_rd_en, am_rd_buf, am_wr_en, am_wr_buf, tm_push;
  logic signed [7:0] am_rd_row;
  logic [5:0] am_rd_col, am_wr_row, am_wr_col, wm_wr_addr;
  logic [6:0] am_rd_h;
  logic [PW-1:0] am_rd_pix = '0, am_wr_data, tm_data;
  logic [4:0] am_wr_strb;
  logic [NO-1:0] wm_wr_en;
  logic [479:0] wm_wr_data;
  logic [14:0] wm_wr_strb;
  int checks = 0, failures = 0;

  cutie_data_port #(.NO(NO), .FM(64), .WD(64), .PW(PW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .busy_i(busy), .req_i(req), .gnt_o(gnt), .we_i(we),
    .addr_i(addr), .wdata_i(wdata), .rvalid_o(rvalid), .rdata_o(rdata),
    .am_rd_en_o(am_rd_en), .am_rd_buf_o(am_rd_buf), .am_rd_row_o(am_rd_row),
    .am_rd_col_o(am_rd_col), .am_rd_h_o(am_rd_h), .am_rd_pix_i(am_rd_pix),
    .am_wr_en_o(am_wr_en), .am_wr_buf_o(am_wr_buf), .am_wr_row_o(am_wr_row),
    .am_wr_col_o(am_wr_col), .am_wr_data_o(am_wr_data), .am_wr_strb_o(am_wr_strb),
    .tm_push_o(tm_push), .tm_data_o(tm_data), .wm_wr_en_o(wm_wr_en),
    .wm_wr_addr_o(wm_wr_addr), .wm_wr_data_o(wm_wr_data), .wm_wr_strb_o(wm_wr_strb));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ck(string what, bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("fail: %s", what); end
  endtask

  initial begin
    logic [PW-1:0] tv;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // activation writes
    repeat (50) begin
      int b, r, c, l;
      b = $urandom_range(0, 1); r = $urandom_range(0, 63); c = $urandom_range(0, 63);
      l = $urandom_range(0, 4);
      @(negedge clk);
      req = 1; we = 1; wdata = $urandom;
      addr = 20'((b << 16) | (r << 10) | (c << 4) | l);
      #1;
      ck("act write", gnt && am_wr_en && am_wr_buf == b[0] && am_wr_row == 6'(r) &&
         am_wr_col == 6'(c) && am_wr_strb == 5'(1 << l) && am_wr_data[32*l +: 32] == wdata &&
         !am_rd_en && !tm_push && wm_wr_en == '0);
      @(negedge clk); req = 0; #1;
      ck("write response", rvalid);
    end
    // activation reads
    repeat (50) begin
      int b, r, c, l;
      b = $urandom_range(0, 1); r = $urandom_range(0, 63); c = $urandom_range(0, 63);
      l = $urandom_range(0, 4);
      @(negedge clk);
      req = 1; we = 0; addr = 20'((b << 16) | (r << 10) | (c << 4) | l);
      #1;
      ck("act read", gnt && am_rd_en && !am_wr_en && am_rd_buf == b[0] &&
         int'(am_rd_row) == r - 1 && am_rd_col == 6'(c) && am_rd_h == 7'd64);
      @(negedge clk); req = 0;
      for (int i = 0; i < PW; i += 32) am_rd_pix[i +: 32] = $urandom;
      #1;
      ck("read data", rvalid && rdata == am_rd_pix[32*l +: 32]);
    end
    // TCN staging and push
    for (int l = 0; l < 5; l++) begin
      @(negedge clk);
      req = 1; we = 1; addr = 20'((1 << 18) | l); wdata = $urandom;
      tv[32*l +: 32] = wdata;
      #1;
      ck("tcn push only on last lane", tm_push == (l == 4));
      if (l == 4) ck("tcn data", tm_data == tv);
    end
    @(negedge clk); req = 0;
    // weight writes
    repeat (50) begin
      int o, w, l;
      o = $urandom_range(0, NO-1); w = $urandom_range(0, 63); l = $urandom_range(0, 14);
      @(negedge clk);
      req = 1; we = 1; wdata = $urandom; addr = 20'((2 << 18) | (o << 10) | (w << 4) | l);
      #1;
      ck("weight write", gnt && wm_wr_en == (NO'(1) << o) && wm_wr_addr == 6'(w) &&
         wm_wr_strb == 15'(1 << l) && wm_wr_data[32*l +: 32] == wdata && !am_wr_en);
    end
    @(negedge clk); req = 0;
    // busy: no grant, no access
    @(negedge clk); busy = 1; req = 1; we = 1; addr = '0; #1;
    ck("no grant while busy", !gnt && !am_wr_en && wm_wr_en == '0);
    @(negedge clk); req = 0; busy = 0; #1;
    ck("no response after refused request", !rvalid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
