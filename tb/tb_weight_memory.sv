// tb_weight_memory: writes every word of a weight_memory lane by lane
// (15 lanes of 32 bits), overwrites random single lanes, and reads all
// words back, checking against a reference copy and the one-cycle latency.
module tb_weight_memory;
  import cutie_pkg::*;
  localparam int unsigned DEPTH = 64;
  localparam int unsigned WW = 480;
  localparam int unsigned WL = 15;

  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [5:0] rd_addr = '0, wr_addr = '0;
  logic [WW-1:0] rd_data, wr_data = '0;
  logic [WL-1:0] wr_strb = '0;
  logic [WW-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  weight_memory #(.DEPTH(DEPTH), .WW(WW)) dut (
    .clk_i(clk), .rd_en_i(rd_en), .rd_addr_i(rd_addr), .rd_data_o(rd_data),
    .wr_en_i(wr_en), .wr_addr_i(wr_addr), .wr_data_i(wr_data), .wr_strb_i(wr_strb));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr_lane(int a, int l, logic [31:0] d);
    @(negedge clk);
    wr_en = 1; wr_addr = 6'(a); wr_strb = WL'(1) << l; wr_data = {WL{d}};
    @(negedge clk);
    wr_en = 0;
    ref_mem[a][32*l +: 32] = d;
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++)
      for (int l = 0; l < WL; l++) wr_lane(a, l, $urandom);
    repeat (300) wr_lane($urandom_range(0, DEPTH-1), $urandom_range(0, WL-1), $urandom);
    for (int i = 0; i < 2*DEPTH; i++) begin
      int a;
      logic [WW-1:0] prev_data;
      a = (i < DEPTH) ? i : $urandom_range(0, DEPTH-1);
      @(negedge clk);
      rd_en = 1; rd_addr = 6'(a);
      prev_data = rd_data;
      #1;
      checks++;
      if (rd_data != prev_data) failures++;
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data != ref_mem[a]) begin
        failures++;
        if (failures < 10) $display("word %0d mismatch", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
