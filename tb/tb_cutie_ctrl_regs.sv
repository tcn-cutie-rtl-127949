// tb_cutie_ctrl_regs: APB writes and reads of cutie_ctrl_regs. Checks
// read-back of every layer descriptor word (masked to its 20/23 bits), the
// descriptor seen on cfg_o for each index, NUM_LAYERS and TRIG_EN, that
// start and TCN-clear are one-cycle pulses, and the busy/done status bits
// (done set by done_i, cleared by the next start).
module tb_cutie_ctrl_regs;
  import cutie_pkg::*;
  localparam int unsigned NL = 16;

  logic clk = 0, rst_n = 0;
  logic psel = 0, penable = 0, pwrite = 0;
  logic [11:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic pready, pslverr, start, tcn_clear, trig_en, busy = 0, done = 0;
  logic [4:0] num_layers;
  logic [3:0] cfg_idx = '0;
  layer_cfg_t cfg;
  logic [31:0] w0 [NL], w1 [NL];
  int checks = 0, failures = 0;
  int starts = 0, clears = 0;

  cutie_ctrl_regs #(.NL(NL)) dut (
    .clk_i(clk), .rst_ni(rst_n), .psel_i(psel), .penable_i(penable), .pwrite_i(pwrite),
    .paddr_i(paddr), .pwdata_i(pwdata), .prdata_o(prdata), .pready_o(pready),
    .pslverr_o(pslverr), .start_o(start), .tcn_clear_o(tcn_clear),
    .num_layers_o(num_layers), .trig_en_o(trig_en), .cfg_idx_i(cfg_idx), .cfg_o(cfg),
    .busy_i(busy), .done_i(done));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (rst_n && start) starts++;
    if (rst_n && tcn_clear) clears++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apb_write(logic [11:0] a, logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 1; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask

  task automatic apb_read(logic [11:0] a, output logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 0; paddr = a;
    @(negedge clk); penable = 1; #1; d = prdata;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  task automatic expect32(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    logic [31:0] d;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      w0[l] = $urandom; w1[l] = $urandom;
      apb_write(12'(32'h100 + 8*l), w0[l]);
      apb_write(12'(32'h104 + 8*l), w1[l]);
    end
    for (int l = 0; l < NL; l++) begin
      apb_read(12'(32'h100 + 8*l), d); expect32("w0", d, w0[l] & 32'h000F_FFFF);
      apb_read(12'(32'h104 + 8*l), d); expect32("w1", d, w1[l] & 32'h007F_FFFF);
      cfg_idx = 4'(l); #1;
      expect32("cfg lo", 32'(cfg[19:0]), w0[l] & 32'h000F_FFFF);
      expect32("cfg hi", 32'(cfg[42:20]), w1[l] & 32'h007F_FFFF);
      checks++;
      if (cfg.in_w != w0[l][6:0] || cfg.n_oc != w1[l][6:0] || cfg.seq_len != w1[l][22:18]) failures++;
    end
    apb_write(12'h008, 32'd9);  apb_read(12'h008, d); expect32("num_layers", d, 32'd9);
    checks++; if (num_layers != 5'd9) failures++;
    apb_write(12'h00C, 32'd1);  apb_read(12'h00C, d); expect32("trig_en", d, 32'd1);
    checks++; if (!trig_en) failures++;
    // start pulse, busy, done
    apb_write(12'h000, 32'd1);
    @(negedge clk);
    expect32("starts", 32'(starts), 32'd1);
    busy = 1;
    apb_read(12'h004, d); expect32("status busy", d, 32'd1);
    @(negedge clk); busy = 0; done = 1; @(negedge clk); done = 0;
    apb_read(12'h004, d); expect32("status done", d, 32'd2);
    apb_write(12'h000, 32'd2);
    @(negedge clk);
    expect32("clears", 32'(clears), 32'd1);
    apb_read(12'h004, d); expect32("done kept", d, 32'd2);
    apb_write(12'h000, 32'd1);
    apb_read(12'h004, d); expect32("done cleared", d, 32'd0);
    expect32("starts2", 32'(starts), 32'd2);
    checks++; if (!pready || pslverr) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
