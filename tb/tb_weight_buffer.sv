// tb_weight_buffer: loads three random kernel-row words and a threshold word
// into weight_buffer and checks the decompressed 3x3x96 kernel trit by trit
// against digits computed here ((byte / 3^k) mod 3 of the compressed
// pixel), and the two signed 14-bit thresholds. Repeated with several
// kernels, in varying load order.
module tb_weight_buffer;
  import cutie_pkg::*;
  localparam int unsigned NC = 96;
  localparam int unsigned PW = 160;

  logic clk = 0, rst_n = 0, load = 0;
  logic [1:0] idx = '0;
  logic [3*PW-1:0] data = '0;
  logic [9*2*NC-1:0] weights;
  logic signed [13:0] thr_lo, thr_hi;
  logic [3*PW-1:0] rows [3];
  int checks = 0, failures = 0;

  weight_buffer #(.NC(NC), .SW(14)) dut (.clk_i(clk), .rst_ni(rst_n), .load_i(load),
    .idx_i(idx), .data_i(data), .weights_o(weights), .thr_lo_o(thr_lo), .thr_hi_o(thr_hi));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [PW-1:0] rand_pix();
    logic [PW-1:0] v;
    for (int j = 0; j < PW/8; j++) v[8*j +: 8] = 8'($urandom_range(0, (j == PW/8-1) ? 2 : 242));
    return v;
  endfunction

  function automatic logic [1:0] exp_trit(logic [PW-1:0] pix, int ch);
    int v, p, d;
    v = int'(pix[8*(ch/5) +: 8]);
    p = 1;
    for (int k = 0; k < ch % 5; k++) p *= 3;
    d = (v / p) % 3;
    return (d == 1) ? 2'b01 : (d == 2) ? 2'b11 : 2'b00;
  endfunction

  task automatic load_word(int i, logic [3*PW-1:0] d);
    @(negedge clk);
    load = 1; idx = 2'(i); data = d;
    @(negedge clk);
    load = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (8) begin
      int lo, hi;
      int order [3];
      lo = $urandom_range(0, 2000) - 1000;
      hi = $urandom_range(0, 2000) - 1000;
      for (int r = 0; r < 3; r++) rows[r] = {rand_pix(), rand_pix(), rand_pix()};
      order[0] = $urandom_range(0, 2);
      order[1] = (order[0] + 1) % 3;
      order[2] = (order[0] + 2) % 3;
      for (int i = 0; i < 3; i++) load_word(order[i], rows[order[i]]);
      load_word(3, {{(3*PW-28){1'b1}}, 14'(hi), 14'(lo)});
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++)
          for (int ch = 0; ch < NC; ch++) begin
            checks++;
            if (weights[2*((r*3+c)*NC+ch) +: 2] != exp_trit(rows[r][PW*c +: PW], ch)) begin
              failures++;
              if (failures < 10) $display("r%0d c%0d ch%0d mismatch", r, c, ch);
            end
          end
      checks += 2;
      if (int'(thr_lo) != lo) failures++;
      if (int'(thr_hi) != hi) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
