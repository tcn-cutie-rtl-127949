// tb_tcn_memory: pushes random compressed vectors into tcn_memory and reads
// random (base, dilation, sequence length) triples, comparing the three
// returned pixels with a reference history kept here: x[n] is the vector
// pushed (seq_len-1-n) pushes ago, zero when n is outside 0..seq_len-1 or
// nothing was pushed that long ago. Also checks the one-cycle read latency
// (data changes only after the clock edge) and the clear input.
module tb_tcn_memory;
  import cutie_pkg::*;
  localparam int unsigned DEPTH = 24;
  localparam int unsigned PW    = 160;
  localparam int unsigned IW    = $clog2(DEPTH) + 2;

  logic clk = 0, rst_n = 0;
  logic clear = 0, push = 0, rd_en = 0;
  logic [PW-1:0] push_data = '0;
  logic signed [IW-1:0] rd_base = '0;
  logic [IW-2:0] rd_stride = '0, seq_len = '0;
  logic [2:0][PW-1:0] rd_data;
  int checks = 0, failures = 0;

  logic [PW-1:0] hist [$];   // all pushed vectors, oldest first

  tcn_memory #(.DEPTH(DEPTH), .PW(PW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .push_i(push), .push_data_i(push_data),
    .rd_en_i(rd_en), .rd_base_i(rd_base), .rd_stride_i(rd_stride), .seq_len_i(seq_len),
    .rd_data_o(rd_data));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
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

  function automatic logic [PW-1:0] expect_x(int n, int L);
    int age;
    if (n < 0 || n >= L) return '0;
    age = L - 1 - n;
    if (age >= DEPTH || age >= hist.size()) return '0;
    return hist[hist.size() - 1 - age];
  endfunction

  task automatic do_read(int base, int d, int L);
    logic [2:0][PW-1:0] prev_data;
    @(negedge clk);
    rd_en = 1; rd_base = IW'(base); rd_stride = (IW-1)'(d); seq_len = (IW-1)'(L);
    prev_data = rd_data;
    #1;
    checks++;
    if (rd_data != prev_data) begin failures++; $display("read output changed before the clock"); end
    @(negedge clk);
    rd_en = 0;
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (rd_data[k] != expect_x(base + k*d, L)) begin
        failures++;
        if (failures < 10) $display("base %0d d %0d L %0d k %0d mismatch", base, d, L, k);
      end
    end
  endtask

  task automatic do_push(logic [PW-1:0] v);
    @(negedge clk);
    push = 1; push_data = v;
    @(negedge clk);
    push = 0;
    hist.push_back(v);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // partially filled
    repeat (5) do_push(rand_vec());
    for (int i = 0; i < 40; i++) do_read($urandom_range(0, 20) - 6, $urandom_range(1, 6), $urandom_range(1, 24));
    // full and wrapping
    repeat (40) do_push(rand_vec());
    for (int i = 0; i < 300; i++) do_read($urandom_range(0, 40) - 12, $urandom_range(1, 12), $urandom_range(1, 24));
    // dilation example: D = 3, L = 9
    do_read(-3, 3, 9);
    do_read(4, 3, 9);
    // clear
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    hist.delete();
    for (int i = 0; i < 10; i++) do_read($urandom_range(0, 10), 1, 24);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
