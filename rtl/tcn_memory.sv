// tcn_memory: the TCN memory, a flip-flop shift register of DEPTH feature
// vectors (24 in the main configuration) with a 24-to-3 read multiplexer.
//
// Each push shifts every entry one place and stores the new compressed
// vector in entry 0, so entry k holds the vector pushed k pushes ago. The
// sequence seen by a TCN layer is x[0..seq_len-1] with x[seq_len-1] the
// newest, so x[n] sits in entry seq_len-1-n. A read names the time index of
// the first required pixel (rd_base_i) and the dilation (rd_stride_i) and
// returns x[base], x[base+D], x[base+2D] side by side (three compressed
// pixels, 480 bits for 96 channels), which is one column of the 2D wrapped
// feature map. Indices outside 0..seq_len-1 read as zero; this is the causal
// and end padding of the 1D-to-2D mapping. The read data is registered (one
// cycle latency, like the activation memory), so the two sources can share
// the path to the line buffer.
//
// Follows the paper: shift register of 24 flip-flop entries, 160-bit input,
// 480-bit output, three time steps chosen from the address of the first
// pixel. This design's choices: entry order, the zero rule, the registered
// output and the synchronous clear.
module tcn_memory
  import cutie_pkg::*;
#(
  parameter int unsigned DEPTH = TCN_STEPS,
  parameter int unsigned PW    = 8*cbytes(N_CH),   // compressed pixel width
  localparam int unsigned IW   = $clog2(DEPTH) + 2  // signed time index width
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic                      clear_i,
  input  logic                      push_i,
  input  logic [PW-1:0]             push_data_i,
  input  logic                      rd_en_i,
  input  logic signed [IW-1:0]      rd_base_i,
  input  logic [IW-2:0]             rd_stride_i,
  input  logic [IW-2:0]             seq_len_i,
  output logic [2:0][PW-1:0]        rd_data_o
);
  logic [PW-1:0] mem_q [DEPTH];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= '0;
    end else if (clear_i) begin
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= '0;
    end else if (push_i) begin
      mem_q[0] <= push_data_i;
      for (int i = 1; i < DEPTH; i++) mem_q[i] <= mem_q[i-1];
    end
  end

  // 24-to-3 multiplexer
  logic [2:0][PW-1:0] rd_d;
  always_comb begin
    for (int k = 0; k < 3; k++) begin
      int n, e;
      n = int'(rd_base_i) + k * int'(rd_stride_i);
      e = int'(seq_len_i) - 1 - n;
      rd_d[k] = '0;
      if (n >= 0 && n < int'(seq_len_i) && e < int'(DEPTH))
        rd_d[k] = mem_q[e];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      rd_data_o <= '0;
    else if (rd_en_i) rd_data_o <= rd_d;
  end
endmodule
