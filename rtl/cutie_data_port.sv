// cutie_data_port: the accelerator's data port towards the SoC interconnect.
// It lets the SoC fill the activation memory, the TCN memory and the weight
// memories with 32-bit words and read results back from the activation
// memory, while the accelerator is idle.
//
// Protocol (request/grant with a response one cycle later): a request is
// granted in the cycle it is made (gnt_o = req_i && !busy_i); the response
// (rvalid_o, and rdata_o for reads) follows in the next cycle. While an
// inference runs, requests wait. Word-address map (addr_i[19:18] = region):
//   0 activation memory: addr_i[16] half, [15:10] row, [9:4] column,
//     [3:0] 32-bit lane of the compressed pixel (0..4); readable
//   1 TCN memory: [3:0] lane; lanes are collected in a staging register and
//     writing the last lane pushes the whole vector; write only
//   2 weight memory: [17:10] OCU, [9:4] word, [3:0] lane (0..14); write only
// Reads of regions 1 and 2 return 0.
//
// Follows the paper: the data port on the high-bandwidth interconnect and
// SoC access to all accelerator memories. The protocol and address map are
// this design's own (sized for maps up to 64 columns and 64 weight words).
module cutie_data_port
  import cutie_pkg::*;
#(
  parameter int unsigned NO = N_OCU,
  parameter int unsigned FM = FM_MAX,
  parameter int unsigned WD = W_DEPTH,
  parameter int unsigned PW = 8*cbytes(N_CH),
  localparam int unsigned RW = $clog2(FM),
  localparam int unsigned AW = $clog2(WD),
  localparam int unsigned PL = (PW + 31) / 32,
  localparam int unsigned WW = 3 * PW,
  localparam int unsigned WL = (WW + 31) / 32
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  busy_i,
  // SoC side
  input  logic                  req_i,
  output logic                  gnt_o,
  input  logic                  we_i,
  input  logic [19:0]           addr_i,
  input  logic [31:0]           wdata_i,
  output logic                  rvalid_o,
  output logic [31:0]           rdata_o,
  // activation memory
  output logic                  am_rd_en_o,
  output logic                  am_rd_buf_o,
  output logic signed [RW+1:0]  am_rd_row_o,
  output logic [RW-1:0]         am_rd_col_o,
  output logic [RW:0]           am_rd_h_o,
  input  logic [PW-1:0]         am_rd_pix_i,   // middle pixel of the read column
  output logic                  am_wr_en_o,
  output logic                  am_wr_buf_o,
  output logic [RW-1:0]         am_wr_row_o,
  output logic [RW-1:0]         am_wr_col_o,
  output logic [PW-1:0]         am_wr_data_o,
  output logic [PL-1:0]         am_wr_strb_o,
  // TCN memory
  output logic                  tm_push_o,
  output logic [PW-1:0]         tm_data_o,
  // weight memories
  output logic [NO-1:0]         wm_wr_en_o,
  output logic [AW-1:0]         wm_wr_addr_o,
  output logic [WW-1:0]         wm_wr_data_o,
  output logic [WL-1:0]         wm_wr_strb_o
);
  logic        acc;
  logic [1:0]  region;
  logic [3:0]  lane;
  logic [PW-1:0] stage_q;
  logic        rd_act_q;
  logic [3:0]  lane_q;

  assign gnt_o  = req_i && !busy_i;
  assign acc    = gnt_o;
  assign region = addr_i[19:18];
  assign lane   = addr_i[3:0];

  always_comb begin
    am_rd_en_o   = acc && !we_i && region == 2'd0;
    am_rd_buf_o  = addr_i[16];
    am_rd_row_o  = (RW+2)'(int'(addr_i[10 +: RW]) - 1);
    am_rd_col_o  = addr_i[4 +: RW];
    am_rd_h_o    = (RW+1)'(FM);
    am_wr_en_o   = acc && we_i && region == 2'd0 && int'(lane) < int'(PL);
    am_wr_buf_o  = addr_i[16];
    am_wr_row_o  = addr_i[10 +: RW];
    am_wr_col_o  = addr_i[4 +: RW];
    am_wr_data_o = {PL{wdata_i}};
    am_wr_strb_o = PL'(1) << lane;

    tm_push_o = acc && we_i && region == 2'd1 && int'(lane) == int'(PL) - 1;
    tm_data_o = stage_q;
    tm_data_o[32*(PL-1) +: PW-32*(PL-1)] = wdata_i[PW-32*(PL-1)-1:0];

    wm_wr_en_o   = '0;
    if (acc && we_i && region == 2'd2 && int'(addr_i[17:10]) < int'(NO) && int'(lane) < int'(WL))
      wm_wr_en_o = NO'(1) << addr_i[17:10];
    wm_wr_addr_o = addr_i[4 +: AW];
    wm_wr_data_o = {WL{wdata_i}};
    wm_wr_strb_o = WL'(1) << lane;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      stage_q  <= '0;
      rvalid_o <= 1'b0;
      rd_act_q <= 1'b0;
      lane_q   <= '0;
    end else begin
      rvalid_o <= acc;
      rd_act_q <= am_rd_en_o;
      lane_q   <= lane;
      if (acc && we_i && region == 2'd1 && int'(lane) < int'(PL) - 1)
        stage_q[32*lane +: 32] <= wdata_i;
    end
  end

  always_comb begin
    rdata_o = '0;
    if (rd_act_q)
      for (int l = 0; l < PL; l++)
        if (lane_q == 4'(l)) rdata_o = 32'(am_rd_pix_i >> (32*l));
  end

  a_gnt_req: assert property (@(posedge clk_i) disable iff (!rst_ni) gnt_o |-> req_i);
  a_no_access_busy: assert property (@(posedge clk_i) disable iff (!rst_ni) busy_i |-> !gnt_o);
endmodule
