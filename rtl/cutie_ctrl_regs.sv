// cutie_ctrl_regs: the accelerator's control port, an APB slave with the
// configuration and status registers. Register map (byte addresses):
//   0x000 CTRL       write: bit 0 starts an inference, bit 1 clears the TCN
//                    memory (both self-clearing pulses)
//   0x004 STATUS     read: bit 0 busy, bit 1 done (set when an inference
//                    ends, cleared by the next start)
//   0x008 NUM_LAYERS number of layers run per inference (1..MAX_LAYERS)
//   0x00C TRIG_EN    bit 0: let the external trigger line start inferences
//   0x100 + 8*l      layer l descriptor word 0 (layer_cfg_t bits [19:0])
//   0x104 + 8*l      layer l descriptor word 1 (layer_cfg_t bits [42:20])
// The descriptor of the layer selected by cfg_idx_i is output combinationally.
// APB: zero wait states (pready always 1), no error responses; writes take
// effect at the access phase (psel & penable & pwrite).
//
// Follows the paper: a control port on the APB, inference started by a
// configuration register or by an interrupt line from the I/O peripherals.
// The register map and descriptor format are this design's own.
module cutie_ctrl_regs
  import cutie_pkg::*;
#(
  parameter int unsigned NL = MAX_LAYERS,
  localparam int unsigned LW = $clog2(NL)
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // APB
  input  logic               psel_i,
  input  logic               penable_i,
  input  logic               pwrite_i,
  input  logic [11:0]        paddr_i,
  input  logic [31:0]        pwdata_i,
  output logic [31:0]        prdata_o,
  output logic               pready_o,
  output logic               pslverr_o,
  // to the scheduler
  output logic               start_o,
  output logic               tcn_clear_o,
  output logic [LW:0]        num_layers_o,
  output logic               trig_en_o,
  input  logic [LW-1:0]      cfg_idx_i,
  output layer_cfg_t         cfg_o,
  input  logic               busy_i,
  input  logic               done_i
);
  localparam int unsigned CW = $bits(layer_cfg_t);

  logic [CW-1:0] layer_q [NL];
  logic          done_q;
  logic          wr, rd;
  logic [LW-1:0] lidx;

  assign wr   = psel_i && penable_i && pwrite_i;
  assign rd   = psel_i && !pwrite_i;
  assign lidx = LW'(paddr_i[11:3]);
  assign pready_o  = 1'b1;
  assign pslverr_o = 1'b0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      start_o      <= 1'b0;
      tcn_clear_o  <= 1'b0;
      num_layers_o <= '0;
      trig_en_o    <= 1'b0;
      done_q       <= 1'b0;
      for (int l = 0; l < NL; l++) layer_q[l] <= '0;
    end else begin
      start_o     <= 1'b0;
      tcn_clear_o <= 1'b0;
      if (done_i) done_q <= 1'b1;
      if (wr) begin
        if (paddr_i[11:8] == 4'h1 && int'(paddr_i[7:3]) < int'(NL)) begin
          if (!paddr_i[2]) layer_q[lidx][19:0]    <= pwdata_i[19:0];
          else             layer_q[lidx][CW-1:20] <= pwdata_i[CW-21:0];
        end else begin
          case (paddr_i)
            12'h000: begin
              start_o     <= pwdata_i[0];
              tcn_clear_o <= pwdata_i[1];
              if (pwdata_i[0]) done_q <= 1'b0;
            end
            12'h008: num_layers_o <= pwdata_i[LW:0];
            12'h00C: trig_en_o    <= pwdata_i[0];
            default: ;
          endcase
        end
      end
    end
  end

  always_comb begin
    prdata_o = '0;
    if (rd) begin
      if (paddr_i[11:8] == 4'h1 && int'(paddr_i[7:3]) < int'(NL)) begin
        if (!paddr_i[2]) prdata_o[19:0]    = layer_q[lidx][19:0];
        else             prdata_o[CW-21:0] = layer_q[lidx][CW-1:20];
      end else begin
        case (paddr_i)
          12'h004: prdata_o[1:0]  = {done_q, busy_i};
          12'h008: prdata_o[LW:0] = num_layers_o;
          12'h00C: prdata_o[0]    = trig_en_o;
          default: ;
        endcase
      end
    end
  end

  assign cfg_o = layer_cfg_t'(layer_q[cfg_idx_i]);

  // APB: an access phase follows a setup phase with the same address
  logic psel_q, pen_q;
  always_ff @(posedge clk_i or negedge rst_ni)
    if (!rst_ni) begin psel_q <= 1'b0; pen_q <= 1'b0; end
    else begin psel_q <= psel_i; pen_q <= penable_i; end
  a_apb_setup: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (psel_i && penable_i) |-> (psel_q && !pen_q));
endmodule
