// trit_compressor: packs a vector of N ternary values (2-bit codes) into
// bytes holding five trits each (3^5 = 243 <= 256), so 96 channels (192 bits)
// become 20 bytes (160 bits), the widths printed on the compressor of the
// block diagram. Byte j holds trits 5j..5j+4 as the base-3 number
// d0 + 3*d1 + 9*d2 + 27*d3 + 81*d4 with digit 0 = 0, 1 = +1, 2 = -1, so an
// all-zero vector compresses to all-zero bytes. The paper names the
// compressor and its widths; the base-3 code and digit order are this
// design's choice. Purely combinational, no clock.
module trit_compressor
  import cutie_pkg::*;
#(
  parameter int unsigned N = N_CH
) (
  input  logic [2*N-1:0]          trits_i,
  output logic [8*cbytes(N)-1:0]  packed_o
);
  localparam int unsigned NB = cbytes(N);

  always_comb begin
    for (int unsigned j = 0; j < NB; j++) begin
      logic [7:0] acc;
      acc = '0;
      for (int k = 4; k >= 0; k--) begin
        logic [1:0] d;
        d = (5*j + k < N) ? trit2digit(trits_i[2*(5*j+k) +: 2]) : 2'd0;
        acc = 8'(acc * 8'd3) + 8'(d);
      end
      packed_o[8*j +: 8] = acc;
    end
  end
endmodule
