// trit_decompressor: inverse of trit_compressor. Each byte of the packed
// input is split into five base-3 digits (least significant first), each
// digit becoming a 2-bit trit code (0 -> 0, 1 -> +1, 2 -> -1). A byte value
// above 242 is not produced by the compressor; its digits are decoded the
// same way except that a top digit of 3 is read as 0. The paper names the decompressors
// (in front of the line buffer and of every weight buffer) and their 160-bit
// input per pixel; the code is this design's choice. Combinational.
module trit_decompressor
  import cutie_pkg::*;
#(
  parameter int unsigned N = N_CH
) (
  input  logic [8*cbytes(N)-1:0]  packed_i,
  output logic [2*N-1:0]          trits_o
);
  localparam int unsigned NB = cbytes(N);

  always_comb begin
    trits_o = '0;
    for (int unsigned j = 0; j < NB; j++) begin
      logic [7:0] v;
      v = packed_i[8*j +: 8];
      for (int unsigned k = 0; k < 5; k++) begin
        logic [1:0] d;
        d = 2'(v % 8'd3);
        v = v / 8'd3;
        if (5*j + k < N) trits_o[2*(5*j+k) +: 2] = digit2trit(d);
      end
    end
  end
endmodule
