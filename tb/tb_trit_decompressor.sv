// tb_trit_decompressor: feeds random compressed bytes (0..242) into
// trit_decompressor and compares every trit with digit k of the byte,
// (v / 3^k) mod 3, computed here; also checks that compressing the result
// gives the input back (round trip through trit_compressor).
module tb_trit_decompressor;
  import cutie_pkg::*;
  localparam int unsigned N  = 96;
  localparam int unsigned NB = (N + 4) / 5;

  logic [8*NB-1:0] packed_i, repacked;
  logic [2*N-1:0]  trits;
  int checks = 0, failures = 0;

  trit_decompressor #(.N(N)) dut (.packed_i(packed_i), .trits_o(trits));
  trit_compressor   #(.N(N)) ref_c (.trits_i(trits), .packed_o(repacked));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300) begin
      int v, p, d;
      logic [1:0] e;
      for (int j = 0; j < NB; j++) begin
        // last byte only carries trit 95
        v = (j == NB-1) ? $urandom_range(0, 2) : $urandom_range(0, 242);
        packed_i[8*j +: 8] = 8'(v);
      end
      #1;
      for (int i = 0; i < N; i++) begin
        v = int'(packed_i[8*(i/5) +: 8]);
        p = 1;
        for (int k = 0; k < i % 5; k++) p *= 3;
        d = (v / p) % 3;
        e = (d == 1) ? 2'b01 : (d == 2) ? 2'b11 : 2'b00;
        checks++;
        if (trits[2*i +: 2] != e) begin
          failures++;
          if (failures < 10) $display("trit %0d: got %b exp %b", i, trits[2*i +: 2], e);
        end
      end
      checks++;
      if (repacked != packed_i) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
