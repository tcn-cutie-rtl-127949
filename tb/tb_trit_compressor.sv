// tb_trit_compressor: drives random 96-trit vectors (including all-zero and
// all -1/+1 vectors) into trit_compressor and compares every output byte
// with the base-3 value sum(d_k * 3^k) worked out here, digit 0/1/2 for
// trit 0/+1/-1.
module tb_trit_compressor;
  import cutie_pkg::*;
  localparam int unsigned N  = 96;
  localparam int unsigned NB = (N + 4) / 5;

  logic [2*N-1:0]  trits;
  logic [8*NB-1:0] packed_o;
  int checks = 0, failures = 0;

  trit_compressor #(.N(N)) dut (.trits_i(trits), .packed_o(packed_o));

  function automatic logic [1:0] rand_trit();
    case ($urandom_range(0, 3))
      0: return 2'b01;
      1: return 2'b11;
      2: return 2'b10;   // unused code, reads as 0
      default: return 2'b00;
    endcase
  endfunction

  task automatic check_vec();
    int exp_b, d, p;
    #1;
    for (int j = 0; j < NB; j++) begin
      exp_b = 0; p = 1;
      for (int k = 0; k < 5; k++) begin
        d = 0;
        if (5*j+k < N) begin
          if (trits[2*(5*j+k) +: 2] == 2'b01) d = 1;
          else if (trits[2*(5*j+k) +: 2] == 2'b11) d = 2;
        end
        exp_b += d * p; p *= 3;
      end
      checks++;
      if (packed_o[8*j +: 8] != 8'(exp_b)) begin
        failures++;
        if (failures < 10) $display("byte %0d: got %0d exp %0d", j, packed_o[8*j +: 8], exp_b);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    trits = '0; check_vec();
    for (int i = 0; i < N; i++) trits[2*i +: 2] = 2'b11; check_vec();
    for (int i = 0; i < N; i++) trits[2*i +: 2] = 2'b01; check_vec();
    repeat (200) begin
      for (int i = 0; i < N; i++) trits[2*i +: 2] = rand_trit();
      check_vec();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
