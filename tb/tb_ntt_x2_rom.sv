// tb_ntt_x2_rom -- checks the NTT(x^2) constants for all 64 pair indices.
// Each constant must equal the evaluation point of its NTT-domain position
// (computed by repeated multiplication in tb_ref_pkg), be a root of
// y^128 + 1 (g^128 = q-1), and the lower one must be q minus the upper one.
module tb_ntt_x2_rom;
  import kyber_pkg::*;
  import tb_ref_pkg::*;
  logic [5:0] pos;
  coeff_t     gu, gv;
  int checks = 0, failures = 0;

  ntt_x2_rom dut (.pos(pos), .gamma_u(gu), .gamma_v(gv));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < 64; j++) begin
      pos = 6'(j);
      #1;
      checks += 4;
      if (int'(gu) != gpt(2 * j))     begin failures++; $display("pos %0d upper %0d exp %0d", j, gu, gpt(2*j)); end
      if (int'(gv) != gpt(2 * j + 1)) begin failures++; $display("pos %0d lower %0d", j, gv); end
      if (powq(int'(gu), 128) != Q - 1) failures++;
      if ((int'(gu) + int'(gv)) % Q != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
