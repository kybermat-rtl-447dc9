// tb_mod_addsub -- self-checking test of the modular adder and subtractor.
// One instance of each mode; corner and random residues, results compared
// with (a+b) % q and (a-b+q) % q.
module tb_mod_addsub;
  import kyber_pkg::*;
  coeff_t a, b, ys, yd;
  int checks = 0, failures = 0;

  mod_addsub #(.SUB(1'b0)) u_add (.a(a), .b(b), .y(ys));
  mod_addsub #(.SUB(1'b1)) u_sub (.a(a), .b(b), .y(yd));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int corner [6] = '{0, 1, 1664, 1665, 3327, 3328};
    for (int n = 0; n < 5036; n++) begin
      if (n < 36) begin
        a = coeff_t'(corner[n % 6]); b = coeff_t'(corner[n / 6]);
      end else begin
        a = coeff_t'($urandom_range(Q - 1)); b = coeff_t'($urandom_range(Q - 1));
      end
      #1;
      checks += 2;
      if (int'(ys) != (int'(a) + int'(b)) % Q) begin
        failures++;
        if (failures < 10) $display("add %0d+%0d got %0d", a, b, ys);
      end
      if (int'(yd) != (int'(a) - int'(b) + Q) % Q) begin
        failures++;
        if (failures < 10) $display("sub %0d-%0d got %0d", a, b, yd);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
