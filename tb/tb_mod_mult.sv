// tb_mod_mult -- self-checking test of the pipelined modular multiplier.
// Drives one operand pair per cycle (corner values first, then random
// residues) and checks every product against (a*b) % 3329 exactly LAT = 5
// cycles later, which also checks the pipeline depth.
module tb_mod_mult;
  import kyber_pkg::*;
  localparam int LAT = 5;
  localparam int NVEC = 4000;

  logic   clk = 0;
  coeff_t a, b, p;
  int     checks = 0, failures = 0;
  int     ea [$], eb [$];

  mod_mult #(.LAT(LAT)) dut (.clk(clk), .a(a), .b(b), .p(p));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int corner [6] = '{0, 1, 2, 1664, 3327, 3328};
    a = 0; b = 0;
    for (int n = 0; n < NVEC + LAT; n++) begin
      @(negedge clk);
      // check the product of the pair driven LAT cycles ago
      if (n >= LAT) begin
        int xa, xb, exp_p;
        xa = ea.pop_front(); xb = eb.pop_front();
        exp_p = (xa * xb) % Q;
        checks++;
        if (int'(p) != exp_p) begin
          failures++;
          if (failures < 10) $display("mismatch %0d*%0d: got %0d exp %0d", xa, xb, p, exp_p);
        end
      end
      if (n < 36) begin
        a = coeff_t'(corner[n % 6]); b = coeff_t'(corner[n / 6]);
      end else begin
        a = coeff_t'($urandom_range(Q - 1)); b = coeff_t'($urandom_range(Q - 1));
      end
      ea.push_back(int'(a)); eb.push_back(int'(b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
