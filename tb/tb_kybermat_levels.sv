// tb_kybermat_levels -- end-to-end runs of the accelerator at the two
// higher Kyber security levels: K = 3 (Kyber-768) and K = 4 (Kyber-1024).
// For each, three matrix-vector products (one, an idle frame, two back to
// back) are checked coefficient by coefficient against a schoolbook
// reference. Only the matrix stage deepens with K, so the first-output
// latency is 105 + (10+K) + 105 cycles: 223 and 224.
module tb_kybermat_levels;
  import kyber_pkg::*;
  localparam int NL = 2;
  localparam int KV [NL] = '{3, 4};

  logic clk = 0;
  logic done_v [NL];
  int   chk_v [NL], fail_v [NL];

  always #5 clk = ~clk;

  for (genvar g = 0; g < NL; g++) begin : g_lvl
    localparam int K = KV[g];
    logic   rst_n, in_valid, ahat_req, out_valid, done;
    coeff_t r_in [K][4], p_out [K][4];
    coeff_t ahat_in [K][K][4];
    int     checks, failures;

    kybermat_top #(.K(K)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .r_in(r_in),
      .ahat_req(ahat_req), .ahat_in(ahat_in), .out_valid(out_valid), .p_out(p_out));

    kyber_e2e_driver #(.K(K), .NPROD(3), .GAP_AT(1), .EXP_LAT(220 + K), .EXP_ALAT(105)) drv (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .r_in(r_in),
      .ahat_req(ahat_req), .ahat_in(ahat_in), .out_valid(out_valid), .p_out(p_out),
      .done(done), .checks(checks), .failures(failures));

    assign done_v[g] = done;
    assign chk_v[g]  = checks;
    assign fail_v[g] = failures;
  end

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", chk_v[0] + chk_v[1], fail_v[0] + fail_v[1] + 1);
    $finish;
  end

  initial begin
    wait (done_v[0] && done_v[1]);
    $display("TB_RESULT checks=%0d failures=%0d", chk_v[0] + chk_v[1], fail_v[0] + fail_v[1]);
    $finish;
  end
endmodule
