// tb_kybermat_top -- end-to-end test of the accelerator at its default
// parameters (K = 2, Kyber-512; five-stage multipliers). Four matrix-vector
// products are streamed (two back to back, an idle frame, two back to
// back) and every output coefficient is compared with a schoolbook
// reference by kyber_e2e_driver. Latency 222 cycles from the first input to
// the first output; a new product every 64 cycles.
module tb_kybermat_top;
  import kyber_pkg::*;
  localparam int K = 2;

  logic   clk = 0;
  logic   rst_n, in_valid, ahat_req, out_valid, done;
  coeff_t r_in [K][4], p_out [K][4];
  coeff_t ahat_in [K][K][4];
  int     checks, failures;

  always #5 clk = ~clk;

  kybermat_top dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .r_in(r_in),
    .ahat_req(ahat_req), .ahat_in(ahat_in), .out_valid(out_valid), .p_out(p_out));

  kyber_e2e_driver #(.K(K), .NPROD(4), .GAP_AT(2), .EXP_LAT(222), .EXP_ALAT(105)) drv (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .r_in(r_in),
    .ahat_req(ahat_req), .ahat_in(ahat_in), .out_valid(out_valid), .p_out(p_out),
    .done(done), .checks(checks), .failures(failures));

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
