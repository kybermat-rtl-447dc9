// tb_intt_r2mdc -- self-checking test of the 128-point inverse NTT processor.
// Five random frames are streamed with X[2j] on in_u and X[2j+1] on in_v; frames 0-1 and 2-4 are
// back to back, with one idle frame between. Each output pair (x[l], x[l+64])
// is compared with the transform evaluated directly from its definition
// (tb_ref_pkg). Also checked: the latency from the first input to the first
// output, 7*(MUL_LAT+1)+63 = 105 cycles, and the output count.
module tb_intt_r2mdc;
  import kyber_pkg::*;
  import tb_ref_pkg::*;
  localparam int NF  = 5;
  localparam int LAT = 105;

  logic   clk = 0, rst_n = 0;
  logic   iv, ov;
  coeff_t iu, ivv, ou, ovv;
  int     checks = 0, failures = 0;
  poly128_t xin [NF], xexp [NF];
  int     t_in = -1, t_out = -1, nout = 0;

  intt_r2mdc dut (.clk(clk), .rst_n(rst_n), .in_valid(iv), .in_u(iu), .in_v(ivv),
              .out_valid(ov), .out_u(ou), .out_v(ovv));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < NF; f++) begin
      for (int t = 0; t < 128; t++) xin[f][t] = (f == 0 && t < 3) ? (t == 1 ? 1 : 0) : int'($urandom_range(Q - 1));
      xexp[f] = intt128(xin[f]);
    end
    iv = 0; iu = 0; ivv = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int f = 0; f < NF; f++) begin
      if (f == 2) begin
        iv = 0;
        repeat (64) @(negedge clk);
      end
      for (int l = 0; l < 64; l++) begin
        iv = 1;
        iu = coeff_t'(xin[f][2 * l]); ivv = coeff_t'(xin[f][2 * l + 1]);
        if (t_in < 0) t_in = $time / 10;
        @(negedge clk);
      end
    end
    iv = 0;
    repeat (LAT + 100) @(negedge clk);
    checks++;
    if (nout != 64 * NF) begin
      failures++;
      $display("%0d outputs, expected %0d", nout, 64 * NF);
    end
    checks++;
    if (t_out - t_in != LAT) begin
      failures++;
      $display("latency %0d, expected %0d", t_out - t_in, LAT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && ov) begin
    int f, j, eu, ev;
    if (t_out < 0) t_out = $time / 10;
    f = nout / 64; j = nout % 64;
    nout++;
    if (f < NF) begin
      eu = xexp[f][j]; ev = xexp[f][j + 64];
      checks++;
      if (int'(ou) != eu || int'(ovv) != ev) begin
        failures++;
        if (failures < 10) $display("frame %0d pair %0d: got (%0d,%0d) exp (%0d,%0d)", f, j, ou, ovv, eu, ev);
      end
    end
  end
endmodule
