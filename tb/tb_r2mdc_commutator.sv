// tb_r2mdc_commutator -- checks the delay-commutator for S = 1, 4 and 32.
// Each instance gets five frames of 2S cycles (tagged values: upper stream
// f*2S+t, lower stream 2048+f*2S+t) with a gap of one whole period after
// the second frame. Every valid output pair is compared, in order, with the
// expected sequence (y[a], y[a+S]) a=0..S-1 then (z[a], z[a+S]); the first
// valid output must come exactly S cycles after the first valid input and
// the number of valid outputs must equal the number of pairs sent.
module tb_r2mdc_commutator;
  import kyber_pkg::*;
  localparam int NS = 3;
  localparam int SV [NS] = '{1, 4, 32};
  localparam int NF = 5;

  logic clk = 0, rst_n = 0;
  int   checks = 0, failures = 0;
  int   done_cnt = 0;

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NS; g++) begin : g_inst
    localparam int S = SV[g];
    logic   iv, ov;
    coeff_t iu, ivv, ou, ovv;
    int     exp_u [$], exp_v [$];
    int     t_in, t_out, nout;

    r2mdc_commutator #(.S(S)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(iv), .in_u(iu), .in_v(ivv),
      .out_valid(ov), .out_u(ou), .out_v(ovv));

    initial begin
      iv = 0; iu = 0; ivv = 0; t_in = -1; t_out = -1; nout = 0;
      for (int f = 0; f < NF; f++)
        for (int h = 0; h < 2; h++)
          for (int a = 0; a < S; a++) begin
            exp_u.push_back(h * 2048 + f * 2 * S + a);
            exp_v.push_back(h * 2048 + f * 2 * S + a + S);
          end
      repeat (3) @(negedge clk);
      rst_n = 1;
      @(negedge clk);
      for (int f = 0; f < NF; f++) begin
        if (f == 2) begin                    // one idle period
          iv = 0;
          repeat (2 * S) @(negedge clk);
        end
        for (int t = 0; t < 2 * S; t++) begin
          iv = 1; iu = coeff_t'(f * 2 * S + t); ivv = coeff_t'(2048 + f * 2 * S + t);
          if (t_in < 0) t_in = $time / 10;
          @(negedge clk);
        end
      end
      iv = 0;
      repeat (4 * S + 4) @(negedge clk);
      checks++;
      if (nout != 2 * S * NF) begin
        failures++;
        $display("S=%0d: %0d valid outputs, expected %0d", S, nout, 2 * S * NF);
      end
      checks++;
      if (t_out - t_in != S) begin
        failures++;
        $display("S=%0d: latency %0d, expected %0d", S, t_out - t_in, S);
      end
      done_cnt++;
    end

    always @(negedge clk) if (rst_n && ov) begin
      if (t_out < 0) t_out = $time / 10;
      nout++;
      checks++;
      if (exp_u.size() == 0) begin
        failures++;
      end else begin
        int eu, ev;
        eu = exp_u.pop_front(); ev = exp_v.pop_front();
        if (int'(ou) != eu || int'(ovv) != ev) begin
          failures++;
          if (failures < 10) $display("S=%0d: got (%0d,%0d) exp (%0d,%0d)", S, ou, ovv, eu, ev);
        end
      end
    end
  end

  initial begin
    wait (done_cnt == NS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
