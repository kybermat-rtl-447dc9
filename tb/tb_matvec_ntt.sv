// tb_matvec_ntt -- self-checking test of the NTT-domain matrix-vector
// module for K = 2 (Kyber-512) and K = 3 (Kyber-768).
// Every cycle each instance gets fresh random r-hat and A-hat values for
// positions 2j and 2j+1 (j = cycle mod 64) and a random valid flag. The
// outputs must appear exactly 10+K cycles later (the paper's Table 4
// pipeline depths, 12 and 13) and equal, per data-path d,
//   p_e,i = sum_j a_e(j,i) r_e,j + g * a_o(j,i) r_o,j
//   p_o,i = sum_j a_e(j,i) r_o,j + a_o(j,i) r_e,j
// with g the evaluation point of the position -- the direct product of
// the even/odd halves, not the shared-sub-structure form the RTL uses.
module tb_matvec_ntt;
  import kyber_pkg::*;
  import tb_ref_pkg::*;
  localparam int NCYC = 600;
  localparam int NK = 2;
  localparam int KV [NK] = '{2, 3};

  logic clk = 0, rst_n = 0;
  int   checks = 0, failures = 0, done_cnt = 0;

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar gi = 0; gi < NK; gi++) begin : g_k
    localparam int K = KV[gi];
    localparam int LAT = 10 + K;
    logic       iv, ov;
    logic [5:0] pos;
    coeff_t     re [K][2], ro [K][2], pe [K][2], po [K][2];
    coeff_t     ae [K][K][2], ao [K][K][2];
    // expected results, indexed by input cycle
    int         exp_pe [NCYC][K][2], exp_po [NCYC][K][2];
    logic       exp_v  [NCYC];

    matvec_ntt #(.K(K)) dut (.clk(clk), .rst_n(rst_n), .in_valid(iv), .pos(pos),
      .re(re), .ro(ro), .ae(ae), .ao(ao), .out_valid(ov), .pe(pe), .po(po));

    initial begin
      iv = 0; pos = 0;
      for (int i = 0; i < K; i++) for (int d = 0; d < 2; d++) begin
        re[i][d] = 0; ro[i][d] = 0;
        for (int j = 0; j < K; j++) begin ae[i][j][d] = 0; ao[i][j][d] = 0; end
      end
      repeat (3) @(negedge clk);
      rst_n = 1;
      for (int c = 0; c < NCYC; c++) begin
        @(negedge clk);
        // check the result of the inputs driven LAT cycles ago
        if (c >= LAT) begin
          checks++;
          if (ov !== exp_v[c - LAT]) begin
            failures++;
            if (failures < 10) $display("K=%0d cycle %0d: valid %0d exp %0d", K, c, ov, exp_v[c - LAT]);
          end
          for (int i = 0; i < K; i++) for (int d = 0; d < 2; d++) begin
            checks++;
            if (int'(pe[i][d]) != exp_pe[c - LAT][i][d] || int'(po[i][d]) != exp_po[c - LAT][i][d]) begin
              failures++;
              if (failures < 10)
                $display("K=%0d cycle %0d row %0d path %0d: got (%0d,%0d) exp (%0d,%0d)", K, c, i, d,
                         pe[i][d], po[i][d], exp_pe[c - LAT][i][d], exp_po[c - LAT][i][d]);
            end
          end
        end
        // new inputs
        iv  = ($urandom_range(3) != 0);
        pos = 6'(c % 64);
        for (int i = 0; i < K; i++) for (int d = 0; d < 2; d++) begin
          re[i][d] = coeff_t'($urandom_range(Q - 1));
          ro[i][d] = coeff_t'($urandom_range(Q - 1));
          for (int j = 0; j < K; j++) begin
            ae[i][j][d] = coeff_t'($urandom_range(Q - 1));
            ao[i][j][d] = coeff_t'($urandom_range(Q - 1));
          end
        end
        exp_v[c] = iv;
        for (int i = 0; i < K; i++) for (int d = 0; d < 2; d++) begin
          int g, se, so;
          g = gpt(2 * (c % 64) + d); se = 0; so = 0;
          for (int j = 0; j < K; j++) begin
            se = (se + mulq(int'(ae[j][i][d]), int'(re[j][d]))
                     + mulq(g, mulq(int'(ao[j][i][d]), int'(ro[j][d])))) % Q;
            so = (so + mulq(int'(ae[j][i][d]), int'(ro[j][d]))
                     + mulq(int'(ao[j][i][d]), int'(re[j][d]))) % Q;
          end
          exp_pe[c][i][d] = se; exp_po[c][i][d] = so;
        end
      end
      done_cnt++;
    end
  end

  initial begin
    wait (done_cnt == NK);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
