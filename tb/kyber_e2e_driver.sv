// kyber_e2e_driver -- stimulus and checker for a whole kybermat_top.
//
// Builds NPROD independent problems: a random K x K matrix A and vector r
// of length-256 polynomials mod 3329. A is handed to the design in NTT
// domain (Kyber order: coefficient 2m / 2m+1 is the even / odd half
// evaluated at 17^(2*brv7(m)+1), computed directly from the definition);
// the expected result is p_i = sum_j A(j,i) * r_j mod (x^256+1), computed
// by schoolbook multiplication. Products 0..GAP_AT-1 are streamed back to
// back, then one 64-cycle idle frame, then the rest back to back.
//
// Checked: every output coefficient; the latency from the first input to
// the first output (EXP_LAT); the latency to ahat_req (EXP_ALAT); the
// spacing of output frames (64 cycles when back to back, 128 across the
// idle frame); the number of output frames. Mechanisms counted, each must
// occur at least once: back-to-back frame pairs at the 64-cycle block
// processing time, and an idle frame between products.
module kyber_e2e_driver
  import kyber_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int K        = 2,
  parameter int NPROD    = 4,
  parameter int GAP_AT   = 2,
  parameter int EXP_LAT  = 222,
  parameter int EXP_ALAT = 105
) (
  input  logic   clk,
  output logic   rst_n,
  output logic   in_valid,
  output coeff_t r_in [K][4],
  input  logic   ahat_req,
  output coeff_t ahat_in [K][K][4],
  input  logic   out_valid,
  input  coeff_t p_out [K][4],
  output logic   done,
  output int     checks,
  output int     failures
);
  int a_t   [NPROD][K][K][256];
  int a_hat [NPROD][K][K][256];
  int r_t   [NPROD][K][256];
  int p_exp [NPROD][K][256];

  int t_in0, t_req0, t_out0;
  int frame_start [NPROD];
  int af, aj;                 // A-hat frame and position being requested
  int of, ol;                 // output frame and position
  int n_b2b, n_gap;
  int cyc;

  always @(posedge clk) cyc <= cyc + 1;

  // ---- problem generation --------------------------------------------
  task automatic build();
    poly128_t h, hh;
    poly256_t acc, prod, aa, rr;
    for (int p = 0; p < NPROD; p++) begin
      for (int i = 0; i < K; i++)
        for (int c = 0; c < 256; c++) r_t[p][i][c] = int'($urandom_range(Q - 1));
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++) begin
          for (int c = 0; c < 256; c++) a_t[p][i][j][c] = int'($urandom_range(Q - 1));
          for (int e = 0; e < 2; e++) begin
            for (int t = 0; t < 128; t++) h[t] = a_t[p][i][j][2 * t + e];
            hh = ntt128(h);
            for (int m = 0; m < 128; m++) a_hat[p][i][j][2 * m + e] = hh[m];
          end
        end
      for (int i = 0; i < K; i++) begin
        for (int c = 0; c < 256; c++) acc[c] = 0;
        for (int j = 0; j < K; j++) begin
          for (int c = 0; c < 256; c++) begin aa[c] = a_t[p][j][i][c]; rr[c] = r_t[p][j][c]; end
          prod = negamul(aa, rr);
          for (int c = 0; c < 256; c++) acc[c] = (acc[c] + prod[c]) % Q;
        end
        for (int c = 0; c < 256; c++) p_exp[p][i][c] = acc[c];
      end
    end
  endtask

  // ---- A-hat supply, in step with ahat_req ----------------------------
  always_comb begin
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++)
        for (int c = 0; c < 4; c++)
          ahat_in[i][j][c] = (ahat_req && af < NPROD) ? coeff_t'(a_hat[af][i][j][4 * aj + c]) : '0;
  end

  // advance on the same edge that samples ahat_in (non-blocking, so the
  // design sees the old value)
  always @(posedge clk) if (rst_n && ahat_req) begin
    if (t_req0 < 0) t_req0 = cyc;
    if (aj == 63) begin aj <= 0; af <= af + 1; end
    else aj <= aj + 1;
  end

  // ---- output checking --------------------------------------------------
  always @(negedge clk) if (rst_n && out_valid) begin
    if (t_out0 < 0) t_out0 = cyc;
    if (ol == 0 && of < NPROD) begin
      frame_start[of] = cyc;
      if (of > 0) begin
        checks++;
        if (cyc - frame_start[of-1] == 64) n_b2b++;
        else if (of == GAP_AT && cyc - frame_start[of-1] == 128) n_gap++;
        else begin
          failures++;
          $display("output frame %0d starts %0d cycles after the previous one", of, cyc - frame_start[of-1]);
        end
      end
    end
    if (of < NPROD) begin
      for (int i = 0; i < K; i++) begin
        int e0, e1, e2, e3;
        e0 = p_exp[of][i][2 * ol];       e1 = p_exp[of][i][2 * ol + 1];
        e2 = p_exp[of][i][2 * ol + 128]; e3 = p_exp[of][i][2 * ol + 129];
        checks++;
        if (int'(p_out[i][0]) != e0 || int'(p_out[i][1]) != e1 ||
            int'(p_out[i][2]) != e2 || int'(p_out[i][3]) != e3) begin
          failures++;
          if (failures < 10)
            $display("product %0d p_%0d cycle %0d: got %0d %0d %0d %0d exp %0d %0d %0d %0d", of, i, ol,
                     p_out[i][0], p_out[i][1], p_out[i][2], p_out[i][3], e0, e1, e2, e3);
        end
      end
    end else begin
      failures++;
    end
    ol = ol + 1;
    if (ol == 64) begin ol = 0; of = of + 1; end
  end

  // ---- input stream -------------------------------------------------------
  initial begin
    checks = 0; failures = 0; done = 0; cyc = 0;
    t_in0 = -1; t_req0 = -1; t_out0 = -1;
    af = 0; aj = 0; of = 0; ol = 0; n_b2b = 0; n_gap = 0;
    rst_n = 0; in_valid = 0;
    for (int i = 0; i < K; i++) for (int c = 0; c < 4; c++) r_in[i][c] = '0;
    build();
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int p = 0; p < NPROD; p++) begin
      if (p == GAP_AT) begin
        in_valid = 0;
        repeat (64) @(negedge clk);
      end
      for (int l = 0; l < 64; l++) begin
        in_valid = 1;
        if (t_in0 < 0) t_in0 = cyc;
        for (int i = 0; i < K; i++) begin
          r_in[i][0] = coeff_t'(r_t[p][i][2 * l]);
          r_in[i][1] = coeff_t'(r_t[p][i][2 * l + 1]);
          r_in[i][2] = coeff_t'(r_t[p][i][2 * l + 128]);
          r_in[i][3] = coeff_t'(r_t[p][i][2 * l + 129]);
        end
        @(negedge clk);
      end
    end
    in_valid = 0;
    repeat (EXP_LAT + 200) @(negedge clk);
    checks++;
    if (of != NPROD || ol != 0) begin
      failures++;
      $display("received %0d whole output frames (+%0d), expected %0d", of, ol, NPROD);
    end
    checks++;
    if (t_out0 - t_in0 != EXP_LAT) begin
      failures++;
      $display("latency first input -> first output %0d, expected %0d", t_out0 - t_in0, EXP_LAT);
    end
    checks++;
    if (t_req0 - t_in0 != EXP_ALAT) begin
      failures++;
      $display("latency first input -> ahat_req %0d, expected %0d", t_req0 - t_in0, EXP_ALAT);
    end
    $display("K=%0d: %0d products, latency %0d cycles, back-to-back frames %0d, idle frames %0d",
             K, NPROD, t_out0 - t_in0, n_b2b, n_gap);
    checks++;
    if (n_b2b == 0) begin failures++; $display("back-to-back streaming never happened"); end
    checks++;
    if (n_gap == 0) begin failures++; $display("idle frame never happened"); end
    done = 1;
  end
endmodule
