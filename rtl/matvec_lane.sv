// matvec_lane -- one data-path (one NTT-domain position per cycle) of the
// matrix-vector multiplication p-hat = A-hat^T r-hat with sub-structure
// sharing.
//
// At one position, with r_e/r_o the even/odd NTT components of r_j and
// a_e/a_o those of A-hat entry (j,i), the lane computes
//   pre-processing  f_j = { r_o - r_e,  r_e,  gamma*r_o - r_e }      (K mults)
//                   g_ji = { a_e,  a_e + a_o,  a_o }
//   products        beta_ij,m = g_ji,m * f_j,m    m = 0,1,2            (3K^2 mults)
//   row sums        s_i,m = sum_j beta_ij,m
//   post-processing p_e,i = s_i,1 + s_i,2 ;  p_o,i = s_i,1 + s_i,0
// which equals p_e = sum_j (a_e r_e + gamma a_o r_o), p_o = sum_j (a_e r_o + a_o r_e),
// the even/odd halves of sum_j a_ji * r_j mod (x^256+1). gamma is the
// NTT(x^2) constant of the position: the single multiplication by it per
// input vector entry, shared by all K rows, is the sub-structure sharing.
// Counts per lane: 3K^2+K multipliers, 4K^2+K adders/subtractors.
// Timing (latency 2*MUL_LAT + K, = 10+K with MUL_LAT=5):
//   0..MUL_LAT      gamma*r_o; f_0 and g computed at once and delayed
//   MUL_LAT         f_2 = gamma*r_o - r_e, unregistered, feeds the beta mults
//   2*MUL_LAT       beta ready; K-1 registered additions form the row sums
//   2*MUL_LAT+K     p_e, p_o registered
// The equations and operator counts are the paper's (Algorithm 1, Fig. 6);
// the register placement is this design's choice, made so the latency grows
// by one cycle per K as the paper's Table 4 pipeline depths do.
module matvec_lane
  import kyber_pkg::*;
#(
  parameter int unsigned K       = 2,
  parameter int unsigned MUL_LAT = 5
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  coeff_t gamma,
  input  coeff_t re [K],
  input  coeff_t ro [K],
  input  coeff_t ae [K][K],    // ae[i][j] = even component of A-hat entry (i,j)
  input  coeff_t ao [K][K],
  output logic   out_valid,
  output coeff_t pe [K],
  output coeff_t po [K]
);
  localparam int unsigned LAT = 2 * MUL_LAT + K;

  // ---- pre-processing -------------------------------------------------
  coeff_t gr [K];                        // gamma * r_o, at MUL_LAT
  coeff_t f0_now [K];
  coeff_t g1_now [K][K];
  coeff_t re_d  [MUL_LAT][K];
  coeff_t f0_d  [MUL_LAT][K];
  coeff_t ae_d  [MUL_LAT][K][K];
  coeff_t ao_d  [MUL_LAT][K][K];
  coeff_t g1_d  [MUL_LAT][K][K];
  coeff_t f     [K][3];                  // f_j at MUL_LAT
  coeff_t g     [K][K][3];               // g_ij at MUL_LAT (entry (i,j) of A-hat)

  for (genvar j = 0; j < K; j++) begin : g_gam
    mod_mult #(.LAT(MUL_LAT)) u_gm (.clk(clk), .a(ro[j]), .b(gamma), .p(gr[j]));
  end

  always_comb begin
    for (int j = 0; j < int'(K); j++) begin
      f0_now[j] = sub_q(ro[j], re[j]);
      for (int i = 0; i < int'(K); i++) g1_now[i][j] = add_q(ae[i][j], ao[i][j]);
    end
  end

  always_ff @(posedge clk) begin
    re_d[0] <= re;
    f0_d[0] <= f0_now;
    ae_d[0] <= ae;
    ao_d[0] <= ao;
    g1_d[0] <= g1_now;
    for (int d = 1; d < int'(MUL_LAT); d++) begin
      re_d[d] <= re_d[d-1];
      f0_d[d] <= f0_d[d-1];
      ae_d[d] <= ae_d[d-1];
      ao_d[d] <= ao_d[d-1];
      g1_d[d] <= g1_d[d-1];
    end
  end

  always_comb begin
    for (int j = 0; j < int'(K); j++) begin
      f[j][0] = f0_d[MUL_LAT-1][j];
      f[j][1] = re_d[MUL_LAT-1][j];
      f[j][2] = sub_q(gr[j], re_d[MUL_LAT-1][j]);
      for (int i = 0; i < int'(K); i++) begin
        g[i][j][0] = ae_d[MUL_LAT-1][i][j];
        g[i][j][1] = g1_d[MUL_LAT-1][i][j];
        g[i][j][2] = ao_d[MUL_LAT-1][i][j];
      end
    end
  end

  // ---- point-wise products: beta[i][j][m] = g_ji,m * f_j,m -------------
  coeff_t beta [K][K][3];
  for (genvar i = 0; i < K; i++) begin : g_row
    for (genvar j = 0; j < K; j++) begin : g_col
      for (genvar m = 0; m < 3; m++) begin : g_m
        mod_mult #(.LAT(MUL_LAT)) u_bm (
          .clk(clk), .a(g[j][i][m]), .b(f[j][m]), .p(beta[i][j][m]));
      end
    end
  end

  // ---- row sums: a chain of K-1 registered modular additions -----------
  coeff_t rowsum [K][3];                 // at 2*MUL_LAT + K - 1
  if (K == 1) begin : g_nochain
    always_comb rowsum = beta[0];
  end else begin : g_chain
    coeff_t acc  [K-1][K][3];            // acc[s] = sum of beta[.][0..s+1], at 2L+s+1
    coeff_t bdly [K-1][K][K][3];         // bdly[s] = beta delayed s+1 cycles
    always_ff @(posedge clk) begin
      for (int i = 0; i < int'(K); i++)
        for (int m = 0; m < 3; m++)
          acc[0][i][m] <= add_q(beta[i][0][m], beta[i][1][m]);
      bdly[0] <= beta;
      for (int s = 1; s < int'(K) - 1; s++) begin
        bdly[s] <= bdly[s-1];
        for (int i = 0; i < int'(K); i++)
          for (int m = 0; m < 3; m++)
            acc[s][i][m] <= add_q(acc[s-1][i][m], bdly[s-1][i][s+1][m]);
      end
    end
    always_comb rowsum = acc[K-2];
  end

  // ---- post-processing -------------------------------------------------
  always_ff @(posedge clk) begin
    for (int i = 0; i < int'(K); i++) begin
      pe[i] <= add_q(rowsum[i][1], rowsum[i][2]);
      po[i] <= add_q(rowsum[i][1], rowsum[i][0]);
    end
  end

  // ---- valid ------------------------------------------------------------
  logic vpipe [LAT];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int d = 0; d < int'(LAT); d++) vpipe[d] <= 1'b0;
    end else begin
      vpipe[0] <= in_valid;
      for (int d = 1; d < int'(LAT); d++) vpipe[d] <= vpipe[d-1];
    end
  end
  assign out_valid = vpipe[LAT-1];
endmodule
