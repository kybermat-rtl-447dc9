// ntt_r2mdc -- 128-point forward NTT processor, feed-forward R2MDC pipeline
// with two input and two output data-paths.
//
// Transform: X[m] = sum_t x[t] * gamma_m^t mod 3329, gamma_m = 17^(2*brv7(m)+1),
// the negacyclic NTT of Z_q[y]/(y^128+1) that Kyber applies to each
// polyphase half of a polynomial.
// Input: one 64-cycle frame per polynomial, x[l] on in_u and x[l+64] on
// in_v at frame cycle l. Output: X[2j] on out_u and X[2j+1] on out_v at
// output cycle j. Frames may follow back to back (one polynomial every 64
// cycles) or be separated by whole frames.
// Structure: stage 0 butterflies the input pairs directly; stages 1..6 are
// each a delay-commutator of S = 64 >> s words followed by a butterfly of
// span 64 >> s. Latency from a frame's first input to its first output:
// 7*(MUL_LAT+1) + 63 cycles (105 with MUL_LAT = 5).
// The R2MDC organisation with two data-paths, 7 multipliers and 14
// adders/subtractors is the paper's; the Cooley-Tukey butterflies and the
// output order are this design's choice (taken from Kyber's reference NTT).
module ntt_r2mdc
  import kyber_pkg::*;
#(
  parameter int unsigned MUL_LAT = 5
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  coeff_t in_u,
  input  coeff_t in_v,
  output logic   out_valid,
  output coeff_t out_u,
  output coeff_t out_v
);
  // bf_* : butterfly outputs; cm_* : commutator outputs (stage inputs)
  logic   bf_valid [7];
  coeff_t bf_u     [7];
  coeff_t bf_v     [7];
  logic   cm_valid [7];
  coeff_t cm_u     [7];
  coeff_t cm_v     [7];

  assign cm_valid[0] = in_valid;
  assign cm_u[0]     = in_u;
  assign cm_v[0]     = in_v;

  for (genvar s = 0; s < 7; s++) begin : g_stage
    if (s > 0) begin : g_comm
      r2mdc_commutator #(.S(64 >> s), .W(QW)) u_comm (
        .clk(clk), .rst_n(rst_n),
        .in_valid(bf_valid[s-1]), .in_u(bf_u[s-1]), .in_v(bf_v[s-1]),
        .out_valid(cm_valid[s]), .out_u(cm_u[s]), .out_v(cm_v[s]));
    end
    ntt_bf_ct #(.STAGE(s), .MUL_LAT(MUL_LAT)) u_bf (
      .clk(clk), .rst_n(rst_n),
      .in_valid(cm_valid[s]), .in_u(cm_u[s]), .in_v(cm_v[s]),
      .out_valid(bf_valid[s]), .out_u(bf_u[s]), .out_v(bf_v[s]));
  end

  assign out_valid = bf_valid[6];
  assign out_u     = bf_u[6];
  assign out_v     = bf_v[6];
endmodule
