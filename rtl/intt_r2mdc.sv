// intt_r2mdc -- 128-point inverse NTT processor, feed-forward R2MDC
// pipeline with two input and two output data-paths.
//
// Transform: x[t] = (1/128) * sum_m X[m] * gamma_m^(-t) mod 3329, the exact
// inverse of ntt_r2mdc, scaling included.
// Input: X[2j] on in_u and X[2j+1] on in_v at frame cycle j, the order in
// which ntt_r2mdc delivers them. Output: x[l] on out_u and x[l+64] on out_v
// at output cycle l, the same order ntt_r2mdc takes its input in.
// Structure: stage 0 butterflies adjacent pairs directly; stages 1..6 are
// each a delay-commutator of S = 1 << (s-1) words followed by a
// Gentleman-Sande butterfly of span 1 << s. Each butterfly halves its
// outputs, which supplies the 1/128. Latency from first input to first
// output: 7*(MUL_LAT+1) + 63 cycles (105 with MUL_LAT = 5). Frames may
// follow back to back or be separated by whole frames.
// The R2MDC organisation with two data-paths and 7 multipliers is the
// paper's; butterfly type, twiddle order and where the scaling happens are
// this design's choice.
module intt_r2mdc
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
      r2mdc_commutator #(.S(1 << (s - 1)), .W(QW)) u_comm (
        .clk(clk), .rst_n(rst_n),
        .in_valid(bf_valid[s-1]), .in_u(bf_u[s-1]), .in_v(bf_v[s-1]),
        .out_valid(cm_valid[s]), .out_u(cm_u[s]), .out_v(cm_v[s]));
    end
    intt_bf_gs #(.STAGE(s), .MUL_LAT(MUL_LAT)) u_bf (
      .clk(clk), .rst_n(rst_n),
      .in_valid(cm_valid[s]), .in_u(cm_u[s]), .in_v(cm_v[s]),
      .out_valid(bf_valid[s]), .out_u(bf_u[s]), .out_v(bf_v[s]));
  end

  assign out_valid = bf_valid[6];
  assign out_u     = bf_u[6];
  assign out_v     = bf_v[6];
endmodule
