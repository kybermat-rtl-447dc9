// ntt_bf_ct -- one pipelined Cooley-Tukey butterfly stage of the forward
// 128-point NTT (stage STAGE = 0..6, butterfly span 64 >> STAGE).
//
// For each input pair (u, v): t = zeta*v, u' = u + t, v' = u - t.
// Pairs arrive in natural block order, one per cycle; c counts them from
// the first valid input (free-running mod 64), so the pair belongs to
// butterfly block b = c >> (6-STAGE) and uses zeta_k with k = 2^STAGE + b,
// zeta_k = 17^brv7(k), as in Kyber's reference NTT.
// Timing: the multiplier takes MUL_LAT cycles, the add/subtract one more;
// latency MUL_LAT+1, one pair per cycle. One modular multiplier, one adder
// and one subtractor per stage, as the paper counts them (7 stages give 7
// multipliers and 14 adders/subtractors per NTT processor).
// The butterfly type and twiddle order follow Kyber's reference NTT; the
// paper does not specify them.
module ntt_bf_ct
  import kyber_pkg::*;
#(
  parameter int unsigned STAGE   = 0,
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
  localparam table_t ZT = zeta_table();

  logic [5:0] c;
  logic       started;
  logic [6:0] k;
  coeff_t     zeta, t, u_d, sum, dif;
  coeff_t     u_pipe [MUL_LAT];
  logic       v_pipe [MUL_LAT+1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      c       <= '0;
      started <= 1'b0;
    end else if (started || in_valid) begin
      started <= 1'b1;
      c       <= c + 1'b1;
    end
  end

  assign k    = 7'((1 << STAGE) + (int'(c) >> (6 - STAGE)));
  assign zeta = ZT[k * QW +: QW];

  mod_mult #(.LAT(MUL_LAT)) u_mul (.clk(clk), .a(in_v), .b(zeta), .p(t));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(MUL_LAT); i++) u_pipe[i] <= '0;
      for (int i = 0; i <= int'(MUL_LAT); i++) v_pipe[i] <= 1'b0;
    end else begin
      u_pipe[0] <= in_u;
      v_pipe[0] <= in_valid;
      for (int i = 1; i < int'(MUL_LAT); i++) u_pipe[i] <= u_pipe[i-1];
      for (int i = 1; i <= int'(MUL_LAT); i++) v_pipe[i] <= v_pipe[i-1];
    end
  end

  assign u_d = u_pipe[MUL_LAT-1];

  mod_addsub #(.SUB(1'b0)) u_add (.a(u_d), .b(t), .y(sum));
  mod_addsub #(.SUB(1'b1)) u_sub (.a(u_d), .b(t), .y(dif));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_u <= '0;
      out_v <= '0;
    end else begin
      out_u <= sum;
      out_v <= dif;
    end
  end

  assign out_valid = v_pipe[MUL_LAT];
endmodule
