// intt_bf_gs -- one pipelined Gentleman-Sande butterfly stage of the
// inverse 128-point NTT (stage STAGE = 0..6, butterfly span 1 << STAGE).
//
// For each input pair (u, v): u' = (u + v)/2, v' = zeta * (v - u)/2.
// Halving mod q (x/2 = x>>1 or (x+q)>>1) is done by the adder/subtractor,
// so seven stages apply the 1/128 factor of the inverse transform without
// a separate scaling multiplier. c counts pairs from the first valid input
// (mod 64); the pair belongs to block b = c >> STAGE and uses zeta_k with
// k = (128 >> STAGE) - 1 - b, Kyber's descending twiddle order.
// Timing: add/subtract and halving one cycle, then MUL_LAT cycles of
// multiplier; latency MUL_LAT+1, one pair per cycle. One multiplier and two
// adders/subtractors per stage, as the paper counts for its iNTT processor.
// Folding the 1/128 into per-stage halving is this design's choice; the
// paper does not say where the scaling is done.
module intt_bf_gs
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
  coeff_t     zeta, zeta_r, sum, dif, sum_r, dif_r, prod;
  coeff_t     s_pipe [MUL_LAT];
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

  assign k    = 7'((128 >> STAGE) - 1 - (int'(c) >> STAGE));
  assign zeta = ZT[k * QW +: QW];

  mod_addsub #(.SUB(1'b0)) u_add (.a(in_u), .b(in_v), .y(sum));
  mod_addsub #(.SUB(1'b1)) u_sub (.a(in_v), .b(in_u), .y(dif));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sum_r  <= '0;
      dif_r  <= '0;
      zeta_r <= '0;
    end else begin
      sum_r  <= half_q(sum);
      dif_r  <= half_q(dif);
      zeta_r <= zeta;
    end
  end

  mod_mult #(.LAT(MUL_LAT)) u_mul (.clk(clk), .a(dif_r), .b(zeta_r), .p(prod));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(MUL_LAT); i++) s_pipe[i] <= '0;
      for (int i = 0; i <= int'(MUL_LAT); i++) v_pipe[i] <= 1'b0;
    end else begin
      s_pipe[0] <= sum_r;
      v_pipe[0] <= in_valid;
      for (int i = 1; i < int'(MUL_LAT); i++) s_pipe[i] <= s_pipe[i-1];
      for (int i = 1; i <= int'(MUL_LAT); i++) v_pipe[i] <= v_pipe[i-1];
    end
  end

  assign out_u     = s_pipe[MUL_LAT-1];
  assign out_v     = prod;
  assign out_valid = v_pipe[MUL_LAT];
endmodule
