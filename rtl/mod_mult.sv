// mod_mult -- pipelined modular multiplier, p = a*b mod 3329.
//
// Barrett reduction with a 26-bit shift. For z = a*b < q^2 the estimate
// qh = (z * 20158) >> 26 undershoots floor(z/q) by at most one, so
// r = z - qh*q lies in [0, 2q) and one conditional subtraction finishes.
// The five register stages are:
//   1: z  = a*b                      (24 bits)
//   2: t  = z*M                      (39 bits), z carried along
//   3: qq = (t >> 26) * q,           z carried along
//   4: r  = z - qq                   (13 bits, < 2q)
//   5: p  = r >= q ? r - q : r
// Operands must already be reduced (< q). A new operand pair is accepted
// every cycle; the product appears LAT cycles later. LAT above 5 adds plain
// delay registers at the output.
// The five-stage depth is the paper's; Barrett reduction and the split of
// work across the stages are this design's choice.
module mod_mult
  import kyber_pkg::*;
#(
  parameter int unsigned LAT = 5
) (
  input  logic   clk,
  input  coeff_t a,
  input  coeff_t b,
  output coeff_t p
);
  localparam int unsigned SH = 26;
  localparam int unsigned M  = (1 << SH) / Q;   // 20158

  logic [23:0] z1, z2, z3;
  logic [38:0] t2;
  logic [23:0] qq3;
  logic [12:0] r4;
  coeff_t      p5;

  always_ff @(posedge clk) begin
    z1  <= 24'(a) * 24'(b);
    t2  <= 39'(z1) * 39'(M);
    z2  <= z1;
    qq3 <= 24'(t2 >> SH) * 24'(Q);
    z3  <= z2;
    r4  <= 13'(z3 - qq3);
    p5  <= (r4 >= 13'(Q)) ? coeff_t'(r4 - 13'(Q)) : coeff_t'(r4);
  end

  generate
    if (LAT > 5) begin : g_extra
      coeff_t dly [LAT-5];
      always_ff @(posedge clk) begin
        dly[0] <= p5;
        for (int i = 1; i < int'(LAT) - 5; i++) dly[i] <= dly[i-1];
      end
      assign p = dly[LAT-6];
    end else begin : g_none
      assign p = p5;
    end
  endgenerate

  initial assert (LAT >= 5) else $error("mod_mult: LAT must be at least 5");
endmodule
