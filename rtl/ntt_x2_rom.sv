// ntt_x2_rom -- pre-computed NTT(x^2) constants for one two-element column.
//
// After the polyphase split, multiplying by x^2 is multiplying by y in
// Z_q[y]/(y^128+1); in the NTT domain that is a point-wise product with
// NTT(0,1,0,...,0), whose entry at position m is gamma_m = 17^(2*brv7(m)+1).
// The data-paths process positions 2j (upper) and 2j+1 (lower) together, so
// this ROM returns both for a 6-bit pair index j. Because brv7(2j+1) =
// brv7(2j) + 64 and 17^128 = -1, the lower constant is q minus the upper one.
// Combinational; the table is computed at elaboration (kyber_pkg::gamma_table).
// The constant set is the paper's; its addressing by pair index is this
// design's choice.
module ntt_x2_rom
  import kyber_pkg::*;
(
  input  logic [5:0] pos,
  output coeff_t     gamma_u,
  output coeff_t     gamma_v
);
  localparam table_t GT = gamma_table();

  always_comb begin
    gamma_u = GT[{pos, 1'b0} * QW +: QW];
    gamma_v = GT[{pos, 1'b1} * QW +: QW];
  end
endmodule
