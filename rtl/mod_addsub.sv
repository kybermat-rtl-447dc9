// mod_addsub -- modular adder (SUB=0) or subtractor (SUB=1) over Z_3329.
//
// y = (a + b) mod q or (a - b) mod q for residues a, b in [0, q). One
// binary add/subtract followed by a single conditional correction by q.
// Purely combinational; the enclosing pipeline registers the result.
// The paper names modular adders/subtractors as the datapath's second
// primitive; the one-correction form is this design's choice.
module mod_addsub
  import kyber_pkg::*;
#(
  parameter bit SUB = 1'b0
) (
  input  coeff_t a,
  input  coeff_t b,
  output coeff_t y
);
  logic [QW:0] raw;
  logic        wrap;

  always_comb begin
    if (SUB) begin
      raw  = {1'b0, a} - {1'b0, b};
      wrap = (a < b);                        // borrow: add q back
      y    = wrap ? coeff_t'(raw + (QW+1)'(Q)) : coeff_t'(raw);
    end else begin
      raw  = {1'b0, a} + {1'b0, b};
      wrap = (raw >= (QW+1)'(Q));            // overflow past q: subtract q
      y    = wrap ? coeff_t'(raw - (QW+1)'(Q)) : coeff_t'(raw);
    end
  end
endmodule
