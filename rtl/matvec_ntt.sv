// matvec_ntt -- matrix-vector polynomial multiplication in the NTT domain,
// p-hat = A-hat^T r-hat, for K x K matrices of polyphase-split polynomials.
//
// Each cycle carries two NTT-domain positions of every polynomial: position
// 2j on the upper data-path and 2j+1 on the lower, j = pos. Both data-paths
// are a matvec_lane (pre-processing with the shared gamma*r_o product,
// 3K^2 point-wise products, row sums, post-processing); ntt_x2_rom supplies
// each lane's NTT(x^2) constant for its position.
// Totals: 6K^2+2K modular multipliers and 8K^2+2K modular adders/subtractors
// (28 and 36 for K = 2), the counts the paper gives for this module.
// Index convention: re/ro[i][d] is r-hat_i even/odd at data-path d
// (0 upper, 1 lower); ae/ao[i][j][d] is entry (i,j) of A-hat; pe/po[i][d]
// is p-hat_i = sum_j A-hat(j,i) * r-hat_j.
// Timing: fully pipelined, one column of 2 positions per cycle, results
// 2*MUL_LAT+K cycles (12 for K = 2) after the inputs. No handshake: outputs
// follow inputs at fixed latency and out_valid is in_valid delayed.
module matvec_ntt
  import kyber_pkg::*;
#(
  parameter int unsigned K       = 2,
  parameter int unsigned MUL_LAT = 5
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [5:0] pos,
  input  coeff_t     re [K][2],
  input  coeff_t     ro [K][2],
  input  coeff_t     ae [K][K][2],
  input  coeff_t     ao [K][K][2],
  output logic       out_valid,
  output coeff_t     pe [K][2],
  output coeff_t     po [K][2]
);
  coeff_t gamma [2];
  logic   lane_valid [2];

  ntt_x2_rom u_rom (.pos(pos), .gamma_u(gamma[0]), .gamma_v(gamma[1]));

  for (genvar d = 0; d < 2; d++) begin : g_lane
    coeff_t l_re [K], l_ro [K], l_pe [K], l_po [K];
    coeff_t l_ae [K][K], l_ao [K][K];
    always_comb begin
      for (int i = 0; i < int'(K); i++) begin
        l_re[i] = re[i][d];
        l_ro[i] = ro[i][d];
        for (int j = 0; j < int'(K); j++) begin
          l_ae[i][j] = ae[i][j][d];
          l_ao[i][j] = ao[i][j][d];
        end
      end
    end
    matvec_lane #(.K(K), .MUL_LAT(MUL_LAT)) u_lane (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .gamma(gamma[d]),
      .re(l_re), .ro(l_ro), .ae(l_ae), .ao(l_ao),
      .out_valid(lane_valid[d]), .pe(l_pe), .po(l_po));
    always_comb begin
      for (int i = 0; i < int'(K); i++) begin
        pe[i][d] = l_pe[i];
        po[i][d] = l_po[i];
      end
    end
  end

  assign out_valid = lane_valid[0];
endmodule
