// kybermat_top -- two-parallel low-latency KyberMat accelerator:
// p = A^T r over Z_3329[x]/(x^256+1), with r a K-vector of polynomials and
// A a K x K matrix already in NTT domain (as Kyber samples it).
//
// Data flow (all feed-forward, one column of coefficients per cycle):
//   1. polyphase split: r_i = r_i,e(x^2) + x*r_i,o(x^2); this is wiring of
//      the input port onto the processors.
//   2. 2K ntt_r2mdc processors, one per (i, even/odd), 128-point NTT each.
//   3. matvec_ntt: p-hat_i = sum_j A-hat(j,i) r-hat_j with sub-structure
//      sharing (one NTT(x^2) product per r_j, 3K^2 point-wise products).
//   4. 2K intt_r2mdc processors return p_i,e and p_i,o.
//   5. merge p_i = p_i,e(x^2) + x*p_i,o(x^2), again wiring.
// Interface (no handshake; a real-time streaming pipeline):
//   r_in[i][0..3] = r_i[2l], r_i[2l+1], r_i[2l+128], r_i[2l+129] in the l-th
//   cycle (l = 0..63) of an input frame marked by in_valid. Frames may be
//   back to back (a new matrix-vector product every 64 cycles) or separated
//   by whole multiples of 64 cycles.
//   ahat_req is high in the cycles the NTT results reach the matrix stage;
//   in the j-th such cycle of a frame, ahat_in[i][j][0..3] must hold the
//   NTT-domain coefficients 4j..4j+3 of entry (i,j) in Kyber's order
//   (a_e[2j], a_o[2j], a_e[2j+1], a_o[2j+1]).
//   p_out[i][0..3] = p_i[2l], p_i[2l+1], p_i[2l+128], p_i[2l+129] in the
//   l-th cycle of an output frame marked by out_valid.
// Timing with MUL_LAT = 5 and K = 2: ahat_req follows in_valid by 105
// cycles, out_valid follows in_valid by 105 + 12 + 105 = 222 cycles, and a
// frame's last output leaves 285 cycles after its first input.
// The block structure is the paper's (NTT module, matrix-vector module,
// iNTT module, 2K processors each); the port layout, the A-hat timing
// contract and the frame rules are this design's choice.
module kybermat_top
  import kyber_pkg::*;
#(
  parameter int unsigned K       = 2,
  parameter int unsigned MUL_LAT = 5
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  coeff_t r_in [K][4],
  output logic   ahat_req,
  input  coeff_t ahat_in [K][K][4],
  output logic   out_valid,
  output coeff_t p_out [K][4]
);
  // ---- NTT computation module: 2K processors --------------------------
  // index [i][0] even component, [i][1] odd component
  logic   ntt_valid [K][2];
  coeff_t ntt_u     [K][2];
  coeff_t ntt_v     [K][2];

  for (genvar i = 0; i < K; i++) begin : g_ntt
    for (genvar eo = 0; eo < 2; eo++) begin : g_eo
      // r_in[i][eo] = r_i[2l+eo] = component[l]; r_in[i][2+eo] = component[l+64]
      ntt_r2mdc #(.MUL_LAT(MUL_LAT)) u_ntt (
        .clk(clk), .rst_n(rst_n), .in_valid(in_valid),
        .in_u(r_in[i][eo]), .in_v(r_in[i][2+eo]),
        .out_valid(ntt_valid[i][eo]), .out_u(ntt_u[i][eo]), .out_v(ntt_v[i][eo]));
    end
  end

  assign ahat_req = ntt_valid[0][0];

  // ---- matrix-vector multiplication in NTT domain ---------------------
  logic       mv_started;
  logic [5:0] mv_pos;
  coeff_t     mv_re [K][2], mv_ro [K][2];
  coeff_t     mv_ae [K][K][2], mv_ao [K][K][2];
  coeff_t     mv_pe [K][2], mv_po [K][2];
  logic       mv_valid;

  // position counter of the NTT-domain stream (pair j = 0..63 of a frame)
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mv_pos     <= '0;
      mv_started <= 1'b0;
    end else if (mv_started || ahat_req) begin
      mv_started <= 1'b1;
      mv_pos     <= mv_pos + 1'b1;
    end
  end

  always_comb begin
    for (int i = 0; i < int'(K); i++) begin
      mv_re[i][0] = ntt_u[i][0];
      mv_re[i][1] = ntt_v[i][0];
      mv_ro[i][0] = ntt_u[i][1];
      mv_ro[i][1] = ntt_v[i][1];
      for (int j = 0; j < int'(K); j++) begin
        mv_ae[i][j][0] = ahat_in[i][j][0];
        mv_ao[i][j][0] = ahat_in[i][j][1];
        mv_ae[i][j][1] = ahat_in[i][j][2];
        mv_ao[i][j][1] = ahat_in[i][j][3];
      end
    end
  end

  matvec_ntt #(.K(K), .MUL_LAT(MUL_LAT)) u_matvec (
    .clk(clk), .rst_n(rst_n), .in_valid(ahat_req), .pos(mv_pos),
    .re(mv_re), .ro(mv_ro), .ae(mv_ae), .ao(mv_ao),
    .out_valid(mv_valid), .pe(mv_pe), .po(mv_po));

  // ---- iNTT computation module: 2K processors -------------------------
  logic   intt_valid [K][2];
  coeff_t intt_u     [K][2];
  coeff_t intt_v     [K][2];

  for (genvar i = 0; i < K; i++) begin : g_intt
    for (genvar eo = 0; eo < 2; eo++) begin : g_eo
      coeff_t in_u, in_v;
      assign in_u = (eo == 0) ? mv_pe[i][0] : mv_po[i][0];
      assign in_v = (eo == 0) ? mv_pe[i][1] : mv_po[i][1];
      intt_r2mdc #(.MUL_LAT(MUL_LAT)) u_intt (
        .clk(clk), .rst_n(rst_n), .in_valid(mv_valid),
        .in_u(in_u), .in_v(in_v),
        .out_valid(intt_valid[i][eo]), .out_u(intt_u[i][eo]), .out_v(intt_v[i][eo]));
      // merge: component[l] -> p_i[2l+eo], component[l+64] -> p_i[2l+128+eo]
      assign p_out[i][eo]     = intt_u[i][eo];
      assign p_out[i][2 + eo] = intt_v[i][eo];
    end
  end

  assign out_valid = intt_valid[0][0];

  // all processors run in lock-step: their valid flags must agree
  for (genvar i = 0; i < K; i++) begin : g_chk
    a_ntt_lockstep : assert property (@(posedge clk) disable iff (!rst_n)
      ntt_valid[i][0] == ntt_valid[0][0] && ntt_valid[i][1] == ntt_valid[0][0]);
    a_intt_lockstep : assert property (@(posedge clk) disable iff (!rst_n)
      intt_valid[i][0] == intt_valid[0][0] && intt_valid[i][1] == intt_valid[0][0]);
  end
endmodule
