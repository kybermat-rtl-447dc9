// r2mdc_commutator -- delay-commutator between two R2MDC butterfly stages.
//
// Two streams enter, one element each per cycle. Over a period of 2*S cycles
// (counted from the first valid input) the upper stream carries a block
// y[0..2S-1] and the lower stream a block z[0..2S-1]. The commutator emits
// the pairs the next butterfly needs:
//   period cycles S..2S-1        : (y[a], y[a+S]),  a = 0..S-1
//   next period cycles 0..S-1    : (z[a], z[a+S])
// It does so with an S-word delay on the lower input, a 2x2 switch that is
// straight for the first S cycles of a period and crossed for the last S,
// and an S-word delay on the switch's upper output. The valid flag is
// carried through the same delays as the data, so out_valid marks exactly
// the pairs built from valid inputs. Latency: S cycles.
// Frames must arrive back to back or separated by whole periods; the phase
// counter free-runs once the first valid sample has been seen.
// The R2MDC principle (two delays and a switch per stage) is the paper's;
// the exact switch phase, the valid lane and reset are this design's choice.
module r2mdc_commutator
  import kyber_pkg::*;
#(
  parameter int unsigned S = 32,
  parameter int unsigned W = QW
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_u,
  input  logic [W-1:0] in_v,
  output logic         out_valid,
  output logic [W-1:0] out_u,
  output logic [W-1:0] out_v
);
  localparam int unsigned CW = (S > 1) ? $clog2(2 * S) : 1;

  typedef logic [W:0] word_t;   // {valid, data}

  logic [CW-1:0] cnt;
  logic          started;
  logic          crossed;
  word_t         dly_v   [S];   // lower-input delay line
  word_t         dly_top [S];   // delay line behind the switch's upper output
  word_t         u_w, v_d, top_pre, top_out, bot_out;

  // phase counter: 0 on the first valid cycle, then free-running mod 2S
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt     <= '0;
      started <= 1'b0;
    end else if (started || in_valid) begin
      started <= 1'b1;
      cnt     <= (cnt == CW'(2 * S - 1)) ? '0 : cnt + 1'b1;
    end
  end

  assign crossed = (cnt >= CW'(S));
  assign u_w     = {in_valid, in_u};
  assign v_d     = dly_v[S-1];

  always_comb begin
    if (crossed) begin
      top_pre = v_d;
      bot_out = u_w;
    end else begin
      top_pre = u_w;
      bot_out = v_d;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(S); i++) begin
        dly_v[i]   <= '0;
        dly_top[i] <= '0;
      end
    end else begin
      dly_v[0]   <= {in_valid, in_v};
      dly_top[0] <= top_pre;
      for (int i = 1; i < int'(S); i++) begin
        dly_v[i]   <= dly_v[i-1];
        dly_top[i] <= dly_top[i-1];
      end
    end
  end

  assign top_out   = dly_top[S-1];
  assign out_valid = top_out[W] & bot_out[W];
  assign out_u     = top_out[W-1:0];
  assign out_v     = bot_out[W-1:0];
endmodule
