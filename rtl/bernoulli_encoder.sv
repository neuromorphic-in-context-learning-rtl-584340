// bernoulli_encoder: context/query token store and Bernoulli spike encoder.
//
// The M = 2N+1 tokens of one inference (y_1, s_1, ..., y_N, s_N, y) are
// written once, already normalized to PW-bit probabilities, through the
// write port.  Each `start` pulse encodes one time step: in M consecutive
// cycles token m = 0..M-1 is turned into DT spikes, spike d being 1 when
// the low PW bits of generator lane d are below the stored probability, so
// P(spike) = prob / 2^PW.  Every lane is a 32-bit xorshift generator that
// advances once per encoded token.  `done` pulses in the cycle after the
// last token; the spike matrix `spk` then holds the whole time step and
// stays stable until the next `start`.
//
// Timing: start at cycle 0, tokens encoded in cycles 1..M, done at cycle M+1.
// `reseed` reloads all generators from SEED, so an inference is repeatable.
//
// The Bernoulli encoding rule is the detector's; the store, the generator
// type and the token-serial schedule are this design's choices.
module bernoulli_encoder #(
  parameter int          M    = snn_pkg::M,
  parameter int          DT   = snn_pkg::DT,
  parameter int          PW   = snn_pkg::PW,
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  reseed,
  // token store write port
  input  logic                  wr_en,
  input  logic [$clog2(M)-1:0]  wr_idx,
  input  logic [DT-1:0][PW-1:0] wr_prob,
  // encoding of one time step
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic [M-1:0][DT-1:0]  spk
);
  logic [DT-1:0][PW-1:0] prob_mem [M];
  logic [DT-1:0][31:0]   lane;
  logic [$clog2(M)-1:0]  m_idx;

  always_ff @(posedge clk) begin
    if (wr_en) prob_mem[wr_idx] <= wr_prob;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      m_idx <= '0;
      spk   <= '0;
      for (int d = 0; d < DT; d++) lane[d] <= snn_pkg::lane_seed(SEED, d);
    end else begin
      done <= 1'b0;
      if (reseed) begin
        for (int d = 0; d < DT; d++) lane[d] <= snn_pkg::lane_seed(SEED, d);
      end else if (busy) begin
        for (int d = 0; d < DT; d++) begin
          spk[m_idx][d] <= (lane[d][PW-1:0] < prob_mem[m_idx][d]);
          lane[d]       <= snn_pkg::xorshift32(lane[d]);
        end
        if (m_idx == $clog2(M)'(M - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        m_idx <= m_idx + 1'b1;
      end else if (start) begin
        busy  <= 1'b1;
        m_idx <= '0;
      end
    end
  end
endmodule
