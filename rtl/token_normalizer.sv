// token_normalizer: turns one input token into Bernoulli probabilities.
//
// A received vector y arrives as 2*NR quantizer codes ordered
// [Re(y_1..y_NR); Im(y_1..y_NR)].  A mid-tread uniform quantizer with 2^QB
// levels over [l_min, l_max) outputs code c for the level l_min + c*delta,
// so the normalization (y - l_min)/(l_max - l_min) used by the detector is
// exactly c / 2^QB; the probability is therefore c shifted left to PW bits.
// A pilot symbol token s carries NT constellation indices k in [0, K); it is
// normalized to k / K.  Entries beyond the token's length are zero padding
// up to DT = max(NT, 2*NR).
//
// The y normalization and the zero padding follow the detector's description.
// The normalization of the symbol tokens (index / K) and the code ordering
// are this design's choices.  Purely combinational.
module token_normalizer #(
  parameter int DT = snn_pkg::DT,
  parameter int NR = snn_pkg::NR,
  parameter int NT = snn_pkg::NT,
  parameter int K  = snn_pkg::K,
  parameter int QB = snn_pkg::QB,
  parameter int PW = snn_pkg::PW
) (
  input  logic                   is_symbol,  // 1: pilot symbol token, 0: received-signal token
  input  logic [DT-1:0][QB-1:0]  code,       // quantizer codes or symbol indices
  output logic [DT-1:0][PW-1:0]  prob        // probability = prob / 2^PW
);
  localparam int KB = $clog2(K);

  always_comb begin
    for (int d = 0; d < DT; d++) begin
      prob[d] = '0;
      if (is_symbol) begin
        if (d < NT) prob[d] = PW'((PW + KB)'(code[d][KB-1:0]) << (PW - KB));
      end else begin
        if (d < 2 * NR) prob[d] = PW'((PW + QB)'(code[d]) << (PW - QB));
      end
    end
  end
endmodule
