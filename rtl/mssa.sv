// mssa: masked stochastic spiking attention over all heads of one layer.
//
// For one time step the layer's binary query, key and value matrices (one
// DE-bit column per token, head h owning bits h*DK .. h*DK+DK-1) are turned
// into the attention output G without any multiplication:
//   A~[m][m'] = popcount(Q[:,m] AND K[:,m'])  for m' <= m, 0 otherwise
//   A[m][m']  ~ Bern(A~[m][m'] / DK)
//   F~[d][m]  = popcount(A[m][:] AND V[d][:])
//   F[d][m]   ~ Bern(F~[d][m] / M)
// and G stacks the heads' F.  One cycle computes one attention row (head h,
// query token m): M AND-popcounts of DK bits, M Bernoulli draws, then DK
// AND-popcounts of M bits and DK draws.  Draws use M + DK xorshift lanes that
// all advance once per row; a draw of Bern(c/n) is 1 when a uniform integer
// in [0, n), taken as (r[15:0] * n) >> 16, is below c.  That is exact for
// n = DK = 32 and within 2^-16 of c/n for n = M = 41.
//
// Timing: `start` at cycle 0; rows in cycles 1..NH*M, heads outer and
// tokens inner; `done` pulses in cycle NH*M + 1 with g complete and stable.
//
// The arithmetic is the detector's attention algorithm.  The mask keeps
// keys m' <= m (causal), as the algorithm calls it a causal mask in a
// decoder-only model, although its condition is printed as m <= m'; the
// row-serial schedule and the random-number generator are this design's.
module mssa #(
  parameter int          M    = snn_pkg::M,
  parameter int          DK   = snn_pkg::DK,
  parameter int          NH   = snn_pkg::NH,
  parameter logic [31:0] SEED = 32'h0BAD_5EED
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     reseed,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  input  logic [M-1:0][NH*DK-1:0]  q,
  input  logic [M-1:0][NH*DK-1:0]  k,
  input  logic [M-1:0][NH*DK-1:0]  v,
  output logic [M-1:0][NH*DK-1:0]  g
);
  localparam int MB = (M > 1) ? $clog2(M) : 1;
  localparam int HB = (NH > 1) ? $clog2(NH) : 1;
  localparam int NL = M + DK;        // generator lanes: M for A, DK for F

  logic [MB-1:0]     m_idx;
  logic [HB-1:0]     h_idx;
  logic [NL-1:0][31:0] lane;

  // one attention row
  logic [M-1:0]      a_row;
  logic [DK-1:0]     f_row;
  always_comb begin
    logic [DK-1:0] qv, kv;
    logic [M-1:0]  vc;
    int            cnt;
    qv = q[m_idx][h_idx*DK +: DK];
    for (int mp = 0; mp < M; mp++) begin
      kv  = k[mp][h_idx*DK +: DK];
      cnt = (MB'(mp) <= m_idx) ? $countones(qv & kv) : 0;   // causal mask
      a_row[mp] = (int'(snn_pkg::scale_rand(lane[mp][15:0], 16'(DK))) < cnt);
    end
    for (int d = 0; d < DK; d++) begin
      for (int mp = 0; mp < M; mp++) vc[mp] = v[mp][h_idx*DK + d];
      cnt = $countones(a_row & vc);
      f_row[d] = (int'(snn_pkg::scale_rand(lane[M+d][15:0], 16'(M))) < cnt);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      m_idx <= '0;
      h_idx <= '0;
      for (int m = 0; m < M; m++) g[m] <= '0;
      for (int i = 0; i < NL; i++) lane[i] <= snn_pkg::lane_seed(SEED, i);
    end else begin
      done <= 1'b0;
      if (reseed) begin
        for (int i = 0; i < NL; i++) lane[i] <= snn_pkg::lane_seed(SEED, i);
      end else if (busy) begin
        g[m_idx][h_idx*DK +: DK] <= f_row;
        for (int i = 0; i < NL; i++) lane[i] <= snn_pkg::xorshift32(lane[i]);
        if (m_idx == MB'(M - 1)) begin
          m_idx <= '0;
          if (h_idx == HB'(NH - 1)) begin
            h_idx <= '0;
            busy  <= 1'b0;
            done  <= 1'b1;
          end else begin
            h_idx <= h_idx + 1'b1;
          end
        end else begin
          m_idx <= m_idx + 1'b1;
        end
      end else if (start) begin
        busy  <= 1'b1;
        m_idx <= '0;
        h_idx <= '0;
      end
    end
  end
endmodule
