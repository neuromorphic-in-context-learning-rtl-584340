// output_layer: classification head, O^t = W_O E_L^t accumulated over time.
//
// W_O (NCLS x DE, INT8) projects each token's DE output spikes of the last
// decoder layer onto the NCLS = K^Nt classes (every combination of the NT
// transmitted symbols).  As in lif_layer, only the weight columns of inputs
// that spiked are read and added, one column per cycle, so no multiplier is
// used.  The per-token sums are accumulated over all T time steps of an
// inference in `score` (cleared by `clear_acc`); the sum is T times the time
// average, which has the same largest entry.  The detector's answer is the
// class with the largest score of the last token (the query y); ties go to
// the lowest class index.  All M tokens are scored, as each token position
// yields an estimate, but only the last one is the answer.
//
// Timing: after `start`, token m takes popcount(e_in[m]) + 2 cycles; `done`
// pulses one cycle after the last token.  `answer` is combinational from the
// registered scores.
//
// The projection, accumulation and argmax are the detector's; the widths and
// tie rule are this design's choices.
module output_layer #(
  parameter int M    = snn_pkg::M,
  parameter int DE   = snn_pkg::DE,
  parameter int NCLS = snn_pkg::NCLS,
  parameter int WW   = snn_pkg::WW,
  parameter int OW   = snn_pkg::OW
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear_acc,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  input  logic [M-1:0][DE-1:0]          e_in,
  output logic signed [OW-1:0]          score [M][NCLS],
  output logic [$clog2(NCLS)-1:0]       answer,
  // weight load port
  input  logic                          w_we,
  input  logic [$clog2(NCLS)-1:0]       w_row,
  input  logic [$clog2(DE)-1:0]         w_col,
  input  logic signed [WW-1:0]          w_data
);
  localparam int MB = (M > 1) ? $clog2(M) : 1;

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_NEXT} state_t;
  state_t state;

  logic [MB-1:0]   m_idx;
  logic [DE-1:0]   rem;
  logic            pend;

  logic                   hit;
  logic [$clog2(DE)-1:0]  hit_idx;
  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int i = DE - 1; i >= 0; i--) begin
      if (rem[i]) begin
        hit     = 1'b1;
        hit_idx = ($clog2(DE))'(i);
      end
    end
  end

  logic [NCLS-1:0][WW-1:0] col;
  weight_mem #(.DEPTH(DE), .NOUT(NCLS), .WW(WW)) u_wmem (
    .clk, .we(w_we), .wrow(w_row), .wcol(w_col), .wdata(w_data),
    .re(state == S_ACC && hit), .raddr(hit_idx), .rdata(col)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      busy  <= 1'b0;
      done  <= 1'b0;
      m_idx <= '0;
      rem   <= '0;
      pend  <= 1'b0;
      for (int m = 0; m < M; m++)
        for (int c = 0; c < NCLS; c++) score[m][c] <= '0;
    end else begin
      done <= 1'b0;
      if (clear_acc) begin
        for (int m = 0; m < M; m++)
          for (int c = 0; c < NCLS; c++) score[m][c] <= '0;
      end
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_ACC;
          busy  <= 1'b1;
          m_idx <= '0;
          rem   <= e_in[0];
          pend  <= 1'b0;
        end
        S_ACC: begin
          if (hit) rem[hit_idx] <= 1'b0;
          pend <= hit;
          if (pend)
            for (int c = 0; c < NCLS; c++)
              score[m_idx][c] <= score[m_idx][c] + OW'($signed(col[c]));
          if (!hit) state <= S_NEXT;
        end
        S_NEXT: begin
          if (m_idx == MB'(M - 1)) begin
            state <= S_IDLE;
            busy  <= 1'b0;
            done  <= 1'b1;
          end else begin
            state <= S_ACC;
            m_idx <= m_idx + 1'b1;
            rem   <= e_in[m_idx + 1'b1];
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // answer: argmax over the classes of the last token
  always_comb begin
    logic signed [OW-1:0] best;
    best   = score[M-1][0];
    answer = '0;
    for (int c = 1; c < NCLS; c++) begin
      if (score[M-1][c] > best) begin
        best   = score[M-1][c];
        answer = ($clog2(NCLS))'(c);
      end
    end
  end
endmodule
