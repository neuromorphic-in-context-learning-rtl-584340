// lif_layer: a layer of leaky integrate-and-fire neurons, x_out = LIF(W x_in),
// applied to each of the M tokens of one time step.
//
// Because the inputs are spikes, W x_in is the sum of the weight columns of
// the inputs that spiked; no multiplier is needed.  For each token the layer
// scans the token's input spikes from the lowest index up and, for every
// spike only, reads that input's weight column from weight_mem and adds it to
// NOUT parallel accumulators (inputs that did not spike cost no cycle).  The
// membrane of each (token, neuron) pair is then updated as
//     V = beta * V_prev + I;  if V >= VTH: spike, V = 0
// with beta = 1 - 2^-LEAK_SHIFT realized as V_prev - (V_prev >>> LEAK_SHIFT)
// (LEAK_SHIFT = 0 gives beta = 1, no leak).  Membrane potentials persist from
// one time step to the next, one NOUT-wide memory word per token.  The
// memory has no reset: `clear_state` (start of an inference) clears one valid
// bit per token, and a word read while its bit is clear counts as zero.
// V is saturated to VW bits.
//
// Timing: after `start`, token m takes popcount(in_spk[m]) + 2 cycles; `done`
// pulses one cycle after the last token, when out_spk holds the full output
// matrix (registered, stable until the next start).
//
// The LIF dynamics (threshold compare, reset to zero, leak factor) follow the
// detector's description; the threshold and leak values, the widths and the
// event-driven token-serial schedule are this design's choices.
module lif_layer #(
  parameter int NIN        = 256,
  parameter int NOUT       = 256,
  parameter int M          = snn_pkg::M,
  parameter int WW         = snn_pkg::WW,
  parameter int VW         = snn_pkg::VW,
  parameter int VTH        = snn_pkg::VTH,
  parameter int LEAK_SHIFT = snn_pkg::LEAK_SHIFT
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear_state,
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  input  logic [M-1:0][NIN-1:0]      in_spk,
  output logic [M-1:0][NOUT-1:0]     out_spk,
  // weight load port
  input  logic                       w_we,
  input  logic [$clog2(NOUT)-1:0]    w_row,
  input  logic [$clog2(NIN)-1:0]     w_col,
  input  logic signed [WW-1:0]       w_data
);
  localparam int AW = WW + $clog2(NIN) + 1;      // accumulator width
  localparam int XW = (AW > VW ? AW : VW) + 2;   // width of the membrane sum
  localparam int MB = (M > 1) ? $clog2(M) : 1;

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_FIRE} state_t;
  state_t state;

  logic [MB-1:0]                 m_idx;
  logic [NIN-1:0]                rem;        // input spikes not yet added
  logic                          pend;       // a column read is in flight
  logic signed [AW-1:0]          acc [NOUT];
  logic [NOUT-1:0][VW-1:0]       vmem [M];   // membrane memory, one word per token
  logic [M-1:0]                  vvalid;     // word holds a potential since the last clear

  // lowest remaining input spike
  logic                          hit;
  logic [$clog2(NIN)-1:0]        hit_idx;
  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int i = NIN - 1; i >= 0; i--) begin
      if (rem[i]) begin
        hit     = 1'b1;
        hit_idx = ($clog2(NIN))'(i);
      end
    end
  end

  logic [NOUT-1:0][WW-1:0] col;
  weight_mem #(.DEPTH(NIN), .NOUT(NOUT), .WW(WW)) u_wmem (
    .clk, .we(w_we), .wrow(w_row), .wcol(w_col), .wdata(w_data),
    .re(state == S_ACC && hit), .raddr(hit_idx), .rdata(col)
  );

  // membrane update of the current token
  logic [NOUT-1:0]          fire;
  logic [NOUT-1:0][VW-1:0]  v_next;
  always_comb begin
    for (int n = 0; n < NOUT; n++) begin
      logic signed [XW-1:0] vp, vs;
      vp = vvalid[m_idx] ? XW'($signed(vmem[m_idx][n])) : '0;
      if (LEAK_SHIFT > 0) vp = vp - (vp >>> LEAK_SHIFT);
      vs = vp + XW'(acc[n]);
      fire[n] = (vs >= XW'(VTH));
      if (fire[n])                            v_next[n] = '0;
      else if (vs < -(XW'(1) <<< (VW - 1)))   v_next[n] = {1'b1, {(VW-1){1'b0}}};
      else                                    v_next[n] = vs[VW-1:0];
    end
  end

  // membrane memory: written once per token, no reset (cleared through vvalid)
  always_ff @(posedge clk) begin
    if (state == S_FIRE) vmem[m_idx] <= v_next;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      busy    <= 1'b0;
      done    <= 1'b0;
      m_idx   <= '0;
      rem     <= '0;
      pend    <= 1'b0;
      vvalid  <= '0;
      for (int n = 0; n < NOUT; n++) acc[n] <= '0;
      for (int m = 0; m < M; m++) out_spk[m] <= '0;
    end else begin
      done <= 1'b0;
      if (clear_state) vvalid <= '0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state <= S_ACC;
            busy  <= 1'b1;
            m_idx <= '0;
            rem   <= in_spk[0];
            pend  <= 1'b0;
            for (int n = 0; n < NOUT; n++) acc[n] <= '0;
          end
        end
        S_ACC: begin
          if (hit) rem[hit_idx] <= 1'b0;
          pend <= hit;
          if (pend)
            for (int n = 0; n < NOUT; n++) acc[n] <= acc[n] + AW'($signed(col[n]));
          if (!hit) state <= S_FIRE;   // last column (if any) is added now
        end
        S_FIRE: begin
          vvalid[m_idx]  <= 1'b1;
          out_spk[m_idx] <= fire;
          for (int n = 0; n < NOUT; n++) acc[n] <= '0;
          if (m_idx == MB'(M - 1)) begin
            state <= S_IDLE;
            busy  <= 1'b0;
            done  <= 1'b1;
          end else begin
            state <= S_ACC;
            m_idx <= m_idx + 1'b1;
            rem   <= in_spk[m_idx + 1'b1];
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
