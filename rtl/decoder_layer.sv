// decoder_layer: one spiking transformer decoder layer.
//
// Input and output are DE x M spike matrices of one time step (E_{l-1} and
// E_l).  The layer runs four phases in sequence:
//   1. QKV: three lif_layers, W_Q, W_K and W_V (each DE x DE, i.e. the
//      DK x DE matrices of the NH heads stacked), encode E_{l-1} into spiking
//      Q, K and V.  The three run in parallel on the same input.
//   2. ATT: mssa computes the multi-head attention output G.
//   3. FF1: lif_layer W_1 (DH x DE) gives the hidden spikes LIF(W_1 G).
//   4. FF2: lif_layer W_2 (DE x DH) gives E_l = LIF(W_2 LIF(W_1 G)).
// All membrane potentials persist across time steps and are cleared by
// `clear_state`; `reseed` restarts the attention's random generators.
//
// Timing: `start` -> `done` takes, summed over tokens, the largest Q/K/V
// input spike count plus the W_1 and W_2 input spike counts, plus 2 cycles per
// token and phase, plus NH*M + 1 cycles of attention and a few cycles of
// hand-over.  e_out is stable from `done` until the next start.
//
// The phase order and layer equations are the detector's.  No residual
// connection or layer normalization is built: the layer equation
// E_l = LIF(W_2 LIF(W_1 G)) has none, although the prose mentions both.
module decoder_layer #(
  parameter int          M          = snn_pkg::M,
  parameter int          DE         = snn_pkg::DE,
  parameter int          DH         = snn_pkg::DH,
  parameter int          NH         = snn_pkg::NH,
  parameter int          WW         = snn_pkg::WW,
  parameter int          VW         = snn_pkg::VW,
  parameter int          VTH        = snn_pkg::VTH,
  parameter int          LEAK_SHIFT = snn_pkg::LEAK_SHIFT,
  parameter logic [31:0] SEED       = 32'h0BAD_5EED,
  localparam int         AB         = $clog2(DE > DH ? DE : DH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear_state,
  input  logic                    reseed,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  input  logic [M-1:0][DE-1:0]    e_in,
  output logic [M-1:0][DE-1:0]    e_out,
  // weight load port
  input  logic                    w_we,
  input  snn_pkg::mat_sel_t       w_mat,
  input  logic [AB-1:0]           w_row,
  input  logic [AB-1:0]           w_col,
  input  logic signed [WW-1:0]    w_data
);
  localparam int DK = DE / NH;

  typedef enum logic [2:0] {P_IDLE, P_QKV, P_ATT, P_FF1, P_FF2} phase_t;
  phase_t phase;

  logic [M-1:0][DE-1:0] q_spk, k_spk, v_spk, g_spk;
  logic [M-1:0][DH-1:0] h_spk;
  logic q_done, k_done, v_done, a_done, f1_done, f2_done;
  logic q_busy, k_busy, v_busy, a_busy, f1_busy, f2_busy;
  logic [2:0] qkv_seen;
  logic start_qkv, start_att, start_ff1, start_ff2;

  lif_layer #(.NIN(DE), .NOUT(DE), .M(M), .WW(WW), .VW(VW), .VTH(VTH), .LEAK_SHIFT(LEAK_SHIFT)) u_q (
    .clk, .rst_n, .clear_state, .start(start_qkv), .busy(q_busy), .done(q_done),
    .in_spk(e_in), .out_spk(q_spk),
    .w_we(w_we && w_mat == snn_pkg::MAT_Q), .w_row(w_row[$clog2(DE)-1:0]), .w_col(w_col[$clog2(DE)-1:0]), .w_data);
  lif_layer #(.NIN(DE), .NOUT(DE), .M(M), .WW(WW), .VW(VW), .VTH(VTH), .LEAK_SHIFT(LEAK_SHIFT)) u_k (
    .clk, .rst_n, .clear_state, .start(start_qkv), .busy(k_busy), .done(k_done),
    .in_spk(e_in), .out_spk(k_spk),
    .w_we(w_we && w_mat == snn_pkg::MAT_K), .w_row(w_row[$clog2(DE)-1:0]), .w_col(w_col[$clog2(DE)-1:0]), .w_data);
  lif_layer #(.NIN(DE), .NOUT(DE), .M(M), .WW(WW), .VW(VW), .VTH(VTH), .LEAK_SHIFT(LEAK_SHIFT)) u_v (
    .clk, .rst_n, .clear_state, .start(start_qkv), .busy(v_busy), .done(v_done),
    .in_spk(e_in), .out_spk(v_spk),
    .w_we(w_we && w_mat == snn_pkg::MAT_V), .w_row(w_row[$clog2(DE)-1:0]), .w_col(w_col[$clog2(DE)-1:0]), .w_data);

  mssa #(.M(M), .DK(DK), .NH(NH), .SEED(SEED)) u_att (
    .clk, .rst_n, .reseed, .start(start_att), .busy(a_busy), .done(a_done),
    .q(q_spk), .k(k_spk), .v(v_spk), .g(g_spk));

  lif_layer #(.NIN(DE), .NOUT(DH), .M(M), .WW(WW), .VW(VW), .VTH(VTH), .LEAK_SHIFT(LEAK_SHIFT)) u_ff1 (
    .clk, .rst_n, .clear_state, .start(start_ff1), .busy(f1_busy), .done(f1_done),
    .in_spk(g_spk), .out_spk(h_spk),
    .w_we(w_we && w_mat == snn_pkg::MAT_W1), .w_row(w_row[$clog2(DH)-1:0]), .w_col(w_col[$clog2(DE)-1:0]), .w_data);
  lif_layer #(.NIN(DH), .NOUT(DE), .M(M), .WW(WW), .VW(VW), .VTH(VTH), .LEAK_SHIFT(LEAK_SHIFT)) u_ff2 (
    .clk, .rst_n, .clear_state, .start(start_ff2), .busy(f2_busy), .done(f2_done),
    .in_spk(h_spk), .out_spk(e_out),
    .w_we(w_we && w_mat == snn_pkg::MAT_W2), .w_row(w_row[$clog2(DE)-1:0]), .w_col(w_col[$clog2(DH)-1:0]), .w_data);

  logic [2:0] qkv_now;
  assign qkv_now = qkv_seen | {v_done, k_done, q_done};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= P_IDLE;
      busy      <= 1'b0;
      done      <= 1'b0;
      qkv_seen  <= '0;
      start_qkv <= 1'b0;
      start_att <= 1'b0;
      start_ff1 <= 1'b0;
      start_ff2 <= 1'b0;
    end else begin
      done      <= 1'b0;
      start_qkv <= 1'b0;
      start_att <= 1'b0;
      start_ff1 <= 1'b0;
      start_ff2 <= 1'b0;
      unique case (phase)
        P_IDLE: if (start) begin
          phase     <= P_QKV;
          busy      <= 1'b1;
          qkv_seen  <= '0;
          start_qkv <= 1'b1;
        end
        P_QKV: begin
          qkv_seen <= qkv_now;
          if (&qkv_now) begin
            phase     <= P_ATT;
            start_att <= 1'b1;
          end
        end
        P_ATT: if (a_done) begin
          phase     <= P_FF1;
          start_ff1 <= 1'b1;
        end
        P_FF1: if (f1_done) begin
          phase     <= P_FF2;
          start_ff2 <= 1'b1;
        end
        P_FF2: if (f2_done) begin
          phase <= P_IDLE;
          busy  <= 1'b0;
          done  <= 1'b1;
        end
        default: phase <= P_IDLE;
      endcase
    end
  end

  // a sub-unit is only started while it is idle
  a_qkv_idle: assert property (@(posedge clk) disable iff (!rst_n) start_qkv |-> !(q_busy || k_busy || v_busy));
  a_att_idle: assert property (@(posedge clk) disable iff (!rst_n) start_att |-> !a_busy);
  a_ff1_idle: assert property (@(posedge clk) disable iff (!rst_n) start_ff1 |-> !f1_busy);
  a_ff2_idle: assert property (@(posedge clk) disable iff (!rst_n) start_ff2 |-> !f2_busy);
endmodule
