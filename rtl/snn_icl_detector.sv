// snn_icl_detector: spiking-transformer in-context-learning MIMO detector.
//
// The detector estimates the symbol vector sent over an unknown MIMO channel
// from one received vector y (the query), given a context of N pilot pairs
// (y_i, s_i) seen through the same channel.  Nothing is trained on-chip: a
// pre-trained decoder-only spiking transformer infers the channel from the
// context.  The token sequence y_1, s_1, ..., y_N, s_N, y (M = 2N+1 tokens of
// DT entries) is processed for T time steps; in each step
//   bernoulli_encoder  -> spikes of all tokens (DT x M)
//   embedding lif_layer (W_e, DE x DT) -> E_0 (DE x M)
//   L x decoder_layer  -> E_1 .. E_L
//   output_layer       -> adds W_O E_L to the per-token class scores
// and after the last step the answer is the class of the query token with the
// largest accumulated score, i.e. the NT transmitted QPSK symbols.
//
// Interface:
//   tok_*    write one token: 4-bit quantizer codes of [Re(y);Im(y)], or the
//            NT symbol indices of a pilot (tok_is_sym = 1), at index 0..M-1
//            in sequence order (pilot i: y at 2i, s at 2i+1; query at M-1).
//   w_*      load one INT8 weight: w_layer 0 = embedding W_e, 1..L = decoder
//            layer (w_mat selects W_Q, W_K, W_V, W_1 or W_2), L+1 = W_O;
//            w_row is the output index, w_col the input index.
//   start    begin an inference (membranes cleared, generators reseeded);
//            busy is high until `done` pulses; answer / answer_sym /
//            score_last are then valid and stay until the next start.
// Timing: data dependent, since every layer spends one cycle per input spike
// (see README for the cycle budget).  Units run one after another.
//
// The dataflow and all layer equations follow the detector's description;
// the load ports, the unit-serial schedule, the class-to-symbol mapping
// (class = sum_j s_j K^j) and all widths are this design's choices.
module snn_icl_detector #(
  parameter int M          = snn_pkg::M,
  parameter int DT         = snn_pkg::DT,
  parameter int DE         = snn_pkg::DE,
  parameter int DH         = snn_pkg::DH,
  parameter int L          = snn_pkg::L,
  parameter int NH         = snn_pkg::NH,
  parameter int T          = snn_pkg::T,
  parameter int NT         = snn_pkg::NT,
  parameter int NR         = snn_pkg::NR,
  parameter int K          = snn_pkg::K,
  parameter int QB         = snn_pkg::QB,
  parameter int VTH        = snn_pkg::VTH,
  parameter int LEAK_SHIFT = snn_pkg::LEAK_SHIFT,
  localparam int NCLS      = K ** NT,
  localparam int AB        = $clog2(DE > DH ? DE : DH),
  localparam int LB        = $clog2(L + 2),
  localparam int MB        = $clog2(M),
  localparam int KB        = $clog2(K),
  localparam int CB        = $clog2(NCLS)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // token load
  input  logic                         tok_we,
  input  logic [MB-1:0]                tok_idx,
  input  logic                         tok_is_sym,
  input  logic [DT-1:0][QB-1:0]        tok_code,
  // weight load
  input  logic                         w_we,
  input  logic [LB-1:0]                w_layer,
  input  snn_pkg::mat_sel_t            w_mat,
  input  logic [AB-1:0]                w_row,
  input  logic [AB-1:0]                w_col,
  input  logic signed [snn_pkg::WW-1:0] w_data,
  // inference
  input  logic                         start,
  output logic                         busy,
  output logic                         done,
  output logic [CB-1:0]                answer,
  output logic [NT-1:0][KB-1:0]        answer_sym,
  output logic signed [snn_pkg::OW-1:0] score_last [NCLS]
);
  localparam int PW = snn_pkg::PW;
  localparam int TB = (T > 1) ? $clog2(T) : 1;
  localparam int DLB = (L > 1) ? $clog2(L) : 1;

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_ENC, S_EMB, S_DEC, S_OUT} state_t;
  state_t state;

  logic          clr;                 // clear membranes / scores, reseed
  logic          enc_start, emb_start, out_start;
  logic [L-1:0]  dec_start;
  logic          enc_done, emb_done, out_done;
  logic [L-1:0]  dec_done;
  logic          enc_busy, emb_busy, out_busy;
  logic [L-1:0]  dec_busy;
  logic [TB-1:0] t_idx;
  logic [DLB-1:0] l_idx;

  // normalization and encoding
  logic [DT-1:0][PW-1:0] tok_prob;
  logic [M-1:0][DT-1:0]  x_spk;
  token_normalizer #(.DT(DT), .NR(NR), .NT(NT), .K(K), .QB(QB), .PW(PW)) u_norm (
    .is_symbol(tok_is_sym), .code(tok_code), .prob(tok_prob));
  bernoulli_encoder #(.M(M), .DT(DT), .PW(PW), .SEED(snn_pkg::ENC_SEED)) u_enc (
    .clk, .rst_n, .reseed(clr), .wr_en(tok_we), .wr_idx(tok_idx), .wr_prob(tok_prob),
    .start(enc_start), .busy(enc_busy), .done(enc_done), .spk(x_spk));

  // spiking token embedding
  logic [M-1:0][DE-1:0] e_chain [L+1];
  lif_layer #(.NIN(DT), .NOUT(DE), .M(M), .VTH(VTH), .LEAK_SHIFT(LEAK_SHIFT)) u_emb (
    .clk, .rst_n, .clear_state(clr), .start(emb_start), .busy(emb_busy), .done(emb_done),
    .in_spk(x_spk), .out_spk(e_chain[0]),
    .w_we(w_we && w_layer == '0), .w_row(w_row[$clog2(DE)-1:0]), .w_col(w_col[$clog2(DT)-1:0]),
    .w_data);

  // decoder layers
  for (genvar l = 0; l < L; l++) begin : g_dec
    decoder_layer #(.M(M), .DE(DE), .DH(DH), .NH(NH), .VTH(VTH), .LEAK_SHIFT(LEAK_SHIFT),
                    .SEED(snn_pkg::layer_seed(l))) u_dec (
      .clk, .rst_n, .clear_state(clr), .reseed(clr), .start(dec_start[l]),
      .busy(dec_busy[l]), .done(dec_done[l]), .e_in(e_chain[l]), .e_out(e_chain[l+1]),
      .w_we(w_we && w_layer == LB'(l + 1)), .w_mat, .w_row, .w_col, .w_data);
  end

  // output layer and accumulation over time steps
  logic signed [snn_pkg::OW-1:0] score [M][NCLS];
  output_layer #(.M(M), .DE(DE), .NCLS(NCLS)) u_out (
    .clk, .rst_n, .clear_acc(clr), .start(out_start), .busy(out_busy), .done(out_done),
    .e_in(e_chain[L]), .score, .answer,
    .w_we(w_we && w_layer == LB'(L + 1)), .w_row(w_row[CB-1:0]), .w_col(w_col[$clog2(DE)-1:0]),
    .w_data);

  always_comb begin
    for (int c = 0; c < NCLS; c++) score_last[c] = score[M-1][c];
    for (int j = 0; j < NT; j++) answer_sym[j] = answer[j*KB +: KB];
  end

  // time-step sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      busy      <= 1'b0;
      done      <= 1'b0;
      clr       <= 1'b0;
      enc_start <= 1'b0;
      emb_start <= 1'b0;
      dec_start <= '0;
      out_start <= 1'b0;
      t_idx     <= '0;
      l_idx     <= '0;
    end else begin
      done      <= 1'b0;
      clr       <= 1'b0;
      enc_start <= 1'b0;
      emb_start <= 1'b0;
      dec_start <= '0;
      out_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_INIT;
          busy  <= 1'b1;
          clr   <= 1'b1;
          t_idx <= '0;
        end
        S_INIT: begin
          state     <= S_ENC;
          enc_start <= 1'b1;
        end
        S_ENC: if (enc_done) begin
          state     <= S_EMB;
          emb_start <= 1'b1;
        end
        S_EMB: if (emb_done) begin
          state        <= S_DEC;
          l_idx        <= '0;
          dec_start[0] <= 1'b1;
        end
        S_DEC: if (dec_done[l_idx]) begin
          if (l_idx == DLB'(L - 1)) begin
            state     <= S_OUT;
            out_start <= 1'b1;
          end else begin
            l_idx                <= l_idx + 1'b1;
            dec_start[l_idx + 1'b1] <= 1'b1;
          end
        end
        S_OUT: if (out_done) begin
          if (t_idx == TB'(T - 1)) begin
            state <= S_IDLE;
            busy  <= 1'b0;
            done  <= 1'b1;
          end else begin
            t_idx     <= t_idx + 1'b1;
            state     <= S_ENC;
            enc_start <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_start_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    enc_start |-> !(enc_busy || emb_busy || out_busy || (|dec_busy)));
endmodule
