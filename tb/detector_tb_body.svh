// Shared body of the end-to-end detector testbenches.  The including module
// declares the localparams M, N_CTX, DT, DE, DH, L, NH, T, NT, NR, K, QB,
// VTH, LEAK, RUNS and instantiates snn_icl_detector as `dut` with the signals
// declared here.  Each run builds a random 2x2 channel, QPSK pilots and a
// query, quantizes the received vectors with the 4-bit mid-tread quantizer
// over [-4, 4), loads random INT8 weights, runs one inference and compares
// the answer and the query token's class scores with the reference model.
// It also counts how often each mechanism of the design was exercised.

  localparam int NCLS = K ** NT;
  localparam int AB   = $clog2(DE > DH ? DE : DH);
  localparam int LB   = $clog2(L + 2);
  localparam int KB   = $clog2(K);

  logic clk = 0, rst_n = 0;
  logic tok_we = 0, tok_is_sym = 0;
  logic [$clog2(M)-1:0] tok_idx = '0;
  logic [DT-1:0][QB-1:0] tok_code = '0;
  logic w_we = 0;
  logic [LB-1:0] w_layer = '0;
  snn_pkg::mat_sel_t w_mat = snn_pkg::MAT_Q;
  logic [AB-1:0] w_row = '0, w_col = '0;
  logic signed [7:0] w_data = '0;
  logic start = 0, busy, done;
  logic [$clog2(NCLS)-1:0] answer;
  logic [NT-1:0][KB-1:0] answer_sym;
  logic signed [snn_pkg::OW-1:0] score_last [NCLS];

  int checks = 0, failures = 0;
  longint n_enc_steps = 0, n_cycles = 0, n_scored = 0;
  snn_ref_pkg::model_ref ref_m;

  always #5 clk = ~clk;
  always @(posedge clk) if (dut.u_enc.done) n_enc_steps++;

  task automatic put_w(int layer, snn_pkg::mat_sel_t sel, int row, int col, int val);
    @(negedge clk);
    w_we = 1; w_layer = LB'(layer); w_mat = sel; w_row = AB'(row); w_col = AB'(col); w_data = 8'(val);
  endtask

  function automatic int rnd_w(int nin);
    int r;
    r = int'(128.0 / $sqrt(real'(nin) / 2.0));
    if (r < 2) r = 2;
    if (r > 60) r = 60;             // keep 2r inside INT8
    return int'($urandom_range(3 * r, 0)) - r;
  endfunction

  task automatic load_lif(int layer, snn_pkg::mat_sel_t sel, snn_ref_pkg::lif_ref l);
    for (int o = 0; o < l.nout; o++)
      for (int i = 0; i < l.nin; i++) begin
        int v;
        v = rnd_w(l.nin);
        l.w[o*l.nin + i] = v;
        put_w(layer, sel, o, i, v);
      end
  endtask

  task automatic load_weights();
    load_lif(0, snn_pkg::MAT_Q, ref_m.emb);
    for (int l = 0; l < L; l++) begin
      load_lif(l + 1, snn_pkg::MAT_Q,  ref_m.dec[l].q);
      load_lif(l + 1, snn_pkg::MAT_K,  ref_m.dec[l].k);
      load_lif(l + 1, snn_pkg::MAT_V,  ref_m.dec[l].v);
      load_lif(l + 1, snn_pkg::MAT_W1, ref_m.dec[l].f1);
      load_lif(l + 1, snn_pkg::MAT_W2, ref_m.dec[l].f2);
    end
    for (int c = 0; c < NCLS; c++)
      for (int i = 0; i < DE; i++) begin
        int v;
        v = int'($urandom_range(255, 0)) - 128;
        ref_m.wo[c*DE + i] = v;
        put_w(L + 1, snn_pkg::MAT_Q, c, i, v);
      end
    @(negedge clk); w_we = 0;
  endtask

  // 4-bit mid-tread quantizer over [-4, 4): level -4 + 0.5*c
  function automatic int quant(real y);
    int c;
    c = int'($floor(y / 0.5 + 0.5)) + 8;
    if (c < 0) c = 0;
    if (c > 15) c = 15;
    return c;
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1000000, 1))) / 1000001.0;
    u2 = (real'($urandom_range(1000000, 0))) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
  endfunction

  // write one task's context and query; returns the query's class index
  task automatic load_tokens(output int q_class);
    real hr [NR][NT], hi [NR][NT];
    real sigma;
    sigma = 0.3;
    for (int r = 0; r < NR; r++)
      for (int t = 0; t < NT; t++) begin
        hr[r][t] = gauss() * 0.7071;
        hi[r][t] = gauss() * 0.7071;
      end
    for (int p = 0; p <= N_CTX; p++) begin
      int sym [NT];
      real sr [NT], si [NT];
      for (int t = 0; t < NT; t++) begin
        sym[t] = int'($urandom_range(K - 1, 0));
        sr[t] = (sym[t] & 1) ? -0.7071 : 0.7071;   // QPSK, unit average power
        si[t] = (sym[t] & 2) ? -0.7071 : 0.7071;
      end
      // received token y_p at index 2p
      @(negedge clk);
      tok_we = 1; tok_is_sym = 0; tok_idx = ($clog2(M))'(2 * p);
      tok_code = '0;
      for (int r = 0; r < NR; r++) begin
        real yr, yi;
        yr = gauss() * sigma; yi = gauss() * sigma;
        for (int t = 0; t < NT; t++) begin
          yr += hr[r][t] * sr[t] - hi[r][t] * si[t];
          yi += hr[r][t] * si[t] + hi[r][t] * sr[t];
        end
        tok_code[r]      = QB'(quant(yr));
        tok_code[NR + r] = QB'(quant(yi));
      end
      for (int d = 0; d < DT; d++)
        ref_m.prob[(2*p)*DT + d] = (d < 2 * NR) ? int'(tok_code[d]) * 16 : 0;
      if (p == N_CTX) begin
        q_class = 0;
        for (int t = 0; t < NT; t++) q_class += sym[t] * (K ** t);
      end else begin
        // pilot symbol token s_p at index 2p+1
        @(negedge clk);
        tok_we = 1; tok_is_sym = 1; tok_idx = ($clog2(M))'(2 * p + 1);
        tok_code = '0;
        for (int t = 0; t < NT; t++) tok_code[t] = QB'(sym[t]);
        for (int d = 0; d < DT; d++)
          ref_m.prob[(2*p+1)*DT + d] = (d < NT) ? sym[d] * 256 / K : 0;
      end
    end
    @(negedge clk); tok_we = 0;
  endtask

  initial begin
    int q_class, cycles, steps_before;
    ref_m = new(M, DT, DE, DH, L, NH, NCLS, T, VTH, LEAK, snn_pkg::VW, snn_pkg::PW,
                snn_pkg::ENC_SEED, snn_pkg::layer_seed(0), snn_pkg::layer_seed(1) - snn_pkg::layer_seed(0));
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_weights();
    $display("weights loaded at %0t", $time);
    for (int run = 0; run < RUNS; run++) begin
      load_tokens(q_class);
      ref_m.run();
      steps_before = int'(n_enc_steps);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      n_cycles += cycles;
      checks++;
      if (int'(answer) != ref_m.answer()) begin
        failures++;
        $display("FAIL run %0d: answer %0d expected %0d", run, answer, ref_m.answer());
      end
      checks++;
      if (answer_sym != (NT*KB)'(answer)) begin failures++; $display("FAIL answer_sym"); end
      for (int c = 0; c < NCLS; c++) begin
        checks++;
        if (longint'(score_last[c]) != ref_m.score[(M-1)*NCLS + c]) begin
          failures++;
          $display("FAIL run %0d class %0d: score %0d expected %0d", run, c, score_last[c],
                   ref_m.score[(M-1)*NCLS + c]);
        end
      end
      for (int c = 0; c < NCLS; c++) if (score_last[c] != 0) begin n_scored++; break; end
      checks++;
      if (int'(n_enc_steps) - steps_before != T) begin failures++; $display("FAIL time steps"); end
      $display("run %0d: answer %0d (sent class %0d), %0d cycles", run, answer, q_class, cycles);
    end
    // mechanisms exercised
    begin
      longint skips, fires, leaks, masked;
      skips = ref_m.emb.skips; fires = ref_m.emb.fires; leaks = ref_m.emb.leaks; masked = 0;
      for (int l = 0; l < L; l++) begin
        skips += ref_m.dec[l].skips(); fires += ref_m.dec[l].fires();
        leaks += ref_m.dec[l].leaks(); masked += ref_m.dec[l].att.masked;
      end
      $display("mechanisms: zero-spike inputs skipped=%0d  neuron fire+reset=%0d  leak applied=%0d",
               skips, fires, leaks);
      $display("            causal-masked attention pairs=%0d  zero-padded entries=%0d  time steps=%0d  inferences=%0d",
               masked, ref_m.pad_zero, n_enc_steps, RUNS);
      checks++; if (n_scored == 0) begin failures++; $display("FAIL query token never reached the output layer"); end
      checks++; if (skips == 0)  begin failures++; $display("FAIL no skipped input"); end
      checks++; if (fires == 0)  begin failures++; $display("FAIL no spike"); end
      checks++; if (leaks == 0)  begin failures++; $display("FAIL no leak"); end
      checks++; if (masked == 0) begin failures++; $display("FAIL no masked pair"); end
      checks++; if (ref_m.pad_zero == 0) begin failures++; $display("FAIL no padding"); end
      checks++; if (n_enc_steps != longint'(T * RUNS)) begin failures++; $display("FAIL step count"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
