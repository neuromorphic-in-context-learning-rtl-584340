// Testbench of decoder_layer: 5 tokens, DE = 16, DH = 32, 2 heads.  Random
// INT8 weights for W_Q, W_K, W_V, W_1 and W_2 are loaded through the port;
// 8 time steps of random input spikes are run and E_l compared bit for bit
// with the reference layer (dense LIF layers and the reference attention).
// The cycle count of each step is checked against the event-driven budget:
//   sum(p_in + 2) + (NH*M + 1) + sum(p_G + 2) + sum(p_H + 2) + HANDOVER
// where p_* are per-token spike counts of the layer input, G and the hidden
// layer, and HANDOVER is the fixed cost of the phase hand-overs.
module tb_decoder_layer;
  import snn_ref_pkg::*;
  localparam int M = 5, DE = 16, DH = 32, NH = 2, VW = 20, VTH = 40, LEAK = 3, STEPS = 8;
  localparam int HANDOVER = 8;
  localparam logic [31:0] SEED = 32'h7777_0101;
  logic clk = 0, rst_n = 0, clear_state = 0, reseed = 0, start = 0, busy, done;
  logic [M-1:0][DE-1:0] e_in, e_out;
  logic w_we = 0;
  snn_pkg::mat_sel_t w_mat;
  logic [4:0] w_row, w_col;
  logic signed [7:0] w_data;
  int checks = 0, failures = 0;
  dec_ref ref_m;

  decoder_layer #(.M(M), .DE(DE), .DH(DH), .NH(NH), .VW(VW), .VTH(VTH), .LEAK_SHIFT(LEAK), .SEED(SEED)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(snn_pkg::mat_sel_t sel, lif_ref l, int lo, int hi);
    for (int o = 0; o < l.nout; o++)
      for (int i = 0; i < l.nin; i++) begin
        @(negedge clk);
        w_we = 1; w_mat = sel; w_row = 5'(o); w_col = 5'(i);
        w_data = 8'(int'($urandom_range(hi - lo, 0)) + lo);
        l.w[o*l.nin + i] = int'(w_data);
      end
    @(negedge clk); w_we = 0;
  endtask

  function automatic int budget(bit x[], int width);
    int b;
    b = 0;
    for (int m = 0; m < M; m++) begin
      b += 2;
      for (int i = 0; i < width; i++) b += int'(x[m*width + i]);
    end
    return b;
  endfunction

  initial begin
    bit xb[], qs[], ks[], vs[], gs[], hs[], yb[];
    ref_m = new(M, DE, DH, NH, VTH, LEAK, VW, SEED);
    e_in = '0; w_mat = snn_pkg::MAT_Q; w_row = '0; w_col = '0; w_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(snn_pkg::MAT_Q,  ref_m.q,  -20, 40);
    load(snn_pkg::MAT_K,  ref_m.k,  -20, 40);
    load(snn_pkg::MAT_V,  ref_m.v,  -20, 40);
    load(snn_pkg::MAT_W1, ref_m.f1, -30, 60);
    load(snn_pkg::MAT_W2, ref_m.f2, -20, 30);
    @(negedge clk); clear_state = 1; reseed = 1;
    @(negedge clk); clear_state = 0; reseed = 0;
    for (int s = 0; s < STEPS; s++) begin
      int cycles, exp_cyc;
      xb = new[M * DE];
      for (int m = 0; m < M; m++)
        for (int i = 0; i < DE; i++) begin
          e_in[m][i] = ($urandom_range(99, 0) < 50);
          xb[m*DE + i] = e_in[m][i];
        end
      ref_m.q.step(xb, qs);
      ref_m.k.step(xb, ks);
      ref_m.v.step(xb, vs);
      ref_m.att.step(qs, ks, vs, gs);
      ref_m.f1.step(gs, hs);
      ref_m.f2.step(hs, yb);
      exp_cyc = budget(xb, DE) + NH * M + 1 + budget(gs, DE) + budget(hs, DH) + HANDOVER;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles != exp_cyc) begin failures++; $display("FAIL step %0d: %0d cycles, expected %0d", s, cycles, exp_cyc); end
      for (int m = 0; m < M; m++)
        for (int i = 0; i < DE; i++) begin
          checks++;
          if (e_out[m][i] != yb[m*DE + i]) begin
            failures++;
            $display("FAIL step %0d token %0d bit %0d: %0d exp %0d", s, m, i, e_out[m][i], yb[m*DE + i]);
          end
        end
    end
    $display("fires=%0d masked=%0d", ref_m.fires(), ref_m.att.masked);
    checks++;
    if (ref_m.fires() == 0 || ref_m.att.masked == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
