// Testbench of lif_layer: a small layer (8 inputs, 6 neurons, 3 tokens, a
// narrow 10-bit membrane so that saturation occurs) runs 12 time steps of
// random input spikes.  Output spikes of every step are compared with the
// dense reference LIF model, and the cycle count of every step is checked
// against the event-driven budget sum over tokens of (input spikes + 2) + 1.
// Membranes are cleared halfway to check clear_state.
module tb_lif_layer;
  import snn_ref_pkg::*;
  localparam int NIN = 8, NOUT = 6, M = 3, VW = 10, VTH = 40, LEAK = 2, STEPS = 12;
  logic clk = 0, rst_n = 0, clear_state = 0, start = 0, busy, done;
  logic [M-1:0][NIN-1:0]  in_spk;
  logic [M-1:0][NOUT-1:0] out_spk;
  logic w_we = 0;
  logic [$clog2(NOUT)-1:0] w_row;
  logic [$clog2(NIN)-1:0]  w_col;
  logic signed [7:0]       w_data;
  int checks = 0, failures = 0;
  lif_ref ref_m;

  lif_layer #(.NIN(NIN), .NOUT(NOUT), .M(M), .VW(VW), .VTH(VTH), .LEAK_SHIFT(LEAK)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit x[], y[];
    ref_m = new(NIN, NOUT, M, VTH, LEAK, VW);
    w_row = '0; w_col = '0; w_data = '0; in_spk = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int o = 0; o < NOUT; o++)
      for (int i = 0; i < NIN; i++) begin
        @(negedge clk);
        w_we = 1; w_row = 3'(o); w_col = 3'(i);
        w_data = 8'(int'($urandom_range(120, 0)) - 70);
        ref_m.w[o*NIN + i] = int'(w_data);
      end
    @(negedge clk); w_we = 0;
    for (int s = 0; s < STEPS; s++) begin
      int cycles, budget;
      if (s == STEPS / 2) begin
        @(negedge clk); clear_state = 1;
        @(negedge clk); clear_state = 0;
        ref_m.clear();
      end
      x = new[M * NIN];
      budget = 1;
      for (int m = 0; m < M; m++) begin
        for (int i = 0; i < NIN; i++) begin
          in_spk[m][i] = ($urandom_range(99, 0) < 55);
          if (s == 1 && m == 0) in_spk[m][i] = 1'b0;   // a token with no input spike
          x[m*NIN + i] = in_spk[m][i];
        end
        budget += $countones(in_spk[m]) + 2;
      end
      ref_m.step(x, y);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles != budget) begin failures++; $display("FAIL step %0d: %0d cycles, budget %0d", s, cycles, budget); end
      for (int m = 0; m < M; m++)
        for (int o = 0; o < NOUT; o++) begin
          checks++;
          if (out_spk[m][o] != y[m*NOUT + o]) begin
            failures++;
            $display("FAIL step %0d token %0d neuron %0d: %0d exp %0d", s, m, o, out_spk[m][o], y[m*NOUT + o]);
          end
        end
    end
    $display("fires=%0d leaks=%0d", ref_m.fires, ref_m.leaks);
    checks++;
    if (ref_m.fires == 0 || ref_m.leaks == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
