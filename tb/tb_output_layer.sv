// Testbench of output_layer: 16 inputs, 4 classes, 3 tokens.  Random INT8
// weights and spikes over 4 time steps; the accumulated per-token scores and
// the argmax of the last token are compared with sums computed here, and each
// step's cycle count with sum over tokens of (input spikes + 2) + 1.
// clear_acc is checked by running two inferences.
module tb_output_layer;
  localparam int M = 3, DE = 16, NCLS = 4, OW = 20, TS = 4;
  logic clk = 0, rst_n = 0, clear_acc = 0, start = 0, busy, done;
  logic [M-1:0][DE-1:0]  e_in;
  logic signed [OW-1:0]  score [M][NCLS];
  logic [1:0]            answer;
  logic w_we = 0;
  logic [1:0]            w_row;
  logic [3:0]            w_col;
  logic signed [7:0]     w_data;
  int w [NCLS][DE];
  int exp_s [M][NCLS];
  int checks = 0, failures = 0;

  output_layer #(.M(M), .DE(DE), .NCLS(NCLS), .OW(OW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    e_in = '0; w_row = '0; w_col = '0; w_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NCLS; c++)
      for (int i = 0; i < DE; i++) begin
        @(negedge clk);
        w_we = 1; w_row = 2'(c); w_col = 4'(i); w_data = 8'($urandom); w[c][i] = int'(w_data);
      end
    @(negedge clk); w_we = 0;
    for (int run = 0; run < 2; run++) begin
      int best;
      @(negedge clk); clear_acc = 1;
      @(negedge clk); clear_acc = 0;
      for (int m = 0; m < M; m++) for (int c = 0; c < NCLS; c++) exp_s[m][c] = 0;
      for (int t = 0; t < TS; t++) begin
        int cycles, budget;
        budget = 1;
        for (int m = 0; m < M; m++) begin
          for (int i = 0; i < DE; i++) e_in[m][i] = ($urandom_range(99, 0) < 40);
          if (t == 1 && m == 1) e_in[m] = '0;
          budget += $countones(e_in[m]) + 2;
          for (int c = 0; c < NCLS; c++)
            for (int i = 0; i < DE; i++) if (e_in[m][i]) exp_s[m][c] += w[c][i];
        end
        @(negedge clk); start = 1;
        @(negedge clk); start = 0;
        cycles = 1;
        while (!done) begin @(negedge clk); cycles++; end
        checks++;
        if (cycles != budget) begin failures++; $display("FAIL %0d cycles, budget %0d", cycles, budget); end
        for (int m = 0; m < M; m++)
          for (int c = 0; c < NCLS; c++) begin
            checks++;
            if (int'(score[m][c]) != exp_s[m][c]) begin
              failures++;
              $display("FAIL run %0d t %0d token %0d class %0d: %0d exp %0d", run, t, m, c, score[m][c], exp_s[m][c]);
            end
          end
      end
      best = 0;
      for (int c = 1; c < NCLS; c++) if (exp_s[M-1][c] > exp_s[M-1][best]) best = c;
      checks++;
      if (int'(answer) != best) begin failures++; $display("FAIL answer %0d exp %0d", answer, best); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
