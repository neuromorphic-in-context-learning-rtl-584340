// Testbench of mssa: 2 heads of width 4 over 5 tokens.  Random Q/K/V spike
// matrices for 40 time steps, plus directed ones (all ones; values only on
// future tokens, which the causal mask must hide), are compared bit for bit
// with the reference attention model, which draws from the same generator
// lanes.  Each step must take NH*M + 1 cycles from start to done.
module tb_mssa;
  import snn_ref_pkg::*;
  localparam int M = 5, DK = 4, NH = 2, DE = NH * DK, STEPS = 40;
  localparam logic [31:0] SEED = 32'h5151_0003;
  logic clk = 0, rst_n = 0, reseed = 0, start = 0, busy, done;
  logic [M-1:0][DE-1:0] q, k, v, g;
  int checks = 0, failures = 0;
  mssa_ref ref_m;

  mssa #(.M(M), .DK(DK), .NH(NH), .SEED(SEED)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit qb[], kb[], vb[], gb[];
    int ones;
    ref_m = new(M, DK, NH, SEED);
    q = '0; k = '0; v = '0;
    ones = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < STEPS; s++) begin
      int cycles;
      qb = new[M * DE]; kb = new[M * DE]; vb = new[M * DE];
      for (int m = 0; m < M; m++)
        for (int i = 0; i < DE; i++) begin
          case (s)
            0: begin q[m][i] = 1; k[m][i] = 1; v[m][i] = 1; end
            1: begin q[m][i] = 1; k[m][i] = 1; v[m][i] = (m == M - 1); end  // value only on the last token
            default: begin
              q[m][i] = ($urandom_range(99, 0) < 60);
              k[m][i] = ($urandom_range(99, 0) < 60);
              v[m][i] = ($urandom_range(99, 0) < 50);
            end
          endcase
          qb[m*DE + i] = q[m][i]; kb[m*DE + i] = k[m][i]; vb[m*DE + i] = v[m][i];
        end
      ref_m.step(qb, kb, vb, gb);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles != NH * M + 1) begin failures++; $display("FAIL step %0d took %0d cycles", s, cycles); end
      for (int m = 0; m < M; m++)
        for (int i = 0; i < DE; i++) begin
          checks++;
          ones += int'(g[m][i]);
          if (g[m][i] != gb[m*DE + i]) begin
            failures++;
            $display("FAIL step %0d token %0d bit %0d: %0d exp %0d", s, m, i, g[m][i], gb[m*DE + i]);
          end
        end
      // directed expectations independent of the random draws
      if (s == 0) begin
        checks++;   // last token sees all M keys at full weight: always 1
        if (g[M-1] != '1) begin failures++; $display("FAIL all-ones last token %b", g[M-1]); end
      end
      if (s == 1) begin
        checks++;   // values exist only on the last token: earlier queries may not see them
        for (int m = 0; m < M - 1; m++) if (g[m] != '0) begin failures++; $display("FAIL mask token %0d", m); end
      end
    end
    $display("masked pairs=%0d ones=%0d", ref_m.masked, ones);
    checks++;
    if (ref_m.masked == 0 || ones == 0) failures++;
    // reseed restarts the generators
    @(negedge clk); reseed = 1;
    @(negedge clk); reseed = 0;
    ref_m.reseed();
    ref_m.step(qb, kb, vb, gb);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int m = 0; m < M; m++)
      for (int i = 0; i < DE; i++) begin
        checks++;
        if (g[m][i] != gb[m*DE + i]) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
