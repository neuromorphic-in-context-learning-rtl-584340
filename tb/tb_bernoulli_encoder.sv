// Testbench of bernoulli_encoder.  Loads M tokens of chosen probabilities and
// encodes many time steps, checking: (1) the done pulse comes exactly M+1
// cycles after start; (2) a zero probability never spikes; (3) each spike's
// frequency matches its probability within a 5-sigma bound; (4) after
// reseed the same spike sequence repeats.
module tb_bernoulli_encoder;
  localparam int M = 5, DT = 4, PW = 8, STEPS = 2000;
  logic clk = 0, rst_n = 0, reseed = 0, wr_en = 0, start = 0, busy, done;
  logic [$clog2(M)-1:0]  wr_idx;
  logic [DT-1:0][PW-1:0] wr_prob;
  logic [M-1:0][DT-1:0]  spk;
  int prob [M][DT];
  int ones [M][DT];
  logic [M-1:0][DT-1:0] first [4];
  int checks = 0, failures = 0;

  bernoulli_encoder #(.M(M), .DT(DT), .PW(PW), .SEED(32'hCAFE_0001)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(output int cycles);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    wr_idx = '0; wr_prob = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < M; m++) begin
      @(negedge clk); wr_en = 1; wr_idx = 3'(m);
      for (int d = 0; d < DT; d++) begin
        prob[m][d] = (d == 3) ? 0 : int'($urandom_range(255, 0));
        wr_prob[d] = PW'(prob[m][d]);
        ones[m][d] = 0;
      end
    end
    @(negedge clk); wr_en = 0;
    for (int s = 0; s < STEPS; s++) begin
      int cyc;
      step(cyc);
      if (s < 4) first[s] = spk;
      checks++;
      if (cyc != M + 1) begin failures++; $display("FAIL step took %0d cycles", cyc); end
      for (int m = 0; m < M; m++) for (int d = 0; d < DT; d++) ones[m][d] += int'(spk[m][d]);
    end
    for (int m = 0; m < M; m++)
      for (int d = 0; d < DT; d++) begin
        real p, sd, f;
        p  = prob[m][d] / 256.0;
        sd = $sqrt(p * (1.0 - p) / STEPS);
        f  = ones[m][d] / real'(STEPS);
        checks++;
        if ((f - p > 5.0 * sd + 0.002) || (p - f > 5.0 * sd + 0.002)) begin
          failures++;
          $display("FAIL token %0d entry %0d: freq %f prob %f", m, d, f, p);
        end
      end
    // repeatability after reseed
    @(negedge clk); reseed = 1;
    @(negedge clk); reseed = 0;
    for (int s = 0; s < 4; s++) begin
      int cyc;
      step(cyc);
      checks++;
      if (spk != first[s]) begin failures++; $display("FAIL reseed step %0d differs", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
