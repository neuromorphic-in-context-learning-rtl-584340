// Testbench of weight_mem: random single-weight writes into a shadow copy,
// then every column read back, checking the one-cycle read latency and that
// a write to one weight leaves the rest of its column untouched.
module tb_weight_mem;
  localparam int DEPTH = 16, NOUT = 8, WW = 8;
  logic clk = 0;
  logic we, re;
  logic [$clog2(NOUT)-1:0]  wrow;
  logic [$clog2(DEPTH)-1:0] wcol, raddr;
  logic signed [WW-1:0]     wdata;
  logic [NOUT-1:0][WW-1:0]  rdata;
  int shadow [DEPTH][NOUT];
  int checks = 0, failures = 0;

  weight_mem #(.DEPTH(DEPTH), .NOUT(NOUT), .WW(WW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; wrow = 0; wcol = 0; wdata = 0; raddr = 0;
    // fill everything, then overwrite random entries
    for (int c = 0; c < DEPTH; c++)
      for (int r = 0; r < NOUT; r++) begin
        @(negedge clk);
        we = 1; wcol = 4'(c); wrow = 3'(r); wdata = 8'($urandom); shadow[c][r] = int'(wdata);
      end
    repeat (200) begin
      @(negedge clk);
      we = 1; wcol = 4'($urandom); wrow = 3'($urandom); wdata = 8'($urandom);
      shadow[wcol][wrow] = int'(wdata);
    end
    @(negedge clk); we = 0;
    for (int c = 0; c < DEPTH; c++) begin
      @(negedge clk); re = 1; raddr = 4'(c);
      @(negedge clk); re = 0; raddr = 4'(c + 1);   // data must come from the previous cycle's address
      for (int r = 0; r < NOUT; r++) begin
        checks++;
        if (int'($signed(rdata[r])) != shadow[c][r]) begin
          failures++;
          $display("FAIL col %0d row %0d: %0d exp %0d", c, r, $signed(rdata[r]), shadow[c][r]);
        end
      end
      // the output holds while re is low
      @(negedge clk);
      checks++;
      if (int'($signed(rdata[0])) != shadow[c][0]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
