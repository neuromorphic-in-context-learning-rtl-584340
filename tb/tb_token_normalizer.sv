// Testbench of token_normalizer: every code value in every entry, for both
// token kinds, against the normalization written out here: a y code c gives
// c * 2^PW / 2^QB in the first 2*NR entries, a symbol index k gives
// k * 2^PW / K in the first NT entries, and padding entries are zero.
module tb_token_normalizer;
  localparam int DT = 4, NR = 2, NT = 2, K = 4, QB = 4, PW = 8;
  logic                  is_symbol;
  logic [DT-1:0][QB-1:0] code;
  logic [DT-1:0][PW-1:0] prob;
  int checks = 0, failures = 0;

  token_normalizer #(.DT(DT), .NR(NR), .NT(NT), .K(K), .QB(QB), .PW(PW)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int sym = 0; sym < 2; sym++) begin
      for (int c = 0; c < 16; c++) begin
        for (int rep = 0; rep < 4; rep++) begin
          is_symbol = sym[0];
          for (int d = 0; d < DT; d++) code[d] = QB'($urandom);
          code[rep] = QB'(c);
          #1;
          for (int d = 0; d < DT; d++) begin
            int exp;
            if (sym == 1) exp = (d < NT) ? (int'(code[d]) % K) * 256 / K : 0;
            else          exp = (d < 2 * NR) ? int'(code[d]) * 256 / 16 : 0;
            checks++;
            if (int'(prob[d]) != exp) begin
              failures++;
              $display("FAIL sym=%0d d=%0d code=%0d prob=%0d exp=%0d", sym, d, code[d], prob[d], exp);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
