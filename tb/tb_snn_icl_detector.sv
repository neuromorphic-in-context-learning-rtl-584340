// End-to-end testbench of snn_icl_detector at reduced size (2 pilot pairs,
// DE = 16, DH = 32, 2 layers, 2 heads, 3 time steps): three inferences on
// random channels with random weights, each compared with the reference
// model; the shared body is in detector_tb_body.svh.
module tb_snn_icl_detector;
  import snn_ref_pkg::*;
  localparam int N_CTX = 2, M = 2 * N_CTX + 1, NT = 2, NR = 2, K = 4, QB = 4, DT = 4;
  localparam int DE = 16, DH = 32, L = 2, NH = 2, T = 3, VTH = 64, LEAK = 4, RUNS = 3;

  snn_icl_detector #(.M(M), .DT(DT), .DE(DE), .DH(DH), .L(L), .NH(NH), .T(T), .NT(NT), .NR(NR),
                     .K(K), .QB(QB), .VTH(VTH), .LEAK_SHIFT(LEAK)) dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`include "detector_tb_body.svh"
endmodule
