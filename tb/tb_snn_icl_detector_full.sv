// Full-size end-to-end testbench of snn_icl_detector with every parameter at
// its default (N = 20 pilot pairs, DE = 256, DH = 1024, 4 layers, 8 heads,
// T = 4): all weights are loaded, one inference on a random channel is run
// and compared with the reference model; body in detector_tb_body.svh.
module tb_snn_icl_detector_full;
  import snn_ref_pkg::*;
  localparam int N_CTX = snn_pkg::N_CTX, M = snn_pkg::M, NT = snn_pkg::NT, NR = snn_pkg::NR;
  localparam int K = snn_pkg::K, QB = snn_pkg::QB, DT = snn_pkg::DT;
  localparam int DE = snn_pkg::DE, DH = snn_pkg::DH, L = snn_pkg::L, NH = snn_pkg::NH, T = snn_pkg::T;
  localparam int VTH = snn_pkg::VTH, LEAK = snn_pkg::LEAK_SHIFT, RUNS = 1;

  snn_icl_detector dut (.*);

  initial begin
    repeat (30000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`include "detector_tb_body.svh"
endmodule
