// Shared constants and helpers of the spiking-transformer MIMO detector.
//
// The size constants are the main configuration evaluated for the detector:
// a 2x2 MIMO link with QPSK (K=4), a 4-bit receive quantizer, a context of
// N=20 pilot pairs, embedding width 256, 4 decoder layers, 8 heads and T=4
// time steps.  The feed-forward hidden width DH, the probability width, the
// membrane width, the LIF threshold and leak are not fixed by the algorithm
// description and are this design's own choices (see README).
//
// The helpers implement the random-number side of the stochastic arithmetic:
// every Bernoulli draw in the design uses a 32-bit xorshift generator
// (shifts 13, 17, 5), and a uniform integer in [0, n) is taken from the low
// 16 bits of a state r as (r * n) >> 16.
package snn_pkg;

  // Link and context (MIMO configuration of the evaluation).
  localparam int NT    = 2;              // transmit antennas
  localparam int NR    = 2;              // receive antennas
  localparam int K     = 4;              // constellation size (QPSK)
  localparam int QB    = 4;              // quantizer resolution in bits
  localparam int N_CTX = 20;             // pilot pairs in the context
  localparam int M     = 2 * N_CTX + 1;  // tokens: y1,s1,...,yN,sN,y
  localparam int DT    = (NT > 2 * NR) ? NT : 2 * NR;  // token width D_t
  localparam int NCLS  = K ** NT;        // output classes K^Nt

  // Transformer sizes.
  localparam int DE = 256;               // embedding width D_e
  localparam int L  = 4;                 // decoder layers
  localparam int NH = 8;                 // attention heads
  localparam int DK = DE / NH;           // head width D_K
  localparam int DH = 4 * DE;            // feed-forward hidden width (own choice)
  localparam int T  = 4;                 // time steps

  // Number formats.
  localparam int WW  = 8;                // INT8 weights
  localparam int PW  = 8;                // probability width: p = value / 2^PW
  localparam int VW  = 20;               // membrane potential width (signed)
  localparam int OW  = 20;               // output accumulator width (signed)
  localparam int VTH = 64;               // LIF threshold (own choice)
  localparam int LEAK_SHIFT = 4;         // beta = 1 - 2^-LEAK_SHIFT, 0 means beta = 1

  // Weight matrices of one decoder layer, as addressed by the load port.
  typedef enum logic [2:0] {
    MAT_Q  = 3'd0,   // W_Q of all heads, DE x DE
    MAT_K  = 3'd1,   // W_K of all heads, DE x DE
    MAT_V  = 3'd2,   // W_V of all heads, DE x DE
    MAT_W1 = 3'd3,   // feed-forward W_1, DH x DE
    MAT_W2 = 3'd4    // feed-forward W_2, DE x DH
  } mat_sel_t;

  // One step of the xorshift32 generator.  The state must never be zero.
  function automatic logic [31:0] xorshift32(input logic [31:0] s);
    logic [31:0] x;
    x = s;
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  // Distinct non-zero seed for generator lane `lane` of a unit seeded `base`.
  function automatic logic [31:0] lane_seed(input logic [31:0] base, input int unsigned lane);
    logic [31:0] s;
    s = base + (32'(lane) + 32'd1) * 32'h9E37_79B9;
    return s | 32'd1;
  endfunction

  // Seeds of the random generators: the encoder, and the attention of layer l.
  localparam logic [31:0] ENC_SEED = 32'h1234_5678;
  function automatic logic [31:0] layer_seed(input int unsigned l);
    return 32'h0BAD_5EED + 32'(l) * 32'h0100_0193;
  endfunction

  // Uniform integer in [0, n) from the low 16 bits of a generator state.
  function automatic logic [15:0] scale_rand(input logic [15:0] r, input logic [15:0] n);
    return 16'(({16'd0, r} * {16'd0, n}) >> 16);
  endfunction

endpackage
