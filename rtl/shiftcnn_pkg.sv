// shiftcnn_pkg: constants, helper functions and address/operation types shared
// by the ShiftCNN convolution pipeline.
//
// The default configuration is the one the paper implements on an FPGA:
// parallelization level C = 128 input channels processed at once, N = 2
// power-of-two codebooks, B = 4-bit weight indices, 8-bit inputs and 16-bit
// precomputed terms. From B and N follow M = 2^B - 1 codebook entries and
// P = M + 2(N-1) precomputed terms per input element, of which P-1 are
// nonzero and K = floor(P/2) are distinct magnitudes 2^0 .. 2^-(K-1).
// The address field widths and the accumulator width are this design's own
// choices; the paper does not give them.
package shiftcnn_pkg;

  // Defaults of the configuration evaluated in the paper.
  localparam int unsigned C_DEF    = 128;  // parallelization level (C-bar = C)
  localparam int unsigned N_DEF    = 2;    // number of codebooks / shifts
  localparam int unsigned B_DEF    = 4;    // bits per weight index
  localparam int unsigned XW_DEF   = 8;    // input element width
  localparam int unsigned PW_DEF   = 16;   // precomputed term width
  localparam int unsigned ACCW_DEF = 32;   // output tensor / bias width (own choice)

  // Address field widths (own choice): up to 4095 output channels,
  // 255 x 255 feature maps, 7 x 7 kernels, 8 codebooks, 4096 input channels.
  localparam int unsigned OC_W = 12;
  localparam int unsigned HW_W = 8;
  localparam int unsigned K_W  = 3;
  localparam int unsigned NI_W = 3;
  localparam int unsigned CI_W = 12;

  // Codebook size M = 2^B - 1.
  function automatic int unsigned num_m(input int unsigned b);
    return (1 << b) - 1;
  endfunction

  // Number of precomputed terms including zero, P = M + 2(N-1).
  function automatic int unsigned num_p(input int unsigned n, input int unsigned b);
    return num_m(b) + 2 * (n - 1);
  endfunction

  // Distinct magnitudes K = floor(P/2) = floor(M/2) + N - 1; the ShiftALU
  // shifts by 0 .. K-1 and stores 2K = P-1 nonzero terms.
  function automatic int unsigned num_mag(input int unsigned n, input int unsigned b);
    return num_p(n, b) / 2;
  endfunction

  // Layer shape, sampled at start. Counts are plain (not minus one).
  typedef struct packed {
    logic [OC_W-1:0] out_ch;  // C~, output channels
    logic [HW_W-1:0] height;  // H (= H~, stride 1)
    logic [HW_W-1:0] width;   // W (= W~)
    logic [K_W-1:0]  kh;      // H_f
    logic [K_W-1:0]  kw;      // W_f
  } layer_cfg_t;

  // Input tensor element address X[c][h][w].
  typedef struct packed {
    logic [HW_W-1:0] h;
    logic [HW_W-1:0] w;
    logic [CI_W-1:0] c;
  } xaddr_t;

  // Weight memory word address: one word holds the C indices idx(n) of
  // W[oc][0..C-1][fh][fw]; n is zero-based (n-1 in the paper's notation).
  typedef struct packed {
    logic [OC_W-1:0] oc;
    logic [NI_W-1:0] n;
    logic [K_W-1:0]  fh;
    logic [K_W-1:0]  fw;
  } waddr_t;

  // Output tensor element address Y[oc][h][w].
  typedef struct packed {
    logic [OC_W-1:0] oc;
    logic [HW_W-1:0] h;
    logic [HW_W-1:0] w;
  } yaddr_t;

  // One adder-tree operation issued by the controller.
  typedef struct packed {
    logic   issue;   // a cycle of the operation loop (always counts)
    logic   wr;      // its output element lies inside the output tensor
    logic   first;   // first contribution to that element: add the bias
    waddr_t wa;      // weight indices to read
    yaddr_t ya;      // output element to accumulate into
  } op_t;

endpackage
