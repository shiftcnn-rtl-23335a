// shift_alu: the ShiftCNN shift arithmetic unit.
//
// For one signed input element x it produces every nonzero precomputed
// convolution term at once: x * 2^-s and -x * 2^-s for s = 0 .. K-1, where
// K = floor(P/2) is the number of distinct magnitudes (8 for N=2, B=4).
// As in the paper's ShiftALU, the pass-through value feeds a chain of K-1
// right-shift-by-one stages, and each of the K values goes through a sign
// flip, so the unit needs K-1 shifts and K negations and no multiplier.
//
// Fixed point (own choice): x is placed in a PW-bit word with K-1 fraction
// bits, so every shift down to 2^-(K-1) is exact and -x never overflows
// (requires XW + K <= PW; 8 + 8 = 16 by default).
//
// Output order: terms[2s] = +x*2^-s, terms[2s+1] = -x*2^-s, following the
// left-to-right order of the paper's ShiftALU figure.
// Timing: purely combinational; the precomputed-tensor buffer that follows
// is the pipeline register.
module shift_alu #(
  parameter int unsigned N  = shiftcnn_pkg::N_DEF,
  parameter int unsigned B  = shiftcnn_pkg::B_DEF,
  parameter int unsigned XW = shiftcnn_pkg::XW_DEF,
  parameter int unsigned PW = shiftcnn_pkg::PW_DEF,
  localparam int unsigned K  = shiftcnn_pkg::num_mag(N, B),
  localparam int unsigned NT = 2 * K
) (
  input  logic signed [XW-1:0] x,
  output logic signed [PW-1:0] terms [NT]
);

  initial begin
    assert (XW + K <= PW)
      else $error("shift_alu: PW=%0d too narrow for XW=%0d and %0d shifts", PW, XW, K - 1);
  end

  logic signed [PW-1:0] shifted [K];

  // Pass-through value, aligned to K-1 fraction bits.
  assign shifted[0] = PW'(x) <<< (K - 1);

  // Chain of right-shift-by-one stages.
  for (genvar s = 1; s < K; s++) begin : g_shift
    assign shifted[s] = shifted[s-1] >>> 1;
  end

  // Sign flip of every magnitude.
  for (genvar s = 0; s < K; s++) begin : g_flip
    assign terms[2*s]   = shifted[s];
    assign terms[2*s+1] = -shifted[s];
  end

endmodule
