// term_mux: per-channel multiplexer that turns a weight index into a
// precomputed term.
//
// The weight entry of codebook n is idx(n), a B-bit signed index with
// |idx| <= floor(M/2) (Algorithm 1 of ShiftCNN: idx = sgn * (2 - n - q_idx)).
// Index 0 selects zero; otherwise the weight is sgn(idx) * 2^-(|idx|+n-2),
// which is the term with shift s = |idx| + n - 2 and the sign of idx.
// Because the P-1 stored terms plus zero need more than B select bits, the
// multiplexer also takes the codebook number n (zero-based n_sel = n-1)
// from the control loop; this is this design's reading of the paper.
// The code -2^(B-1), which the quantizer never produces, also selects zero.
//
// Interface: terms[2s] = +x*2^-s, terms[2s+1] = -x*2^-s (see shift_alu).
// Timing: combinational.
module term_mux #(
  parameter int unsigned N  = shiftcnn_pkg::N_DEF,
  parameter int unsigned B  = shiftcnn_pkg::B_DEF,
  parameter int unsigned PW = shiftcnn_pkg::PW_DEF,
  localparam int unsigned K  = shiftcnn_pkg::num_mag(N, B),
  localparam int unsigned NT = 2 * K
) (
  input  logic signed [PW-1:0]               terms [NT],
  input  logic        [B-1:0]                idx,
  input  logic        [shiftcnn_pkg::NI_W-1:0] n_sel,
  output logic signed [PW-1:0]               y
);

  localparam int unsigned HALF_M = shiftcnn_pkg::num_m(B) / 2;

  logic                 neg;
  logic [B-1:0]         mag;
  int unsigned          shift;

  always_comb begin
    neg   = idx[B-1];
    mag   = neg ? B'(-idx) : idx;
    shift = int'(mag) + int'(n_sel) - 1;
    y     = '0;
    if (mag != '0 && int'(mag) <= int'(HALF_M) && shift < K)
      y = terms[2*shift + (neg ? 1 : 0)];
  end

endmodule
