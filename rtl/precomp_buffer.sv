// precomp_buffer: memory buffer for the precomputed tensor P_{h,w} of one
// input pixel, (P-1) x C terms.
//
// Organised, as the paper suggests, as P-1 shift registers of length C that
// are written along the channel dimension (one channel per shift, all P-1
// terms of that channel at once) and read in parallel along the term
// dimension by the C index multiplexers.
//
// Interface: when shift_en is high, terms_in enters at index C-1 and every
// entry moves down by one. After C shifts the first channel written sits at
// index 0 and channel c at index c (channel order is this design's choice).
// Timing: one clock edge per shift; terms_out is the register contents.
// The data registers have no reset; each pixel rewrites all C entries
// before they are read.
module precomp_buffer #(
  parameter int unsigned C  = shiftcnn_pkg::C_DEF,
  parameter int unsigned NT = 2 * shiftcnn_pkg::num_mag(shiftcnn_pkg::N_DEF, shiftcnn_pkg::B_DEF),
  parameter int unsigned PW = shiftcnn_pkg::PW_DEF
) (
  input  logic                 clk,
  input  logic                 shift_en,
  input  logic signed [PW-1:0] terms_in  [NT],
  output logic signed [PW-1:0] terms_out [C][NT]
);

  // The shift registers as one packed vector, channel position c at sr[c].
  logic [C-1:0][NT-1:0][PW-1:0] sr;
  logic [NT-1:0][PW-1:0]        din;

  for (genvar t = 0; t < NT; t++) begin : g_in
    assign din[t] = terms_in[t];
  end

  for (genvar c = 0; c < C; c++) begin : g_out
    for (genvar t = 0; t < NT; t++) begin : g_t
      assign terms_out[c][t] = sr[c][t];
    end
  end

  always_ff @(posedge clk) begin
    if (shift_en) sr <= {din, sr[C-1:1]};
  end

endmodule
