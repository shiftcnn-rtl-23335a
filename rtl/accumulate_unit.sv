// accumulate_unit: the bias multiplexer and output adder of the ShiftCNN
// pipeline.
//
// Each adder-tree sum is one convolution contribution to an output element
// Y[oc][h][w]. For the first contribution to an element the multiplexer
// picks the bias b[oc]; for later ones it picks the element's current
// value, read back from the output tensor. The adder adds the sum and the
// result is written back to the output tensor.
//
// Bypass (own addition): the output tensor read for an operation is issued
// one cycle before the operation arrives here, so the write made by the
// operation just before it is not yet visible in memory. When both address
// the same element (1x1 filters, where successive codebooks n revisit it)
// the value written in the previous cycle is used instead of y_old.
//
// Interface and timing: in_* , bias and y_old belong to the same operation
// in the same cycle; wr_en/wr_addr/wr_data are combinational and commit at
// the next clock edge. bypass flags a cycle that used the forwarded value.
// Widths (ACCW, fixed point with the same fraction bits as the terms) are
// this design's choice.
module accumulate_unit #(
  parameter int unsigned TW   = shiftcnn_pkg::PW_DEF + $clog2(shiftcnn_pkg::C_DEF),
  parameter int unsigned ACCW = shiftcnn_pkg::ACCW_DEF
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic                         in_first,
  input  shiftcnn_pkg::yaddr_t         in_addr,
  input  logic signed [TW-1:0]         in_sum,
  input  logic signed [ACCW-1:0]       bias,
  input  logic signed [ACCW-1:0]       y_old,
  output logic                         wr_en,
  output shiftcnn_pkg::yaddr_t         wr_addr,
  output logic signed [ACCW-1:0]       wr_data,
  output logic                         bypass
);

  logic                    prev_valid;
  shiftcnn_pkg::yaddr_t    prev_addr;
  logic signed [ACCW-1:0]  prev_data;
  logic signed [ACCW-1:0]  base;

  always_comb begin
    bypass = in_valid && !in_first && prev_valid && (prev_addr == in_addr);
    if (in_first)    base = bias;
    else if (bypass) base = prev_data;
    else             base = y_old;
    wr_en   = in_valid;
    wr_addr = in_addr;
    wr_data = base + ACCW'(in_sum);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_valid <= 1'b0;
      prev_addr  <= '0;
      prev_data  <= '0;
    end else begin
      prev_valid <= wr_en;
      prev_addr  <= wr_addr;
      prev_data  <= wr_data;
    end
  end

endmodule
