// adder_tree: pipelined binary adder tree that sums the C multiplexer
// outputs of the ShiftCNN pipeline.
//
// The paper's array of adders becomes an adder tree when all C channels are
// processed in parallel. Here each of the clog2(C) levels adds pairs and is
// followed by a register, so the latency is clog2(C) cycles and one new set
// of C inputs is accepted every cycle. The register per level and the
// full-precision output width IW + clog2(C) are this design's choices.
//
// Interface: in_valid/in_data enter at a clock edge; out_valid/out_sum
// appear LAT = clog2(C) edges later. C must be at least 2; a C that is not
// a power of two is padded with zeros.
module adder_tree #(
  parameter int unsigned C  = shiftcnn_pkg::C_DEF,
  parameter int unsigned IW = shiftcnn_pkg::PW_DEF,
  parameter int unsigned OW = IW + $clog2(C)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [IW-1:0] in_data [C],
  output logic                 out_valid,
  output logic signed [OW-1:0] out_sum
);

  localparam int unsigned LVL = $clog2(C);
  localparam int unsigned CP  = 1 << LVL;

  initial begin
    assert (C >= 2) else $error("adder_tree: C must be at least 2");
  end

  // Heap-ordered tree: leaves lf[0 .. CP-1] are the zero-padded inputs,
  // node[i] = (children of i) registered, children of i are nodes 2i and
  // 2i+1, or leaves 2i-CP and 2i+1-CP once 2i >= CP. node[1] is the root.
  logic [CP-1:0][OW-1:0] lf;
  logic [CP-1:1][OW-1:0] node;
  logic [LVL-1:0]        vld;

  for (genvar i = 0; i < CP; i++) begin : g_leaf
    if (i < C) begin : g_in
      assign lf[i] = OW'(in_data[i]);
    end else begin : g_pad
      assign lf[i] = '0;
    end
  end

  always_ff @(posedge clk) begin
    for (int i = CP / 2; i < int'(CP); i++)
      node[i] <= $signed(lf[2*i-CP]) + $signed(lf[2*i+1-CP]);
    for (int i = 1; i < int'(CP / 2); i++)
      node[i] <= $signed(node[2*i]) + $signed(node[2*i+1]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= LVL'({vld, in_valid});
  end

  assign out_sum   = node[1];
  assign out_valid = vld[LVL-1];

endmodule
