// shiftcnn_top: ShiftCNN convolutional-layer pipeline.
//
// A stride-1 convolution whose weights are sums of N signed powers of two is
// computed without multipliers. For each input pixel the C input channels
// are streamed, one per cycle, through the shift arithmetic unit, which
// writes every possible weight-times-input product (P-1 shifted and
// sign-flipped copies) into the precomputed buffer. Then, for every output
// channel, codebook n and filter tap, C multiplexers pick the term named by
// each channel's weight index, an adder tree sums the C picks, and the
// accumulate unit adds the sum to the bias or to the partial output read
// back from the output tensor.
//
// Datapath and timing (operation issued by the controller in cycle t):
//   t        weight indices read (w_rd_*)
//   t+1      indices arrive; C term multiplexers; adder tree input
//   t+L      output tensor / bias read (y_rd_*, b_rd_*), L = clog2(C)
//   t+L+1    adder tree sum arrives; accumulate; output tensor write (y_wr_*)
// Input elements read in cycle t arrive at t+1 and are shifted into the
// buffer at the end of t+1.
//
// The input, weight, bias and output tensor memories are outside this
// module, as in the paper's own implementation; each is expected to answer
// a read one cycle later, and the output tensor to return the old value when
// read and written in the same cycle. The memory interfaces and all widths
// not named in the paper (32-bit output/bias) are this design's choice.
module shiftcnn_top
  import shiftcnn_pkg::*;
#(
  parameter int unsigned C    = C_DEF,
  parameter int unsigned N    = N_DEF,
  parameter int unsigned B    = B_DEF,
  parameter int unsigned XW   = XW_DEF,
  parameter int unsigned PW   = PW_DEF,
  parameter int unsigned ACCW = ACCW_DEF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // layer control
  input  logic                     start,
  input  layer_cfg_t               cfg,
  output logic                     busy,
  output logic                     done,
  // input tensor memory
  output logic                     x_rd_en,
  output xaddr_t                   x_rd_addr,
  input  logic signed [XW-1:0]     x_rd_data,
  // weight index memory: one word = C indices of B bits, channel c at [c]
  output logic                     w_rd_en,
  output waddr_t                   w_rd_addr,
  input  logic [C-1:0][B-1:0]      w_rd_data,
  // bias memory
  output logic                     b_rd_en,
  output logic [OC_W-1:0]          b_rd_addr,
  input  logic signed [ACCW-1:0]   b_rd_data,
  // output tensor memory
  output logic                     y_rd_en,
  output yaddr_t                   y_rd_addr,
  input  logic signed [ACCW-1:0]   y_rd_data,
  output logic                     y_wr_en,
  output yaddr_t                   y_wr_addr,
  output logic signed [ACCW-1:0]   y_wr_data
);

  localparam int unsigned K   = num_mag(N, B);
  localparam int unsigned NT  = 2 * K;
  localparam int unsigned L   = $clog2(C);
  localparam int unsigned TW  = PW + L;

  // ---------------------------------------------------------------- control
  op_t  op;
  op_t  op_d [L+2];   // op_d[k]: the operation issued k cycles ago

  conv_controller #(.C(C), .N(N), .DRAIN(L + 2)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .x_rd_en, .x_rd_addr, .op
  );

  assign op_d[0] = op;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 1; k < int'(L) + 2; k++) op_d[k] <= '0;
    end else begin
      for (int k = 1; k < int'(L) + 2; k++) op_d[k] <= op_d[k-1];
    end
  end

  // ------------------------------------------------- ShiftALU and P buffer
  logic                 x_vld;
  logic signed [PW-1:0] alu_terms [NT];
  logic signed [PW-1:0] buf_terms [C][NT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) x_vld <= 1'b0;
    else        x_vld <= x_rd_en;
  end

  shift_alu #(.N(N), .B(B), .XW(XW), .PW(PW)) u_alu (
    .x(x_rd_data), .terms(alu_terms)
  );

  precomp_buffer #(.C(C), .NT(NT), .PW(PW)) u_pbuf (
    .clk, .shift_en(x_vld), .terms_in(alu_terms), .terms_out(buf_terms)
  );

  // -------------------------------------------------- multiplexers and tree
  assign w_rd_en   = op.issue;
  assign w_rd_addr = op.wa;

  logic signed [PW-1:0] mux_out [C];

  for (genvar c = 0; c < C; c++) begin : g_mux
    term_mux #(.N(N), .B(B), .PW(PW)) u_mux (
      .terms(buf_terms[c]), .idx(w_rd_data[c]), .n_sel(op_d[1].wa.n), .y(mux_out[c])
    );
  end

  logic                 tree_vld;
  logic signed [TW-1:0] tree_sum;

  adder_tree #(.C(C), .IW(PW), .OW(TW)) u_tree (
    .clk, .rst_n, .in_valid(op_d[1].issue), .in_data(mux_out),
    .out_valid(tree_vld), .out_sum(tree_sum)
  );

  // ------------------------------------------------ bias / output feedback
  assign y_rd_en   = op_d[L].wr && !op_d[L].first;
  assign y_rd_addr = op_d[L].ya;
  assign b_rd_en   = op_d[L].wr && op_d[L].first;
  assign b_rd_addr = op_d[L].ya.oc;

  accumulate_unit #(.TW(TW), .ACCW(ACCW)) u_acc (
    .clk, .rst_n,
    .in_valid(op_d[L+1].wr), .in_first(op_d[L+1].first), .in_addr(op_d[L+1].ya),
    .in_sum(tree_sum), .bias(b_rd_data), .y_old(y_rd_data),
    .wr_en(y_wr_en), .wr_addr(y_wr_addr), .wr_data(y_wr_data), .bypass()
  );

  // The adder tree and the operation delay line stay aligned.
  assert property (@(posedge clk) disable iff (!rst_n) tree_vld == op_d[L+1].issue)
    else $error("shiftcnn_top: adder tree out of step with control");

endmodule
