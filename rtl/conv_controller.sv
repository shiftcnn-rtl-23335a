// conv_controller: scheduling and control logic of the ShiftCNN
// convolution pipeline (the paper's Algorithm 2).
//
// For every input pixel (h, w) in raster order:
//   FILL  C cycles: read X[0..C-1][h][w], one channel per cycle, into the
//         ShiftALU, which shifts the terms into the precomputed buffer.
//   COMP  C~ * N * H_f * W_f cycles: one adder-tree operation per
//         (output channel oc, codebook n, tap fh, fw), loops nested in that
//         order, fw innermost, as in Algorithm 2.
// After the last pixel, DRAIN waits for the pipeline to empty and then
// pulses done. A layer therefore takes H*W*(C + C~*N*H_f*W_f) + DRAIN
// cycles from the start cycle to the done cycle.
//
// Scatter addressing (this design's reading of Algorithm 2): tap (fh, fw) of
// input pixel (h, w) contributes to output pixel (h - fh + pad_h,
// w - fw + pad_w), pad = floor((K-1)/2) ("same" padding, stride 1). An
// operation whose output pixel lies outside the tensor still takes its cycle
// but has wr = 0. first = 1 marks the first contribution to an output element
// in processing order (n = 1, and fh = 0 or h = 0, and fw = 0 or w = 0); the
// accumulate unit then adds the bias instead of the stored partial sum.
//
// Interface: start (one cycle, while idle) samples cfg; busy is high from
// the next cycle to the done pulse. x_rd_* and op are issued in the same
// cycle as their loop iteration; memories answer one cycle later.
module conv_controller #(
  parameter int unsigned C     = shiftcnn_pkg::C_DEF,
  parameter int unsigned N     = shiftcnn_pkg::N_DEF,
  parameter int unsigned DRAIN = $clog2(C) + 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  shiftcnn_pkg::layer_cfg_t cfg,
  output logic                     busy,
  output logic                     done,
  output logic                     x_rd_en,
  output shiftcnn_pkg::xaddr_t     x_rd_addr,
  output shiftcnn_pkg::op_t        op
);
  import shiftcnn_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_FILL, S_COMP, S_DRAIN} state_e;

  localparam int unsigned DW = $clog2(DRAIN + 1);
  localparam int unsigned SW = HW_W + 2;  // signed output coordinate width

  state_e          state;
  layer_cfg_t      cfg_q;
  logic [HW_W-1:0] h, w;
  logic [CI_W-1:0] c;
  logic [OC_W-1:0] oc;
  logic [NI_W-1:0] n;
  logic [K_W-1:0]  fh, fw;
  logic [DW-1:0]   dcnt;

  logic [K_W-1:0]       pad_h, pad_w;
  logic signed [SW-1:0] ho, wo;
  logic                 last_fw, last_fh, last_n, last_oc, last_w, last_h;

  initial begin
    assert (C >= 2 && C <= (1 << CI_W)) else $error("conv_controller: C out of range");
    assert (N >= 1 && N <= (1 << NI_W)) else $error("conv_controller: N out of range");
  end

  always_comb begin
    last_fw = (fw == cfg_q.kw - 1'b1);
    last_fh = (fh == cfg_q.kh - 1'b1);
    last_n  = (n == NI_W'(N - 1));
    last_oc = (oc == cfg_q.out_ch - 1'b1);
    last_w  = (w == cfg_q.width - 1'b1);
    last_h  = (h == cfg_q.height - 1'b1);

    pad_h = K_W'(cfg_q.kh - 1'b1) >> 1;
    pad_w = K_W'(cfg_q.kw - 1'b1) >> 1;
    ho = SW'(h) - SW'(fh) + SW'(pad_h);
    wo = SW'(w) - SW'(fw) + SW'(pad_w);

    busy      = (state != S_IDLE);
    done      = (state == S_DRAIN) && (dcnt == DW'(DRAIN - 1));
    x_rd_en   = (state == S_FILL);
    x_rd_addr = '{h: h, w: w, c: c};

    op.issue = (state == S_COMP);
    op.wr    = (state == S_COMP) && (ho >= 0) && (ho < SW'(cfg_q.height))
                                 && (wo >= 0) && (wo < SW'(cfg_q.width));
    op.first = (n == '0) && (fh == '0 || h == '0) && (fw == '0 || w == '0);
    op.wa    = '{oc: oc, n: n, fh: fh, fw: fw};
    op.ya    = '{oc: oc, h: ho[HW_W-1:0], w: wo[HW_W-1:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cfg_q <= '0;
      {h, w, c, oc, n, fh, fw, dcnt} <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (start) begin
            cfg_q <= cfg;
            {h, w, c, oc, n, fh, fw, dcnt} <= '0;
            state <= S_FILL;
          end
        end
        S_FILL: begin
          c <= c + 1'b1;
          if (c == CI_W'(C - 1)) begin
            c     <= '0;
            state <= S_COMP;
          end
        end
        S_COMP: begin
          fw <= fw + 1'b1;
          if (last_fw) begin
            fw <= '0;
            fh <= fh + 1'b1;
            if (last_fh) begin
              fh <= '0;
              n  <= n + 1'b1;
              if (last_n) begin
                n  <= '0;
                oc <= oc + 1'b1;
                if (last_oc) begin
                  oc    <= '0;
                  state <= S_FILL;
                  w     <= w + 1'b1;
                  if (last_w) begin
                    w <= '0;
                    h <= h + 1'b1;
                    if (last_h) begin
                      h     <= '0;
                      state <= S_DRAIN;
                    end
                  end
                end
              end
            end
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (done) begin
            dcnt  <= '0;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A layer needs a nonzero shape; start is ignored while busy.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (start && state == S_IDLE) |-> (cfg.out_ch != 0 && cfg.height != 0 &&
                                                   cfg.width != 0 && cfg.kh != 0 && cfg.kw != 0))
    else $error("conv_controller: zero-sized layer started");
  assert property (@(posedge clk) disable iff (!rst_n) !(x_rd_en && op.issue));

endmodule
