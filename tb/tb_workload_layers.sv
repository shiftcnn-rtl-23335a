// tb_workload_layers: runs full-size convolution layers shaped like layers of
// networks ShiftCNN was evaluated on, on the pipeline at its default size
// (C = 128, N = 2, B = 4), and checks every output element against a direct
// convolution and the layer's cycle count. The shapes are the published ones
// of these public networks (input channels, output channels, feature map,
// kernel); layers with fewer than 128 input channels are zero-padded in the
// input memory. Weights and inputs are random, not trained values:
//   SqueezeNet v1.1 fire9 expand3x3 : 64 -> 256, 13 x 13, 3x3
//   GoogleNet inception(3a) 5x5     : 16 -> 32,  28 x 28, 5x5
//   ResNet-18 conv2_x 3x3           : 64 -> 64,  56 x 56, 3x3
//   ResNet-50 conv2_x 1x1 (expand)  : 64 -> 256, 56 x 56 reduced to 14 x 14, 1x1
module tb_workload_layers;
  import shiftcnn_pkg::*;

  localparam int unsigned C    = C_DEF;
  localparam int unsigned N    = N_DEF;
  localparam int unsigned B    = B_DEF;
  localparam int unsigned XW   = XW_DEF;
  localparam int unsigned PW   = PW_DEF;
  localparam int unsigned ACCW = ACCW_DEF;
  localparam int unsigned K    = num_mag(N, B);
  localparam int unsigned L    = $clog2(C);
  localparam int          OCM  = 256, HM = 56, WM = 56, KM = 5;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  layer_cfg_t cfg;
  logic busy, done;
  logic x_rd_en, w_rd_en, b_rd_en, y_rd_en, y_wr_en;
  xaddr_t x_rd_addr;
  waddr_t w_rd_addr;
  yaddr_t y_rd_addr, y_wr_addr;
  logic [OC_W-1:0] b_rd_addr;
  logic signed [XW-1:0] x_rd_data;
  logic [C-1:0][B-1:0] w_rd_data;
  logic signed [ACCW-1:0] b_rd_data, y_rd_data, y_wr_data;

  shiftcnn_top dut (.*);

  always #5 clk = ~clk;

  // ------------------------------------------------ tensor memory models
  logic signed [XW-1:0]   xmem [HM][WM][C];
  logic [C-1:0][B-1:0]    wmem [OCM][N][KM][KM];
  logic signed [ACCW-1:0] bmem [OCM];
  logic signed [ACCW-1:0] ymem [OCM][HM][WM];

  always_ff @(posedge clk) begin
    if (x_rd_en) x_rd_data <= xmem[x_rd_addr.h][x_rd_addr.w][x_rd_addr.c];
    if (w_rd_en) w_rd_data <= wmem[w_rd_addr.oc][w_rd_addr.n][w_rd_addr.fh][w_rd_addr.fw];
    if (b_rd_en) b_rd_data <= bmem[b_rd_addr];
    if (y_rd_en) y_rd_data <= ymem[y_rd_addr.oc][y_rd_addr.h][y_rd_addr.w];
    if (y_wr_en) ymem[y_wr_addr.oc][y_wr_addr.h][y_wr_addr.w] <= y_wr_data;
  end

  // ------------------------------------------------------------ counters
  int checks = 0, failures = 0;

  // ------------------------------------------------------ reference model
  // Weight index -> weight value times 2^(K-1), or 0.
  function automatic longint wscaled(logic [B-1:0] idx, int n0);
    int v, m, s;
    v = $signed(idx);
    m = v < 0 ? -v : v;
    if (v == 0 || m > int'(num_m(B) / 2)) return 0;
    s = m + n0 - 1;                    // shift = |idx| + n - 2, n = n0 + 1
    return (v < 0 ? -1 : 1) * (longint'(1) << (K - 1 - s));
  endfunction

  task automatic run_layer(string name, int cin, int oc_n, int hh, int ww, int kh, int kw);
    longint ref_v;
    int ph, pw_, hi, wi, cycles;
    // random contents
    for (int h = 0; h < hh; h++) for (int w = 0; w < ww; w++) for (int c = 0; c < int'(C); c++)
      xmem[h][w][c] = (c < cin) ? XW'($urandom) : '0;
    for (int o = 0; o < oc_n; o++) begin
      bmem[o] = ACCW'(int'($urandom_range(0, 200000)) - 100000);
      for (int n = 0; n < int'(N); n++) for (int a = 0; a < kh; a++) for (int b = 0; b < kw; b++)
        for (int c = 0; c < int'(C); c++) begin
          logic [B-1:0] r;
          r = B'($urandom);
          if ($urandom_range(0, 5) == 0) r = '0;
          wmem[o][n][a][b][c] = r;
        end
      for (int h = 0; h < hh; h++) for (int w = 0; w < ww; w++) ymem[o][h][w] = ACCW'($urandom);
    end
    // run
    cfg = '{out_ch: OC_W'(oc_n), height: HW_W'(hh), width: HW_W'(ww), kh: K_W'(kh), kw: K_W'(kw)};
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    @(negedge clk);
    checks++;
    if (cycles != hh * ww * (int'(C) + oc_n * int'(N) * kh * kw) + int'(L) + 2) begin
      failures++;
      $display("FAIL cycles %0d for layer %s", cycles, name);
    end
    $display("%s: %0d cycles, %0d of them ShiftALU cycles", name, cycles, hh * ww * int'(C));
    // compare
    ph = (kh - 1) / 2;
    pw_ = (kw - 1) / 2;
    for (int o = 0; o < oc_n; o++) for (int ho = 0; ho < hh; ho++) for (int wo = 0; wo < ww; wo++) begin
      ref_v = bmem[o];
      for (int a = 0; a < kh; a++) for (int b = 0; b < kw; b++) begin
        hi = ho + a - ph;
        wi = wo + b - pw_;
        if (hi >= 0 && hi < hh && wi >= 0 && wi < ww)
          for (int n = 0; n < int'(N); n++) for (int c = 0; c < int'(C); c++)
            ref_v += longint'(xmem[hi][wi][c]) * wscaled(wmem[o][n][a][b][c], n);
      end
      checks++;
      if (ymem[o][ho][wo] != ACCW'(ref_v)) begin
        failures++;
        if (failures < 10)
          $display("FAIL Y[%0d][%0d][%0d] = %0d, expected %0d", o, ho, wo, ymem[o][ho][wo], ref_v);
      end
    end
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_layer("squeezenet_fire9_expand3x3", 64, 256, 13, 13, 3, 3);
    run_layer("googlenet_3a_5x5", 16, 32, 28, 28, 5, 5);
    run_layer("resnet18_conv2_3x3", 64, 64, 56, 56, 3, 3);
    run_layer("resnet50_conv2_1x1", 64, 256, 14, 14, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
