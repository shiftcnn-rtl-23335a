// tb_shiftcnn_top: end-to-end test of the ShiftCNN convolution pipeline.
//
// The testbench holds behavioural models of the four tensor memories (one
// cycle read latency, output tensor read-first), fills them with random
// 8-bit inputs, random B-bit weight indices (including zero and the unused
// code) and random biases, runs several stride-1 "same" convolution layers
// and compares every output element with a direct convolution computed here
// from the weight values sgn(idx) * 2^-(|idx|+n-2) by multiplication.
// It also checks the layer cycle count H*W*(C + C~*N*H_f*W_f) + clog2(C) + 2
// and counts how often each mechanism of the pipeline occurred: bias
// selection, read-back accumulation, the read/write bypass, taps that fall
// outside the output (padding), zero and negative weight selections.
// The parallelization level is reduced to C = 8 to keep the run short.
module tb_shiftcnn_top;
  import shiftcnn_pkg::*;

  localparam int unsigned C    = 8;
  localparam int unsigned N    = 2;
  localparam int unsigned B    = 4;
  localparam int unsigned XW   = 8;
  localparam int unsigned PW   = 16;
  localparam int unsigned ACCW = 32;
  localparam int unsigned K    = num_mag(N, B);
  localparam int unsigned L    = $clog2(C);
  localparam int          OCM  = 4, HM = 6, WM = 6, KM = 5;

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

  shiftcnn_top #(.C(C), .N(N), .B(B), .XW(XW), .PW(PW), .ACCW(ACCW)) dut (.*);

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
  int n_bias = 0, n_readback = 0, n_bypass = 0, n_skip = 0, n_zero = 0, n_neg = 0;

  always @(posedge clk) if (rst_n) begin
    if (b_rd_en) n_bias++;
    if (y_rd_en) n_readback++;
    if (dut.u_acc.bypass) n_bypass++;
    if (dut.op.issue && !dut.op.wr) n_skip++;
    if (dut.op_d[1].issue)
      for (int c = 0; c < int'(C); c++) begin
        if (w_rd_data[c] == '0) n_zero++;
        else if (w_rd_data[c][B-1]) n_neg++;
      end
  end

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

  task automatic run_layer(int oc_n, int hh, int ww, int kh, int kw);
    longint ref_v;
    int ph, pw_, hi, wi, cycles;
    // random contents
    for (int h = 0; h < hh; h++) for (int w = 0; w < ww; w++) for (int c = 0; c < int'(C); c++)
      xmem[h][w][c] = XW'($urandom);
    for (int o = 0; o < oc_n; o++) begin
      bmem[o] = ACCW'(int'($urandom_range(0, 200000)) - 100000);
      for (int n = 0; n < int'(N); n++) for (int a = 0; a < kh; a++) for (int b = 0; b < kw; b++)
        for (int c = 0; c < int'(C); c++) begin
          logic [B-1:0] r;
          r = B'($urandom);
          if ($urandom_range(0, 5) == 0) r = '0;
          wmem[o][n][a][b][c] = r;
        end
      for (int h = 0; h < HM; h++) for (int w = 0; w < WM; w++) ymem[o][h][w] = ACCW'($urandom);
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
      $display("FAIL cycles %0d for layer %0dx%0dx%0d k%0dx%0d", cycles, oc_n, hh, ww, kh, kw);
    end
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
    run_layer(3, 4, 5, 3, 3);
    run_layer(2, 3, 3, 1, 1);
    run_layer(2, 5, 4, 5, 5);
    run_layer(4, 6, 6, 3, 1);
    run_layer(1, 1, 1, 3, 3);
    // every mechanism must have occurred
    checks++; if (n_bias == 0)     begin failures++; $display("FAIL no bias selection"); end
    checks++; if (n_readback == 0) begin failures++; $display("FAIL no read-back accumulation"); end
    checks++; if (n_bypass == 0)   begin failures++; $display("FAIL no bypass"); end
    checks++; if (n_skip == 0)     begin failures++; $display("FAIL no out-of-range tap"); end
    checks++; if (n_zero == 0)     begin failures++; $display("FAIL no zero index"); end
    checks++; if (n_neg == 0)      begin failures++; $display("FAIL no negative index"); end
    $display("mechanisms: bias=%0d readback=%0d bypass=%0d skipped_taps=%0d zero_idx=%0d neg_idx=%0d",
             n_bias, n_readback, n_bypass, n_skip, n_zero, n_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
