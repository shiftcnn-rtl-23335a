// tb_conv_controller: cycle-exact test of the scheduling and control logic.
// For several layer shapes the testbench walks Algorithm 2 itself (input
// pixels in raster order; C input reads; then output channel, codebook n,
// tap fh, fw) and compares, cycle by cycle, the input reads and the issued
// operations: weight address, scattered output address, the in-range flag,
// and the bias flag, which it derives independently by remembering which
// output elements have already been written. It then checks that done comes
// exactly DRAIN cycles after the last operation and that busy covers the run.
// C is reduced to 4 to keep the sequences short.
module tb_conv_controller;
  import shiftcnn_pkg::*;

  localparam int unsigned C     = 4;
  localparam int unsigned N     = 2;
  localparam int unsigned DRAIN = 4;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  layer_cfg_t cfg;
  logic busy, done, x_rd_en;
  xaddr_t x_rd_addr;
  op_t op;
  int checks = 0, failures = 0, n_skip = 0, n_first = 0;

  conv_controller #(.C(C), .N(N), .DRAIN(DRAIN)) dut (.*);

  always #5 clk = ~clk;

  task automatic expect_cycle(logic xe, xaddr_t xa, logic iss, logic wr, logic first,
                              waddr_t wa, yaddr_t ya);
    checks++;
    if (x_rd_en != xe || op.issue != iss || busy != 1'b1 || done != 1'b0 ||
        (xe && x_rd_addr != xa) ||
        (iss && (op.wr != wr || op.wa != wa || (wr && (op.ya != ya || op.first != first))))) begin
      failures++;
      if (failures < 10)
        $display("FAIL t=%0t x=%b/%b iss=%b/%b wr=%b/%b first=%b/%b wa=%h/%h ya=%h/%h", $time,
                 x_rd_en, xe, op.issue, iss, op.wr, wr, op.first, first, op.wa, wa, op.ya, ya);
    end
    @(negedge clk);
  endtask

  task automatic run(int oc_n, int hh, int ww, int kh, int kw);
    bit touched [int];
    int ph, pw_, ho, wo, key;
    logic wr, first;
    cfg = '{out_ch: OC_W'(oc_n), height: HW_W'(hh), width: HW_W'(ww), kh: K_W'(kh), kw: K_W'(kw)};
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cfg   = '0;                                   // must have been sampled
    ph  = (kh - 1) / 2;
    pw_ = (kw - 1) / 2;
    for (int h = 0; h < hh; h++) for (int w = 0; w < ww; w++) begin
      for (int c = 0; c < int'(C); c++)
        expect_cycle(1'b1, '{h: HW_W'(h), w: HW_W'(w), c: CI_W'(c)}, 1'b0, 1'b0, 1'b0, '0, '0);
      for (int o = 0; o < oc_n; o++) for (int n = 0; n < int'(N); n++)
        for (int a = 0; a < kh; a++) for (int b = 0; b < kw; b++) begin
          ho = h - a + ph;
          wo = w - b + pw_;
          wr = (ho >= 0 && ho < hh && wo >= 0 && wo < ww);
          key = (o * 256 + ho) * 256 + wo;
          first = wr && !touched.exists(key);
          if (wr) touched[key] = 1'b1;
          if (!wr) n_skip++;
          if (first) n_first++;
          expect_cycle(1'b0, '0, 1'b1, wr, first,
                       '{oc: OC_W'(o), n: NI_W'(n), fh: K_W'(a), fw: K_W'(b)},
                       '{oc: OC_W'(o), h: HW_W'(ho), w: HW_W'(wo)});
        end
    end
    for (int d = 0; d < int'(DRAIN) - 1; d++) begin
      checks++;
      if (!busy || done || x_rd_en || op.issue) begin failures++; $display("FAIL drain %0d", d); end
      @(negedge clk);
    end
    checks += 2;
    if (!done) begin failures++; $display("FAIL done missing"); end
    if (touched.num() != oc_n * hh * ww) begin failures++; $display("FAIL not every output reached"); end
    @(negedge clk);
    checks++;
    if (busy || done) begin failures++; $display("FAIL not idle after done"); end
    @(negedge clk);
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (busy || x_rd_en || op.issue) begin failures++; $display("FAIL not idle after reset"); end
    run(2, 3, 4, 3, 3);
    run(1, 2, 2, 1, 1);
    run(3, 4, 3, 5, 3);
    run(1, 5, 5, 2, 4);
    checks += 2;
    if (n_skip == 0)  begin failures++; $display("FAIL no out-of-range tap"); end
    if (n_first == 0) begin failures++; $display("FAIL no bias flag"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
