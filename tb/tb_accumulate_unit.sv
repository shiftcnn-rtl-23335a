// tb_accumulate_unit: random test of the bias multiplexer, output adder and
// bypass. The testbench keeps the true contents of a small output tensor
// (4 elements, so the same element often recurs in consecutive cycles) and
// presents y_old as a one-cycle-latency read-first memory would: stale by
// the write of the previous cycle. Every write must carry
// (first ? bias : true value) + sum; idle cycles must not write; the bypass
// flag must be raised exactly for back-to-back accumulations of one element.
module tb_accumulate_unit;
  import shiftcnn_pkg::*;

  localparam int unsigned TW   = PW_DEF + $clog2(C_DEF);
  localparam int unsigned ACCW = ACCW_DEF;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_first;
  yaddr_t in_addr;
  logic signed [TW-1:0] in_sum;
  logic signed [ACCW-1:0] bias, y_old, wr_data;
  logic wr_en, bypass;
  yaddr_t wr_addr;

  accumulate_unit dut (.*);

  always #5 clk = ~clk;

  longint mem_true [4];
  int     last_a;
  longint last_old;
  logic   last_w;
  int checks = 0, failures = 0, n_byp = 0, n_first = 0, n_rb = 0;

  initial begin
    {in_valid, in_first, in_addr, in_sum, bias, y_old} = '0;
    for (int a = 0; a < 4; a++) mem_true[a] = 0;
    last_w = 1'b0; last_a = 0; last_old = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      int a;
      longint base, expv;
      logic exp_byp;
      @(negedge clk);
      a        = $urandom_range(0, 3);
      in_valid = ($urandom_range(0, 5) != 0);
      in_first = ($urandom_range(0, 4) == 0);
      in_addr  = '{oc: OC_W'(a), h: HW_W'(a * 3), w: HW_W'(7 - a)};
      in_sum   = TW'($urandom);
      bias     = ACCW'($urandom_range(0, 2000000)) - 1000000;
      y_old    = ACCW'((last_w && last_a == a) ? last_old : mem_true[a]);
      exp_byp  = in_valid && !in_first && last_w && last_a == a;
      #1;
      base = in_first ? longint'(bias) : mem_true[a];
      expv = base + longint'(in_sum);
      checks += 2;
      if (wr_en != in_valid) begin failures++; $display("FAIL wr_en at %0d", t); end
      if (bypass != exp_byp) begin failures++; $display("FAIL bypass flag at %0d", t); end
      if (in_valid) begin
        checks += 2;
        if (wr_addr != in_addr) begin failures++; $display("FAIL wr_addr at %0d", t); end
        if (wr_data != ACCW'(expv)) begin
          failures++;
          if (failures < 10) $display("FAIL data at %0d: %0d expected %0d", t, wr_data, ACCW'(expv));
        end
        if (exp_byp) n_byp++;
        if (in_first) n_first++; else if (!exp_byp) n_rb++;
        last_old    = mem_true[a];
        mem_true[a] = longint'($signed(ACCW'(expv)));
        last_a = a;
      end
      last_w = in_valid;
    end
    checks += 3;
    if (n_byp == 0)   begin failures++; $display("FAIL bypass never exercised"); end
    if (n_first == 0) begin failures++; $display("FAIL bias never selected"); end
    if (n_rb == 0)    begin failures++; $display("FAIL read-back never used"); end
    $display("bias=%0d readback=%0d bypass=%0d", n_first, n_rb, n_byp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
