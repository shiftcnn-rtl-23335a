// tb_adder_tree: test of the pipelined adder tree at its default size
// (128 inputs of 16 bits). A new random vector (including all-maximum and
// all-minimum vectors) enters every cycle, with occasional idle cycles; each
// sum must appear exactly clog2(C) = 7 cycles later with out_valid, and
// out_valid must be low otherwise.
module tb_adder_tree;
  import shiftcnn_pkg::*;

  localparam int unsigned C   = C_DEF;
  localparam int unsigned IW  = PW_DEF;
  localparam int unsigned OW  = IW + $clog2(C);
  localparam int unsigned LAT = $clog2(C);
  localparam int          NV  = 300;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [IW-1:0] in_data [C];
  logic out_valid;
  logic signed [OW-1:0] out_sum;
  longint exp_sum [NV + LAT + 1];
  logic   exp_vld [NV + LAT + 1];
  int checks = 0, failures = 0;

  adder_tree dut (.clk, .rst_n, .in_valid, .in_data, .out_valid, .out_sum);

  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < NV + int'(LAT) + 1; i++) begin exp_vld[i] = 1'b0; exp_sum[i] = 0; end
    for (int c = 0; c < int'(C); c++) in_data[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NV + int'(LAT); t++) begin
      // drive cycle t, check what entered at t - LAT
      if (t < NV) begin
        longint s;
        s = 0;
        in_valid = ($urandom_range(0, 9) != 0);
        for (int c = 0; c < int'(C); c++) begin
          in_data[c] = (t == 5) ? IW'(32767) : (t == 6) ? IW'(-32768) : IW'($urandom);
          s += longint'(in_data[c]);
        end
        exp_sum[t] = s;
        exp_vld[t] = in_valid;
      end else begin
        in_valid = 1'b0;
      end
      if (t >= int'(LAT)) begin
        checks++;
        if (out_valid != exp_vld[t - LAT]) begin failures++; $display("FAIL valid at %0d", t); end
        if (exp_vld[t - LAT]) begin
          checks++;
          if (out_sum != OW'(exp_sum[t - LAT])) begin
            failures++;
            if (failures < 10) $display("FAIL sum at %0d: %0d expected %0d", t, out_sum, exp_sum[t - LAT]);
          end
        end
      end else begin
        checks++;
        if (out_valid) begin failures++; $display("FAIL early valid at %0d", t); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NV + 100) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
