// tb_precomp_buffer: test of the precomputed-tensor shift-register buffer at
// its default size (C = 128 channels, 16 terms of 16 bits).
// Shifts in C random channel vectors with gaps, checks that channel c ends at
// index c one clock edge after its shift, that the contents hold while
// shift_en is low, and that a second pixel fully replaces the first.
module tb_precomp_buffer;
  import shiftcnn_pkg::*;

  localparam int unsigned C  = C_DEF;
  localparam int unsigned NT = 2 * num_mag(N_DEF, B_DEF);
  localparam int unsigned PW = PW_DEF;

  logic clk = 1'b0, shift_en = 1'b0;
  logic signed [PW-1:0] terms_in [NT];
  logic signed [PW-1:0] terms_out [C][NT];
  logic signed [PW-1:0] ref_m [C][NT];
  int checks = 0, failures = 0;

  precomp_buffer dut (.clk, .shift_en, .terms_in, .terms_out);

  always #5 clk = ~clk;

  task automatic fill_pixel();
    for (int c = 0; c < int'(C); c++) begin
      @(negedge clk);
      shift_en = 1'b1;
      for (int t = 0; t < int'(NT); t++) begin
        ref_m[c][t] = PW'($urandom);
        terms_in[t] = ref_m[c][t];
      end
      if (c % 7 == 3) begin              // a gap: nothing may move
        @(negedge clk);
        shift_en = 1'b0;
        for (int t = 0; t < int'(NT); t++) terms_in[t] = PW'($urandom);
        @(negedge clk);
        checks++;
        if (terms_out[C-1][0] != ref_m[c][0]) begin failures++; $display("FAIL hold at c=%0d", c); end
      end
    end
    @(negedge clk);
    shift_en = 1'b0;
  endtask

  initial begin
    for (int t = 0; t < int'(NT); t++) terms_in[t] = '0;
    repeat (2) @(negedge clk);
    for (int pix = 0; pix < 2; pix++) begin
      fill_pixel();
      repeat (3) @(negedge clk);
      for (int c = 0; c < int'(C); c++) for (int t = 0; t < int'(NT); t++) begin
        checks++;
        if (terms_out[c][t] != ref_m[c][t]) begin
          failures++;
          if (failures < 10) $display("FAIL pix %0d c=%0d t=%0d: %0d vs %0d", pix, c, t, terms_out[c][t], ref_m[c][t]);
        end
      end
    end
    // one-edge latency: a single shift moves entry 1 to 0 at the next edge
    @(negedge clk);
    shift_en = 1'b1;
    for (int t = 0; t < int'(NT); t++) terms_in[t] = PW'(t + 1);
    checks++;
    if (terms_out[0][0] != ref_m[0][0]) begin failures++; $display("FAIL moved before the edge"); end
    @(negedge clk);
    shift_en = 1'b0;
    checks += 2;
    if (terms_out[0][0] != ref_m[1][0]) begin failures++; $display("FAIL no move at the edge"); end
    if (terms_out[C-1][5] != PW'(6))    begin failures++; $display("FAIL new entry missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
