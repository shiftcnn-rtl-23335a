// tb_term_mux: exhaustive test of the weight-index multiplexer.
// The terms come from a real shift_alu fed with random inputs; for every
// index code and every codebook n the output must equal x times the weight
// sgn(idx) * 2^-(|idx|+n-2) (scaled by 2^(K-1)), computed here by
// multiplication, and zero for index 0 and for the unused code -2^(B-1).
module tb_term_mux;
  import shiftcnn_pkg::*;

  localparam int unsigned N = N_DEF;
  localparam int unsigned B = B_DEF;
  localparam int unsigned K = num_mag(N, B);

  logic signed [XW_DEF-1:0] x;
  logic signed [PW_DEF-1:0] terms [2*K];
  logic        [B-1:0]      idx;
  logic        [NI_W-1:0]   n_sel;
  logic signed [PW_DEF-1:0] y;
  int checks = 0, failures = 0, n_zero = 0;

  shift_alu u_alu (.x, .terms);
  term_mux  dut   (.terms, .idx, .n_sel, .y);

  initial begin
    for (int rep = 0; rep < 40; rep++) begin
      x = (rep == 0) ? XW_DEF'(-128) : (rep == 1) ? XW_DEF'(127) : XW_DEF'($urandom);
      for (int n0 = 0; n0 < int'(N); n0++)
        for (int code = 0; code < (1 << B); code++) begin
          int v, m, e;
          idx   = B'(code);
          n_sel = NI_W'(n0);
          #1;
          v = $signed(idx);
          m = v < 0 ? -v : v;
          if (v == 0 || m > int'(num_m(B) / 2)) e = 0;
          else e = (v < 0 ? -1 : 1) * int'(x) * (1 << (int'(K) - 1 - (m + n0 - 1)));
          if (e == 0) n_zero++;
          checks++;
          if (y != PW_DEF'(e)) begin
            failures++;
            if (failures < 10) $display("FAIL x=%0d idx=%0d n=%0d: %0d expected %0d", x, v, n0 + 1, y, e);
          end
        end
    end
    checks++;
    if (n_zero == 0) begin failures++; $display("FAIL zero selection never tested"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
