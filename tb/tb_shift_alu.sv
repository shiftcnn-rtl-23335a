// tb_shift_alu: exhaustive test of the shift arithmetic unit.
// For every 8-bit input x it checks all P-1 = 16 outputs against
// +-x * 2^(K-1-s), computed here by multiplication, for s = 0 .. K-1.
module tb_shift_alu;
  import shiftcnn_pkg::*;

  localparam int unsigned K = num_mag(N_DEF, B_DEF);

  logic signed [XW_DEF-1:0] x;
  logic signed [PW_DEF-1:0] terms [2*K];
  int checks = 0, failures = 0;

  shift_alu dut (.x, .terms);

  initial begin
    for (int v = -128; v < 128; v++) begin
      x = XW_DEF'(v);
      #1;
      for (int s = 0; s < int'(K); s++) begin
        int e;
        e = v * (1 << (K - 1 - s));
        checks += 2;
        if (terms[2*s] != PW_DEF'(e))    begin failures++; $display("FAIL x=%0d s=%0d + : %0d", v, s, terms[2*s]); end
        if (terms[2*s+1] != PW_DEF'(-e)) begin failures++; $display("FAIL x=%0d s=%0d - : %0d", v, s, terms[2*s+1]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
