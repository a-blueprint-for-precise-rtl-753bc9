// tb_ps_modular_dot: self-checking test of the phase-shifter modular dot
// product. Configuration A is the paper's example (2 elements, 3 digits; the
// modulus 7 is this test's choice); configuration B is one row of the core
// (128 elements, 6-bit residues, m = 59). Random operands, expected value
// sum(w_i x_i) mod m computed with integers here.
module tb_ps_modular_dot;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;

  logic [2:0] xa [2], wa [2];
  logic [2:0] ya;
  logic [5:0] xb [128], wb [128];
  logic [5:0] yb;

  ps_modular_dot #(.ELEMS(2),   .DIGITS(3), .MODULUS(7))  dut_a (.x(xa), .w(wa), .y(ya));
  ps_modular_dot #(.ELEMS(128), .DIGITS(6), .MODULUS(59)) dut_b (.x(xb), .w(wb), .y(yb));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int sa, sb;
      sa = 0; sb = 0;
      for (int i = 0; i < 2; i++) begin
        xa[i] = 3'($urandom % 7); wa[i] = 3'($urandom % 7);
        sa += int'(xa[i]) * int'(wa[i]);
      end
      for (int i = 0; i < 128; i++) begin
        xb[i] = (t == 0) ? 6'd58 : 6'($urandom % 59);
        wb[i] = (t == 0) ? 6'd58 : 6'($urandom % 59);
        sb += int'(xb[i]) * int'(wb[i]);
      end
      #1;
      checks += 2;
      if (int'(ya) != sa % 7) begin
        failures++; $display("FAIL A: sum=%0d got %0d", sa, ya);
      end
      if (int'(yb) != sb % 59) begin
        failures++; $display("FAIL B: sum=%0d got %0d", sb, yb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
