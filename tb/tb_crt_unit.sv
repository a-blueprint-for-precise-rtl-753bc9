// tb_crt_unit: self-checking test of the CRT reverse conversion.
// Encodes random signed values of [-psi, psi] (and the range ends) into
// residues of the moduli {63, 62, 61, 59}, converts them back and compares
// both the unsigned value (A mod M) and the signed value with the original.
module tb_crt_unit;
  import rns_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int              NM   = 4;
  localparam moduli_t         MODS = MODULI_6B_RRNS;
  localparam int              RW   = 6;
  localparam longint          M    = 63 * 62 * 61 * 59;
  localparam longint          PSI  = (M - 1) / 2;
  localparam int              VW   = ubits(M);

  logic        [RW-1:0] res [NM];
  logic        [VW-1:0] value;
  logic signed [VW:0]   value_s;

  crt_unit #(.NM(NM), .MODS(MODS), .RW(RW), .VW(VW)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      longint a, u;
      case (t)
        0: a = 0;
        1: a = PSI;
        2: a = -PSI;
        3: a = -1;
        4: a = 1;
        default: a = longint'($urandom % 32'(2 * PSI + 1)) - PSI;
      endcase
      u = (a < 0) ? a + M : a;
      for (int i = 0; i < NM; i++) res[i] = RW'(u % longint'(MODS[i]));
      #1;
      checks += 2;
      if (longint'(value) != u) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0d unsigned got %0d exp %0d", a, value, u);
      end
      if (longint'(value_s) != a) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0d signed got %0d", a, value_s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
