// tb_ro_modulo: self-checking test of the ring-oscillator modulo model.
// Starts conversions of random dot-product levels A at random instants and
// checks result = A mod N, for N = 3 (the paper's example) and N = 59, and
// that the conversion takes A * t_prop (+ the two settle delays).
module tb_ro_modulo;
  timeunit 1ps;
  timeprecision 1ps;

  int checks = 0, failures = 0;

  logic rst_n = 1, start = 0;
  initial #1 rst_n = 0;   // a falling edge, so asynchronous resets act
  logic [23:0] a;
  logic [1:0]  r3;
  logic [5:0]  r59;
  logic        d3, d59;

  ro_modulo #(.N(3),  .AW(24)) dut3  (.rst_n, .start, .a_level(a), .result(r3),  .done(d3));
  ro_modulo #(.N(59), .AW(24)) dut59 (.rst_n, .start, .a_level(a), .result(r59), .done(d59));

  initial begin
    #2000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '0;
    #10 rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      longint t_start;
      a = (t == 0) ? 24'd0 : (t == 1) ? 24'd1 : (t < 100) ? 24'($urandom % 200) : 24'($urandom % 500000);
      #($urandom % 17);
      t_start = $time;
      start = 1;
      #1 start = 0;
      wait (d3 && d59);
      checks += 3;
      if (int'(r3) != int'(a % 3)) begin
        failures++; $display("FAIL N=3 A=%0d got %0d", a, r3);
      end
      if (int'(r59) != int'(a % 59)) begin
        failures++; $display("FAIL N=59 A=%0d got %0d", a, r59);
      end
      if (a > 2 && ($time - t_start) != longint'(a) + 2) begin
        failures++; $display("FAIL A=%0d took %0d ps", a, $time - t_start);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
