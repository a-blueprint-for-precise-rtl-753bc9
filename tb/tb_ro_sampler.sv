// tb_ro_sampler: self-checking test of the ring-oscillator sampler.
// Builds legal node patterns of an N-inverter ring (one equal adjacent pair,
// at the inverter given by the state) for random start and end states, pulses
// sample_clk twice and compares the result with (S_end - S_start) mod N.
// Covers N = 3 (the paper's example) and N = 61.
module tb_ro_sampler;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;

  // nodes of a ring with the defect at state s and polarity p:
  // nodes[(s+t) mod N] = p ^ (t odd)
  function automatic logic [63:0] pattern(input int n, input int s, input logic p);
    logic [63:0] v = '0;
    for (int t = 0; t < n; t++) v[(s + t) % n] = p ^ logic'(t & 1);
    return v;
  endfunction

  logic rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so asynchronous resets act
  logic sclk3 = 0, sclk61 = 0;
  logic [2:0]  nodes3;
  logic [60:0] nodes61;
  logic [1:0]  res3;
  logic [5:0]  res61;
  logic        v3, v61;

  ro_sampler #(.N(3))  dut3  (.rst_n, .sample_clk(sclk3),  .nodes(nodes3),  .result(res3),  .result_valid(v3));
  ro_sampler #(.N(61)) dut61 (.rst_n, .sample_clk(sclk61), .nodes(nodes61), .result(res61), .result_valid(v61));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nodes3 = '0; nodes61 = '0;
    #10 rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      int s0, s1, e;
      logic p0, p1;
      // N = 3
      s0 = int'($urandom % 3); s1 = int'($urandom % 3);
      p0 = logic'($urandom); p1 = logic'($urandom);
      nodes3 = pattern(3, s0, p0)[2:0];
      #5 sclk3 = 1; #5 sclk3 = 0;
      checks++;
      if (v3) begin failures++; $display("FAIL N=3 valid after first edge"); end
      nodes3 = pattern(3, s1, p1)[2:0];
      #5 sclk3 = 1; #5 sclk3 = 0;
      e = (s1 - s0 + 3) % 3;
      checks++;
      if (!v3 || int'(res3) != e) begin
        failures++;
        $display("FAIL N=3 s0=%0d s1=%0d got %0d exp %0d", s0, s1, res3, e);
      end
      // N = 61
      s0 = int'($urandom % 61); s1 = int'($urandom % 61);
      nodes61 = pattern(61, s0, p0)[60:0];
      #5 sclk61 = 1; #5 sclk61 = 0;
      nodes61 = pattern(61, s1, p1)[60:0];
      #5 sclk61 = 1; #5 sclk61 = 0;
      e = (s1 - s0 + 61) % 61;
      checks++;
      if (!v61 || int'(res61) != e) begin
        failures++;
        $display("FAIL N=61 s0=%0d s1=%0d got %0d exp %0d", s0, s1, res61, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
