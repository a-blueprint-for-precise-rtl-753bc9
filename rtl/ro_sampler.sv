// ro_sampler: the digital sampler of a ring-oscillator modulo.
//
// A ring of N inverters (N odd) always has exactly one inverter whose input
// and output are equal; the ring state S_RO = k means that inverter k (0-based)
// is that one. Inverter k takes node k-1 (node N-1 for k = 0) and drives
// node k, so the state is the k with nodes[k] == nodes[k-1]. The sampler
// decodes the state on two successive rising edges of sample_clk (the start
// and the end of the period T_s = A * t_prop set by the voltage-to-time
// converter) and outputs (S_end - S_start) mod N, which is |A|_N.
//
// The decoding of the state follows the paper's definition of S_RO; the
// two-edge protocol, the priority encoder and the output register are this
// design's own. A node pattern with no equal pair (which a running odd ring
// never shows) decodes as state 0.
//
// Timing: result and result_valid change on the second edge; result_valid is
// cleared by the next first edge and by rst_n.
module ro_sampler #(
  parameter int N  = 3,
  parameter int SW = $clog2(N)
) (
  input  logic          rst_n,
  input  logic          sample_clk,
  input  logic [N-1:0]  nodes,
  output logic [SW-1:0] result,
  output logic          result_valid
);

  timeunit 1ns;
  timeprecision 1ps;

  logic [SW-1:0] s_now, s_start;
  logic          second;

  always_comb begin
    s_now = '0;
    for (int k = N - 1; k >= 0; k--)
      if (nodes[k] == nodes[(k + N - 1) % N]) s_now = SW'(k);
  end

  always_ff @(posedge sample_clk or negedge rst_n) begin
    if (!rst_n) begin
      second       <= 1'b0;
      s_start      <= '0;
      result       <= '0;
      result_valid <= 1'b0;
    end else if (!second) begin
      s_start      <= s_now;
      second       <= 1'b1;
      result_valid <= 1'b0;
    end else begin
      result       <= (s_now >= s_start) ? SW'(s_now - s_start) : SW'(s_now + SW'(N) - s_start);
      second       <= 1'b0;
      result_valid <= 1'b1;
    end
  end

endmodule
