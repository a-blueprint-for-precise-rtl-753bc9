// ro_modulo: BEHAVIOURAL MODEL (not synthesizable) of an analog modulo built
// from a free-running ring oscillator, a voltage-to-time converter (VTC) and
// the ro_sampler.
//
// The ring has N = m inverters, each with delay t_prop. Every t_prop the one
// inverter whose input equals its output switches, which moves that position
// one inverter on: the ring state S_RO steps 0, 1, ..., N-1, 0, ... The VTC
// turns the analog dot-product value A into a sampling period
// T_s = A * t_prop; the sampler reads the state at the start and at the end of
// T_s, and the difference is |A|_N. The ring is modelled exactly but lazily:
// the node values at any instant are computed from the number of t_prop steps
// since time 0, so no event is spent per inverter transition.
//
// The analog value A arrives as an integer number of unit steps (a_level); the
// VTC's voltage-to-time gain is taken as exactly one t_prop per unit. A ring
// of an even number of inverters latches instead of oscillating, so N must be
// odd; the paper asks for N = m without saying how an even modulus is served,
// and the model stops with an error for one.
//
// Interface: a rising edge on start (with a_level stable) begins a
// conversion; done rises when the result is ready, a_level * t_prop + 2 * T_SETUP
// later, and falls at the next start.
module ro_modulo #(
  parameter int N         = 3,
  parameter int AW        = 24,
  parameter int SW        = $clog2(N),
  parameter int TPROP_PS  = 1,     // inverter delay in ps
  parameter int TSETUP_PS = 1      // node settle time before each sampling edge
) (
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] a_level,
  output logic [SW-1:0] result,
  output logic          done
);

  timeunit 1ps;
  timeprecision 1ps;

  logic [N-1:0] nodes;
  logic         sample_clk;
  logic         res_valid;
  longint       t0, t1;

  // Node values after 'steps' state changes of a ring that starts in state 0
  // with nodes[t] = t & 1 (inverter 0 then sees 0 at input and output).
  function automatic logic [N-1:0] ring_nodes(input longint steps);
    logic [N-1:0] nd;
    for (int j = 0; j < N; j++) begin
      longint flips = (steps > j) ? ((steps - 1 - j) / N + 1) : 0;
      nd[j] = logic'(j & 1) ^ logic'(flips & 1);
    end
    return nd;
  endfunction

  initial begin
    if (N % 2 == 0) $fatal(1, "ro_modulo: a ring of %0d inverters does not oscillate", N);
  end

  initial begin
    sample_clk = 1'b0;
    nodes      = ring_nodes(0);
    done       = 1'b0;
    forever begin
      @(posedge start);
      done  = 1'b0;
      t0    = $time;
      t1    = t0 + longint'(a_level) * TPROP_PS;
      nodes = ring_nodes(t0 / TPROP_PS);
      #(TSETUP_PS) sample_clk = 1'b1;
      #(1) sample_clk = 1'b0;
      if ($time < t1) #(t1 - $time);
      nodes = ring_nodes(t1 / TPROP_PS);
      #(TSETUP_PS) sample_clk = 1'b1;
      #(1) sample_clk = 1'b0;
      done = res_valid;
    end
  end

  ro_sampler #(.N(N), .SW(SW)) u_sampler (
    .rst_n       (rst_n),
    .sample_clk  (sample_clk),
    .nodes       (nodes),
    .result      (result),
    .result_valid(res_valid)
  );

endmodule
