// ps_modular_dot: BEHAVIOURAL MODEL (not synthesizable) of an optical modular
// dot product built from cascaded dual-rail phase shifters.
//
// Weight element w_i is written digit by digit: digit j drives a phase-shifter
// pair of length 2^j * L through a switch that is on when the digit is 1.
// Input x_i sets the voltage v_i = x_i * (V_pi.cm / L) * (2*pi / m) on all
// switched-on shifters of element i, so shifter (i, j) adds the phase
// v_i * 2^j * L / V_pi.cm = (2*pi/m) * 2^j * x_i. The light leaves the cascade
// with total phase (2*pi/m) * |sum_i w_i x_i|_m, because optical phase wraps at
// 2*pi; reading it out and scaling by m/(2*pi) gives the modular dot product.
//
// The element count, digit count and 2^j lengths follow the phase-shifter
// figure of the paper (there: 2 elements of 3 digits, lengths L, 2L, 4L). The
// paper's voltage formula carries a 1/(pi L) factor that does not reproduce
// its own total-phase formula; this model uses the voltage that does. Phase
// detection is taken as ideal (the figure's output E_in sin|dPhi| is not
// modelled) and the readout is rounded to the nearest integer.
//
// Combinational: y follows x and w in zero time.
module ps_modular_dot #(
  parameter int  ELEMS   = 2,
  parameter int  DIGITS  = 3,
  parameter int  MODULUS = 7,
  parameter int  YW      = $clog2(MODULUS),
  parameter real L_UNIT  = 1.0e-4,   // unit shifter length L [m], arbitrary
  parameter real VPI_CM  = 1.0e-2    // modulation efficiency V_pi.cm [V m], arbitrary
) (
  input  logic [DIGITS-1:0] x [ELEMS],
  input  logic [DIGITS-1:0] w [ELEMS],
  output logic [YW-1:0]     y
);

  timeunit 1ns;
  timeprecision 1ps;

  localparam real TWO_PI = 6.283185307179586;

  real phase, wrapped, v;
  int  yi;

  always_comb begin
    phase = 0.0;
    for (int i = 0; i < ELEMS; i++) begin
      v = real'(x[i]) * (VPI_CM / L_UNIT) * (TWO_PI / real'(MODULUS));
      for (int j = 0; j < DIGITS; j++)
        if (w[i][j]) phase = phase + v * (real'(1 << j) * L_UNIT) / VPI_CM;
    end
    wrapped = phase - TWO_PI * $floor(phase / TWO_PI);
    yi = $rtoi(wrapped * real'(MODULUS) / TWO_PI + 0.5);
    if (yi >= MODULUS) yi = yi - MODULUS;
    y = YW'(yi);
  end

endmodule
