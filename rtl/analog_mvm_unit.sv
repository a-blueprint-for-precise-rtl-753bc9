// analog_mvm_unit: BEHAVIOURAL MODEL (not synthesizable) of one analog
// modular matrix-vector-multiply unit of the RNS core, for one modulus m.
//
// It stands for the whole column of the dataflow figure: an h x h array of
// analog multiply-accumulate cells programmed through the weight DACs (h^2),
// the input DACs (h), the analog modulo on each of the h outputs and the h
// output ADCs. All data converters are ceil(log2 m) bits wide; because the
// modulo brings every output back into [0, m), they lose nothing, and the
// model treats them as ideal. Two technologies are offered for the modulo:
//   TECH_OPTICAL    - each row is a ps_modular_dot (phase shifters), which
//                     computes the modular dot product directly;
//   TECH_ELECTRICAL - each row's plain dot product drives a ro_modulo (ring
//                     oscillator with m inverters; m must be odd).
// The paper keeps the dataflow agnostic of the technology; which one a unit
// uses is a parameter here.
//
// Noise: where err_mask[r] is set, the ADC reading of row r is replaced by
// |y_r + err_offset|_m, a wrong residue whenever err_offset is not a multiple
// of m. This is how residue errors (the paper's single-residue error events)
// are injected for the redundant-RNS decoder.
//
// Interface: w_we writes one row of weight residues (row w_row) into the array
// on a clock edge. x_valid (one clock) latches an input residue vector and
// starts the MVM; y_valid pulses for one clock with the h output residues.
// Latency: LATENCY clocks for the optical unit; for the electrical unit, the
// ring-oscillator sampling time (A * t_prop for the largest row value A) and
// two clocks of synchronisation.
module analog_mvm_unit
  import rns_pkg::*;
#(
  parameter int           H       = 128,
  parameter int           MODULUS = 63,
  parameter int           RW      = $clog2(MODULUS),
  parameter analog_tech_e TECH    = TECH_OPTICAL,
  parameter int           LATENCY = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 w_we,
  input  logic [$clog2(H)-1:0] w_row,
  input  logic [RW-1:0]        w_res [H],
  input  logic                 x_valid,
  input  logic [RW-1:0]        x_res [H],
  input  logic [H-1:0]         err_mask,
  input  logic [RW-1:0]        err_offset,
  output logic                 y_valid,
  output logic [RW-1:0]        y_res [H]
);

  timeunit 1ns;
  timeprecision 1ps;

  localparam int AW = $clog2(H) + 2 * RW + 1;

  logic [RW-1:0] wmem [H][H];      // programmed weights, row-major
  logic [RW-1:0] xq   [H];         // input held on the input DACs
  logic [RW-1:0] ymod [H];         // analog modulo outputs
  logic          busy;

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_row] <= w_res;
    if (x_valid) xq <= x_res;
  end

  logic all_done;

  if (TECH == TECH_OPTICAL) begin : g_optical
    for (genvar r = 0; r < H; r++) begin : g_row
      ps_modular_dot #(.ELEMS(H), .DIGITS(RW), .MODULUS(MODULUS), .YW(RW)) u_ps (
        .x(xq), .w(wmem[r]), .y(ymod[r])
      );
    end
    logic [$clog2(LATENCY+1):0] cnt;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)       cnt <= '0;
      else if (x_valid) cnt <= ($clog2(LATENCY+1)+1)'(LATENCY);
      else if (cnt != 0) cnt <= cnt - 1'b1;
    end
    assign all_done = busy && (cnt == 1);
  end else begin : g_electrical
    logic          start;
    logic [H-1:0]  rdone;
    for (genvar r = 0; r < H; r++) begin : g_row
      logic [AW-1:0] a;
      always_comb begin
        a = '0;
        for (int i = 0; i < H; i++) a = a + AW'(wmem[r][i]) * AW'(xq[i]);
      end
      ro_modulo #(.N(MODULUS), .AW(AW), .SW(RW)) u_ro (
        .rst_n(rst_n), .start(start), .a_level(a), .result(ymod[r]), .done(rdone[r])
      );
    end
    // Start the rings two clocks after x_valid, once the row sums have
    // settled on the latched input; ignore the done flags of the previous
    // conversion until the rings have been restarted.
    logic       s0, d1, d2;
    logic [1:0] hold;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        s0 <= 1'b0; start <= 1'b0; d1 <= 1'b0; d2 <= 1'b0; hold <= '0;
      end else begin
        s0    <= x_valid;
        start <= s0;
        d1    <= &rdone;
        d2    <= d1;
        if (x_valid)        hold <= 2'd3;
        else if (hold != 0) hold <= hold - 1'b1;
      end
    end
    assign all_done = busy && !x_valid && (hold == 0) && d2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= all_done;
      if (x_valid)       busy <= 1'b1;
      else if (all_done) busy <= 1'b0;
    end
  end

  // output ADCs, with residue-error injection
  always_ff @(posedge clk) begin
    if (all_done) begin
      for (int r = 0; r < H; r++) begin
        if (err_mask[r]) y_res[r] <= RW'((int'(ymod[r]) + int'(err_offset)) % MODULUS);
        else             y_res[r] <= ymod[r];
      end
    end
  end

endmodule
