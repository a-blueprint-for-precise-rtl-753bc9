// fwd_conv: forward conversion of a signed integer vector into RNS residues.
//
// Every lane holds a signed BW-bit integer A (a weight row or an input vector
// that the host has already scaled and quantized). For each modulus m_i the
// block produces |A|_{m_i}, the residue in [0, m_i): A mod m_i, with m_i added
// when A is negative, i.e. the Methods' mapping of [-psi, psi] onto [0, M).
// One "mod m_i" unit per modulus and lane, as drawn in the forward-conversion
// box of the dataflow figure.
//
// Interface: in_valid/in_data/in_tag in, out_valid/out_res/out_tag one clock
// later. The tag travels with the data so the caller can tell weight rows
// from input vectors (this design's own convention). No back-pressure: one
// vector per clock. Reset clears out_valid only.
module fwd_conv
  import rns_pkg::*;
#(
  parameter int      LANES = 128,
  parameter int      BW    = 6,                 // b_in = b_w (signed)
  parameter int      NMOD  = 6,                 // n + k moduli
  parameter moduli_t MODS  = MODULI_6B_RRNS,
  parameter int      RW    = residue_width(MODS, NMOD),
  parameter int      TW    = 8                  // tag width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [BW-1:0] in_data [LANES],
  input  logic        [TW-1:0] in_tag,
  output logic                 out_valid,
  output logic        [RW-1:0] out_res [NMOD][LANES],
  output logic        [TW-1:0] out_tag
);

  timeunit 1ns;
  timeprecision 1ps;

  for (genvar i = 0; i < NMOD; i++) begin : g_mod
    localparam int M = int'(MODS[i]);
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      int r;
      always_comb begin
        r = int'(in_data[l]) % M;       // sign follows the dividend
        if (r < 0) r = r + M;
      end
      always_ff @(posedge clk) begin
        if (in_valid) out_res[i][l] <= RW'(r);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_tag <= in_tag;
    end
  end

endmodule
