// crt_unit: reverse conversion of one residue tuple by the Chinese Remainder
// Theorem.
//
// For moduli m_1..m_NM with M = prod m_i, M_i = M/m_i and T_i = |M_i^-1|_{m_i},
// the standard value is A = | sum a_i M_i T_i |_M (Eq. 1). Each term is formed
// as M_i * |a_i T_i|_{m_i}, which equals |a_i M_i T_i|_M but needs only a
// small modular product per residue (this design's choice); the NM terms, each
// below M, are added and brought back below M by NM-1 conditional
// subtractions. The signed result follows the Methods' rule: A if A <= psi,
// otherwise A - M, with psi = floor((M-1)/2).
//
// Purely combinational; the caller registers. value is in [0, M), value_s in
// [-psi, psi].
module crt_unit
  import rns_pkg::*;
#(
  parameter int      NM   = 4,
  parameter moduli_t MODS = MODULI_6B_RRNS,
  parameter int      RW   = residue_width(MODS, NM),
  parameter int      VW   = ubits(prod_n(MODS, NM))
) (
  input  logic        [RW-1:0] res [NM],
  output logic        [VW-1:0] value,
  output logic signed [VW:0]   value_s
);

  timeunit 1ns;
  timeprecision 1ps;

  localparam longint unsigned M   = prod_n(MODS, NM);
  localparam longint unsigned PSI = (M - 1) / 2;
  localparam int              SW  = VW + ubits(NM) + 1;

  logic [SW-1:0] term [NM];

  for (genvar i = 0; i < NM; i++) begin : g_term
    localparam longint MI_L = longint'(M / longint'(MODS[i]));
    localparam longint TI_L = modinv(MI_L % longint'(MODS[i]), longint'(MODS[i]));
    localparam int     MOD  = int'(MODS[i]);
    localparam int     TI   = int'(TI_L);
    int t;
    always_comb begin
      t       = (int'(res[i]) * TI) % MOD;        // |a_i T_i|_{m_i}
      term[i] = SW'(MI_L) * SW'(t);               // M_i |a_i T_i|_{m_i} < M
    end
  end

  logic [SW-1:0] acc;
  always_comb begin
    acc = '0;
    for (int i = 0; i < NM; i++) acc = acc + term[i];
    for (int i = 1; i < NM; i++) if (acc >= SW'(M)) acc = acc - SW'(M);
    value = VW'(acc);
    if (acc <= SW'(PSI)) value_s = (VW+1)'(acc);
    else                 value_s = (VW+1)'(acc) - (VW+1)'(M);
  end

endmodule
