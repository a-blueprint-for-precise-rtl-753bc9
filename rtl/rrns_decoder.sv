// rrns_decoder: majority-logic decoding of redundant-RNS (RRNS) codewords.
//
// Each lane receives N+K residues of one MVM output, N non-redundant and K
// redundant. The residues are split into all G = C(N+K, N) groups of N; every
// group is reverse-converted on its own (crt_unit) and the results are
// compared, as the paper's "simple" majority-logic decoder does. A group's
// value is mapped to the signed range [-psi_L, psi_L], psi_L =
// floor((M_L-1)/2), where M_L is the smallest product of any N moduli (the
// legitimate range of the code); a group whose value falls outside it cannot
// come from a legitimate codeword and casts no vote.
//
// Decision rule. A value is accepted when at least THRESH groups agree on it.
// THRESH defaults to C(N+K-t, N) with t = floor(K/2): that many groups avoid
// any t wrong residues, so up to t errors are corrected, and no other
// legitimate value can collect that many votes. The paper also words the rule
// as "more than 50% of the groups"; for K = 2 only 5 of 15 groups avoid one bad
// residue, so that reading would correct nothing, and the correction
// capability floor(K/2) stated alongside it is followed instead. A lane with
// no accepted value is flagged "detected" (Case 2 of the paper); an accepted
// value that not all valid groups share is flagged "corrected". For K = 0 the
// block is a plain CRT converter.
//
// Timing: in_valid -> group values registered (1 clock) -> vote registered
// (1 clock). out_valid follows in_valid by two clocks; one codeword vector per
// clock.
module rrns_decoder
  import rns_pkg::*;
#(
  parameter int      LANES  = 128,
  parameter int      N      = 4,
  parameter int      K      = 2,
  parameter moduli_t MODS   = MODULI_6B_RRNS,
  parameter int      RW     = residue_width(MODS, N + K),
  parameter int      OW     = out_width(MODS, N, K),
  parameter int      THRESH = int'(choose(N + K - K / 2, N))
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic        [RW-1:0] in_res [N+K][LANES],
  output logic                 out_valid,
  output logic signed [OW-1:0] out_value [LANES],
  output logic                 out_corrected [LANES],
  output logic                 out_detected [LANES]
);

  timeunit 1ns;
  timeprecision 1ps;

  localparam int              G     = int'(choose(N + K, N));
  localparam longint unsigned ML    = min_group_range(MODS, N, K);
  localparam longint unsigned PSI_L = (ML - 1) / 2;
  localparam int              GW    = ubits(ML) + 8;   // headroom for any group range
  localparam int              CW    = ubits(longint'(G) + 1);

  // ---- stage 1: one CRT per group and lane, registered -----------------
  logic        [GW-1:0] gval_q [G][LANES];
  logic                 s1_valid;

  for (genvar g = 0; g < G; g++) begin : g_grp
    localparam logic [MAXN-1:0] MASK = nth_comb(N + K, N, g);
    localparam moduli_t         GM   = subset(MODS, MASK);
    localparam int              VWG  = ubits(prod_n(GM, N));
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      logic        [RW-1:0] gres [N];
      logic        [VWG-1:0] v;
      logic signed [VWG:0]   v_s;
      for (genvar p = 0; p < N; p++) begin : g_pick
        assign gres[p] = in_res[nth_set(MASK, p)][l];
      end
      crt_unit #(.NM(N), .MODS(GM), .RW(RW), .VW(VWG)) u_crt (
        .res(gres), .value(v), .value_s(v_s)
      );
      always_ff @(posedge clk) begin
        if (in_valid) gval_q[g][l] <= GW'(v);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= in_valid;
  end

  // ---- stage 2: signed mapping, voting, registered ---------------------
  for (genvar l = 0; l < LANES; l++) begin : g_vote
    logic signed [OW-1:0] sv   [G];
    logic                 ok   [G];
    logic        [CW-1:0] cnt  [G];
    logic signed [OW-1:0] pick_v;
    logic                 pick_ok;
    logic        [CW-1:0] pick_cnt;
    logic        [CW-1:0] n_ok;

    for (genvar g = 0; g < G; g++) begin : g_map
      localparam longint unsigned MG = prod_n(subset(MODS, nth_comb(N + K, N, g)), N);
      always_comb begin
        if (gval_q[g][l] <= GW'(PSI_L)) begin
          ok[g] = 1'b1;
          sv[g] = OW'(gval_q[g][l]);
        end else if (gval_q[g][l] >= GW'(MG - PSI_L) && gval_q[g][l] < GW'(MG)) begin
          ok[g] = 1'b1;
          sv[g] = OW'(signed'({1'b0, gval_q[g][l]}) - signed'({1'b0, GW'(MG)}));
        end else begin
          ok[g] = 1'b0;
          sv[g] = '0;
        end
      end
    end

    always_comb begin
      n_ok = '0;
      for (int g = 0; g < G; g++) begin
        cnt[g] = '0;
        if (ok[g]) n_ok = n_ok + 1'b1;
        for (int h = 0; h < G; h++)
          if (ok[g] && ok[h] && sv[g] == sv[h]) cnt[g] = cnt[g] + 1'b1;
      end
      pick_ok  = 1'b0;
      pick_v   = '0;
      pick_cnt = '0;
      for (int g = G - 1; g >= 0; g--) begin
        if (ok[g] && cnt[g] >= CW'(THRESH)) begin
          pick_ok  = 1'b1;
          pick_v   = sv[g];
          pick_cnt = cnt[g];
        end
      end
    end

    always_ff @(posedge clk) begin
      if (s1_valid) begin
        out_value[l]     <= pick_v;
        out_detected[l]  <= !pick_ok;
        out_corrected[l] <= pick_ok && (pick_cnt != CW'(G));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s1_valid;
  end

endmodule
