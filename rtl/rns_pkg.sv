// rns_pkg: types, default moduli and elaboration-time arithmetic shared by the
// residue-number-system (RNS) analog core.
//
// A moduli set is carried as a packed array of up to MAXN 16-bit moduli,
// element 0 first. The default set is the 6-bit set of the paper,
// {63, 62, 61, 59} (h = 128 covers the 18-bit dot-product range), followed by
// two redundant moduli {55, 53}. The paper gives no redundant moduli; 55 and
// 53 are this design's choice: the largest 6-bit values co-prime with the
// rest, so the code keeps the 6-bit converter width.
//
// The functions below run at elaboration only (constant functions): modular
// inverse, products over a subset of moduli, enumeration of the C(n+k, n)
// decoding groups, and the widths derived from them.
package rns_pkg;

  timeunit 1ns;
  timeprecision 1ps;

  localparam int MAXN = 8;
  typedef logic [MAXN-1:0][15:0] moduli_t;

  // 6-bit moduli of Table 1 followed by the two redundant moduli (element 0 = 63).
  localparam moduli_t MODULI_6B_RRNS =
      {16'd0, 16'd0, 16'd53, 16'd55, 16'd59, 16'd61, 16'd62, 16'd63};
  // An all-odd 6-bit set for the ring-oscillator (electrical) modulo, which
  // needs an odd number of inverters N = m: {63, 61, 59, 55} + {53, 47}.
  localparam moduli_t MODULI_6B_ODD_RRNS =
      {16'd0, 16'd0, 16'd47, 16'd53, 16'd55, 16'd59, 16'd61, 16'd63};

  // Technology of the analog modulo inside each MVM unit.
  typedef enum logic [0:0] {
    TECH_OPTICAL    = 1'b0,  // cascaded dual-rail phase shifters (any modulus)
    TECH_ELECTRICAL = 1'b1   // dot product followed by a ring oscillator (odd moduli)
  } analog_tech_e;

  function automatic longint unsigned choose(input int n, input int k);
    longint unsigned r = 1;
    if (k < 0 || k > n) return 0;
    for (longint i = 0; i < longint'(k); i++) r = r * (longint'(n) - i) / (i + 1);
    return r;
  endfunction

  // Multiplicative inverse of a modulo m (a and m co-prime), extended Euclid.
  function automatic longint modinv(input longint a, input longint m);
    longint t = 0, newt = 1, r = m, newr = a % m, q, tmp;
    while (newr != 0) begin
      q = r / newr;
      tmp = t - q * newt; t = newt; newt = tmp;
      tmp = r - q * newr; r = newr; newr = tmp;
    end
    if (t < 0) t = t + m;
    return t;
  endfunction

  // Product of the first n moduli of a set.
  function automatic longint unsigned prod_n(input moduli_t mods, input int n);
    longint unsigned p = 1;
    for (int i = 0; i < n; i++) p = p * longint'(mods[i]);
    return p;
  endfunction

  // Mask of the g-th n-element subset of {0..total-1}, in increasing mask order.
  function automatic logic [MAXN-1:0] nth_comb(input int total, input int n, input int g);
    int cnt = 0;
    for (int m = 0; m < (1 << total); m++) begin
      if ($countones(m[MAXN-1:0]) == n) begin
        if (cnt == g) return m[MAXN-1:0];
        cnt++;
      end
    end
    return '0;
  endfunction

  // Position of the p-th set bit of a mask.
  function automatic int nth_set(input logic [MAXN-1:0] mask, input int p);
    int cnt = 0;
    for (int i = 0; i < MAXN; i++) begin
      if (mask[i]) begin
        if (cnt == p) return i;
        cnt++;
      end
    end
    return 0;
  endfunction

  // The moduli selected by a mask, packed from element 0.
  function automatic moduli_t subset(input moduli_t mods, input logic [MAXN-1:0] mask);
    moduli_t s = '0;
    int p = 0;
    for (int i = 0; i < MAXN; i++) begin
      if (mask[i]) begin
        s[p] = mods[i];
        p++;
      end
    end
    return s;
  endfunction

  // Smallest product of any n of the n+k moduli: the legitimate range of an
  // RRNS(n+k, n) code whose redundant moduli are not larger than the others.
  function automatic longint unsigned min_group_range(input moduli_t mods, input int n, input int k);
    longint unsigned best = 0;
    for (int g = 0; g < int'(choose(n + k, n)); g++) begin
      longint unsigned p = prod_n(subset(mods, nth_comb(n + k, n, g)), n);
      if (best == 0 || p < best) best = p;
    end
    return best;
  endfunction

  // Bits of an unsigned value in [0, x).
  function automatic int ubits(input longint unsigned x);
    int b = 1;
    while ((longint'(1) << b) < x) b++;
    return b;
  endfunction

  // Bits of the signed output, range [-psi, psi] with psi = floor((M_L-1)/2).
  function automatic int out_width(input moduli_t mods, input int n, input int k);
    return ubits((min_group_range(mods, n, k) - 1) / 2 + 1) + 1;
  endfunction

  // Residue width: ceil(log2(max modulus)).
  function automatic int residue_width(input moduli_t mods, input int nm);
    longint unsigned mx = 2;
    for (int i = 0; i < nm; i++) if (longint'(mods[i]) > mx) mx = longint'(mods[i]);
    return ubits(mx);
  endfunction

endpackage
