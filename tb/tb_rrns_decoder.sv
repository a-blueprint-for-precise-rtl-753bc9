// tb_rrns_decoder: self-checking test of the RRNS majority-logic decoder,
// RRNS(6,4) with moduli {63,62,61,59 | 55,53}.
// Each codeword is a random legitimate value with 0, 1, 2 or 3 residues
// replaced by wrong ones. The expected decision is worked out here by an
// independent model: each group value is found by stepping through
// candidates (Garner-style search, not the CRT formula), then the same
// acceptance rule (at least C(5,4) = 5 agreeing groups) is applied.
// Also checked: 0 and 1 errors always give the right value, 2 errors are
// never silently passed as error-free, and the latency is two clocks.
module tb_rrns_decoder;
  import rns_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int      LANES = 4;
  localparam int      N     = 4;
  localparam int      K     = 2;
  localparam int      NM    = N + K;
  localparam moduli_t MODS  = MODULI_6B_RRNS;
  localparam int      RW    = 6;
  localparam int      OW    = out_width(MODS, N, K);
  localparam int      G     = 15;
  localparam longint  ML    = 61 * 59 * 55 * 53;   // smallest 4-modulus product
  localparam longint  PSI_L = (ML - 1) / 2;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so asynchronous resets act
  always #5 clk = ~clk;

  logic                 in_valid;
  logic        [RW-1:0] in_res [NM][LANES];
  logic                 out_valid;
  logic signed [OW-1:0] out_value [LANES];
  logic                 out_corrected [LANES];
  logic                 out_detected [LANES];

  rrns_decoder #(.LANES(LANES), .N(N), .K(K), .MODS(MODS), .RW(RW)) dut (.*);

  int checks = 0, failures = 0;
  int n_err_hist [4] = '{0, 0, 0, 0};
  int n_det2 = 0;

  // value in [0, prod) with the given residues for the moduli in mask
  function automatic longint group_value(input int r [NM], input int mask);
    longint x = 0, step = 1;
    for (int i = 0; i < NM; i++) begin
      if (mask[i]) begin
        while (x % longint'(MODS[i]) != longint'(r[i])) x += step;
        step *= longint'(MODS[i]);
      end
    end
    return x;
  endfunction

  task automatic expect_decode(input int r [NM], output logic ok, output longint v,
                               output logic corr);
    longint sv [G];
    logic   vv [G];
    int     g = 0;
    for (int m = 0; m < 64; m++) begin
      if ($countones(m) == N) begin
        longint x, mg = 1;
        for (int i = 0; i < NM; i++) if (m[i]) mg *= longint'(MODS[i]);
        x = group_value(r, m);
        vv[g] = 1;
        if (x <= PSI_L)            sv[g] = x;
        else if (x >= mg - PSI_L)  sv[g] = x - mg;
        else begin vv[g] = 0; sv[g] = 0; end
        g++;
      end
    end
    ok = 0; v = 0; corr = 0;
    for (int a = 0; a < G; a++) begin
      int c = 0;
      for (int b = 0; b < G; b++) if (vv[a] && vv[b] && sv[a] == sv[b]) c++;
      if (vv[a] && c >= 5 && !ok) begin ok = 1; v = sv[a]; corr = (c != G); end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int     r [LANES][NM];
    longint a [LANES];
    int     ne [LANES];
    in_valid = 0;
    foreach (in_res[i, l]) in_res[i][l] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        longint u;
        a[l] = (t == 0) ? PSI_L : (t == 1) ? -PSI_L :
               longint'($urandom % 32'(2 * PSI_L + 1)) - PSI_L;
        ne[l] = (t < 2) ? 0 : int'($urandom % 4);
        for (int i = 0; i < NM; i++) begin
          u = (a[l] < 0) ? a[l] + longint'(MODS[i]) * (1 + (-a[l]) / longint'(MODS[i])) : a[l];
          r[l][i] = int'(u % longint'(MODS[i]));
        end
        // corrupt ne distinct residues
        begin
          int used;
          used = 0;
          for (int e = 0; e < ne[l]; e++) begin
            int p;
            do p = int'($urandom % NM); while (used[p]);
            used[p] = 1;
            r[l][p] = (r[l][p] + 1 + int'($urandom % (MODS[p] - 1))) % int'(MODS[p]);
          end
        end
        n_err_hist[ne[l]]++;
        for (int i = 0; i < NM; i++) in_res[i][l] = RW'(r[l][i]);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (out_valid) begin failures++; $display("FAIL output after one clock"); end
      @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("FAIL no output after two clocks"); end
      for (int l = 0; l < LANES; l++) begin
        logic ok, corr;
        longint v;
        expect_decode(r[l], ok, v, corr);
        checks++;
        if (out_detected[l] != !ok || (ok && (longint'(out_value[l]) != v || out_corrected[l] != corr))) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d lane %0d ne=%0d: got v=%0d c=%0b d=%0b, exp ok=%0b v=%0d c=%0b",
                                      t, l, ne[l], out_value[l], out_corrected[l], out_detected[l], ok, v, corr);
        end
        if (ne[l] <= 1) begin
          checks++;
          if (out_detected[l] || longint'(out_value[l]) != a[l] || out_corrected[l] != (ne[l] == 1)) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d lane %0d: %0d error(s) not corrected", t, l, ne[l]);
          end
        end else if (ne[l] == 2) begin
          checks++;
          if (!out_detected[l] && !out_corrected[l]) begin
            failures++;
            $display("FAIL t=%0d lane %0d: two errors passed as clean", t, l);
          end
          if (out_detected[l]) n_det2++;
        end
      end
    end
    $display("errors per codeword: 0:%0d 1:%0d 2:%0d 3:%0d; 2-error codewords detected: %0d",
             n_err_hist[0], n_err_hist[1], n_err_hist[2], n_err_hist[3], n_det2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
