// tb_rns_analog_core: end-to-end test of the RNS analog core at H = 8.
// Two cores run side by side on the same stimulus: the default optical core
// (moduli {63,62,61,59 | 55,53}) and an electrical (ring-oscillator) core
// with the all-odd set {63,61,59,55 | 53,47}; both RRNS(6,4), two attempts.
// Signed 6-bit weight tiles and inputs are random; every output is compared
// with the integer dot product computed here. Residue errors are injected
// into the analog units per operation, following one of five scenarios:
//   clean        - no error
//   corrected    - one wrong residue in some lanes, on every attempt
//   retried      - two wrong residues in some lanes on attempt 1 only
//   uncorrected  - two wrong residues on every attempt
//   reload       - a new weight tile is programmed before the operation
// Each mechanism (correction, repetition, error flag after the last attempt,
// weight reload, input refused while busy) is counted and must occur.
// Two wrong residues can, rarely, sit one residue away from another
// codeword and be miscorrected (the code has distance 3); such lanes are
// counted, not failed.
module tb_rns_analog_core;
  import rns_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int H    = 8;
  localparam int N    = 4;
  localparam int K    = 2;
  localparam int NMOD = 6;
  localparam int OW   = out_width(MODULI_6B_RRNS, N, K);
  localparam int OWE  = out_width(MODULI_6B_ODD_RRNS, N, K);

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so asynchronous resets act
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic                w_valid, x_valid;
  logic [2:0]          w_row;
  logic signed [5:0]   w_data [H], x_data [H];
  logic [H-1:0]        err_mask [NMOD];
  logic [5:0]          err_offset [NMOD];
  logic [1:0]          w_ready, x_ready, y_valid, busy;
  logic signed [OW-1:0]  y_o [H];
  logic signed [OWE-1:0] y_e [H];
  logic                y_corr [2][H], y_err [2][H];
  logic [7:0]          attempt [2];

  rns_analog_core #(.H(H)) dut_o (
    .clk, .rst_n, .w_valid, .w_ready(w_ready[0]), .w_row, .w_data, .x_valid,
    .x_ready(x_ready[0]), .x_data, .err_mask, .err_offset, .y_valid(y_valid[0]),
    .y_data(y_o), .y_corrected(y_corr[0]), .y_error(y_err[0]), .attempt(attempt[0]),
    .busy(busy[0]));
  rns_analog_core #(.H(H), .MODULI(MODULI_6B_ODD_RRNS), .TECH(TECH_ELECTRICAL)) dut_e (
    .clk, .rst_n, .w_valid, .w_ready(w_ready[1]), .w_row, .w_data, .x_valid,
    .x_ready(x_ready[1]), .x_data, .err_mask, .err_offset, .y_valid(y_valid[1]),
    .y_data(y_e), .y_corrected(y_corr[1]), .y_error(y_err[1]), .attempt(attempt[1]),
    .busy(busy[1]));

  int w [H][H];
  int x [H];
  int scen;
  logic [H-1:0] lanes;
  int u1, u2;

  // error schedule, driven from the attempt number (both cores run in step
  // closely enough; each samples the mask when its units finish)
  always_comb begin
    for (int i = 0; i < NMOD; i++) begin
      err_mask[i]   = '0;
      err_offset[i] = 6'd1 + 6'(i);
    end
    case (scen)
      1: err_mask[u1] = lanes;
      2: if (attempt[0] == 8'd1) begin err_mask[u1] = lanes; err_mask[u2] = lanes; end
      3: begin err_mask[u1] = lanes; err_mask[u2] = lanes; end
      default: ;
    endcase
  end

  int n_corrected = 0, n_retry = 0, n_flagged = 0, n_reload = 0, n_refused = 0,
      n_clean = 0, n_miscorr = 0;

  task automatic load_tile();
    for (int r = 0; r < H; r++) begin
      @(negedge clk);
      w_valid = 1; w_row = 3'(r);
      for (int i = 0; i < H; i++) begin
        w[r][i] = int'($urandom % 64) - 32;
        w_data[i] = 6'(w[r][i]);
      end
      #1;
      if (!(w_ready[0] && w_ready[1])) begin failures++; $display("FAIL weight refused while idle"); end
    end
    @(negedge clk); w_valid = 0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int done_o, done_e;
    w_valid = 0; x_valid = 0; w_row = 0; scen = 0; lanes = '0; u1 = 0; u2 = 1;
    foreach (w_data[i]) begin w_data[i] = 0; x_data[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_tile();
    for (int op = 0; op < 60; op++) begin
      scen = op % 5;
      if (scen == 4) begin load_tile(); n_reload++; end
      lanes = H'($urandom) | H'(1);
      u1 = int'($urandom % NMOD);
      u2 = (u1 + 1 + int'($urandom % (NMOD - 1))) % NMOD;
      @(negedge clk);
      for (int i = 0; i < H; i++) begin
        x[i] = (op == 0) ? -32 : int'($urandom % 64) - 32;
        x_data[i] = 6'(x[i]);
      end
      x_valid = 1;
      #1;
      checks++;
      if (!(x_ready[0] && x_ready[1])) begin failures++; $display("FAIL input refused while idle, op %0d", op); end
      @(negedge clk);
      // offer a second input while busy: it must be refused
      #1;
      checks++;
      if (x_ready != 2'b00) begin failures++; $display("FAIL input accepted while busy"); end
      else n_refused++;
      x_valid = 0;
      done_o = 0; done_e = 0;
      while (!(done_o && done_e)) begin
        @(posedge clk); #1;
        for (int c = 0; c < 2; c++) begin
          if (y_valid[c]) begin
            if (c == 0) done_o = 1; else done_e = 1;
            for (int r = 0; r < H; r++) begin
              longint e, got;
              e = 0;
              for (int i = 0; i < H; i++) e += longint'(w[r][i]) * longint'(x[i]);
              got = (c == 0) ? longint'(y_o[r]) : longint'(y_e[r]);
              checks++;
              if (scen == 3 && lanes[r]) begin
                if (y_err[c][r]) n_flagged++;
                else if (got != e) n_miscorr++;
              end else if (scen == 2 && lanes[r] && got != e) begin
                n_miscorr++;
              end else if (got != e || y_err[c][r]) begin
                failures++;
                $display("FAIL core %0d op %0d scen %0d row %0d: got %0d exp %0d err=%0b",
                         c, op, scen, r, got, e, y_err[c][r]);
              end
              if (scen == 1 && lanes[r]) begin
                checks++;
                if (!y_corr[c][r]) begin failures++; $display("FAIL lane %0d not flagged corrected", r); end
                else n_corrected++;
              end
              if (scen == 0 && y_corr[c][r]) begin failures++; $display("FAIL clean lane flagged corrected"); end
            end
            checks++;
            if (scen == 2 || scen == 3) begin
              if (attempt[c] == 8'd2) n_retry++;
            end else if (attempt[c] != 8'd1) begin
              failures++; $display("FAIL core %0d op %0d: %0d attempts without detected error", c, op, attempt[c]);
            end
            if (scen == 0) n_clean++;
          end
        end
      end
      @(posedge clk);   // y_valid is the last clock of the operation
    end
    $display("mechanisms: clean=%0d corrected_lanes=%0d retries=%0d flagged_lanes=%0d reloads=%0d refused=%0d miscorrected_lanes=%0d",
             n_clean, n_corrected, n_retry, n_flagged, n_reload, n_refused, n_miscorr);
    checks += 6;
    if (n_clean == 0)     begin failures++; $display("FAIL no clean operation"); end
    if (n_corrected == 0) begin failures++; $display("FAIL no correction"); end
    if (n_retry == 0)     begin failures++; $display("FAIL no repeated attempt"); end
    if (n_flagged == 0)   begin failures++; $display("FAIL no error flagged after the last attempt"); end
    if (n_reload == 0)    begin failures++; $display("FAIL no weight reload"); end
    if (n_refused == 0)   begin failures++; $display("FAIL no input refused while busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
