// tb_rns_analog_core_full: the RNS analog core at its default size
// (H = 128, 6-bit data, RRNS(6,4) with moduli {63,62,61,59 | 55,53}, optical
// units, two attempts), no parameter overridden.
// Programs a full random 128 x 128 signed 6-bit weight tile and runs three
// MVMs with random signed inputs: one clean, one with a single wrong residue
// in every lane (all corrected), one with two wrong residues in lane 0 on the
// first attempt (detected, repeated, clean on the second). Every output is
// compared with the integer dot product computed here, and the operation
// latency of the clean MVM is checked: y_valid is high 1 (accept) + 1
// (forward conversion) + 1 (issue) + 3 (analog) + 2 (decode) = 8 rising
// edges after the edge that accepts the input.
module tb_rns_analog_core_full;
  import rns_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int H    = 128;
  localparam int NMOD = 6;
  localparam int OW   = out_width(MODULI_6B_RRNS, 4, 2);

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so asynchronous resets act
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic                 w_valid, x_valid, w_ready, x_ready, y_valid, busy;
  logic [6:0]           w_row;
  logic signed [5:0]    w_data [H], x_data [H];
  logic [H-1:0]         err_mask [NMOD];
  logic [5:0]           err_offset [NMOD];
  logic signed [OW-1:0] y_data [H];
  logic                 y_corrected [H], y_error [H];
  logic [7:0]           attempt;

  rns_analog_core dut (.*);

  int w [H][H];
  int x [H];
  int scen;

  always_comb begin
    for (int i = 0; i < NMOD; i++) begin
      err_mask[i]   = '0;
      err_offset[i] = 6'd7;
    end
    if (scen == 1) err_mask[2] = '1;
    if (scen == 2 && attempt == 8'd1) begin err_mask[0] = H'(1); err_mask[5] = H'(1); end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    w_valid = 0; x_valid = 0; w_row = 0; scen = 0;
    foreach (w_data[i]) begin w_data[i] = 0; x_data[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < H; r++) begin
      @(negedge clk);
      w_valid = 1; w_row = 7'(r);
      for (int i = 0; i < H; i++) begin
        w[r][i] = (r == 0) ? -32 : int'($urandom % 64) - 32;
        w_data[i] = 6'(w[r][i]);
      end
    end
    @(negedge clk); w_valid = 0;
    for (int op = 0; op < 3; op++) begin
      scen = op;
      @(negedge clk);
      for (int i = 0; i < H; i++) begin
        x[i] = (op == 0) ? -32 : int'($urandom % 64) - 32;
        x_data[i] = 6'(x[i]);
      end
      x_valid = 1;
      @(posedge clk); #1;
      x_valid = 0;
      lat = 1;
      while (!y_valid) begin @(posedge clk); #1; lat++; end
      checks++;
      if (op == 0 && lat != 8) begin failures++; $display("FAIL latency %0d clocks", lat); end
      checks++;
      if (attempt != ((op == 2) ? 8'd2 : 8'd1)) begin failures++; $display("FAIL op %0d: %0d attempts", op, attempt); end
      for (int r = 0; r < H; r++) begin
        longint e;
        e = 0;
        for (int i = 0; i < H; i++) e += longint'(w[r][i]) * longint'(x[i]);
        checks++;
        if (longint'(y_data[r]) != e || y_error[r] || y_corrected[r] != (op == 1)) begin
          failures++;
          if (failures < 10) $display("FAIL op %0d row %0d: got %0d exp %0d corr=%0b err=%0b",
                                      op, r, y_data[r], e, y_corrected[r], y_error[r]);
        end
      end
      $display("op %0d: %0d clocks, %0d attempt(s), y[0] = %0d", op, lat, attempt, y_data[0]);
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
