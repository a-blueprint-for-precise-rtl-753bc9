// tb_analog_mvm_unit: self-checking test of the analog MVM unit model in both
// technologies: optical (m = 62) and electrical (ring oscillator, m = 61),
// H = 16. Programs a random residue weight tile row by row, runs random input
// vectors and compares each output with sum_i w_ri x_i mod m computed here.
// Also checks the optical latency (LATENCY + 1 clocks from x_valid to
// y_valid) and the residue-error injection.
module tb_analog_mvm_unit;
  import rns_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int H = 16;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so asynchronous resets act
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic           w_we, x_valid;
  logic [3:0]     w_row;
  logic [5:0]     w_o [H], w_e [H], x_o [H], x_e [H];
  logic [H-1:0]   err_mask;
  logic [5:0]     err_offset;
  logic           yv_o, yv_e;
  logic [5:0]     y_o [H], y_e [H];

  analog_mvm_unit #(.H(H), .MODULUS(62), .RW(6), .TECH(TECH_OPTICAL)) dut_o (
    .clk, .rst_n, .w_we, .w_row, .w_res(w_o), .x_valid, .x_res(x_o),
    .err_mask, .err_offset, .y_valid(yv_o), .y_res(y_o));
  analog_mvm_unit #(.H(H), .MODULUS(61), .RW(6), .TECH(TECH_ELECTRICAL)) dut_e (
    .clk, .rst_n, .w_we, .w_row, .w_res(w_e), .x_valid, .x_res(x_e),
    .err_mask, .err_offset, .y_valid(yv_e), .y_res(y_e));

  int wo [H][H], we [H][H];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_we = 0; x_valid = 0; w_row = 0; err_mask = '0; err_offset = 6'd5;
    foreach (w_o[i]) begin w_o[i] = 0; w_e[i] = 0; x_o[i] = 0; x_e[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < H; r++) begin
      @(negedge clk);
      w_we = 1; w_row = 4'(r);
      for (int i = 0; i < H; i++) begin
        wo[r][i] = int'($urandom % 62); we[r][i] = int'($urandom % 61);
        w_o[i] = 6'(wo[r][i]); w_e[i] = 6'(we[r][i]);
      end
    end
    @(negedge clk); w_we = 0;
    for (int t = 0; t < 40; t++) begin
      int lat_o, got_o, got_e;
      int xo [H], xe [H];
      @(negedge clk);
      for (int i = 0; i < H; i++) begin
        xo[i] = (t == 0) ? 61 : int'($urandom % 62);
        xe[i] = (t == 0) ? 60 : int'($urandom % 61);
        x_o[i] = 6'(xo[i]); x_e[i] = 6'(xe[i]);
      end
      err_mask = (t % 4 == 3) ? H'($urandom) : '0;
      x_valid = 1;
      @(negedge clk); x_valid = 0;
      lat_o = 1; got_o = 0; got_e = 0;
      while (!(got_o && got_e)) begin
        if (yv_o && !got_o) begin
          got_o = 1;
          checks++;
          if (lat_o != 3) begin failures++; $display("FAIL optical latency %0d", lat_o); end
          for (int r = 0; r < H; r++) begin
            int s;
            s = 0;
            for (int i = 0; i < H; i++) s += wo[r][i] * xo[i];
            s = s % 62;
            if (err_mask[r]) s = (s + 5) % 62;
            checks++;
            if (int'(y_o[r]) != s) begin failures++; $display("FAIL optical t=%0d row %0d got %0d exp %0d", t, r, y_o[r], s); end
          end
        end
        if (yv_e && !got_e) begin
          got_e = 1;
          for (int r = 0; r < H; r++) begin
            int s;
            s = 0;
            for (int i = 0; i < H; i++) s += we[r][i] * xe[i];
            s = s % 61;
            if (err_mask[r]) s = (s + 5) % 61;
            checks++;
            if (int'(y_e[r]) != s) begin failures++; $display("FAIL electrical t=%0d row %0d got %0d exp %0d", t, r, y_e[r], s); end
          end
        end
        @(negedge clk);
        lat_o++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
