// tb_fwd_conv: self-checking test of the forward conversion.
// Drives random signed 6-bit vectors (plus the extremes -32 and 31) and
// compares every residue with ((a mod m) + m) mod m worked out here. Also
// checks the one-clock latency and that the tag travels with the data.
module tb_fwd_conv;
  import rns_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int      LANES = 16;
  localparam int      BW    = 6;
  localparam int      NMOD  = 6;
  localparam moduli_t MODS  = MODULI_6B_RRNS;
  localparam int      RW    = residue_width(MODS, NMOD);

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so asynchronous resets act
  always #5 clk = ~clk;

  logic                 in_valid;
  logic signed [BW-1:0] in_data [LANES];
  logic        [7:0]    in_tag, out_tag;
  logic                 out_valid;
  logic        [RW-1:0] out_res [NMOD][LANES];

  fwd_conv #(.LANES(LANES), .BW(BW), .NMOD(NMOD), .MODS(MODS), .RW(RW), .TW(8)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_tag = 0;
    foreach (in_data[l]) in_data[l] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 200; v++) begin
      @(negedge clk);
      in_valid = 1;
      in_tag   = 8'(v);
      foreach (in_data[l]) begin
        if (v == 0)      in_data[l] = -32;
        else if (v == 1) in_data[l] = 31;
        else             in_data[l] = BW'($urandom);
      end
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      if (!out_valid || out_tag != 8'(v)) begin
        failures++;
        $display("FAIL vector %0d: out_valid=%0b tag=%0d", v, out_valid, out_tag);
      end
      for (int i = 0; i < NMOD; i++) begin
        for (int l = 0; l < LANES; l++) begin
          int a, m, e;
          a = int'(in_data[l]);
          m = int'(MODS[i]);
          e = ((a % m) + m) % m;
          checks++;
          if (int'(out_res[i][l]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d m=%0d got %0d exp %0d", a, m, out_res[i][l], e);
          end
        end
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
