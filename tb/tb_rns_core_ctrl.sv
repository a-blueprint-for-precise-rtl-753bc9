// tb_rns_core_ctrl: self-checking test of the operation sequencer.
// Plays the forward converter, the MVM units and the decoder around two
// controllers (MAX_ATTEMPTS = 2 and 0 = unlimited). For each operation the
// decoder reports a detected error on the first D attempts (D random, 0..3).
// Checks: the number of mvm_start pulses equals min(D+1, MAX) (or D+1),
// out_valid comes exactly once, attempt counts correctly, weight rows are
// refused while busy and take priority over inputs when idle.
module tb_rns_core_ctrl;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so asynchronous resets act
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic       w_valid, x_valid;
  logic [1:0] w_ready, x_ready, mvm_start, dec_start, out_valid, busy;
  logic [1:0] conv_done, mvm_done, dec_done, det;
  logic [7:0] attempt [2];

  rns_core_ctrl #(.MAX_ATTEMPTS(2)) dut0 (
    .clk, .rst_n, .w_valid, .w_ready(w_ready[0]), .x_valid, .x_ready(x_ready[0]),
    .conv_done(conv_done[0]), .mvm_start(mvm_start[0]), .mvm_done(mvm_done[0]),
    .dec_start(dec_start[0]), .dec_done(dec_done[0]), .dec_detected_any(det[0]),
    .out_valid(out_valid[0]), .attempt(attempt[0]), .busy(busy[0]));
  rns_core_ctrl #(.MAX_ATTEMPTS(0)) dut1 (
    .clk, .rst_n, .w_valid, .w_ready(w_ready[1]), .x_valid, .x_ready(x_ready[1]),
    .conv_done(conv_done[1]), .mvm_start(mvm_start[1]), .mvm_done(mvm_done[1]),
    .dec_start(dec_start[1]), .dec_done(dec_done[1]), .dec_detected_any(det[1]),
    .out_valid(out_valid[1]), .attempt(attempt[1]), .busy(busy[1]));

  // environment model per controller
  int n_start [2], n_out [2], n_dec [2], fail_first;
  int mcnt [2];
  logic [1:0] conv_pipe, dec_pipe1, dec_pipe2;
  always_ff @(posedge clk) begin
    for (int c = 0; c < 2; c++) begin
      conv_pipe[c] <= x_valid && x_ready[c];
      if (mvm_start[c]) begin mcnt[c] <= 3; mvm_done[c] <= 1'b0; n_start[c]++; end
      else if (mcnt[c] > 1) mcnt[c] <= mcnt[c] - 1;
      else if (mcnt[c] == 1) begin mcnt[c] <= 0; mvm_done[c] <= 1'b1; end
      dec_pipe1[c] <= dec_start[c];
      dec_pipe2[c] <= dec_pipe1[c];
      if (dec_pipe1[c]) n_dec[c]++;
      if (out_valid[c]) n_out[c]++;
    end
  end
  assign conv_done = conv_pipe;
  assign dec_done  = dec_pipe2;
  assign det[0] = dec_done[0] && (n_dec[0] <= fail_first);
  assign det[1] = dec_done[1] && (n_dec[1] <= fail_first);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_valid = 0; x_valid = 0;
    mcnt = '{0, 0}; mvm_done = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int op = 0; op < 60; op++) begin
      @(negedge clk);
      n_start = '{0, 0}; n_out = '{0, 0}; n_dec = '{0, 0};
      fail_first = int'($urandom % 4);
      // a weight row and an input on the same clock: the row wins
      w_valid = 1; x_valid = 1;
      #1;
      checks++;
      if (w_ready != 2'b11 || x_ready != 2'b00) begin failures++; $display("FAIL priority"); end
      @(negedge clk);
      w_valid = 0;
      @(negedge clk);
      x_valid = 0;
      @(negedge clk);
      w_valid = 1;
      #1;
      checks++;
      if (w_ready != 2'b00 || busy != 2'b11) begin failures++; $display("FAIL weight accepted while busy"); end
      w_valid = 0;
      while (!(n_out[0] == 1 && n_out[1] == 1)) @(negedge clk);
      repeat (3) @(negedge clk);
      checks += 4;
      if (n_start[0] != ((fail_first + 1 < 2) ? fail_first + 1 : 2)) begin
        failures++; $display("FAIL R=2: %0d starts for %0d failing attempts", n_start[0], fail_first);
      end
      if (n_start[1] != fail_first + 1) begin
        failures++; $display("FAIL R=inf: %0d starts for %0d failing attempts", n_start[1], fail_first);
      end
      if (int'(attempt[0]) != n_start[0] || int'(attempt[1]) != n_start[1]) begin
        failures++; $display("FAIL attempt counters %0d %0d", attempt[0], attempt[1]);
      end
      if (n_out[0] != 1 || n_out[1] != 1) begin failures++; $display("FAIL out_valid count"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
