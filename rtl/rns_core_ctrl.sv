// rns_core_ctrl: operation sequencer of the RNS analog core, including the
// repeat-on-detected-error loop of the redundant-RNS scheme.
//
// One operation is one MVM of the programmed weight tile with one input
// vector: forward conversion, the n+k analog MVM units, RRNS decoding. When
// the decoder flags a detectable but uncorrectable error in any lane, the
// whole calculation is repeated (the paper's remedy), from the analog MVM on,
// with the input residues still held; at most MAX_ATTEMPTS attempts are made
// (0 means no limit, the paper's "infinite attempts"). After the last attempt
// the result is released as it is, with the decoder's per-lane flags.
//
// The paper specifies the repetition and the attempt count R; the states, the
// handshakes and the restart point are this design's choices.
//
// Handshakes: x_valid/x_ready and w_valid/w_ready accept on a clock where both
// are high. Weight rows are accepted only while idle, so a tile never changes
// under a running MVM; a weight row has priority over an input vector on the
// same clock. mvm_start pulses one clock; mvm_done is a level that the caller
// raises once all units have answered; dec_start pulses when it does;
// dec_done is the decoder's output strobe. out_valid pulses one clock with
// the final result, attempt holds the number of the attempt in progress (or
// of the last one once done).
module rns_core_ctrl #(
  parameter int MAX_ATTEMPTS = 2,
  parameter int AW           = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          w_valid,
  output logic          w_ready,
  input  logic          x_valid,
  output logic          x_ready,
  input  logic          conv_done,
  output logic          mvm_start,
  input  logic          mvm_done,
  output logic          dec_start,
  input  logic          dec_done,
  input  logic          dec_detected_any,
  output logic          out_valid,
  output logic [AW-1:0] attempt,
  output logic          busy
);

  timeunit 1ns;
  timeprecision 1ps;

  typedef enum logic [2:0] {
    S_IDLE, S_CONV, S_ISSUE, S_WAIT, S_DEC
  } state_e;

  state_e state, state_n;
  logic   retry;

  assign w_ready   = (state == S_IDLE);
  assign x_ready   = (state == S_IDLE) && !w_valid;
  assign mvm_start = (state == S_ISSUE);
  assign dec_start = (state == S_WAIT) && mvm_done;
  assign retry     = dec_detected_any &&
                     (MAX_ATTEMPTS == 0 || attempt < AW'(MAX_ATTEMPTS));
  assign out_valid = (state == S_DEC) && dec_done && !retry;
  assign busy      = (state != S_IDLE);

  always_comb begin
    state_n = state;
    unique case (state)
      S_IDLE:  if (x_valid && x_ready) state_n = S_CONV;
      S_CONV:  if (conv_done)          state_n = S_ISSUE;
      S_ISSUE:                         state_n = S_WAIT;
      S_WAIT:  if (mvm_done)           state_n = S_DEC;
      S_DEC:   if (dec_done)           state_n = retry ? S_ISSUE : S_IDLE;
      default:                         state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      attempt <= '0;
    end else begin
      state <= state_n;
      if (state == S_IDLE && x_valid && x_ready)    attempt <= AW'(1);
      else if (state == S_DEC && dec_done && retry) attempt <= attempt + 1'b1;
    end
  end

  // The decoder answers only to a decode request, the units only to a start.
  a_dec_in_dec: assert property (@(posedge clk) disable iff (!rst_n)
                                 dec_done |-> state == S_DEC)
    else $error("rns_core_ctrl: decoder output outside the decode state");
  a_mvm_in_wait: assert property (@(posedge clk) disable iff (!rst_n)
                                  mvm_start |=> state == S_WAIT)
    else $error("rns_core_ctrl: MVM started outside the issue state");

endmodule
