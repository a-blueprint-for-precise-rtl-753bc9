// rns_analog_core: a residue-number-system (RNS) analog MVM core with
// redundant-RNS (RRNS) error correction.
//
// Data path, as in the paper's dataflow figure: signed integer weights and
// inputs -> forward conversion into N+K residues (one per modulus) -> N+K
// analog modular MVM units of size H x H running in parallel, each with
// DACs, an analog modulo and ADCs of ceil(log2 m_i) bits -> reverse conversion
// by CRT inside the RRNS majority-logic decoder -> signed integer outputs. A
// lane whose residues hold more errors than the code corrects is flagged, and
// the controller repeats the MVM up to MAX_ATTEMPTS times.
//
// Defaults follow the paper's main operating point: 6-bit inputs and weights,
// moduli {63, 62, 61, 59} (18-bit dot products at h = 128 fit in M ~ 2^24),
// H = 128. Two redundant moduli {55, 53} (K = 2, the middle of the paper's
// k = 1, 2, 4) and two attempts are this design's picks among the cases the
// paper evaluates. The FP32 scaling, quantization and non-linear functions
// around the core are left to the host; the core's ports are signed integers.
//
// Interface:
//   w_valid/w_ready, w_row, w_data  - program one weight row (signed BW-bit)
//   x_valid/x_ready, x_data         - start one MVM with an input vector
//   y_valid (1 clock), y_data       - signed results, [-psi_L, psi_L]
//   y_corrected / y_error           - per lane: residue errors corrected /
//                                     detected but not corrected after the
//                                     last attempt
//   attempt                         - attempt number in progress
//   err_mask, err_offset            - residue-error injection into the
//                                     behavioural analog units (test only)
// Latency with the optical units: 1 (accept) + 1 (forward conversion) +
// 1 (issue) + LATENCY+1 (analog) + 2 (decode) clocks per attempt.
module rns_analog_core
  import rns_pkg::*;
#(
  parameter int           H            = 128,
  parameter int           BW           = 6,
  parameter int           N            = 4,
  parameter int           K            = 2,
  parameter moduli_t      MODULI       = MODULI_6B_RRNS,
  parameter analog_tech_e TECH         = TECH_OPTICAL,
  parameter int           MAX_ATTEMPTS = 2,
  localparam int          NMOD         = N + K,
  localparam int          RW           = residue_width(MODULI, N + K),
  localparam int          OW           = out_width(MODULI, N, K),
  localparam int          HW           = $clog2(H),
  localparam int          AW           = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 w_valid,
  output logic                 w_ready,
  input  logic [HW-1:0]        w_row,
  input  logic signed [BW-1:0] w_data [H],
  input  logic                 x_valid,
  output logic                 x_ready,
  input  logic signed [BW-1:0] x_data [H],
  input  logic [H-1:0]         err_mask [NMOD],
  input  logic [RW-1:0]        err_offset [NMOD],
  output logic                 y_valid,
  output logic signed [OW-1:0] y_data [H],
  output logic                 y_corrected [H],
  output logic                 y_error [H],
  output logic [AW-1:0]        attempt,
  output logic                 busy
);

  timeunit 1ns;
  timeprecision 1ps;

  localparam int TW = HW + 1;   // tag: {is_input, weight row}

  // ---- forward conversion, shared by weight rows and input vectors -------
  logic                 w_acc, x_acc, fc_in_valid;
  logic signed [BW-1:0] fc_in [H];
  logic        [TW-1:0] fc_tag_in, fc_tag;
  logic                 fc_valid;
  logic        [RW-1:0] fc_res [NMOD][H];

  assign w_acc       = w_valid && w_ready;
  assign x_acc       = x_valid && x_ready;
  assign fc_in_valid = w_acc || x_acc;
  assign fc_in       = w_acc ? w_data : x_data;
  assign fc_tag_in   = {x_acc && !w_acc, w_row};

  fwd_conv #(.LANES(H), .BW(BW), .NMOD(NMOD), .MODS(MODULI), .RW(RW), .TW(TW)) u_fwd (
    .clk, .rst_n, .in_valid(fc_in_valid), .in_data(fc_in), .in_tag(fc_tag_in),
    .out_valid(fc_valid), .out_res(fc_res), .out_tag(fc_tag)
  );

  logic fc_is_x, fc_w_we;
  assign fc_is_x = fc_tag[TW-1];
  assign fc_w_we = fc_valid && !fc_is_x;

  // input residues held for every attempt of the operation
  logic [RW-1:0] x_hold [NMOD][H];
  always_ff @(posedge clk) begin
    if (fc_valid && fc_is_x) x_hold <= fc_res;
  end

  // ---- analog MVM units, one per modulus ----------------------------------
  logic          mvm_start, mvm_done, dec_start, dec_done;
  logic [NMOD-1:0] u_valid, got;
  logic [RW-1:0] u_y  [NMOD][H];
  logic [RW-1:0] y_hold [NMOD][H];

  for (genvar i = 0; i < NMOD; i++) begin : g_unit
    analog_mvm_unit #(.H(H), .MODULUS(int'(MODULI[i])), .RW(RW), .TECH(TECH)) u_mvm (
      .clk, .rst_n,
      .w_we(fc_w_we), .w_row(fc_tag[HW-1:0]), .w_res(fc_res[i]),
      .x_valid(mvm_start), .x_res(x_hold[i]),
      .err_mask(err_mask[i]), .err_offset(err_offset[i]),
      .y_valid(u_valid[i]), .y_res(u_y[i])
    );
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)          got[i] <= 1'b0;
      else if (mvm_start)  got[i] <= 1'b0;
      else if (u_valid[i]) got[i] <= 1'b1;
    end
    always_ff @(posedge clk) begin
      if (u_valid[i]) y_hold[i] <= u_y[i];
    end
  end
  assign mvm_done = &got;

  // ---- RRNS decoding (reverse conversion) ---------------------------------
  logic dec_det [H];
  logic det_any;

  rrns_decoder #(.LANES(H), .N(N), .K(K), .MODS(MODULI), .RW(RW), .OW(OW)) u_dec (
    .clk, .rst_n, .in_valid(dec_start), .in_res(y_hold),
    .out_valid(dec_done), .out_value(y_data), .out_corrected(y_corrected),
    .out_detected(dec_det)
  );

  always_comb begin
    det_any = 1'b0;
    for (int l = 0; l < H; l++) det_any |= dec_det[l];
  end
  assign y_error = dec_det;

  // ---- sequencing -----------------------------------------------------------
  rns_core_ctrl #(.MAX_ATTEMPTS(MAX_ATTEMPTS), .AW(AW)) u_ctrl (
    .clk, .rst_n,
    .w_valid, .w_ready, .x_valid, .x_ready,
    .conv_done(fc_valid && fc_is_x),
    .mvm_start, .mvm_done, .dec_start, .dec_done,
    .dec_detected_any(det_any),
    .out_valid(y_valid), .attempt, .busy
  );

endmodule
