// rns_accel_top: RNS-based analog matrix-vector core with redundant-residue
// fault tolerance.
//
// The core computes y = f(W x) for an H x H FP32 weight matrix W and an
// H-element FP32 input vector x with low-precision analog hardware:
//   1. scale_quantize turns each weight row and the input vector into signed
//      B-bit integers plus one FP32 scale factor per row / vector.
//   2. N forward_converter instances (one per modulus) turn each integer into
//      its residue; all N analog units receive their own residues.
//   3. N analog_mvm_unit models (one per modulus) perform the H dot products
//      modulo m_i and return B-bit residues from their ADCs.
//   4. residue_buffer captures the N residue vectors; rrns_voter converts each
//      element back to a signed integer by CRT over all C(N,K) groups of K
//      moduli and votes. rns_controller repeats the MVM, up to MAX_ATTEMPTS
//      times in all (0: without limit), while an element has a detected but
//      uncorrectable error.
//   5. scale_back multiplies by s_in * s_w[k] / QMAX^2 and activation applies
//      the sigmoid (sigmoid_en), ReLU (relu_en) or nothing before the element
//      leaves on the y stream.
// Defaults: H = 128, B = 6, moduli {63, 62, 61, 59} (K = 4, the paper's 6-bit
// configuration, product about 2^23.7 against an 18-bit dot-product range)
// plus the redundant moduli {55, 53} chosen here (N = 6, one correctable
// residue error per element).
//
// Streams: w_* and x_* are FP32 ready/valid inputs (weights row by row, H*H
// elements per matrix; inputs H elements per vector). y_* carries one result
// per clock with its index, y_err (uncorrectable after the last attempt),
// y_corrected (accepted although not all groups agreed) and y_clamped (set
// to zero by ReLU); it has no back-pressure. fault drives the error-injection port of the analog models
// and stands for analog noise. busy, attempt and retry report progress.
module rns_accel_top
  import rns_pkg::*;
#(
  parameter int      H            = 128,
  parameter int      B            = 6,
  parameter int      K            = 4,
  parameter int      N            = 6,
  parameter moduli_t MODULI       = MODULI_6B,
  parameter int      MAX_ATTEMPTS = 2,
  parameter int      VOTE_MIN     = default_vote_min(N, K),
  localparam int     IW           = $clog2(H),
  localparam int     AW           = (MAX_ATTEMPTS == 0) ? 8 : $clog2(MAX_ATTEMPTS + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          w_valid,
  output logic          w_ready,
  input  fp32_t         w_data,
  input  logic          x_valid,
  output logic          x_ready,
  input  fp32_t         x_data,
  input  logic          relu_en,
  input  logic          sigmoid_en,
  input  analog_fault_t fault,
  output logic          y_valid,
  output logic [IW-1:0] y_idx,
  output fp32_t         y_data,
  output logic          y_err,
  output logic          y_corrected,
  output logic          y_clamped,
  output logic          busy,
  output logic [AW-1:0] attempt,
  output logic          retry
);
  localparam int RES_W = B;

  // Scale and quantize.
  logic                qin_valid, qin_ready;
  fp32_t               qin_data, q_scale;
  logic                q_scale_valid, q_valid, q_last;
  logic [IW-1:0]       q_idx;
  logic signed [B-1:0] q_data;

  scale_quantize #(.H(H), .B(B)) u_sq (
    .clk, .rst_n,
    .in_valid(qin_valid), .in_ready(qin_ready), .in_data(qin_data),
    .scale_valid(q_scale_valid), .scale(q_scale),
    .q_valid, .q_idx, .q_data, .q_last
  );

  // Controller signals.
  logic               sw_we, sin_we, aw_we, ax_we, mvm_start, mvm_done;
  logic [IW-1:0]      sw_idx, aw_row, aw_col, ax_idx;
  logic               rb_rd_en, rb_rd_valid;
  logic [IW-1:0]      rb_rd_idx, rb_rd_idx_q;
  logic               v_valid, v_ok, v_unanimous;
  logic [IW-1:0]      v_idx;
  logic signed [31:0] v_value;
  logic               sb_valid;
  logic [IW-1:0]      sb_idx;
  logic signed [31:0] sb_y;
  logic [1:0]         sb_tag;

  // Forward conversion and the analog units, one per modulus.
  logic [N-1:0][H-1:0][RES_W-1:0] cap_res;
  logic [N-1:0]                   unit_done;

  for (genvar i = 0; i < N; i++) begin : g_mod
    localparam int MI = int'(MODULI[i]);
    localparam int RW = bits_for(longint'(MI));
    logic [RW-1:0]        res;
    logic [H-1:0][RW-1:0] yres;

    forward_converter #(.B(B), .MODULUS(MI)) u_fwd (.x(q_data), .r(res));

    analog_mvm_unit #(.H(H), .MODULUS(MI), .UNIT(i)) u_mvm (
      .clk, .rst_n,
      .w_we(aw_we), .w_row(aw_row), .w_col(aw_col), .w_res(res),
      .x_we(ax_we), .x_idx(ax_idx), .x_res(res),
      .start(mvm_start), .fault(fault),
      .y_valid(unit_done[i]), .y_res(yres)
    );

    for (genvar k = 0; k < H; k++) begin : g_el
      assign cap_res[i][k] = RES_W'(yres[k]);
    end
  end

  assign mvm_done = &unit_done;

  logic [N-1:0][RES_W-1:0] rb_res;

  residue_buffer #(.H(H), .N(N), .RES_W(RES_W)) u_rb (
    .clk, .rst_n,
    .cap(mvm_done), .cap_res(cap_res),
    .rd_en(rb_rd_en), .rd_idx(rb_rd_idx),
    .rd_valid(rb_rd_valid), .rd_idx_q(rb_rd_idx_q), .rd_res(rb_res)
  );

  rrns_voter #(
    .MODULI(MODULI), .N(N), .K(K), .RES_W(RES_W), .H(H), .VOTE_MIN(VOTE_MIN)
  ) u_vote (
    .clk, .rst_n,
    .in_valid(rb_rd_valid), .in_idx(rb_rd_idx_q), .res(rb_res),
    .out_valid(v_valid), .out_idx(v_idx), .value(v_value),
    .ok(v_ok), .unanimous(v_unanimous)
  );

  rns_controller #(.H(H), .MAX_ATTEMPTS(MAX_ATTEMPTS)) u_ctl (
    .clk, .rst_n,
    .w_valid, .w_ready, .w_data, .x_valid, .x_ready, .x_data,
    .qin_valid, .qin_ready, .qin_data,
    .q_scale_valid, .q_valid, .q_idx, .q_last,
    .sw_we, .sw_idx, .sin_we,
    .aw_we, .aw_row, .aw_col, .ax_we, .ax_idx, .mvm_start, .mvm_done,
    .rb_rd_en, .rb_rd_idx,
    .v_valid, .v_idx, .v_value, .v_ok, .v_unanimous,
    .sb_valid, .sb_idx, .sb_y, .sb_tag,
    .busy, .attempt, .retry
  );

  // Rescale and activation.
  logic          s_valid;
  logic [IW-1:0] s_idx;
  fp32_t         s_data;
  logic [1:0]    s_tag, y_tag;

  scale_back #(.H(H), .B(B), .TAG_W(2)) u_sb (
    .clk, .rst_n,
    .sw_we, .sw_idx, .sin_we, .s_data(q_scale),
    .in_valid(sb_valid), .in_idx(sb_idx), .in_y(sb_y), .in_tag(sb_tag),
    .out_valid(s_valid), .out_idx(s_idx), .out_data(s_data), .out_tag(s_tag)
  );

  activation #(.H(H), .TAG_W(2)) u_act (
    .clk, .rst_n, .relu_en, .sigmoid_en,
    .in_valid(s_valid), .in_idx(s_idx), .in_data(s_data), .in_tag(s_tag),
    .out_valid(y_valid), .out_idx(y_idx), .out_data(y_data), .out_tag(y_tag),
    .out_clamped(y_clamped)
  );

  assign y_err       = y_tag[1];
  assign y_corrected = y_tag[0];
endmodule
