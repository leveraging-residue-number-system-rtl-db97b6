// rns_controller: sequencer of the RNS analog MVM dataflow.
//
// The controller owns the order of operations of the core:
//   weight load  H rows of H FP32 weights are taken from the w stream, one row
//                at a time, through the scale/quantize unit. Each row's scale
//                factor is written into the scale-back unit (sw_we) and each
//                quantized element, after forward conversion, into the weight
//                DACs of every analog unit (aw_we, aw_row, aw_col).
//   input load   An H-element FP32 input vector from the x stream is scaled and
//                quantized likewise (sin_we, ax_we, ax_idx).
//   MVM          mvm_start runs all analog units at once. Their ADC outputs are
//                captured by the residue buffer when mvm_done comes back.
//   voting       The H elements are read from the residue buffer and voted on
//                by the redundant-RNS voter. Elements accepted by the voter are
//                resolved; the others are detected errors.
//   retry        If any element is unresolved and fewer than MAX_ATTEMPTS MVMs
//                were made, the MVM is repeated (retry pulses, attempt counts
//                up) and only still-unresolved elements take the new votes.
//                MAX_ATTEMPTS = 0 means no limit: the MVM is repeated until
//                every element is resolved (attempt then saturates at 255). This
//                waits forever on an error that persists.
//   output       The H signed results go to the scale-back unit, tagged with
//                {err, corrected}; err marks an element still unresolved after
//                the last attempt.
// Weight load has priority over an input vector when both are offered. The
// dataflow and the repeat-on-detected-error rule follow the paper; the
// whole-MVM retry, the error flag after the last attempt and all timing are
// this design's choices. One input vector costs 2H clocks of load, 2 + LAT
// clocks per MVM attempt, H + 3 clocks per voting pass and H clocks of
// output issue.
module rns_controller
  import rns_pkg::*;
#(
  parameter int  H            = 128,
  parameter int  MAX_ATTEMPTS = 2,
  localparam int IW           = $clog2(H),
  localparam int AW           = (MAX_ATTEMPTS == 0) ? 8 : $clog2(MAX_ATTEMPTS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // host streams
  input  logic               w_valid,
  output logic               w_ready,
  input  fp32_t              w_data,
  input  logic               x_valid,
  output logic               x_ready,
  input  fp32_t              x_data,
  // scale/quantize unit
  output logic               qin_valid,
  input  logic               qin_ready,
  output fp32_t              qin_data,
  input  logic               q_scale_valid,
  input  logic               q_valid,
  input  logic [IW-1:0]      q_idx,
  input  logic               q_last,
  // scale factor writes
  output logic               sw_we,
  output logic [IW-1:0]      sw_idx,
  output logic               sin_we,
  // analog units
  output logic               aw_we,
  output logic [IW-1:0]      aw_row,
  output logic [IW-1:0]      aw_col,
  output logic               ax_we,
  output logic [IW-1:0]      ax_idx,
  output logic               mvm_start,
  input  logic               mvm_done,
  // residue buffer read
  output logic               rb_rd_en,
  output logic [IW-1:0]      rb_rd_idx,
  // voter result
  input  logic               v_valid,
  input  logic [IW-1:0]      v_idx,
  input  logic signed [31:0] v_value,
  input  logic               v_ok,
  input  logic               v_unanimous,
  // to scale-back
  output logic               sb_valid,
  output logic [IW-1:0]      sb_idx,
  output logic signed [31:0] sb_y,
  output logic [1:0]         sb_tag,
  // status
  output logic               busy,
  output logic [AW-1:0]      attempt,
  output logic               retry
);
  typedef enum logic [2:0] {
    S_IDLE, S_WLOAD, S_XLOAD, S_MVM, S_WAIT, S_VOTE, S_CHECK, S_OUT
  } state_t;

  state_t             state;
  logic [IW-1:0]      row;
  logic [IW-1:0]      rd_ptr, out_ptr;
  logic [IW:0]        rd_cnt, rx_cnt;
  logic [H-1:0]       resolved, corrected;
  logic signed [31:0] ysi [H];

  // Host stream steering into the shared scale/quantize unit.
  always_comb begin
    qin_valid = 1'b0;
    qin_data  = x_data;
    w_ready   = 1'b0;
    x_ready   = 1'b0;
    if (state == S_WLOAD) begin
      qin_valid = w_valid;
      qin_data  = w_data;
      w_ready   = qin_ready;
    end else if (state == S_XLOAD) begin
      qin_valid = x_valid;
      x_ready   = qin_ready;
    end
  end

  assign sw_we  = (state == S_WLOAD) && q_scale_valid;
  assign sw_idx = row;
  assign sin_we = (state == S_XLOAD) && q_scale_valid;
  assign aw_we  = (state == S_WLOAD) && q_valid;
  assign aw_row = row;
  assign aw_col = q_idx;
  assign ax_we  = (state == S_XLOAD) && q_valid;
  assign ax_idx = q_idx;

  assign mvm_start = (state == S_MVM);
  assign rb_rd_en  = (state == S_VOTE) && (rd_cnt < (IW+1)'(H));
  assign rb_rd_idx = rd_ptr;
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      row       <= '0;
      rd_ptr    <= '0;
      rd_cnt    <= '0;
      rx_cnt    <= '0;
      out_ptr   <= '0;
      resolved  <= '0;
      corrected <= '0;
      attempt   <= '0;
      retry     <= 1'b0;
      sb_valid  <= 1'b0;
      sb_idx    <= '0;
      sb_y      <= '0;
      sb_tag    <= '0;
      for (int k = 0; k < H; k++) ysi[k] <= '0;
    end else begin
      retry    <= 1'b0;
      sb_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          row <= '0;
          if (w_valid)      state <= S_WLOAD;
          else if (x_valid) state <= S_XLOAD;
        end
        S_WLOAD: if (q_valid && q_last) begin
          row <= row + 1'b1;
          if (row == IW'(H - 1)) state <= S_IDLE;
        end
        S_XLOAD: if (q_valid && q_last) begin
          attempt   <= '0;
          resolved  <= '0;
          corrected <= '0;
          state     <= S_MVM;
        end
        S_MVM: state <= S_WAIT;
        S_WAIT: if (mvm_done) begin
          rd_ptr <= '0;
          rd_cnt <= '0;
          rx_cnt <= '0;
          state  <= S_VOTE;
        end
        S_VOTE: begin
          if (rb_rd_en) begin
            rd_ptr <= rd_ptr + 1'b1;
            rd_cnt <= rd_cnt + 1'b1;
          end
          if (v_valid) begin
            if (!resolved[v_idx]) begin
              ysi[v_idx]       <= v_value;
              resolved[v_idx]  <= v_ok;
              corrected[v_idx] <= v_ok && !v_unanimous;
            end
            rx_cnt <= rx_cnt + 1'b1;
            if (rx_cnt == (IW+1)'(H - 1)) state <= S_CHECK;
          end
        end
        S_CHECK: begin
          if (!(&resolved) && (MAX_ATTEMPTS == 0 || int'(attempt) < MAX_ATTEMPTS - 1)) begin
            if (attempt != '1) attempt <= attempt + 1'b1;
            retry   <= 1'b1;
            state   <= S_MVM;
          end else begin
            out_ptr <= '0;
            state   <= S_OUT;
          end
        end
        S_OUT: begin
          sb_valid <= 1'b1;
          sb_idx   <= out_ptr;
          sb_y     <= ysi[out_ptr];
          sb_tag   <= {!resolved[out_ptr], corrected[out_ptr]};
          out_ptr  <= out_ptr + 1'b1;
          if (out_ptr == IW'(H - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The voter answers every read exactly once, in order.
  a_vote_order: assert property (@(posedge clk) disable iff (!rst_n)
    v_valid |-> (state == S_VOTE))
    else $error("rns_controller: voter result outside the voting phase");
endmodule
