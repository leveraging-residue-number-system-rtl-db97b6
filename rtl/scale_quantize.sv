// scale_quantize: per-vector scaling and symmetric quantization of FP32 data.
//
// An h-element FP32 vector (the input vector, or one row of the weight
// matrix) is streamed in. While it arrives it is stored in a local buffer and
// its scale factor s = max(|v|) is tracked; for non-negative IEEE-754 values
// the integer order of the bit patterns is the numeric order, so the maximum
// needs only an unsigned compare of bits [30:0]. In the second pass each
// element is mapped to the signed integer
//     q = sign(v) * round(|v| / s * QMAX),   QMAX = 2^(B-1) - 1,
// giving the symmetric range [-QMAX, QMAX]. The division is done on the
// mantissas: |v|/s = (mv/ms) * 2^(ev-es), so q = round(mv*QMAX / (ms << (es-ev)))
// with a single integer divider. Ties round away from zero.
//
// Interface and timing: in_valid/in_ready/in_data is a ready/valid stream;
// in_ready is high during the load pass (H clocks at full rate). The clock
// after the H-th element is taken, scale_valid pulses with scale = s and the
// emit pass starts: q_valid is high for H clocks with q_idx = 0..H-1 and
// q_last on the last one. There is no back-pressure on the q stream. A whole
// vector thus takes 2H clocks. Denormals count as zero; Inf and NaN are not
// handled. Scaling by max(|v|) per vector and per weight row follows the
// paper; buffering, rounding and the two-pass timing are this design's choice.
module scale_quantize
  import rns_pkg::*;
#(
  parameter int  H  = 128,
  parameter int  B  = 6,
  localparam int IW = $clog2(H)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  fp32_t               in_data,
  output logic                scale_valid,
  output fp32_t               scale,
  output logic                q_valid,
  output logic [IW-1:0]       q_idx,
  output logic signed [B-1:0] q_data,
  output logic                q_last
);
  localparam int QMAX = (1 << (B - 1)) - 1;
  localparam int NUM_W = 24 + B;
  localparam int DEN_W = 24 + 16 + 1;

  typedef enum logic {S_LOAD, S_EMIT} state_t;
  state_t        state;
  logic [IW-1:0] cnt;
  fp32_t         vbuf [H];
  logic [30:0]   maxabs, maxnext;

  // Running maximum including the element being accepted.
  always_comb begin
    maxnext = (cnt == '0) ? '0 : maxabs;
    if (in_data[30:0] > maxnext) maxnext = in_data[30:0];
  end

  assign in_ready = (state == S_LOAD);

  // Quantization of the buffered element cnt against the scale maxabs.
  fp32_t               e;
  logic [7:0]          ee, es, d;
  logic [NUM_W-1:0]    num;
  logic [DEN_W-1:0]    den;
  logic [DEN_W+1:0]    quo;
  logic [B-1:0]        qmag;
  logic signed [B-1:0] qcalc;

  always_comb begin
    e    = vbuf[cnt];
    ee   = e[30:23];
    es   = maxabs[30:23];
    d    = es - ee;
    num  = NUM_W'({1'b1, e[22:0]}) * NUM_W'(QMAX);
    den  = DEN_W'({1'b1, maxabs[22:0]}) << d[3:0];
    quo  = ((DEN_W+2)'(num) * 2 + (DEN_W+2)'(den)) / ((DEN_W+2)'(den) * 2);
    if (ee == 8'd0 || es == 8'd0 || ee > es || d > 8'd15) qmag = '0;
    else if (quo > (DEN_W+2)'(QMAX)) qmag = B'(QMAX);  // cannot happen for |v| <= s
    else qmag = B'(quo);
    qcalc = e[31] ? -$signed(qmag) : $signed(qmag);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_LOAD;
      cnt         <= '0;
      maxabs      <= '0;
      scale_valid <= 1'b0;
      scale       <= '0;
      q_valid     <= 1'b0;
      q_idx       <= '0;
      q_data      <= '0;
      q_last      <= 1'b0;
    end else begin
      scale_valid <= 1'b0;
      q_valid     <= 1'b0;
      q_last      <= 1'b0;
      unique case (state)
        S_LOAD: if (in_valid) begin
          vbuf[cnt] <= in_data;
          maxabs    <= maxnext;
          if (cnt == IW'(H - 1)) begin
            cnt         <= '0;
            state       <= S_EMIT;
            scale_valid <= 1'b1;
            scale       <= {1'b0, maxnext};
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_EMIT: begin
          q_valid <= 1'b1;
          q_idx   <= cnt;
          q_data  <= qcalc;
          q_last  <= (cnt == IW'(H - 1));
          if (cnt == IW'(H - 1)) begin
            cnt   <= '0;
            state <= S_LOAD;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end
endmodule
