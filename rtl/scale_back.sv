// scale_back: converts the signed integer MVM outputs back to FP32.
//
// Holds the h+1 FP32 scale factors of the current operation: s_in for the
// input vector and s_w[k] for each weight row k. Since the quantizer maps
// v/s onto integers in [-QMAX, QMAX] (QMAX = 2^(B-1)-1), output k is
//     Y[k] = Y_SI[k] * s_in * s_w[k] / QMAX^2 .
// The product s_in * s_w[k] and the paper's rescaling follow the paper; the
// 1/QMAX^2 factor is this design's completion of it (the paper leaves the
// quantization step out of its formula).
//
// Pipeline, one element per clock, three clocks of latency:
//   1: Y_SI -> FP32, and s_in * s_w[idx]
//   2: product of the two
//   3: times the constant 1/QMAX^2
// A TAG_W-bit tag (status flags of the element) travels with it.
module scale_back
  import rns_pkg::*;
#(
  parameter int  H     = 128,
  parameter int  B     = 6,
  parameter int  TAG_W = 2,
  localparam int IW    = $clog2(H)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sw_we,
  input  logic [IW-1:0]      sw_idx,
  input  logic               sin_we,
  input  fp32_t              s_data,
  input  logic               in_valid,
  input  logic [IW-1:0]      in_idx,
  input  logic signed [31:0] in_y,
  input  logic [TAG_W-1:0]   in_tag,
  output logic               out_valid,
  output logic [IW-1:0]      out_idx,
  output fp32_t              out_data,
  output logic [TAG_W-1:0]   out_tag
);
  localparam longint unsigned QMAX = (64'd1 << (B - 1)) - 1;
  localparam fp32_t RQ2 = recip_fp32(QMAX * QMAX);

  fp32_t s_in;
  fp32_t s_w [H];

  always_ff @(posedge clk) begin
    if (sw_we)  s_w[sw_idx] <= s_data;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      s_in <= '0;
    else if (sin_we) s_in <= s_data;
  end

  fp32_t yf, sc, t, o;
  fp32_t yf_q, sc_q, t_q;
  logic [2:0]         v;
  logic [IW-1:0]      idx1, idx2;
  logic [TAG_W-1:0]   tag1, tag2;

  int_to_fp32 u_cvt (.i(in_y), .f(yf));
  fp32_mul    u_m1  (.a(s_in), .b(s_w[in_idx]), .p(sc));
  fp32_mul    u_m2  (.a(yf_q), .b(sc_q), .p(t));
  fp32_mul    u_m3  (.a(t_q),  .b(RQ2),  .p(o));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      {yf_q, sc_q, t_q, out_data} <= '0;
      {idx1, idx2, out_idx} <= '0;
      {tag1, tag2, out_tag} <= '0;
    end else begin
      v        <= {v[1:0], in_valid};
      yf_q     <= yf;
      sc_q     <= sc;
      idx1     <= in_idx;
      tag1     <= in_tag;
      t_q      <= t;
      idx2     <= idx1;
      tag2     <= tag1;
      out_data <= o;
      out_idx  <= idx2;
      out_tag  <= tag2;
    end
  end
  assign out_valid = v[2];
endmodule
