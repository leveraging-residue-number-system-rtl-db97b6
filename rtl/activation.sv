// activation: element-wise non-linear function on the FP32 MVM output.
//
// Three functions, selected per element:
//   sigmoid_en = 1   logistic sigmoid 1 / (1 + e^-y)
//   relu_en    = 1   ReLU max(0, y): for IEEE-754 data a test of the sign bit
//                    (negative values, including -0, become +0, out_clamped)
//   neither          identity, for layers whose non-linearity is done elsewhere
// sigmoid_en has priority over relu_en.
//
// The sigmoid is computed in fixed point. |y| is rounded to Q.12, and the
// result for |y| in [0, 16) is interpolated linearly in a 257-entry table of
// sigmoid(j/16) in Q.16. That table is computed at elaboration from $exp.
// Negative inputs use sigmoid(-y) = 1 - sigmoid(y). |y| >= 16 saturates to
// 1 or 0. The Q.16 result is made FP32 by int_to_fp32 followed by an exponent
// decrement of 16 (exact). The absolute error is below 1e-4: about 5e-5 from
// the interpolation and 1.5e-5 from rounding. NaN inputs are not handled.
//
// One register stage; a TAG_W-bit tag and the element index travel along.
// The paper applies f digitally in floating point after the rescaling and
// names ReLU and sigmoid; the table method and its precision are this
// design's choice.
module activation
  import rns_pkg::*;
#(
  parameter int  H     = 128,
  parameter int  TAG_W = 2,
  localparam int IW    = $clog2(H)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             relu_en,
  input  logic             sigmoid_en,
  input  logic             in_valid,
  input  logic [IW-1:0]    in_idx,
  input  fp32_t            in_data,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [IW-1:0]    out_idx,
  output fp32_t            out_data,
  output logic [TAG_W-1:0] out_tag,
  output logic             out_clamped
);
  localparam int SEG = 256;                 // table segments over [0, 16)
  localparam int ONE = 1 << 16;             // 1.0 in Q.16

  typedef logic [SEG:0][16:0] table_t;

  // Entry j = round(sigmoid(j / 16) * 2^16).
  function automatic table_t sigmoid_table();
    table_t t;
    for (int j = 0; j <= SEG; j++) begin
      real x;
      x    = real'(j) / 16.0;
      t[j] = 17'($rtoi(65536.0 / (1.0 + $exp(-x)) + 0.5));
    end
    return t;
  endfunction

  localparam table_t TABLE = sigmoid_table();

  // |y| in Q.12, or saturation when |y| >= 16.
  logic [7:0]  ex;
  logic [23:0] mant;
  logic [31:0] xfix;
  logic        sat;
  logic [8:0]  seg;
  logic [7:0]  frac;
  logic [16:0] t0, t1;
  logic [25:0] slope;
  logic [16:0] ypos;
  logic signed [31:0] yq;
  fp32_t       yf, sig;

  always_comb begin
    ex   = in_data[30:23];
    mant = {1'b1, in_data[22:0]};
    sat  = (ex >= 8'd131);
    xfix = '0;
    // |y| * 2^12 = mant * 2^(ex - 138); ex <= 130 gives a right shift >= 8.
    if (ex != 8'd0 && !sat && (8'd138 - ex) < 8'd32)
      xfix = (32'(mant) + (32'd1 << (8'd137 - ex))) >> (8'd138 - ex);
    seg   = xfix[16:8];
    frac  = xfix[7:0];
    if (xfix[16]) begin                     // rounded up to exactly 16.0
      seg  = 9'(SEG);
      frac = '0;
    end
    t0    = TABLE[seg];
    t1    = (seg == 9'(SEG)) ? t0 : TABLE[seg + 9'd1];
    slope = 26'(t1 - t0) * 26'(frac) + 26'd128;
    // Bits above 16 of xfix are zero for ex <= 130; they saturate otherwise.
    ypos  = (sat || (|xfix[31:17])) ? 17'(ONE) : t0 + 17'(slope >> 8);
    yq    = in_data[31] ? 32'(ONE) - 32'(ypos) : 32'(ypos);
  end

  int_to_fp32 u_cvt (.i(yq), .f(yf));

  assign sig = (yf == '0) ? '0 : {yf[31], yf[30:23] - 8'd16, yf[22:0]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_idx     <= '0;
      out_data    <= '0;
      out_tag     <= '0;
      out_clamped <= 1'b0;
    end else begin
      out_valid   <= in_valid;
      out_idx     <= in_idx;
      out_tag     <= in_tag;
      out_clamped <= in_valid && !sigmoid_en && relu_en && in_data[31];
      if (sigmoid_en)                 out_data <= sig;
      else if (relu_en && in_data[31]) out_data <= '0;
      else                            out_data <= in_data;
    end
  end
endmodule
