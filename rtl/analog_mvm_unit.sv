// analog_mvm_unit: behavioural model of one analog MVM unit (one modulus).
//
// This is a behavioural model of an analog block, not synthesizable logic. It
// stands for the weight DACs (h^2), the input DACs (h), the h x h analog
// multiply-accumulate array, the analog modulo and the h output ADCs that
// serve one modulus m. It follows the photonic variant of the analog modulo:
// each product w*x is encoded as a phase step of w*x*2*pi/m, the phases add
// along a row and wrap at 2*pi, so the accumulated phase is
// |sum_j w_kj x_j|_m * 2*pi/m. The ADC samples that phase with m levels and
// returns the output residue in [0, m). The model computes in real numbers to
// mirror this; with ideal components the result is exact.
//
// Interface and timing (this design's choice; the paper leaves the digital
// interface of the analog units open):
//   w_we/w_row/w_col/w_res  write one weight residue into the weight DAC array
//   x_we/x_idx/x_res        write one input residue into the input DAC register
//   start                   run one MVM on the held weights and inputs
//   y_valid/y_res           LATENCY clocks after start, the h ADC outputs
//   fault                   if fault.en and fault.unit_mask[UNIT] when start
//                           is seen, fault.offset is added (mod m) to output row
//                           fault.row: a stand-in for analog noise that lets
//                           the redundant-residue error handling be exercised.
module analog_mvm_unit
  import rns_pkg::*;
#(
  parameter int  H       = 128,
  parameter int  MODULUS = 63,
  parameter int  UNIT    = 0,
  parameter int  LATENCY = 1,
  localparam int IW      = $clog2(H),
  localparam int RES_W   = bits_for(longint'(MODULUS))
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       w_we,
  input  logic [IW-1:0]              w_row,
  input  logic [IW-1:0]              w_col,
  input  logic [RES_W-1:0]           w_res,
  input  logic                       x_we,
  input  logic [IW-1:0]              x_idx,
  input  logic [RES_W-1:0]           x_res,
  input  logic                       start,
  input  analog_fault_t              fault,
  output logic                       y_valid,
  output logic [H-1:0][RES_W-1:0]    y_res
);
  localparam real TWO_PI = 6.283185307179586;
  localparam real STEP   = TWO_PI / real'(MODULUS);

  logic [RES_W-1:0] wdac [H][H];
  logic [RES_W-1:0] xdac [H];

  always_ff @(posedge clk) begin
    if (w_we) wdac[w_row][w_col] <= w_res;
    if (x_we) xdac[x_idx] <= x_res;
  end

  // One row: accumulate phase, wrap at 2*pi, digitize with MODULUS levels.
  function automatic logic [RES_W-1:0] row_residue(input logic [IW-1:0] k);
    real phi = 0.0;
    int  code;
    for (int j = 0; j < H; j++)
      phi = phi + STEP * real'(int'(wdac[k][j]) * int'(xdac[j]));
    phi  = phi - TWO_PI * $floor(phi / TWO_PI);
    code = int'($floor(phi / STEP + 0.5)) % MODULUS;
    return RES_W'(code);
  endfunction

  // All h rows, with the injected error applied.
  function automatic logic [H-1:0][RES_W-1:0] mvm(input analog_fault_t f);
    logic [H-1:0][RES_W-1:0] y;
    for (int k = 0; k < H; k++) begin
      y[k] = row_residue(IW'(k));
      if (f.en && f.unit_mask[UNIT] && int'(f.row) == k)
        y[k] = RES_W'((int'(y[k]) + int'(f.offset)) % MODULUS);
    end
    return y;
  endfunction

  logic [LATENCY-1:0]      vpipe;
  logic [H-1:0][RES_W-1:0] ypipe [LATENCY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe <= '0;
      for (int l = 0; l < LATENCY; l++) ypipe[l] <= '0;
    end else begin
      vpipe <= LATENCY'({vpipe, start});
      if (start) ypipe[0] <= mvm(fault);
      for (int l = 1; l < LATENCY; l++) ypipe[l] <= ypipe[l-1];
    end
  end

  assign y_valid = vpipe[LATENCY-1];
  assign y_res   = ypipe[LATENCY-1];
endmodule
