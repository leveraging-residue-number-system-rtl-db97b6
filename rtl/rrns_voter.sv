// rrns_voter: redundant-RNS error detection and correction by group voting.
//
// The N output residues of one element are split into all G = C(N,K) groups
// of K residues. Each group is converted to a signed integer by its own CRT
// converter (clock 1). Then every group counts how many groups produced the
// same value; the first value reaching VOTE_MIN votes is taken (clock 2).
//   ok = 1          a value was accepted (no error, or a corrected error)
//   ok = 0          no value has enough votes: a detected, uncorrectable error
//   unanimous = 1   all G groups agreed (no residue error seen)
// With t = floor((N-K)/2) errors at most, the correct value is still produced
// by the C(N-t,K) groups that avoid every faulty residue, which is the default
// VOTE_MIN; two different values cannot both reach it while every group's
// range covers the output range. Setting VOTE_MIN = G/2 + 1 gives a strict
// majority rule instead, which with N = K+1 or K+2 only accepts error-free
// codewords. Grouping and CRT per group follow the paper; the threshold and
// the two-stage pipeline are this design's choices.
//
// Interface: in_valid/in_idx/res in; out_valid/out_idx/value/ok/unanimous
// two clocks later, one element per clock.
module rrns_voter
  import rns_pkg::*;
#(
  parameter moduli_t MODULI   = MODULI_6B,
  parameter int      N        = 6,
  parameter int      K        = 4,
  parameter int      RES_W    = 6,
  parameter int      H        = 128,
  parameter int      VOTE_MIN = default_vote_min(N, K),
  localparam int     IW       = $clog2(H),
  localparam int     G        = binom(N, K)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [IW-1:0]            in_idx,
  input  logic [N-1:0][RES_W-1:0]  res,
  output logic                     out_valid,
  output logic [IW-1:0]            out_idx,
  output logic signed [31:0]       value,
  output logic                     ok,
  output logic                     unanimous
);
  logic signed [31:0] gval   [G];
  logic signed [31:0] gval_q [G];
  logic               v_q;
  logic [IW-1:0]      idx_q;

  for (genvar g = 0; g < G; g++) begin : g_grp
    crt_converter #(
      .MODULI(MODULI), .N(N), .GROUP(group_mask(N, K, g)), .RES_W(RES_W)
    ) u_crt (
      .res(res),
      .y  (gval[g])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q   <= 1'b0;
      idx_q <= '0;
      for (int g = 0; g < G; g++) gval_q[g] <= '0;
    end else begin
      v_q   <= in_valid;
      idx_q <= in_idx;
      for (int g = 0; g < G; g++) gval_q[g] <= gval[g];
    end
  end

  // Vote.
  logic               found, all_same;
  logic signed [31:0] winner;
  int                 votes;

  always_comb begin
    found    = 1'b0;
    winner   = gval_q[0];
    all_same = 1'b1;
    votes    = 0;
    for (int g = 0; g < G; g++) begin
      votes = 0;
      for (int j = 0; j < G; j++) votes += int'(gval_q[j] == gval_q[g]);
      if (!found && votes >= VOTE_MIN) begin
        found  = 1'b1;
        winner = gval_q[g];
      end
      if (gval_q[g] != gval_q[0]) all_same = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      value     <= '0;
      ok        <= 1'b0;
      unanimous <= 1'b0;
    end else begin
      out_valid <= v_q;
      out_idx   <= idx_q;
      value     <= winner;
      ok        <= found;
      unanimous <= all_same;
    end
  end
endmodule
