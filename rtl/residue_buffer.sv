// residue_buffer: holds the ADC output residues of all moduli after an MVM.
//
// When cap is high, the h output residues of each of the N analog units are
// stored. The reverse converter then reads one output element per clock:
// rd_res returns the N residues of element rd_idx, one registered clock after
// the request (rd_valid follows rd_en by one clock, with rd_idx echoed as
// rd_idx_q). Capturing while reading is allowed; the read then sees the old
// contents. The paper draws one such buffer per modulus between the ADCs and
// the reverse conversion; its organisation here is this design's choice.
module residue_buffer
  import rns_pkg::*;
#(
  parameter int  H     = 128,
  parameter int  N     = 6,
  parameter int  RES_W = 6,
  localparam int IW    = $clog2(H)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            cap,
  input  logic [N-1:0][H-1:0][RES_W-1:0]  cap_res,
  input  logic                            rd_en,
  input  logic [IW-1:0]                   rd_idx,
  output logic                            rd_valid,
  output logic [IW-1:0]                   rd_idx_q,
  output logic [N-1:0][RES_W-1:0]         rd_res
);
  logic [N-1:0][H-1:0][RES_W-1:0] store;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      store    <= '0;
      rd_valid <= 1'b0;
      rd_idx_q <= '0;
      rd_res   <= '0;
    end else begin
      if (cap) store <= cap_res;
      rd_valid <= rd_en;
      if (rd_en) begin
        rd_idx_q <= rd_idx;
        for (int i = 0; i < N; i++) rd_res[i] <= store[i][rd_idx];
      end
    end
  end
endmodule
