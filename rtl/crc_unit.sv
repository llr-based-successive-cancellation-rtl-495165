// crc_unit: per-path bit-serial CRC check for CRC-aided list decoding.
//
// L registers of CRC_LEN bits, one per path slot, cleared by `init` before a
// codeword. Every decided information bit u of a path is shifted into that
// path's register as a bit-serial polynomial division by the generator
// (MSB-first: feedback = reg[MSB] xor u; reg = (reg << 1) xor (feedback ?
// poly : 0)). The code carries the CRC remainder of its first information
// bits in its last CRC_LEN information bits, so after the whole codeword a
// correct path leaves a zero register: `pass[l]` = register l is zero.
// On an information-bit commit slot s continues from the register of its
// parent src[s] (the L x L crossbar copy), on a re-sort it takes src[s]
// unchanged, and frozen bits leave the registers alone. The default
// polynomial is the CRC-8 x^8+x^7+x^6+x^4+x^2+1 that the paper pairs with
// list size 4; the zero-remainder check over all information bits is this
// design's reading of "declares which paths pass the CRC".
module crc_unit #(
  parameter int                  L        = 4,
  parameter int                  CRC_LEN  = 8,
  parameter logic [CRC_LEN-1:0]  CRC_POLY = 8'hD5,
  localparam int LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic                  clk,
  input  logic                  init,
  input  scl_pkg::commit_kind_e commit_kind,
  input  logic [LW-1:0]         commit_src [L],
  input  logic [L-1:0]          commit_u,
  output logic [L-1:0]          pass
);
  import scl_pkg::*;

  logic [CRC_LEN-1:0] crc [L];

  function automatic logic [CRC_LEN-1:0] crc_step(input logic [CRC_LEN-1:0] c, input logic u);
    logic fb;
    fb = c[CRC_LEN-1] ^ u;
    return (c << 1) ^ (fb ? CRC_POLY : '0);
  endfunction

  always_ff @(posedge clk) begin
    if (init) begin
      for (int l = 0; l < L; l++) crc[l] <= '0;
    end else begin
      for (int s = 0; s < L; s++) begin
        if (commit_kind == CM_INFO)   crc[s] <= crc_step(crc[commit_src[s]], commit_u[s]);
        if (commit_kind == CM_RESORT) crc[s] <= crc[commit_src[s]];
      end
    end
  end

  always_comb begin
    for (int l = 0; l < L; l++) pass[l] = (crc[l] == '0);
  end
endmodule
