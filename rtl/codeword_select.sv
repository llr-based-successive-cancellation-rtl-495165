// codeword_select: final choice of the decoded path.
//
// Among the active path slots it picks the one with the smallest path
// metric (the most likely path). With crc_en set, only slots whose CRC check
// passes are considered; if none passes, all active slots are (this fallback
// is this design's choice). Equal metrics go to the lower slot index.
// Combinational.
module codeword_select #(
  parameter int L = 4,
  parameter int M = 8,
  localparam int LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic [M-1:0]  pm [L],
  input  logic [L-1:0]  valid,
  input  logic [L-1:0]  pass,
  input  logic          crc_en,
  output logic [LW-1:0] sel
);
  logic [L-1:0] elig;
  logic         have, found_pass;
  logic [M-1:0] best;

  always_comb begin
    found_pass = |(valid & pass);
    elig       = (crc_en && found_pass) ? (valid & pass) : valid;
    sel        = '0;
    best       = '1;
    have       = 1'b0;
    for (int l = 0; l < L; l++) begin
      if (elig[l] && (!have || pm[l] < best)) begin
        sel  = LW'(l);
        best = pm[l];
        have = 1'b1;
      end
    end
  end
endmodule
