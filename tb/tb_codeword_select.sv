// tb_codeword_select: choice of the output path.
//
// L = 4, M = 8. Random metrics (small ranges for ties), valid flags (path 0
// always valid, as in the decoder) and CRC flags. Expected: without crc_en
// the valid path with the smallest metric; with crc_en the smallest-metric
// valid path among those that pass the CRC, or among all valid paths when
// none passes; the lower slot on equal metrics. Combinational.
module tb_codeword_select;
  localparam int L = 4;
  localparam int M = 8;
  logic [M-1:0] pm [L];
  logic [L-1:0] valid, pass;
  logic crc_en;
  logic [1:0] sel;
  int checks = 0, failures = 0;

  codeword_select #(.L(L), .M(M)) dut (.pm, .valid, .pass, .crc_en, .sel);

  initial begin
    #10000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      automatic int best = -1;
      automatic bit any_pass = 0;
      for (int l = 0; l < L; l++) pm[l] = M'((t % 2 == 0) ? $urandom % 4 : $urandom);
      valid  = L'($urandom) | L'(1);
      pass   = L'($urandom);
      crc_en = 1'($urandom);
      for (int l = 0; l < L; l++) if (valid[l] && pass[l]) any_pass = 1;
      for (int l = 0; l < L; l++)
        if (valid[l] && (!crc_en || !any_pass || pass[l]))
          if (best < 0 || pm[l] < pm[best]) best = l;
      #1;
      checks++;
      if (int'(sel) != best) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
