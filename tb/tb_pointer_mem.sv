// tb_pointer_mem: the LLR memory pointers under random writes and commits.
//
// N = 1024 (10 tree levels), L = 4. The test models the data, not the
// pointer table: every write of path l at level k stores a new unique tag in
// bank l, level k, and path l now "owns" that tag at level k. An information
// or re-sort commit makes slot s see what path src[s] saw. After every cycle
// the tag in bank rd_bank[l] at level k must be the tag path l is meant to
// see (for every l and k), except where another path has since overwritten
// that bank level (the decoding schedule rewrites a level before reading it,
// so such entries are never read). init makes every path see its own bank.
// Pointer updates take effect the next cycle; the lookup is combinational.
module tb_pointer_mem;
  import scl_pkg::*;
  localparam int N = 1024;
  localparam int L = 4;
  localparam int NL = $clog2(N);
  localparam int LW = $clog2(L);
  localparam int KW = $clog2(NL + 1);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic init, wr_en;
  logic [KW-1:0] rd_level, wr_level;
  logic [LW-1:0] rd_bank [L], commit_src [L];
  commit_kind_e commit_kind;
  int bank_tag [L][NL];   // tag stored in bank b at level k
  int view [L][NL];       // tag path l should read at level k, -1 = clobbered
  int nv [L][NL];
  int checks = 0, failures = 0, tag = 1;

  pointer_mem #(.N(N), .L(L)) dut (.clk, .init, .rd_level, .rd_bank, .wr_en, .wr_level,
                                   .commit_kind, .commit_src);

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    init = 1'b0; wr_en = 1'b0; commit_kind = CM_NONE; wr_level = '0; rd_level = '0;
    for (int run = 0; run < 20; run++) begin
      init = 1'b1;
      @(posedge clk); #1;
      init = 1'b0;
      for (int b = 0; b < L; b++)
        for (int k = 0; k < NL; k++) begin bank_tag[b][k] = tag; view[b][k] = tag; tag++; end
      for (int t = 0; t < 400; t++) begin
        automatic int r = $urandom % 8;
        nv = view;
        wr_en = 1'b0; commit_kind = CM_NONE;
        if (r < 5) begin
          automatic int k = $urandom % NL;
          wr_en = 1'b1; wr_level = KW'(k);
          for (int l = 0; l < L; l++) begin
            for (int s = 0; s < L; s++)
              if (view[s][k] == bank_tag[l][k]) nv[s][k] = -1;
            bank_tag[l][k] = tag;
            nv[l][k] = tag;
            tag++;
          end
        end else if (r < 7) begin
          commit_kind = (r == 5) ? CM_INFO : CM_RESORT;
          for (int s = 0; s < L; s++) begin
            commit_src[s] = LW'($urandom);
            for (int k = 0; k < NL; k++) nv[s][k] = view[commit_src[s]][k];
          end
        end else begin
          commit_kind = CM_FROZEN;  // no effect on the pointers
        end
        @(posedge clk); #1;
        view = nv;
        wr_en = 1'b0; commit_kind = CM_NONE;
        for (int k = 0; k < NL; k++) begin
          rd_level = KW'(k);
          #1;
          for (int l = 0; l < L; l++) if (view[l][k] != -1) begin
            checks++;
            if (bank_tag[rd_bank[l]][k] != view[l][k]) failures++;
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
