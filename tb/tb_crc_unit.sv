// tb_crc_unit: per-path CRC check under random path commits.
//
// Default CRC-8 (x^8+x^7+x^6+x^4+x^2+1), L = 4. Each run starts with init and
// applies random information commits (slot s continues path src[s] with bit
// u[s]) and re-sorts (slot s copies path src[s]); the information bits of
// each path are tracked behaviourally and pass[l] must equal "the bits seen
// so far are divisible by the generator" (1-cycle latency). Every second run
// drives path 0 with a message followed by its correct CRC, so pass[0] must
// be 1 at the end, and a single flipped bit must make it 0.
module tb_crc_unit;
  import scl_pkg::*;
  import scl_ref_pkg::*;
  localparam int L = 4;
  localparam int R = 8;
  localparam int unsigned POLY = 32'hD5;
  localparam int LW = $clog2(L);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic init;
  commit_kind_e commit_kind;
  logic [LW-1:0] commit_src [L];
  logic [L-1:0] commit_u, pass;
  bitq_t info [L], nxt [L];
  int checks = 0, failures = 0;

  crc_unit #(.L(L), .CRC_LEN(R), .CRC_POLY(8'hD5)) dut (.clk, .init, .commit_kind, .commit_src, .commit_u, .pass);

  function automatic bit divisible(bitq_t b);
    bitq_t rem = crc_remainder(b, R, POLY);
    foreach (rem[j]) if (rem[j]) return 0;
    return 1;
  endfunction

  task automatic commit(commit_kind_e k, logic [LW-1:0] src [L], logic [L-1:0] u);
    commit_kind = k;
    commit_src  = src;
    commit_u    = u;
    for (int s = 0; s < L; s++) begin
      nxt[s] = info[src[s]];
      if (k == CM_INFO) nxt[s].push_back(u[s]);
    end
    @(posedge clk); #1;
    info = nxt;
    commit_kind = CM_NONE;
    for (int s = 0; s < L; s++) begin
      checks++;
      if (pass[s] != divisible(info[s])) failures++;
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    commit_kind = CM_NONE; init = 1'b0;
    for (int run = 0; run < 40; run++) begin
      automatic logic [LW-1:0] src [L];
      automatic logic [L-1:0] u;
      automatic bitq_t msg, rem;
      init = 1'b1;
      @(posedge clk); #1;
      init = 1'b0;
      for (int s = 0; s < L; s++) info[s] = {};
      if (run % 2 == 1) begin
        for (int j = 0; j < 40; j++) msg.push_back(1'($urandom));
        rem = crc_remainder(msg, R, POLY);
        foreach (rem[j]) msg.push_back(rem[j]);
        if (run % 4 == 3) msg[$urandom % msg.size()] ^= 1'b1;
        foreach (msg[j]) begin
          for (int s = 0; s < L; s++) begin src[s] = LW'(s); u[s] = (s == 0) ? msg[j] : 1'($urandom); end
          commit(CM_INFO, src, u);
        end
        checks++;
        if (pass[0] != (run % 4 == 1)) failures++;
      end else begin
        for (int j = 0; j < 60; j++) begin
          for (int s = 0; s < L; s++) begin src[s] = LW'($urandom); u[s] = 1'($urandom); end
          commit(($urandom % 4 == 0) ? CM_RESORT : CM_INFO, src, u);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
