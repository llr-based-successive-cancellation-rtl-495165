// tb_llr_bank: random test of one internal LLR memory bank (one tree level set of one path): lane-masked write, two combinational read ports.
//
// Random writes and reads at the default size (N = 1024, P = 64) are checked
// against a shadow array; a write is visible on the read ports from the next
// cycle on (1-cycle write latency, 0-cycle read latency).
module tb_llr_bank;
  localparam int N = 1024;
  localparam int P = 64;
  localparam int Q = 6;
  localparam int W = N / P;
  localparam int AW = $clog2(W);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [AW-1:0] wr_addr, rd_addr_a, rd_addr_b;
  logic [P-1:0] wr_mask;
  logic signed [Q-1:0] wr_data [P], rd_data_a [P], rd_data_b [P];
  logic signed [Q-1:0] shadow [W][P];
  int checks = 0, failures = 0;

  llr_bank #(.N(N), .P(P), .Q(Q)) dut (.clk, .wr_en, .wr_addr, .wr_mask, .wr_data,
    .rd_addr_a, .rd_addr_b, .rd_data_a, .rd_data_b);

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wr_en = 1'b1;
    wr_mask = '1;
    // fill every word first so the shadow is defined
    for (int w = 0; w < W; w++) begin
      wr_addr = AW'(w);
      for (int p = 0; p < P; p++) begin
        wr_data[p] = Q'($urandom);
        shadow[w][p] = wr_data[p];
      end
      @(posedge clk); #1;
    end
    for (int t = 0; t < 3000; t++) begin
      wr_en   = 1'($urandom);
      wr_addr = AW'($urandom);
      wr_mask = ($urandom % 3 == 0) ? P'({$urandom, $urandom}) : '1;
      for (int p = 0; p < P; p++) wr_data[p] = Q'($urandom);
      rd_addr_a = AW'($urandom);
      rd_addr_b = AW'($urandom);
      #1;
      for (int p = 0; p < P; p++) begin
        checks += 2;
        if (rd_data_a[p] != shadow[rd_addr_a][p]) failures++;
        if (rd_data_b[p] != shadow[rd_addr_b][p]) failures++;
      end
      @(posedge clk);
      if (wr_en) for (int p = 0; p < P; p++) if (wr_mask[p]) shadow[wr_addr][p] = wr_data[p];
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
