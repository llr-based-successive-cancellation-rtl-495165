// channel_llr_mem: the single copy of the N channel LLRs.
//
// N/P words of P Q-bit LLRs, built from registers. Word w holds channel
// LLRs w*P .. w*P+P-1. There is one write port, used to load a codeword
// word by word before decoding, and two combinational read ports so that
// all P PEs of a core can fetch both operands in one cycle. A write is
// visible to reads from the next clock edge. Contents are not reset.
// Size, word width and the two read ports follow the paper; the load
// interface (address + data + enable, one word per cycle) is this design's.
module channel_llr_mem #(
  parameter int N = 1024,
  parameter int P = 64,
  parameter int Q = 6,
  localparam int W  = N / P,
  localparam int AW = (W > 1) ? $clog2(W) : 1
) (
  input  logic                clk,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_addr,
  input  logic signed [Q-1:0] wr_data   [P],
  input  logic [AW-1:0]       rd_addr_a,
  input  logic [AW-1:0]       rd_addr_b,
  output logic signed [Q-1:0] rd_data_a [P],
  output logic signed [Q-1:0] rd_data_b [P]
);
  logic signed [Q-1:0] mem [W][P];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  assign rd_data_a = mem[rd_addr_a];
  assign rd_data_b = mem[rd_addr_b];
endmodule
