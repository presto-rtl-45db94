// bucket_buffer: on-chip memory holding the bucket boundaries of one Bucketize unit.
//
// A simple dual-port RAM of DEPTH words of WIDTH bits: one write port, filled from DRAM
// before a feature column is bucketized, and one synchronous read port used by the binary
// search (address in cycle t, data in cycle t+1). The paper names the bucket buffer and
// feeds the Bucketize unit from it; its depth follows the largest bucket size the paper
// evaluates (4096 boundaries, RM5). The one-cycle read latency (a block or UltraRAM) and the
// 32-bit boundary width are this design's choices.
module bucket_buffer #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned WIDTH = 32
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
