// mem_model: behavioural model of the accelerator's DRAM (testbench only, not synthesizable).
//
// One word array shared by NCH independent channels, each a read channel (request,
// in-order response after LAT cycles) and a write channel, as defined in presto_pkg.
// When STALL is set, each channel's request-ready lines are dropped at random (one cycle
// in four) to exercise back-pressure. Writes and reads are applied at the clock edge where
// the request is accepted; requests are ignored while rst_n is low. The array `mem` is
// read and written directly by testbenches.
module mem_model
  import presto_pkg::*;
#(
  parameter int unsigned NCH   = 1,
  parameter int unsigned WORDS = 65536,
  parameter int unsigned LAT   = 8,
  parameter bit          STALL = 1'b1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  rd_req_t rd_req       [NCH],
  output logic    rd_req_ready [NCH],
  output rd_rsp_t rd_rsp       [NCH],
  input  wr_req_t wr_req       [NCH],
  output logic    wr_req_ready [NCH]
);
  word_t mem [WORDS];

  typedef struct { longint due; word_t d; } pend_t;
  pend_t  q [NCH][$];
  longint cyc = 0;
  longint n_stall = 0;   // cycles a valid request was held off

  initial begin
    for (int c = 0; c < NCH; c++) begin
      rd_req_ready[c] = 1'b1;
      wr_req_ready[c] = 1'b1;
      rd_rsp[c]       = '0;
    end
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int c = 0; c < NCH; c++) begin
      if (rst_n && rd_req[c].valid && rd_req_ready[c]) begin
        pend_t p;
        p.due = cyc + LAT;
        p.d   = mem[rd_req[c].addr % WORDS];
        q[c].push_back(p);
      end
      if (rst_n && ((rd_req[c].valid && !rd_req_ready[c]) || (wr_req[c].valid && !wr_req_ready[c])))
        n_stall <= n_stall + 1;
      if (rst_n && wr_req[c].valid && wr_req_ready[c]) mem[wr_req[c].addr % WORDS] <= wr_req[c].data;
      if (q[c].size() > 0 && q[c][0].due <= cyc) begin
        rd_rsp[c].valid <= 1'b1;
        rd_rsp[c].data  <= q[c][0].d;
        void'(q[c].pop_front());
      end else begin
        rd_rsp[c].valid <= 1'b0;
      end
      rd_req_ready[c] <= STALL ? (($urandom % 4) != 0) : 1'b1;
      wr_req_ready[c] <= STALL ? (($urandom % 4) != 0) : 1'b1;
    end
  end
endmodule
