// presto_csr: host-visible control registers of the accelerator.
//
// The host runtime programs one job descriptor per processing element (PE) and starts it.
// Each PE owns eight 64-bit registers at word address 8*pe + r:
//   r = 0  MODE   job_mode_e in bits [2:0]
//   r = 1  SRC    first DRAM word to read
//   r = 2  DST    first DRAM word to write
//   r = 3  N_IN   number of words to read
//   r = 4  P0     kernel parameter 0
//   r = 5  P1     kernel parameter 1
//   r = 6  CTRL   write bit 0 = 1: start the job (ignored while the PE is busy)
//                 read: bit 0 busy, bit 1 done (sticky until the next start), bit 2 error
//   r = 7  (reserved, reads 0)
// PE order: decoder PEs, then Bucketize, SigridHash and Log PEs.
//
// Timing: a write takes effect at the clock edge where cfg_we is high; start pulses for one
// cycle after a CTRL write. Reads are combinational. The paper only says the FPGA is
// managed through the vendor runtime; this register map is this design's own.
module presto_csr
  import presto_pkg::*;
#(
  parameter int unsigned NPE = 7
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [$clog2(NPE)+2:0] cfg_addr,
  input  word_t       cfg_wdata,
  output word_t       cfg_rdata,
  output job_t        job   [NPE],
  output logic        start [NPE],
  input  logic        busy  [NPE],
  input  logic        done  [NPE],
  input  logic        err   [NPE]
);
  localparam int unsigned PW = $clog2(NPE) > 0 ? $clog2(NPE) : 1;

  logic done_q [NPE];
  logic err_q  [NPE];

  wire [2:0]    reg_sel = cfg_addr[2:0];
  wire [PW-1:0] pe_sel  = PW'(cfg_addr >> 3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPE; p++) begin
        job[p]    <= '0;
        start[p]  <= 1'b0;
        done_q[p] <= 1'b0;
        err_q[p]  <= 1'b0;
      end
    end else begin
      for (int p = 0; p < NPE; p++) begin
        start[p] <= 1'b0;
        if (done[p]) begin
          done_q[p] <= 1'b1;
          err_q[p]  <= err[p];
        end
        if (cfg_we && (cfg_addr >> 3) == ($bits(cfg_addr))'(p)) begin
          case (reg_sel)
            3'd0: job[p].mode <= job_mode_e'(cfg_wdata[2:0]);
            3'd1: job[p].src  <= cfg_wdata[ADDR_W-1:0];
            3'd2: job[p].dst  <= cfg_wdata[ADDR_W-1:0];
            3'd3: job[p].n_in <= cfg_wdata[CNT_W-1:0];
            3'd4: job[p].p0   <= cfg_wdata;
            3'd5: job[p].p1   <= cfg_wdata;
            3'd6: if (cfg_wdata[0] && !busy[p]) begin
              start[p]  <= 1'b1;
              done_q[p] <= 1'b0;
              err_q[p]  <= 1'b0;
            end
            default: ;
          endcase
        end
      end
    end
  end

  always_comb begin
    cfg_rdata = '0;
    if (32'(pe_sel) < NPE) begin
      case (reg_sel)
        3'd0: cfg_rdata = WORD_W'(job[pe_sel].mode);
        3'd1: cfg_rdata = WORD_W'(job[pe_sel].src);
        3'd2: cfg_rdata = WORD_W'(job[pe_sel].dst);
        3'd3: cfg_rdata = WORD_W'(job[pe_sel].n_in);
        3'd4: cfg_rdata = job[pe_sel].p0;
        3'd5: cfg_rdata = job[pe_sel].p1;
        3'd6: cfg_rdata = WORD_W'({err_q[pe_sel], done_q[pe_sel], busy[pe_sel]});
        default: cfg_rdata = '0;
      endcase
    end
  end
endmodule
