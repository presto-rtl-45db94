// presto_accel: the in-storage RecSys preprocessing accelerator (top level).
//
// The accelerator lives on the FPGA of a computational SSD, next to the flash that holds
// the raw feature columns as Parquet files. Raw pages are copied peer-to-peer from the SSD
// into the FPGA's DRAM; the accelerator then turns them into train-ready tensors in that
// DRAM, from where the host ships them to the GPUs. It has three kinds of unit:
//   - a decoder unit (N_DEC decoder PEs) that decodes Parquet pages into value columns,
//   - a feature generation unit (N_BKT Bucketize PEs, each with its bucket buffer) that
//     turns dense columns into sparse bucket-id columns,
//   - a feature normalisation unit (N_SH SigridHash PEs and N_LOG Log PEs) that maps
//     sparse ids into embedding-table range and log-scales dense values.
// Every PE has its own DRAM read and write channel and its own double-buffered feature
// buffers, so different features are processed at the same time (inter-feature
// parallelism) and, within a feature, fetching overlaps computing (intra-feature).
//
// Ports: the control register bus (see presto_csr; PE p at word addresses 8p..8p+7, PEs
// numbered decoders first, then Bucketize, SigridHash, Log), per-PE DRAM channels
// rd_req/rd_req_ready/rd_rsp and wr_req/wr_req_ready (see presto_pkg), and irq, a
// one-cycle pulse whenever a PE finishes a job (the host then reads the CTRL registers to
// see which). DRAM, its controller and the PCIe peer-to-peer path are
// outside this module.
//
// The unit structure follows the paper's accelerator figure. The PE counts are not given
// in the paper; the defaults (1, 2, 2, 2) are this design's choice. Lint reports rst_n as
// used both synchronously and asynchronously: the synchronous use is the `disable iff`
// of the assertions inside the PEs.
module presto_accel
  import presto_pkg::*;
#(
  parameter int unsigned N_DEC      = 1,
  parameter int unsigned N_BKT      = 2,
  parameter int unsigned N_SH       = 2,
  parameter int unsigned N_LOG      = 2,
  parameter int unsigned BUF_DEPTH  = 512,
  parameter int unsigned BKT_DEPTH  = 4096,
  parameter int unsigned DICT_DEPTH = 4096,
  parameter int unsigned LOG_FB     = 24,
  localparam int unsigned NPE       = N_DEC + N_BKT + N_SH + N_LOG
) (
  input  logic    clk,
  input  logic    rst_n,
  // control registers
  input  logic    cfg_we,
  input  logic [$clog2(NPE)+2:0] cfg_addr,
  input  word_t   cfg_wdata,
  output word_t   cfg_rdata,
  output logic    irq,
  // DRAM channels, one read and one write channel per PE
  output rd_req_t rd_req       [NPE],
  input  logic    rd_req_ready [NPE],
  input  rd_rsp_t rd_rsp       [NPE],
  output wr_req_t wr_req       [NPE],
  input  logic    wr_req_ready [NPE]
);
  job_t job   [NPE];
  logic start [NPE];
  logic busy  [NPE];
  logic done  [NPE];
  logic err   [NPE];

  presto_csr #(.NPE(NPE)) u_csr (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .job, .start, .busy, .done, .err
  );

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    localparam pe_kind_e K = (p < N_DEC)               ? PE_DECODE :
                             (p < N_DEC + N_BKT)       ? PE_BUCKETIZE :
                             (p < N_DEC + N_BKT + N_SH) ? PE_SIGRID : PE_LOG;
    feature_pe #(
      .KIND(K), .BUF_DEPTH(BUF_DEPTH), .BKT_DEPTH(BKT_DEPTH),
      .DICT_DEPTH(DICT_DEPTH), .LOG_FB(LOG_FB)
    ) u_pe (
      .clk, .rst_n,
      .job(job[p]), .start(start[p]), .busy(busy[p]), .done(done[p]), .err(err[p]),
      .rd_req(rd_req[p]), .rd_req_ready(rd_req_ready[p]), .rd_rsp(rd_rsp[p]),
      .wr_req(wr_req[p]), .wr_req_ready(wr_req_ready[p])
    );
  end

  always_comb begin
    irq = 1'b0;
    for (int p = 0; p < NPE; p++) irq |= done[p];
  end
endmodule
