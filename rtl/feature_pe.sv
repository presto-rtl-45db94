// feature_pe: one processing element of the accelerator.
//
// A PE serves one feature column at a time. It reads n_in consecutive 64-bit words from
// DRAM starting at src, streams them through an input feature buffer, its kernel and an
// output feature buffer, and writes the kernel's results to consecutive words from dst.
// Both feature buffers are double-buffered (feature_buffer), so the DRAM fetch of the next
// chunk overlaps with the transformation of the current one, and the write-back of one
// chunk with the production of the next. Each PE has its own DRAM read and write channel,
// so PEs working on different features run in parallel (inter-feature parallelism).
//
// KIND selects the kernel: the Parquet decoder, the Bucketize unit with its bucket buffer,
// the SigridHash unit or the Log unit. The job descriptor (job_t) gives the mode and two
// kernel parameters; see each kernel for their meaning.
//
// Reader: it issues a read only while its outstanding requests are fewer than the free
// slots of the input buffer, so read data, which has no back-pressure, always has room.
// The final word read is flagged `last`. Writer: pops the output buffer into write
// requests. The job is done when all words were read, both buffers are empty, the kernel
// is idle and the last write was accepted; `done` then pulses for one cycle. A job with
// n_in = 0 finishes at once without starting the kernel. Since a
// kernel need not output as many words as it reads (decoder, table loads), the output
// buffer is flushed once reading and the kernel have finished.
//
// Handshake: start is taken when busy is low. The PE structure (buffer, unit, DRAM port
// per feature) follows the paper's accelerator figure; the job interface, the channel
// protocol and the flow control are this design's choices. The protocol assertions are
// disabled during reset (`disable iff (!rst_n)`), which lint reports as a synchronous use of
// the asynchronous reset. The output buffer's free-slot count is not needed here (the
// kernel is stalled by its ready instead) and stays unused, as do the job fields a
// kernel does not read.
module feature_pe
  import presto_pkg::*;
#(
  parameter pe_kind_e    KIND       = PE_BUCKETIZE,
  parameter int unsigned BUF_DEPTH  = 512,
  parameter int unsigned BKT_DEPTH  = 4096,
  parameter int unsigned DICT_DEPTH = 4096,
  parameter int unsigned LOG_FB     = 24
) (
  input  logic    clk,
  input  logic    rst_n,
  // job control
  input  job_t    job,
  input  logic    start,
  output logic    busy,
  output logic    done,
  output logic    err,
  // DRAM channels
  output rd_req_t rd_req,
  input  logic    rd_req_ready,
  input  rd_rsp_t rd_rsp,
  output wr_req_t wr_req,
  input  logic    wr_req_ready
);
  localparam int unsigned FSW = $clog2(2*BUF_DEPTH+1);

  typedef enum logic [1:0] {P_IDLE, P_START, P_RUN, P_DONE} pstate_e;
  pstate_e state;
  job_t    jq;

  cnt_t issued, received, written;
  logic [FSW-1:0] in_free, out_free;
  logic [FSW:0]   outstanding;
  logic in_empty, out_empty;

  // kernel stream signals
  logic  k_in_valid, k_in_ready, k_out_valid, k_out_ready, k_idle, k_err;
  elem_t k_in_data, k_out_data;
  logic  ib_wr_ready, ob_rd_valid;
  elem_t ib_wr_data, ob_rd_data;

  // ---- reader ----
  wire rd_more = (state == P_RUN) && (issued != jq.n_in);
  assign rd_req.valid = rd_more && (outstanding < (FSW+1)'(in_free));
  assign rd_req.addr  = jq.src + issued;
  wire rd_fire = rd_req.valid && rd_req_ready;

  assign ib_wr_data.data = rd_rsp.data;
  assign ib_wr_data.last = (received == jq.n_in - 1'b1);

  feature_buffer #(.DEPTH(BUF_DEPTH)) u_in_buf (
    .clk, .rst_n,
    .wr_valid(rd_rsp.valid), .wr_ready(ib_wr_ready), .wr_data(ib_wr_data), .flush(1'b0),
    .rd_valid(k_in_valid), .rd_ready(k_in_ready), .rd_data(k_in_data),
    .free_slots(in_free), .empty(in_empty)
  );

  // ---- kernel ----
  wire job_start = (state == P_START);
  generate
    if (KIND == PE_BUCKETIZE) begin : g_bkt
      bucketize_unit #(.DEPTH(BKT_DEPTH)) u_kernel (
        .clk, .rst_n, .mode(jq.mode), .num_bounds(jq.p0[$clog2(BKT_DEPTH):0]),
        .in_valid(k_in_valid), .in_ready(k_in_ready), .in_data(k_in_data),
        .out_valid(k_out_valid), .out_ready(k_out_ready), .out_data(k_out_data),
        .idle(k_idle)
      );
      assign k_err = 1'b0;
    end else if (KIND == PE_SIGRID) begin : g_sh
      sigridhash_unit u_kernel (
        .clk, .rst_n, .job_start, .seed(jq.p0), .max_value(jq.p1),
        .in_valid(k_in_valid), .in_ready(k_in_ready), .in_data(k_in_data),
        .out_valid(k_out_valid), .out_ready(k_out_ready), .out_data(k_out_data),
        .idle(k_idle)
      );
      assign k_err = 1'b0;
    end else if (KIND == PE_LOG) begin : g_log
      log_unit #(.FB(LOG_FB)) u_kernel (
        .clk, .rst_n, .offset(jq.p0[31:0]),
        .in_valid(k_in_valid), .in_ready(k_in_ready), .in_data(k_in_data),
        .out_valid(k_out_valid), .out_ready(k_out_ready), .out_data(k_out_data),
        .idle(k_idle)
      );
      assign k_err = 1'b0;
    end else begin : g_dec
      parquet_decoder #(.DICT_DEPTH(DICT_DEPTH)) u_kernel (
        .clk, .rst_n, .job_start, .mode(jq.mode), .p0(jq.p0), .p1(jq.p1),
        .in_valid(k_in_valid), .in_ready(k_in_ready), .in_data(k_in_data),
        .out_valid(k_out_valid), .out_ready(k_out_ready), .out_data(k_out_data),
        .idle(k_idle), .err(k_err)
      );
    end
  endgenerate

  // ---- output buffer and writer ----
  wire reading_done = (state == P_RUN) && (issued == jq.n_in) && (outstanding == '0);
  wire drained_in   = reading_done && in_empty && !k_in_valid && k_idle;

  feature_buffer #(.DEPTH(BUF_DEPTH)) u_out_buf (
    .clk, .rst_n,
    .wr_valid(k_out_valid), .wr_ready(k_out_ready), .wr_data(k_out_data), .flush(drained_in),
    .rd_valid(ob_rd_valid), .rd_ready(wr_req_ready), .rd_data(ob_rd_data),
    .free_slots(out_free), .empty(out_empty)
  );

  assign wr_req.valid = ob_rd_valid;
  assign wr_req.addr  = jq.dst + written;
  assign wr_req.data  = ob_rd_data.data;
  wire wr_fire = wr_req.valid && wr_req_ready;

  // ---- control ----
  assign busy = (state != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= P_IDLE;
      jq          <= '0;
      issued      <= '0;
      received    <= '0;
      written     <= '0;
      outstanding <= '0;
      done        <= 1'b0;
      err         <= 1'b0;
    end else begin
      done <= 1'b0;
      if (rd_fire)                    issued   <= issued + 1'b1;
      if (rd_rsp.valid)               received <= received + 1'b1;
      if (wr_fire)                    written  <= written + 1'b1;
      outstanding <= outstanding + (FSW+1)'(rd_fire) - (FSW+1)'(rd_rsp.valid);
      case (state)
        P_IDLE: if (start) begin
          jq       <= job;
          issued   <= '0;
          received <= '0;
          written  <= '0;
          err      <= 1'b0;
          state    <= (job.n_in == '0) ? P_DONE : P_START;   // nothing to read: done
        end
        P_START: state <= P_RUN;
        P_RUN: if (drained_in && out_empty && !ob_rd_valid) state <= P_DONE;
        P_DONE: begin
          err   <= k_err;
          done  <= 1'b1;
          state <= P_IDLE;
        end
        default: state <= P_IDLE;
      endcase
    end
  end

  // Read data always finds room in the input buffer.
  a_rsp_has_room: assert property (@(posedge clk) disable iff (!rst_n)
    rd_rsp.valid |-> ib_wr_ready);
  // A request holds its address while it waits.
  a_rd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (rd_req.valid && !rd_req_ready) |=> (rd_req.valid && $stable(rd_req.addr)));
  a_wr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (wr_req.valid && !wr_req_ready) |=> (wr_req.valid && $stable(wr_req.addr)
                                         && $stable(wr_req.data)));
endmodule
