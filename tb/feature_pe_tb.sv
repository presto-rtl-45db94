// feature_pe_tb: self-checking test of processing elements on a shared DRAM model.
//
// Three PEs (Bucketize, SigridHash, decoder) with small feature buffers (16 words per
// bank) run jobs at the same time against a DRAM model with latency and random stalls:
//   - Bucketize: load 100 boundaries, then bucketize 300 values;
//   - SigridHash: hash 500 ids;
//   - decoder: decode a PLAIN INT32 page of 101 values (51 words in, 101 words out),
//     which relies on the output-buffer flush because the counts differ;
//   - an empty job (n_in = 0).
// It checks every word written against reference models, that nothing is written past
// the end of a result, that each PE raises `done`, that DRAM reads and writes of one PE
// overlap in time (double buffering) and that several PEs were busy together.
module feature_pe_tb;
  import presto_pkg::*;
  localparam int NCH = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  job_t    job [NCH];
  logic    start [NCH], busy [NCH], done [NCH], err [NCH];
  rd_req_t rd_req [NCH];
  logic    rd_req_ready [NCH];
  rd_rsp_t rd_rsp [NCH];
  wr_req_t wr_req [NCH];
  logic    wr_req_ready [NCH];

  mem_model #(.NCH(NCH), .WORDS(16384), .LAT(6), .STALL(1)) u_mem (
    .clk, .rst_n, .rd_req, .rd_req_ready, .rd_rsp, .wr_req, .wr_req_ready);

  feature_pe #(.KIND(PE_BUCKETIZE), .BUF_DEPTH(16), .BKT_DEPTH(1024)) u_bkt (
    .clk, .rst_n, .job(job[0]), .start(start[0]), .busy(busy[0]), .done(done[0]), .err(err[0]),
    .rd_req(rd_req[0]), .rd_req_ready(rd_req_ready[0]), .rd_rsp(rd_rsp[0]),
    .wr_req(wr_req[0]), .wr_req_ready(wr_req_ready[0]));
  feature_pe #(.KIND(PE_SIGRID), .BUF_DEPTH(16)) u_sh (
    .clk, .rst_n, .job(job[1]), .start(start[1]), .busy(busy[1]), .done(done[1]), .err(err[1]),
    .rd_req(rd_req[1]), .rd_req_ready(rd_req_ready[1]), .rd_rsp(rd_rsp[1]),
    .wr_req(wr_req[1]), .wr_req_ready(wr_req_ready[1]));
  feature_pe #(.KIND(PE_DECODE), .BUF_DEPTH(16), .DICT_DEPTH(256)) u_dec (
    .clk, .rst_n, .job(job[2]), .start(start[2]), .busy(busy[2]), .done(done[2]), .err(err[2]),
    .rd_req(rd_req[2]), .rd_req_ready(rd_req_ready[2]), .rd_rsp(rd_rsp[2]),
    .wr_req(wr_req[2]), .wr_req_ready(wr_req_ready[2]));

  int checks = 0, failures = 0;
  int overlap [NCH] = '{0, 0, 0};
  int n_done [NCH] = '{0, 0, 0};
  int multi_busy = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic word_t ref_hash(word_t x, word_t s, word_t d);
    logic [63:0] k = 64'h9DDF_EA08_EB38_2D69;
    logic [63:0] a, b;
    a = (x ^ s) * k;  a = a ^ (a >> 47);
    b = (s ^ a) * k;  b = b ^ (b >> 47);
    b = b * k;  b[63] = 1'b0;
    return (d == 0) ? b : b % d;
  endfunction

  always @(posedge clk) begin
    int nb = 0;
    for (int c = 0; c < NCH; c++) begin
      if (rd_req[c].valid && rd_req_ready[c] && wr_req[c].valid && wr_req_ready[c]) overlap[c]++;
      if (done[c]) n_done[c]++;
      if (busy[c]) nb++;
    end
    if (nb > 1) multi_busy++;
  end

  task automatic go(int c, job_mode_e m, int src, int dst, int n, word_t a0, word_t a1);
    @(negedge clk);
    job[c] = '{mode: m, src: addr_t'(src), dst: addr_t'(dst), n_in: cnt_t'(n), p0: a0, p1: a1};
    start[c] = 1;
    @(negedge clk) start[c] = 0;
  endtask

  task automatic wait_done(int c);
    int n0 = n_done[c];
    while (n_done[c] == n0) @(posedge clk);
  endtask

  int signed bnd [100];
  int signed dv  [300];
  word_t     ids [500];
  int signed pv  [101];

  initial begin
    for (int c = 0; c < NCH; c++) begin job[c] = '0; start[c] = 0; end
    for (int i = 0; i < 16384; i++) u_mem.mem[i] = 64'hA5A5_A5A5_A5A5_A5A5;
    // data
    for (int i = 0; i < 100; i++) begin
      bnd[i] = (i == 0) ? -1000 : bnd[i-1] + int'($urandom % 50);
      u_mem.mem[i] = word_t'(unsigned'(bnd[i]));
    end
    for (int i = 0; i < 300; i++) begin
      dv[i] = int'($urandom % 6000) - 2000;
      u_mem.mem[1000 + i] = word_t'(unsigned'(dv[i]));
    end
    for (int i = 0; i < 500; i++) begin
      ids[i] = {$urandom, $urandom};
      u_mem.mem[2000 + i] = ids[i];
    end
    for (int i = 0; i < 101; i++) pv[i] = int'($urandom);
    for (int w = 0; w < 51; w++)
      u_mem.mem[3000 + w] = {(2*w+1 < 101) ? pv[2*w+1] : 32'hFFFF_FFFF, pv[2*w]};
    repeat (3) @(posedge clk);
    rst_n = 1;

    go(0, MODE_LOAD_TABLE, 0, 0, 100, 0, 0);
    go(1, MODE_RUN, 2000, 8000, 500, 64'd77, 64'd500000);
    go(2, MODE_DEC_PLAIN, 3000, 11000, 51, 64'd4, 64'd101);
    wait_done(0);
    $display("load done at %0t", $time);
    go(0, MODE_RUN, 1000, 5000, 300, 100, 0);
    fork wait_done(0); wait_done(1); wait_done(2); join
    $display("jobs done at %0t", $time);
    go(2, MODE_DEC_PLAIN, 3000, 12000, 0, 64'd4, 64'd0);   // empty job
    wait_done(2);

    for (int i = 0; i < 300; i++) begin
      int e;
      e = 0;
      for (int j = 0; j < 100; j++) if (bnd[j] <= dv[i]) e++;
      check(u_mem.mem[5000 + i] == word_t'(e), $sformatf("bucketize %0d got %0d exp %0d", i, u_mem.mem[5000+i], e));
    end
    check(u_mem.mem[5300] == 64'hA5A5_A5A5_A5A5_A5A5, "bucketize wrote past end");
    for (int i = 0; i < 500; i++)
      check(u_mem.mem[8000 + i] == ref_hash(ids[i], 77, 500000), $sformatf("sigridhash %0d", i));
    check(u_mem.mem[8500] == 64'hA5A5_A5A5_A5A5_A5A5, "sigridhash wrote past end");
    for (int i = 0; i < 101; i++)
      check(u_mem.mem[11000 + i] == word_t'(longint'(pv[i])), $sformatf("decode %0d", i));
    check(u_mem.mem[11101] == 64'hA5A5_A5A5_A5A5_A5A5, "decoder wrote past end");
    check(u_mem.mem[12000] == 64'hA5A5_A5A5_A5A5_A5A5, "empty job wrote");
    check(err[2] == 0, "decoder error");
    for (int c = 0; c < NCH; c++) begin
      check(overlap[c] > 0, $sformatf("PE %0d: reads and writes never overlapped", c));
      check(!busy[c], $sformatf("PE %0d busy at end", c));
    end
    check(multi_busy > 0, "PEs never ran together");
    $display("overlap=%0d/%0d/%0d multi_busy=%0d dram stalls=%0d", overlap[0], overlap[1], overlap[2],
             multi_busy, u_mem.n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
