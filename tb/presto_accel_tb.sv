// presto_accel_tb: end-to-end test of the accelerator at its default configuration.
//
// Plays the host and the SSD: raw Parquet pages for one mini-batch of 8192 rows are placed
// in the DRAM model (as the peer-to-peer copy from flash would), and the accelerator is
// programmed through its control registers to produce train-ready columns:
//   decoder     dense column 0 and 1 (PLAIN INT32 pages, 8192 values each),
//               a dictionary page (1000 INT64 ids) and a sparse column (RLE_DICTIONARY,
//               8192 rows x 20 ids = 163840 values, 10-bit indices)
//   Bucketize   PE 1: 4096 boundaries on dense 0 -> generated sparse feature G0
//               PE 2: 1024 boundaries on dense 1 -> G1
//   SigridHash  PE 3: sparse column, d = 500000; PE 4: G0, d = 4096 + 1
//   Log         PE 5: ln(dense 0 + 1); PE 6: ln(dense 1 + 1)
// Jobs on different PEs run concurrently, each started as soon as its input is in DRAM.
// Every output word is compared with reference models written here (linear bucket count,
// hash with %, double-precision ln). The test also counts each mechanism of the design and
// fails if one never happened: DRAM back-pressure, reads held back by a full input buffer,
// read/write overlap inside a PE (double buffering), several PEs busy at once, bucket
// table loads, dictionary loads, RLE runs, bit-packed runs, output-buffer flushes (jobs
// whose output count differs from the input count) and completion interrupts.
module presto_accel_tb;
  import presto_pkg::*;
  localparam int NPE   = 7;
  localparam int ROWS  = 8192;
  localparam int SLEN  = 20;
  localparam int NSP   = ROWS * SLEN;
  localparam int NDICT = 1000;
  localparam int WORDS = 1 << 20;

  // DRAM map (word addresses)
  localparam int RAW_D0 = 'h00000, RAW_D1 = 'h01000, BND0 = 'h02000, BND1 = 'h03000;
  localparam int DICTP  = 'h04000, SPP = 'h08000;
  localparam int DEN0 = 'h10000, DEN1 = 'h12000, SPARSE = 'h20000;
  localparam int GEN0 = 'h50000, GEN1 = 'h52000, HS = 'h60000, HG = 'h90000;
  localparam int LOG0 = 'h98000, LOG1 = 'h9A000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    cfg_we, irq;
  logic [$clog2(NPE)+2:0] cfg_addr;
  word_t   cfg_wdata, cfg_rdata;
  rd_req_t rd_req [NPE];
  logic    rd_req_ready [NPE];
  rd_rsp_t rd_rsp [NPE];
  wr_req_t wr_req [NPE];
  logic    wr_req_ready [NPE];

  presto_accel dut (.*);
  mem_model #(.NCH(NPE), .WORDS(WORDS), .LAT(10), .STALL(1)) u_mem (
    .clk, .rst_n, .rd_req, .rd_req_ready, .rd_rsp, .wr_req, .wr_req_ready);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_overlap = 0, n_multi = 0, n_held = 0, n_irq = 0;
  int n_tbl = 0, n_dict = 0, n_rle = 0, n_bp = 0, n_flush = 0;
  always @(posedge clk) if (rst_n) begin
    int nb = 0;
    for (int p = 0; p < NPE; p++) begin
      if (rd_req[p].valid && rd_req_ready[p] && wr_req[p].valid && wr_req_ready[p]) n_overlap++;
    end
    if (dut.g_pe[1].u_pe.busy) nb++;
    if (dut.g_pe[0].u_pe.busy) nb++;
    if (dut.g_pe[3].u_pe.busy) nb++;
    if (dut.g_pe[5].u_pe.busy) nb++;
    if (nb > 1) n_multi++;
    if (dut.g_pe[3].u_pe.rd_more && !rd_req[3].valid) n_held++;
    if (irq) n_irq++;
  end

  // ---------------- host bus (one user at a time) ----------------
  bit bus_busy = 0;
  task automatic bus_get();
    while (bus_busy) @(negedge clk);
    bus_busy = 1;
  endtask
  task automatic wr(int a, word_t d);
    @(negedge clk); cfg_we = 1; cfg_addr = 6'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic run_job(int p, job_mode_e m, int src, int dst, int n, word_t a0, word_t a1);
    word_t st;
    bus_get();
    wr(8*p + 0, word_t'(m)); wr(8*p + 1, src); wr(8*p + 2, dst); wr(8*p + 3, n);
    wr(8*p + 4, a0); wr(8*p + 5, a1); wr(8*p + 6, 1);
    bus_busy = 0;
    do begin
      repeat (32) @(negedge clk);
      bus_get();
      cfg_addr = 6'(8*p + 6); #1; st = cfg_rdata;
      bus_busy = 0;
    end while (!st[1]);
    check(st[2] == 0, $sformatf("PE %0d reported an error", p));
  endtask

  // ---------------- reference data ----------------
  int signed d0 [ROWS], d1 [ROWS];
  int signed b0 [4096], b1 [1024];
  word_t     dict [NDICT];
  int        sidx [NSP];
  int        spw;          // sparse page words

  function automatic word_t ref_hash(word_t x, word_t s, word_t d);
    logic [63:0] k = 64'h9DDF_EA08_EB38_2D69;
    logic [63:0] a, b;
    a = (x ^ s) * k;  a = a ^ (a >> 47);
    b = (s ^ a) * k;  b = b ^ (b >> 47);
    b = b * k;  b[63] = 1'b0;
    return b % d;
  endfunction
  function automatic real f32(logic [31:0] f);
    real m;
    int  e;
    if (f[30:0] == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    return m * (2.0 ** e);
  endfunction
  function automatic int bucket(int signed v, bit which);
    int e = 0;
    if (!which) begin for (int i = 0; i < 4096; i++) if (b0[i] <= v) e++; end
    else        begin for (int i = 0; i < 1024; i++) if (b1[i] <= v) e++; end
    return e;
  endfunction

  // Builds the raw pages in DRAM.
  task automatic build_inputs();
    byte unsigned bytes [$];
    int cur;
    for (int i = 0; i < ROWS; i++) begin
      d0[i] = ($urandom % 20 == 0) ? -int'($urandom % 3) : int'($urandom % 100000);
      d1[i] = int'($urandom % 5000);
    end
    for (int w = 0; w < ROWS / 2; w++) begin
      u_mem.mem[RAW_D0 + w] = {d0[2*w+1], d0[2*w]};
      u_mem.mem[RAW_D1 + w] = {d1[2*w+1], d1[2*w]};
    end
    cur = -5;
    for (int i = 0; i < 4096; i++) begin cur += int'($urandom % 49); b0[i] = cur; u_mem.mem[BND0 + i] = word_t'(unsigned'(cur)); end
    cur = 0;
    for (int i = 0; i < 1024; i++) begin cur += int'($urandom % 10); b1[i] = cur; u_mem.mem[BND1 + i] = word_t'(unsigned'(cur)); end
    for (int i = 0; i < NDICT; i++) begin dict[i] = {$urandom, $urandom}; u_mem.mem[DICTP + i] = dict[i]; end
    // RLE_DICTIONARY page, bit width 10
    bytes.push_back(8'd10);
    cur = 0;
    while (cur < NSP) begin
      if ($urandom % 3 == 0) begin
        int cnt, idx;
        cnt = 1 + $urandom % 30;
        if (cnt > NSP - cur) cnt = NSP - cur;
        idx = $urandom % NDICT;
        for (int v = cnt << 1; ; ) begin
          byte unsigned b = byte'(v & 'h7F);
          v = v >> 7;
          if (v != 0) b |= 8'h80;
          bytes.push_back(b);
          if (v == 0) break;
        end
        bytes.push_back(byte'(idx)); bytes.push_back(byte'(idx >> 8));
        for (int k = 0; k < cnt; k++) sidx[cur + k] = idx;
        cur += cnt;
        n_rle++;
      end else begin
        int groups, nv;
        logic [63:0] acc;
        int nb;
        groups = 1 + $urandom % 16;
        nv = 8 * groups;
        for (int v = (groups << 1) | 1; ; ) begin
          byte unsigned b = byte'(v & 'h7F);
          v = v >> 7;
          if (v != 0) b |= 8'h80;
          bytes.push_back(b);
          if (v == 0) break;
        end
        acc = 0; nb = 0;
        for (int k = 0; k < nv; k++) begin
          int idx;
          idx = $urandom % NDICT;
          if (cur < NSP) sidx[cur] = idx;
          cur++;
          acc |= 64'(idx) << nb;
          nb += 10;
          while (nb >= 8) begin bytes.push_back(acc[7:0]); acc >>= 8; nb -= 8; end
        end
        n_bp++;
      end
    end
    while (bytes.size() % 8 != 0) bytes.push_back(8'h00);
    spw = bytes.size() / 8;
    for (int w = 0; w < spw; w++) begin
      word_t d;
      for (int b = 0; b < 8; b++) d[8*b +: 8] = bytes[8*w + b];
      u_mem.mem[SPP + w] = d;
    end
  endtask

  event dense0_ok, dense1_ok, sparse_ok, gen0_ok;
  bit   f_d0 = 0, f_d1 = 0, f_sp = 0, f_g0 = 0;
  longint t_start, t_end;

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    build_inputs();
    repeat (3) @(posedge clk);
    rst_n = 1;
    t_start = $time;
    fork
      begin   // decoder unit
        run_job(0, MODE_DEC_PLAIN, RAW_D0, DEN0, ROWS / 2, 4, ROWS);  n_flush++;
        f_d0 = 1;
        run_job(0, MODE_DEC_PLAIN, RAW_D1, DEN1, ROWS / 2, 4, ROWS);  n_flush++;
        f_d1 = 1;
        run_job(0, MODE_LOAD_TABLE, DICTP, 0, NDICT, 8, NDICT);       n_dict++;
        run_job(0, MODE_DEC_RLEDICT, SPP, SPARSE, spw, 0, NSP);       n_flush++;
        f_sp = 1;
      end
      begin   // Bucketize PE 1, then SigridHash PE 4 on its result
        run_job(1, MODE_LOAD_TABLE, BND0, 0, 4096, 0, 0);              n_tbl++;
        while (!f_d0) @(negedge clk);
        run_job(1, MODE_RUN, DEN0, GEN0, ROWS, 4096, 0);
        run_job(4, MODE_RUN, GEN0, HG, ROWS, 64'd31, 64'd4097);
      end
      begin   // Bucketize PE 2
        run_job(2, MODE_LOAD_TABLE, BND1, 0, 1024, 0, 0);              n_tbl++;
        while (!f_d1) @(negedge clk);
        run_job(2, MODE_RUN, DEN1, GEN1, ROWS, 1024, 0);
      end
      begin   // SigridHash PE 3 on the sparse column
        while (!f_sp) @(negedge clk);
        run_job(3, MODE_RUN, SPARSE, HS, NSP, 64'd2024, 64'd500000);
      end
      begin   // Log PEs
        while (!f_d0) @(negedge clk);
        run_job(5, MODE_RUN, DEN0, LOG0, ROWS, 1, 0);
      end
      begin
        while (!f_d1) @(negedge clk);
        run_job(6, MODE_RUN, DEN1, LOG1, ROWS, 1, 0);
      end
    join
    t_end = $time;
    $display("all jobs done in %0d cycles", (t_end - t_start) / 10);

    // ---------------- check results ----------------
    for (int i = 0; i < ROWS; i++) begin
      real e0, e1;
      check(u_mem.mem[DEN0 + i] == word_t'(longint'(d0[i])), $sformatf("dense0 %0d", i));
      check(u_mem.mem[DEN1 + i] == word_t'(longint'(d1[i])), $sformatf("dense1 %0d", i));
      check(u_mem.mem[GEN0 + i] == word_t'(bucket(d0[i], 0)), $sformatf("gen0 %0d", i));
      check(u_mem.mem[GEN1 + i] == word_t'(bucket(d1[i], 1)), $sformatf("gen1 %0d", i));
      check(u_mem.mem[HG + i] == ref_hash(word_t'(bucket(d0[i], 0)), 31, 4097), $sformatf("hash gen0 %0d", i));
      e0 = $ln(real'((d0[i] + 1 < 1) ? 1 : d0[i] + 1));
      e1 = $ln(real'(d1[i] + 1));
      check(f32(u_mem.mem[LOG0 + i][31:0]) - e0 <= 1e-5 * (e0 + 1) && e0 - f32(u_mem.mem[LOG0 + i][31:0]) <= 1e-5 * (e0 + 1), $sformatf("log0 %0d", i));
      check(f32(u_mem.mem[LOG1 + i][31:0]) - e1 <= 1e-5 * (e1 + 1) && e1 - f32(u_mem.mem[LOG1 + i][31:0]) <= 1e-5 * (e1 + 1), $sformatf("log1 %0d", i));
    end
    for (int i = 0; i < NSP; i++) begin
      check(u_mem.mem[SPARSE + i] == dict[sidx[i]], $sformatf("sparse %0d", i));
      check(u_mem.mem[HS + i] == ref_hash(dict[sidx[i]], 2024, 500000), $sformatf("hash sparse %0d", i));
    end

    // ---------------- every mechanism happened ----------------
    $display("dram stalls=%0d held reads=%0d overlap=%0d multi-busy=%0d tables=%0d dicts=%0d rle=%0d bp=%0d flush jobs=%0d irq=%0d",
             u_mem.n_stall, n_held, n_overlap, n_multi, n_tbl, n_dict, n_rle, n_bp, n_flush, n_irq);
    check(u_mem.n_stall > 0, "no DRAM back-pressure");
    check(n_held > 0,    "input buffer never limited reads");
    check(n_overlap > 0, "reads and writes never overlapped");
    check(n_multi > 0,   "PEs never ran concurrently");
    check(n_tbl > 0,     "no bucket table load");
    check(n_dict > 0,    "no dictionary load");
    check(n_rle > 0,     "no RLE run");
    check(n_bp > 0,      "no bit-packed run");
    check(n_flush > 0,   "no flushed job");
    check(n_irq == 12,   $sformatf("irq pulses %0d, expected 12", n_irq));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
