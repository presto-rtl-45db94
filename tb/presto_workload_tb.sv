// presto_workload_tb: complete mini-batches of the evaluated model configurations.
//
// Runs the preprocessing of one 8192-row mini-batch on the accelerator at its default
// configuration, first for RM1 and then for RM5 (the configurations differ only in their
// sizes; RM2-RM4 are RM5 with fewer generated features or smaller bucket tables):
//
//            dense  sparse  ids/row  generated  boundaries  sparse column encoding
//     RM1      13     26       1        13         1024      PLAIN INT64
//     RM5     504     42      20        42         4096      dictionary page + RLE_DICTIONARY
//
// RM1 is run complete. Of RM5, every dense and generated feature is run, but only 4 of the
// 42 sparse features, to keep the simulation within a few minutes: each dictionary-encoded
// sparse column of 163,840 ids costs the single decoder PE about 0.4 million cycles (one
// page byte per cycle plus one value per cycle), about 17 million cycles for all 42.
//
// Per mini-batch the decoder decodes every dense column (PLAIN INT32) and every sparse
// column, the Log PEs take ln(x + 1) of every dense column, the Bucketize PEs load one
// boundary table per generated feature and bucketize its dense column, and the SigridHash
// PEs map every sparse and generated column into a 500,000-row table with a per-feature
// seed. RM1's sparse columns are PLAIN, as a writer falls back to for high-cardinality
// columns; RM5's are dictionary-encoded (1000-entry dictionary, 10-bit indices, a random
// mix of RLE and bit-packed runs).
//
// The test plays the host's scheduler: a job starts on the first idle PE of its kind once
// the column it reads exists; a table load and the job using the table go to the same PE
// back to back. PE status is polled through the control registers. Every output word is
// compared with reference models written here; every job must end without error, with one
// done pulse each, and irq must be the OR of the done pulses. The cycle count of each
// mini-batch is printed (RM1 is bound by Bucketize, RM5 by the single decoder PE).
module presto_workload_tb;
  import presto_pkg::*;
  localparam int NPE   = 7;
  localparam int ROWS  = 8192;
  localparam int TSIZE = 500000;
  localparam int NDICT = 1000;
  localparam int WORDS = 1 << 25;

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

  // irq is the OR of the PEs' done pulses: count both, they must agree.
  int n_irq = 0, n_done = 0, n_irq_bad = 0, max_busy = 0;
  always @(posedge clk) if (rst_n) begin
    int nb, nd;
    nb = 0;
    nd = 0;
    if (irq) n_irq++;
    for (int p = 0; p < NPE; p++) begin
      if (dut.busy[p]) nb++;
      if (dut.done[p]) nd++;
    end
    n_done += nd;
    if (irq != (nd > 0)) n_irq_bad++;
    if (nb > max_busy) max_busy = nb;
  end

  // ---------------- reference models ----------------
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

  // ---------------- one workload ----------------
  typedef struct {
    pe_kind_e  kind;
    job_mode_e mode;
    int        src, dst, n;
    word_t     p0, p1;
    int        dep;        // job that must finish first, -1 for none
    bit        second;     // runs right after the table load before it, on the same PE
  } tjob_t;
  tjob_t jobs [$];

  int    top;              // DRAM allocation pointer
  function automatic int alloc(int n);
    int a;
    a = top;
    top += n;
    return a;
  endfunction

  function automatic int add(pe_kind_e k, job_mode_e m, int src, int dst, int n, word_t a0,
                             word_t a1, int dep, bit second);
    jobs.push_back('{k, m, src, dst, n, a0, a1, dep, second});
    return jobs.size() - 1;
  endfunction

  // PE numbering of the default top: decoder, 2 Bucketize, 2 SigridHash, 2 Log.
  function automatic pe_kind_e kind_of(int p);
    return p == 0 ? PE_DECODE : p < 3 ? PE_BUCKETIZE : p < 5 ? PE_SIGRID : PE_LOG;
  endfunction

  task automatic wr(int a, word_t d);
    @(negedge clk); cfg_we = 1; cfg_addr = 6'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic rd(int a, output word_t d);
    @(negedge clk); cfg_addr = 6'(a); #1; d = cfg_rdata;
  endtask
  task automatic launch(int p, int j);
    wr(8*p + 0, word_t'(jobs[j].mode)); wr(8*p + 1, jobs[j].src); wr(8*p + 2, jobs[j].dst);
    wr(8*p + 3, jobs[j].n); wr(8*p + 4, jobs[j].p0); wr(8*p + 5, jobs[j].p1); wr(8*p + 6, 1);
  endtask

  // Runs the job list to completion, returns the number of jobs that reported an error.
  task automatic schedule(output int nerr);
    int  cur [NPE], follow [NPE];
    bit  started [], finished [];
    int  ndone;
    word_t st;
    started  = new[jobs.size()];
    finished = new[jobs.size()];
    for (int p = 0; p < NPE; p++) begin cur[p] = -1; follow[p] = -1; end
    ndone = 0;
    nerr  = 0;
    while (ndone < jobs.size()) begin
      for (int p = 0; p < NPE; p++) begin
        if (cur[p] >= 0) begin
          rd(8*p + 6, st);
          if (st[1]) begin
            if (st[2]) nerr++;
            finished[cur[p]] = 1;
            ndone++;
            cur[p] = -1;
          end
        end
        if (cur[p] < 0 && follow[p] >= 0) begin
          if (jobs[follow[p]].dep < 0 || finished[jobs[follow[p]].dep]) begin
            launch(p, follow[p]);
            cur[p] = follow[p];
            follow[p] = -1;
          end
        end else if (cur[p] < 0) begin
          foreach (jobs[j]) begin
            if (!started[j] && !jobs[j].second && jobs[j].kind == kind_of(p)
                && (jobs[j].dep < 0 || finished[jobs[j].dep])) begin
              launch(p, j);
              started[j] = 1;
              cur[p] = j;
              if (jobs[j].mode == MODE_LOAD_TABLE) begin
                follow[p] = j + 1;
                started[j + 1] = 1;
              end
              break;
            end
          end
        end
      end
      repeat (8) @(negedge clk);
    end
  endtask

  task automatic run_workload(string name, int nd, int ns, int slen, int ng, int nb, bit rle);
    // ns: sparse features simulated
    int    nv, nerr, done0;
    int    raw_d [], den [], logo [], bnd [], gen [], hgen [], raw_s [], spw [], dictp [],
           spa [], hsp [], ddec [];
    int signed dval [];    // nd x ROWS
    int signed bval [];    // ng x nb
    word_t     sref [];    // ns x nv expected decoded sparse values
    longint    t0, t1;

    nv = ROWS * slen;
    top = 0;
    jobs.delete();
    raw_d = new[nd]; den = new[nd]; logo = new[nd]; ddec = new[nd];
    bnd = new[ng]; gen = new[ng]; hgen = new[ng];
    raw_s = new[ns]; spw = new[ns]; dictp = new[ns]; spa = new[ns]; hsp = new[ns];
    dval = new[nd * ROWS]; bval = new[ng * nb]; sref = new[ns * nv];

    // ---- raw data in DRAM ----
    for (int f = 0; f < nd; f++) begin
      raw_d[f] = alloc(ROWS / 2);
      for (int i = 0; i < ROWS; i++)
        dval[f*ROWS + i] = ($urandom % 16 == 0) ? -int'($urandom % 2) : int'($urandom % (1000 << f % 8));
      for (int w = 0; w < ROWS / 2; w++)
        u_mem.mem[raw_d[f] + w] = {dval[f*ROWS + 2*w + 1], dval[f*ROWS + 2*w]};
    end
    for (int g = 0; g < ng; g++) begin
      int c;
      bnd[g] = alloc(nb);
      c = -3;
      for (int i = 0; i < nb; i++) begin
        c += int'($urandom % ((1000 << g % 8) / nb + 2));
        bval[g*nb + i] = c;
        u_mem.mem[bnd[g] + i] = word_t'(unsigned'(c));
      end
    end
    for (int s = 0; s < ns; s++) begin
      if (!rle) begin
        raw_s[s] = alloc(nv);
        spw[s] = nv;
        for (int i = 0; i < nv; i++) begin
          sref[s*nv + i] = {$urandom, $urandom};
          u_mem.mem[raw_s[s] + i] = sref[s*nv + i];
        end
      end else begin
        byte unsigned bytes [$];
        word_t dict [NDICT];
        int    c;
        dictp[s] = alloc(NDICT);
        for (int i = 0; i < NDICT; i++) begin
          dict[i] = {$urandom, $urandom};
          u_mem.mem[dictp[s] + i] = dict[i];
        end
        bytes.push_back(8'd10);                    // index bit width
        c = 0;
        while (c < nv) begin
          if ($urandom % 3 == 0) begin             // RLE run
            int cnt, idx;
            cnt = 1 + $urandom % 30;
            if (cnt > nv - c) cnt = nv - c;
            idx = $urandom % NDICT;
            for (int v = cnt << 1; ; ) begin
              byte unsigned b = byte'(v & 'h7F);
              v = v >> 7;
              if (v != 0) b |= 8'h80;
              bytes.push_back(b);
              if (v == 0) break;
            end
            bytes.push_back(byte'(idx)); bytes.push_back(byte'(idx >> 8));
            for (int k = 0; k < cnt; k++) sref[s*nv + c + k] = dict[idx];
            c += cnt;
          end else begin                           // bit-packed run
            int groups, nbits;
            logic [63:0] acc;
            groups = 1 + $urandom % 16;
            for (int v = (groups << 1) | 1; ; ) begin
              byte unsigned b = byte'(v & 'h7F);
              v = v >> 7;
              if (v != 0) b |= 8'h80;
              bytes.push_back(b);
              if (v == 0) break;
            end
            acc = 0; nbits = 0;
            for (int k = 0; k < 8 * groups; k++) begin
              int idx;
              idx = $urandom % NDICT;
              if (c < nv) sref[s*nv + c] = dict[idx];
              c++;
              acc |= 64'(idx) << nbits;
              nbits += 10;
              while (nbits >= 8) begin bytes.push_back(acc[7:0]); acc >>= 8; nbits -= 8; end
            end
          end
        end
        while (bytes.size() % 8 != 0) bytes.push_back(8'h00);
        spw[s] = bytes.size() / 8;
        raw_s[s] = alloc(spw[s]);
        for (int w = 0; w < spw[s]; w++) begin
          word_t d;
          for (int b = 0; b < 8; b++) d[8*b +: 8] = bytes[8*w + b];
          u_mem.mem[raw_s[s] + w] = d;
        end
      end
    end
    // ---- output regions ----
    for (int f = 0; f < nd; f++) begin den[f] = alloc(ROWS); logo[f] = alloc(ROWS); end
    for (int g = 0; g < ng; g++) begin gen[g] = alloc(ROWS); hgen[g] = alloc(ROWS); end
    for (int s = 0; s < ns; s++) begin spa[s] = alloc(nv); hsp[s] = alloc(nv); end
    check(top <= WORDS, $sformatf("%s: DRAM map of %0d words too large", name, top));

    // ---- job list: decoder order = dense columns feeding Bucketize first, then the
    //      sparse columns interleaved with the remaining dense columns ----
    for (int g = 0; g < ng; g++)
      ddec[g] = add(PE_DECODE, MODE_DEC_PLAIN, raw_d[g], den[g], ROWS / 2, 4, ROWS, -1, 0);
    for (int i = 0, f = ng; i < ns || f < nd; i++) begin
      if (i < ns) begin
        int d;
        if (!rle)
          d = add(PE_DECODE, MODE_DEC_PLAIN, raw_s[i], spa[i], nv, 8, nv, -1, 0);
        else begin
          void'(add(PE_DECODE, MODE_LOAD_TABLE, dictp[i], 0, NDICT, 8, NDICT, -1, 0));
          d = add(PE_DECODE, MODE_DEC_RLEDICT, raw_s[i], spa[i], spw[i], 0, nv, -1, 1);
        end
        void'(add(PE_SIGRID, MODE_RUN, spa[i], hsp[i], nv, word_t'(7 * i + 1), TSIZE, d, 0));
      end
      for (int k = 0; k < (nd - ng + ns - 1) / ns && f < nd; k++, f++)
        ddec[f] = add(PE_DECODE, MODE_DEC_PLAIN, raw_d[f], den[f], ROWS / 2, 4, ROWS, -1, 0);
    end
    for (int g = 0; g < ng; g++) begin
      int r;
      void'(add(PE_BUCKETIZE, MODE_LOAD_TABLE, bnd[g], 0, nb, 0, 0, -1, 0));
      r = add(PE_BUCKETIZE, MODE_RUN, den[g], gen[g], ROWS, nb, 0, ddec[g], 1);
      void'(add(PE_SIGRID, MODE_RUN, gen[g], hgen[g], ROWS, word_t'(100 + g), TSIZE, r, 0));
    end
    for (int f = 0; f < nd; f++)
      void'(add(PE_LOG, MODE_RUN, den[f], logo[f], ROWS, 1, 0, ddec[f], 0));

    // ---- run ----
    done0 = n_done;
    n_irq_bad = 0;
    max_busy = 0;
    t0 = $time;
    schedule(nerr);
    t1 = $time;
    $display("%s mini-batch: %0d jobs in %0d cycles, at most %0d PEs busy at once",
             name, jobs.size(), (t1 - t0) / 10, max_busy);

    // ---- check ----
    check(nerr == 0, $sformatf("%s: %0d jobs reported an error", name, nerr));
    check(n_done - done0 == jobs.size(), $sformatf("%s: %0d done pulses for %0d jobs",
          name, n_done - done0, jobs.size()));
    check(n_irq_bad == 0, $sformatf("%s: irq differs from the done pulses %0d times", name, n_irq_bad));
    check(max_busy > NPE / 2, $sformatf("%s: at most %0d PEs busy at once", name, max_busy));
    for (int f = 0; f < nd; f++)
      for (int i = 0; i < ROWS; i++) begin
        real e, y;
        int  v;
        v = dval[f*ROWS + i];
        check(u_mem.mem[den[f] + i] == word_t'(longint'(v)), $sformatf("%s dense %0d/%0d", name, f, i));
        e = $ln(real'((v + 1 < 1) ? 1 : v + 1));
        y = f32(u_mem.mem[logo[f] + i][31:0]);
        check(y - e <= 1e-5 * (e + 1) && e - y <= 1e-5 * (e + 1), $sformatf("%s log %0d/%0d", name, f, i));
      end
    for (int g = 0; g < ng; g++)
      for (int i = 0; i < ROWS; i++) begin
        int b, v;
        v = dval[g*ROWS + i];
        b = 0;
        for (int k = 0; k < nb; k++) if (bval[g*nb + k] <= v) b++;
        check(u_mem.mem[gen[g] + i] == word_t'(b), $sformatf("%s gen %0d/%0d", name, g, i));
        check(u_mem.mem[hgen[g] + i] == ref_hash(word_t'(b), word_t'(100 + g), TSIZE),
              $sformatf("%s hash gen %0d/%0d", name, g, i));
      end
    for (int s = 0; s < ns; s++)
      for (int i = 0; i < nv; i++) begin
        check(u_mem.mem[spa[s] + i] == sref[s*nv + i], $sformatf("%s sparse %0d/%0d", name, s, i));
        check(u_mem.mem[hsp[s] + i] == ref_hash(sref[s*nv + i], word_t'(7 * s + 1), TSIZE),
              $sformatf("%s hash sparse %0d/%0d", name, s, i));
      end
  endtask

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_workload("RM1", 13, 26, 1, 13, 1024, 1'b0);
    run_workload("RM5", 504, 4, 20, 42, 4096, 1'b1);   // 4 of 42 sparse features
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
