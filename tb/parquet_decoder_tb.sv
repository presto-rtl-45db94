// parquet_decoder_tb: self-checking test of the Parquet decoder unit.
//
// An independent encoder in this testbench builds Parquet value sections:
//   - PLAIN INT32 and INT64 pages (with random padding after the values),
//   - PLAIN dictionary pages, loaded into the decoder's dictionary,
//   - RLE_DICTIONARY pages: a bit-width byte followed by a random mix of RLE runs and
//     bit-packed runs (last group padded), for bit widths 0, 1, 5, 10 and 12,
// streams them in with random input gaps and output stalls, and checks every decoded
// value, the `last` flag on the final value, that the unit goes idle, and that `err`
// is raised only for a page whose input ends too early.
module parquet_decoder_tb;
  import presto_pkg::*;
  localparam int unsigned DICT_DEPTH = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      job_start, in_valid, in_ready, out_valid, out_ready, idle, err;
  job_mode_e mode;
  word_t     p0, p1;
  elem_t     in_data, out_data;

  parquet_decoder #(.DICT_DEPTH(DICT_DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int n_rle = 0, n_bp = 0;
  word_t dict_ref [DICT_DEPTH];
  byte unsigned bytes [$];
  word_t exp_q [$];
  int n_out;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) out_ready <= ($urandom % 4 != 0);

  bit ignore_vals = 0;   // truncated page: values after the cut are junk
  always @(posedge clk) if (rst_n && out_valid && out_ready && !ignore_vals) begin
    word_t e;
    e = exp_q.pop_front();
    check(out_data.data == e, $sformatf("value %0d got %h exp %h", n_out, out_data.data, e));
    check(out_data.last == (exp_q.size() == 0), $sformatf("last at value %0d", n_out));
    n_out++;
  end

  function automatic void put_uleb(int unsigned v);
    do begin
      byte unsigned b = byte'(v & 32'h7F);
      v = v >> 7;
      if (v != 0) b |= 8'h80;
      bytes.push_back(b);
    end while (v != 0);
  endfunction

  // Stream `bytes` as words (plus `pad` junk words) and run one job.
  task automatic run_job(job_mode_e m, word_t a0, word_t a1, int pad_words, bit expect_err);
    int nw;
    while (bytes.size() % 8 != 0) bytes.push_back(byte'($urandom));
    for (int i = 0; i < 8 * pad_words; i++) bytes.push_back(byte'($urandom));
    nw = bytes.size() / 8;
    n_out = 0;
    @(negedge clk);
    mode = m; p0 = a0; p1 = a1; job_start = 1;
    @(negedge clk) job_start = 0;
    for (int w = 0; w < nw; w++) begin
      word_t d;
      for (int b = 0; b < 8; b++) d[8*b +: 8] = bytes[8*w + b];
      while ($urandom % 3 == 0) @(negedge clk);
      in_valid = 1; in_data.data = d; in_data.last = (w == nw - 1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk) in_valid = 0;
    end
    while (!idle) @(negedge clk);
    repeat (2) @(negedge clk);
    check(exp_q.size() == 0 || expect_err, $sformatf("%0d values missing", exp_q.size()));
    check(err == expect_err, $sformatf("err=%0d expected %0d", err, expect_err));
    exp_q.delete();
    bytes.delete();
  endtask

  task automatic plain(int n, bit is64, int pad);
    for (int i = 0; i < n; i++) begin
      word_t v = {$urandom, $urandom};
      if (!is64) v = {{32{v[31]}}, v[31:0]};
      for (int b = 0; b < (is64 ? 8 : 4); b++) bytes.push_back(v[8*b +: 8]);
      exp_q.push_back(v);
    end
    run_job(MODE_DEC_PLAIN, is64 ? 8 : 4, n, pad, 0);
  endtask

  task automatic load_dict(int n, bit is64);
    for (int i = 0; i < n; i++) begin
      word_t v = {$urandom, $urandom};
      if (!is64) v = {{32{v[31]}}, v[31:0]};
      for (int b = 0; b < (is64 ? 8 : 4); b++) bytes.push_back(v[8*b +: 8]);
      dict_ref[i] = v;
    end
    run_job(MODE_LOAD_TABLE, is64 ? 8 : 4, n, 0, 0);
  endtask

  task automatic rle_dict(int dsize, int bw, int nruns, bit truncate);
    int total = 0;
    bytes.push_back(byte'(bw));
    for (int r = 0; r < nruns; r++) begin
      if ($urandom % 2 == 0) begin
        int cnt = 1 + $urandom % 40;
        int idx = (dsize > 1) ? $urandom % dsize : 0;
        put_uleb(cnt << 1);
        for (int b = 0; b < (bw + 7) / 8; b++) bytes.push_back(byte'(idx >> (8 * b)));
        for (int k = 0; k < cnt; k++) exp_q.push_back(dict_ref[idx]);
        total += cnt;
        n_rle++;
      end else begin
        int groups = 1 + $urandom % 20;
        int nvals  = 8 * groups;
        int keep   = (r == nruns - 1) ? nvals - ($urandom % 8) : nvals;  // padded last group
        logic [63:0] acc = 0;
        int nb = 0;
        put_uleb((groups << 1) | 1);
        for (int k = 0; k < nvals; k++) begin
          int idx = (dsize > 1) ? $urandom % dsize : 0;
          if (k < keep) exp_q.push_back(dict_ref[idx]);
          acc |= 64'(idx) << nb;
          nb += bw;
          while (nb >= 8) begin bytes.push_back(acc[7:0]); acc >>= 8; nb -= 8; end
        end
        if (nb > 0) bytes.push_back(acc[7:0]);
        total += keep;
        n_bp++;
      end
    end
    if (truncate) begin
      // drop the tail of the page: the decoder must flag the error
      repeat (bytes.size() / 2) void'(bytes.pop_back());
      ignore_vals = 1;
    end
    run_job(MODE_DEC_RLEDICT, 0, total, truncate ? 0 : 1, truncate);
    ignore_vals = 0;
  endtask

  initial begin
    in_valid = 0; in_data = '0; job_start = 0; mode = MODE_DEC_PLAIN; p0 = 0; p1 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    plain(37, 0, 0);
    plain(40, 0, 2);
    plain(25, 1, 1);
    load_dict(1000, 1);
    rle_dict(1000, 10, 30, 0);
    load_dict(32, 0);
    rle_dict(32, 5, 30, 0);
    load_dict(2, 1);
    rle_dict(2, 1, 20, 0);
    load_dict(1, 1);
    rle_dict(1, 0, 10, 0);
    load_dict(4096, 1);
    rle_dict(4096, 12, 40, 0);
    rle_dict(4096, 12, 10, 1);
    plain(10, 1, 0);
    check(n_rle > 0 && n_bp > 0, "both run kinds exercised");
    $display("rle runs=%0d bit-packed runs=%0d", n_rle, n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
