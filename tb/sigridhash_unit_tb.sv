// sigridhash_unit_tb: self-checking test of the SigridHash unit.
//
// For a set of (seed, d) pairs (d = 0, 1, 2, 3, 500000, a power of two, a large 63-bit
// value) it streams random 64-bit ids through the unit with random output stalls and
// compares each result with a reference: the CityHash 128-to-64 mix of (seed, id), low 63
// bits, reduced with the % operator. It also checks that with no stalls N elements leave
// the 6-stage pipeline in N + 5 cycles after the first is accepted (one per cycle).
module sigridhash_unit_tb;
  import presto_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  job_start, in_valid, in_ready, out_valid, out_ready, idle;
  word_t seed, max_value;
  elem_t in_data, out_data;

  sigridhash_unit dut (.*);

  int checks = 0, failures = 0;
  word_t exp_q [$];
  logic  lst_q [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic word_t ref_hash(word_t x, word_t s, word_t d);
    logic [63:0] k = 64'h9DDF_EA08_EB38_2D69;
    logic [63:0] a, b;
    a = (x ^ s) * k;  a = a ^ (a >> 47);
    b = (s ^ a) * k;  b = b ^ (b >> 47);
    b = b * k;
    b[63] = 1'b0;
    if (d == 0) return b;
    return b % d;
  endfunction

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    word_t e;
    logic  l;
    e = exp_q.pop_front();
    l = lst_q.pop_front();
    check(out_data.data == e, $sformatf("seed %h d %0d got %h exp %h", seed, max_value, out_data.data, e));
    check(out_data.last == l, "last");
  end

  always @(posedge clk) out_ready <= stall_en ? ($urandom % 4 != 0) : 1'b1;
  bit stall_en = 1;

  task automatic run(word_t s, word_t d, int n, bit stalls);
    @(negedge clk);
    seed = s; max_value = d; stall_en = stalls;
    job_start = 1;
    @(negedge clk) job_start = 0;
    for (int i = 0; i < n; i++) begin
      word_t x;
      x = (i % 5 == 0) ? word_t'(i) : {$urandom, $urandom};
      in_valid = 1; in_data.data = x; in_data.last = (i == n - 1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      exp_q.push_back(ref_hash(x, s, d));
      lst_q.push_back(i == n - 1);
      @(negedge clk);
    end
    in_valid = 0;
    while (exp_q.size() > 0) @(posedge clk);
    @(negedge clk);
  endtask

  initial begin
    longint t0, t1;
    in_valid = 0; in_data = '0; job_start = 0; seed = 0; max_value = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(64'd0,         64'd500000, 200, 1);
    run(64'd12345,     64'd0,      50,  1);
    run(64'd7,         64'd1,      50,  1);
    run(64'd99,        64'd2,      50,  1);
    run(64'hDEADBEEF,  64'd3,      100, 1);
    run(64'd42,        64'd1 << 20, 100, 1);
    run({$urandom, $urandom}, 64'h5A5A_5A5A_1234_5677, 100, 1);
    run({$urandom, $urandom}, 64'd10_000_019, 200, 1);
    // throughput: no stalls, back-to-back input
    @(negedge clk);
    stall_en = 0; seed = 64'd5; max_value = 64'd500000;
    job_start = 1;
    @(negedge clk) job_start = 0;
    while (!in_ready) @(negedge clk);
    t0 = $time / 10;
    for (int i = 0; i < 100; i++) begin
      in_valid = 1; in_data.data = word_t'(i * 7919); in_data.last = (i == 99);
      exp_q.push_back(ref_hash(word_t'(i * 7919), 64'd5, 64'd500000));
      lst_q.push_back(i == 99);
      @(negedge clk);
    end
    in_valid = 0;
    while (!(out_valid && out_data.last)) @(negedge clk);
    t1 = $time / 10;
    check(t1 - t0 == 100 + 5, $sformatf("100 elements took %0d cycles, expected 105", t1 - t0));
    repeat (3) @(posedge clk);
    check(idle, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
