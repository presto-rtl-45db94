// log_unit_tb: self-checking test of the Log unit.
//
// Streams signed 32-bit values (zero, negatives, small counts, powers of two and their
// neighbours, random values up to 2^31-1) with offsets 1 and 3 through the unit, with
// random output stalls, and compares each float32 result with ln(max(x + offset, 1))
// computed in double precision: relative error at most 2^-20. Also checks that with no
// stalls N elements leave the pipeline in N + 26 cycles after the first (27 stages).
module log_unit_tb;
  import presto_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] offset;
  logic  in_valid, in_ready, out_valid, out_ready, idle;
  elem_t in_data, out_data;

  log_unit dut (.*);

  int checks = 0, failures = 0;
  real   exp_q [$];
  bit stall_en = 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real f32_to_real(logic [31:0] f);
    real m;
    int  e;
    if (f[30:0] == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    return (f[31] ? -m : m) * (2.0 ** e);
  endfunction

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    real e, g, tol;
    e = exp_q.pop_front();
    g = f32_to_real(out_data.data[31:0]);
    tol = (e < 1.0 ? 1.0 : e) * (2.0 ** -20);
    check((g - e) <= tol && (e - g) <= tol, $sformatf("got %f exp %f (%h)", g, e, out_data.data[31:0]));
  end
  always @(posedge clk) out_ready <= stall_en ? ($urandom % 4 != 0) : 1'b1;

  task automatic push(int signed x);
    longint y;
    y = longint'(x) + longint'(signed'(offset));
    if (y < 1) y = 1;
    in_valid = 1; in_data.data = WORD_W'(unsigned'(x)); in_data.last = 0;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    exp_q.push_back($ln(real'(y)));
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    longint t0, t1;
    in_valid = 0; in_data = '0; offset = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    foreach (offset_vals[j]) begin
      offset = offset_vals[j];
      push(0); push(-5); push(-1); push(1); push(2); push(3);
      push(2147483647 - 3);
      for (int k = 1; k < 31; k++) begin push((1 << k) - 1); push(1 << k); push((1 << k) + 1); end
      for (int i = 0; i < 300; i++) push(int'($urandom % 100000));
      for (int i = 0; i < 100; i++) push(int'($urandom >> 1));
    end
    while (exp_q.size() > 0) @(posedge clk);
    // throughput
    @(negedge clk);
    stall_en = 0;
    repeat (3) @(negedge clk);
    offset = 1;
    t0 = $time / 10;
    for (int i = 0; i < 64; i++) begin
      in_valid = 1; in_data.data = WORD_W'(i * 1000); in_data.last = (i == 63);
      exp_q.push_back($ln(real'(i * 1000 + 1)));
      @(negedge clk);
    end
    in_valid = 0;
    while (!(out_valid && out_data.last)) @(negedge clk);
    t1 = $time / 10;
    check(t1 - t0 == 64 + 26, $sformatf("64 elements took %0d cycles, expected 90", t1 - t0));
    repeat (3) @(posedge clk);
    check(idle, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int offset_vals [2] = '{1, 3};

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
