// bucketize_unit_tb: self-checking test of the Bucketize unit.
//
// For several boundary counts m (0, 1, 7, 1000, 1024, 4096) it loads m sorted random
// signed boundaries (with duplicates), bucketizes random values and values equal to
// boundaries, and compares each bucket id with a linear count of boundaries <= value.
// It also checks that no element takes longer than ceil(log2(m+1)) + 2 cycles and that
// `last` is passed through.
module bucketize_unit_tb;
  import presto_pkg::*;
  localparam int unsigned DEPTH = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  job_mode_e mode;
  logic [$clog2(DEPTH):0] num_bounds;
  logic in_valid, in_ready, out_valid, out_ready, idle;
  elem_t in_data, out_data;

  bucketize_unit #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int signed bnd [DEPTH];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int clog2i(int x);
    int r = 0;
    while ((1 << r) < x) r++;
    return r;
  endfunction

  task automatic run(int m, int nvals);
    int signed vals [$];
    // sorted boundaries with duplicates
    int signed cur = -50000;
    for (int i = 0; i < m; i++) begin
      cur += ($urandom % 4 == 0) ? 0 : int'($urandom % 200);
      bnd[i] = cur;
    end
    // load table
    @(negedge clk);
    mode = MODE_LOAD_TABLE;
    for (int i = 0; i < m; i++) begin
      in_valid = 1; in_data.data = WORD_W'(unsigned'(bnd[i])); in_data.last = (i == m - 1);
      @(posedge clk); #1;
      while (!in_ready) begin @(posedge clk); #1; end
      @(negedge clk);
    end
    in_valid = 0;
    num_bounds = ($clog2(DEPTH)+1)'(m);
    mode = MODE_RUN;
    for (int i = 0; i < nvals; i++) begin
      if (m > 0 && i % 3 == 0) vals.push_back(bnd[$urandom % m]);
      else vals.push_back(int'($urandom % 120000) - 60000);
    end
    vals.push_back(-2147483648);
    vals.push_back(2147483647);
    foreach (vals[k]) begin
      int exp_id = 0, cyc = 0;
      for (int i = 0; i < m; i++) if (bnd[i] <= vals[k]) exp_id++;
      @(negedge clk);
      in_valid = 1; in_data.data = WORD_W'(unsigned'(vals[k])); in_data.last = (k == vals.size() - 1);
      out_ready = 1;
      do begin @(posedge clk); #1; end while (!in_ready && 0);
      @(negedge clk) in_valid = 0;
      cyc = 1;
      while (!out_valid) begin @(posedge clk); #1; cyc++; end
      check(out_data.data == WORD_W'(exp_id),
            $sformatf("m=%0d a=%0d got %0d exp %0d", m, vals[k], out_data.data, exp_id));
      check(out_data.last == (k == vals.size() - 1), "last passthrough");
      check(cyc + 1 <= clog2i(m + 1) + 2,
            $sformatf("m=%0d element took %0d cycles, bound %0d", m, cyc + 1, clog2i(m + 1) + 2));
      @(posedge clk); #1;
    end
  endtask

  initial begin
    in_valid = 0; in_data = '0; out_ready = 1; mode = MODE_RUN; num_bounds = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 5);
    run(1, 10);
    run(7, 40);
    run(1000, 100);
    run(1024, 100);
    run(4096, 200);
    check(idle, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
