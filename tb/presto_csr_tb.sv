// presto_csr_tb: self-checking test of the control registers.
//
// For each of the 7 PEs it writes random job registers and reads them back through the
// bus and at the job outputs, then checks the CTRL register: a start write gives a
// one-cycle start pulse, is ignored while the PE is busy, done and error become sticky
// status bits when the PE reports done, and the next start clears them. Reserved and
// out-of-range addresses read 0.
module presto_csr_tb;
  import presto_pkg::*;
  localparam int NPE = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we;
  logic [$clog2(NPE)+2:0] cfg_addr;
  word_t cfg_wdata, cfg_rdata;
  job_t job [NPE];
  logic start [NPE], busy [NPE], done [NPE], err [NPE];

  presto_csr #(.NPE(NPE)) dut (.*);

  int checks = 0, failures = 0, n_start [NPE];
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) for (int p = 0; p < NPE; p++) if (start[p]) n_start[p]++;

  task automatic wr(int a, word_t d);
    @(negedge clk); cfg_we = 1; cfg_addr = 6'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0; #1;
  endtask
  task automatic rd_t(int a, output word_t d);
    cfg_addr = 6'(a); #1;
    d = cfg_rdata;
  endtask
  word_t rv;

  initial begin
    word_t v [6];
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    for (int p = 0; p < NPE; p++) begin busy[p] = 0; done[p] = 0; err[p] = 0; n_start[p] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NPE; p++) begin
      v[0] = word_t'($urandom % 4);
      v[1] = word_t'($urandom); v[2] = word_t'($urandom); v[3] = word_t'($urandom);
      v[4] = {$urandom, $urandom}; v[5] = {$urandom, $urandom};
      for (int r = 0; r < 6; r++) wr(8*p + r, v[r]);
      @(negedge clk);
      for (int r = 0; r < 6; r++) begin rd_t(8*p + r, rv); check(rv == v[r], $sformatf("PE %0d reg %0d readback", p, r)); end
      check(job[p].mode == job_mode_e'(v[0][2:0]) && job[p].src == v[1][31:0] &&
            job[p].dst == v[2][31:0] && job[p].n_in == v[3][31:0] &&
            job[p].p0 == v[4] && job[p].p1 == v[5], $sformatf("PE %0d job outputs", p));
      rd_t(8*p + 7, rv);
      check(rv == 0, "reserved reads 0");
      // start
      wr(8*p + 6, 1);
      check(n_start[p] == 1, $sformatf("PE %0d one start pulse (%0d)", p, n_start[p]));
      busy[p] = 1;
      @(negedge clk);
      rd_t(8*p + 6, rv);
      check(rv == 64'd1, "busy status");
      wr(8*p + 6, 1);                      // ignored while busy
      check(n_start[p] == 1, "start ignored while busy");
      // finish with an error
      @(negedge clk); busy[p] = 0; done[p] = 1; err[p] = (p % 2 == 1);
      @(negedge clk); done[p] = 0; err[p] = 0;
      rd_t(8*p + 6, rv);
      check(rv == {61'd0, (p % 2 == 1), 2'b10}, $sformatf("PE %0d done/err sticky", p));
      repeat (3) @(negedge clk);
      rd_t(8*p + 6, rv);
      check(rv == {61'd0, (p % 2 == 1), 2'b10}, "still sticky");
      wr(8*p + 6, 1);
      check(n_start[p] == 2, "restart");
      @(negedge clk);
      rd_t(8*p + 6, rv);
      check(rv == 64'd0, "restart clears done");
    end
    rd_t(8*7 + 1, rv);
    check(rv == 0, "out-of-range PE reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
