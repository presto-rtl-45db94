// feature_buffer_tb: self-checking test of the double-buffered feature buffer.
//
// Pushes random words (with `last` on some of them) through the buffer with random
// producer and consumer stalls, and checks that every word comes out once, in order, with
// its `last` flag, that a bank closed by `flush` ends with `last`, that writes and reads
// overlap in time (the point of double buffering) and that free_slots never exceeds
// the two banks.
module feature_buffer_tb;
  import presto_pkg::*;
  localparam int unsigned DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  wr_valid, wr_ready, rd_valid, rd_ready, flush, empty;
  elem_t wr_data, rd_data;
  logic [$clog2(2*DEPTH+1)-1:0] free_slots;

  feature_buffer #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, overlap = 0;
  elem_t exp_q [$];
  int n_sent = 0, n_recv = 0;
  localparam int N = 400;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // producer
  always @(posedge clk) if (rst_n) begin
    if (wr_valid && wr_ready) begin
      exp_q.push_back(wr_data);
      n_sent++;
    end
    if (!(wr_valid && !wr_ready)) begin
      wr_valid     <= (n_sent < N) && ($urandom % 3 != 0);
      wr_data.data <= {$urandom, $urandom};
      wr_data.last <= ($urandom % 13 == 0);
    end
    rd_ready <= ($urandom % 3 != 0);
  end

  // consumer
  always @(posedge clk) if (rst_n) begin
    if (wr_valid && wr_ready && rd_valid && rd_ready) overlap++;
    if (rd_valid && rd_ready) begin
      elem_t e;
      e = exp_q.pop_front();
      check(rd_data.data == e.data, $sformatf("data %0d", n_recv));
      check(rd_data.last == e.last, $sformatf("last %0d", n_recv));
      n_recv++;
    end
    check(free_slots <= 2*DEPTH, "free_slots range");
  end

  initial begin
    wr_valid = 0; rd_ready = 0; flush = 0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (n_sent == N);
    // let the consumer catch up to what is stuck in a partly filled bank
    repeat (200) @(posedge clk);
    if (exp_q.size() > 0) begin
      // the tail without `last`: flush it and expect its final word to read as last
      elem_t t;
      t = exp_q.pop_back(); t.last = 1'b1; exp_q.push_back(t);
      @(negedge clk) flush = 1;
      @(negedge clk) flush = 0;
      repeat (100) @(posedge clk);
    end
    check(n_recv == N, $sformatf("received %0d of %0d", n_recv, N));
    check(empty, "empty at end");
    check(free_slots == 2*DEPTH, "all slots free at end");
    check(overlap > 0, "writes overlap reads");
    $display("overlap cycles=%0d", overlap);
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
