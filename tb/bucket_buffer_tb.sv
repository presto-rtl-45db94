// bucket_buffer_tb: self-checking test of the bucket boundary RAM.
//
// Fills every entry with a random word, then reads all entries back in random order and
// checks each word one cycle after its address, also while writes to other entries go on.
module bucket_buffer_tb;
  localparam int unsigned DEPTH = 4096, WIDTH = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we;
  logic [$clog2(DEPTH)-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  bucket_buffer #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = i[11:0]; wdata = $urandom; ref_mem[i] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 3*DEPTH; i++) begin
      logic [$clog2(DEPTH)-1:0] a;
      a = $urandom;
      @(negedge clk) raddr = a;
      // concurrent write to a different entry
      we = ($urandom % 2) == 1; waddr = a + 1'b1; wdata = $urandom;
      @(posedge clk) #1;
      checks++;
      if (rdata !== ref_mem[a]) begin
        failures++; $display("FAIL: addr %0d got %h exp %h", a, rdata, ref_mem[a]);
      end
      if (we) ref_mem[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
