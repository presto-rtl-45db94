// feature_buffer: double-buffered (ping-pong) on-chip feature buffer.
//
// Two banks of DEPTH elements. The producer fills one bank while the consumer drains the
// other, so that fetching the next chunk of a feature column from DRAM overlaps with the
// transformation of the current chunk (the double buffering the paper describes for every
// processing element). A bank is handed to the consumer when it is full or when an element
// flagged `last` is written into it; the consumer then reads it in order, and the bank
// returns to the producer once its final element has been read.
//
// Interface: valid/ready on both sides. rd_data is read combinationally from the bank
// (distributed RAM), so an element written into a bank that has just been closed is
// readable on the next cycle. `free_slots` counts the elements the producer can still
// write without waiting, used by the DRAM reader to bound its outstanding requests.
// `empty` is high when both banks are free and empty.
//
// The paper gives the double buffering; the bank depth, the `last` handling and the
// combinational read are this design's choices. `flush` hands a partly filled bank to the
// consumer, its final element then reads as `last`. The assertion is disabled during reset
// (`disable iff (!rst_n)`), which lint reports as a synchronous use of the asynchronous
// reset; the logic itself uses rst_n only asynchronously.
module feature_buffer
  import presto_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic  clk,
  input  logic  rst_n,
  // producer side
  input  logic  wr_valid,
  output logic  wr_ready,
  input  elem_t wr_data,
  input  logic  flush,      // close a partly filled bank that will get no `last`
  // consumer side
  output logic  rd_valid,
  input  logic  rd_ready,
  output elem_t rd_data,
  // status
  output logic [$clog2(2*DEPTH+1)-1:0] free_slots,
  output logic  empty
);
  localparam int unsigned IW = $clog2(DEPTH);

  elem_t            mem [2*DEPTH];
  logic [1:0]       full;        // bank handed to consumer
  logic [1:0]       lastf;       // bank closed by a `last` element
  logic [IW:0]      cnt [2];     // elements written into each bank
  logic             wbank, rbank;
  logic [IW-1:0]    ridx;

  assign wr_ready = !full[wbank];
  assign rd_valid = full[rbank];
  always_comb begin
    rd_data      = mem[{rbank, ridx}];
    rd_data.last = lastf[rbank] && ({1'b0, ridx} == cnt[rbank] - 1'b1);
  end

  always_comb begin
    free_slots = '0;
    for (int b = 0; b < 2; b++)
      if (!full[b]) free_slots += ($bits(free_slots))'(DEPTH - cnt[b]);
  end
  assign empty = (full == 2'b00) && (cnt[0] == '0) && (cnt[1] == '0);

  wire do_wr = wr_valid && wr_ready;
  wire do_rd = rd_valid && rd_ready;
  wire rd_end = do_rd && ({1'b0, ridx} == cnt[rbank] - 1'b1);

  always_ff @(posedge clk) begin
    if (do_wr) mem[{wbank, cnt[wbank][IW-1:0]}] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full  <= '0;
      lastf <= '0;
      cnt   <= '{default: '0};
      wbank <= 1'b0;
      rbank <= 1'b0;
      ridx  <= '0;
    end else begin
      if (do_wr) begin
        cnt[wbank] <= cnt[wbank] + 1'b1;
        if (wr_data.last || cnt[wbank] == (IW+1)'(DEPTH - 1)) begin
          full[wbank]  <= 1'b1;
          lastf[wbank] <= wr_data.last;
          wbank        <= ~wbank;
        end
      end
      if (flush && !do_wr && !full[wbank] && cnt[wbank] != '0) begin
        full[wbank]  <= 1'b1;
        lastf[wbank] <= 1'b1;
        wbank        <= ~wbank;
      end
      if (do_rd) begin
        if (rd_end) begin
          full[rbank]  <= 1'b0;
          lastf[rbank] <= 1'b0;
          cnt[rbank]   <= '0;
          ridx         <= '0;
          rbank        <= ~rbank;
        end else begin
          ridx <= ridx + 1'b1;
        end
      end
    end
  end

  // The two sides never touch the same bank in one cycle.
  a_bank_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    (do_wr && do_rd) |-> (wbank != rbank));
endmodule
