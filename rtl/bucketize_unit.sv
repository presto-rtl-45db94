// bucketize_unit: feature generation by Bucketize (dense value -> sparse bucket id).
//
// For every dense value a the unit returns the bucket id: the number of boundaries b[i]
// with b[i] <= a, found by binary search over the sorted boundaries held in its bucket
// buffer (Algorithm 1 of the paper: "find the index of buckets to which the input value
// belongs using binary search"). With m boundaries, ids run from 0 (a < b[0]) to m
// (a >= b[m-1]).
//
// Modes (job_mode_e):
//   MODE_LOAD_TABLE  every input word carries one boundary in bits [31:0]; they are written
//                    to the bucket buffer at addresses 0,1,2,... The `last` word ends the
//                    table. Nothing is output.
//   MODE_RUN         every input word carries a signed 32-bit dense value in bits [31:0];
//                    one output word, the bucket id zero-extended, is produced per input,
//                    with `last` passed through.
// num_bounds (m, 0..DEPTH) is the number of boundaries loaded; it is sampled per element.
//
// Timing: the bucket buffer reads synchronously, and the next probe address is computed
// combinationally from the word just read, so the search takes one cycle per step, at
// most ceil(log2(m+1)) steps. One element costs steps + 2 cycles (accept, search, output):
// at most 13 cycles for m = 1024, 15 for m = 4096. A boundary load takes one cycle per word.
// The binary search is the paper's; the step timing, the 32-bit signed value format and
// the "boundaries <= value" convention (upper bound) are this design's choices.
module bucketize_unit
  import presto_pkg::*;
#(
  parameter int unsigned DEPTH = 4096
) (
  input  logic       clk,
  input  logic       rst_n,
  input  job_mode_e  mode,
  input  logic [$clog2(DEPTH):0] num_bounds,
  input  logic       in_valid,
  output logic       in_ready,
  input  elem_t      in_data,
  output logic       out_valid,
  input  logic       out_ready,
  output elem_t      out_data,
  output logic       idle
);
  localparam int unsigned AW = $clog2(DEPTH);

  typedef enum logic [1:0] {S_IDLE, S_SEARCH, S_OUT} state_e;
  state_e state;

  logic [AW:0]         lo, hi, lo_n, hi_n;
  logic signed [31:0]  a;
  logic                a_last;
  logic [AW-1:0]       raddr, load_idx;
  logic [31:0]         rdata;
  logic                we;

  bucket_buffer #(.DEPTH(DEPTH), .WIDTH(32)) u_bkt_buf (
    .clk, .we, .waddr(load_idx), .wdata(in_data.data[31:0]), .raddr, .rdata
  );

  wire loading = (mode == MODE_LOAD_TABLE);
  assign in_ready = (state == S_IDLE);
  wire accept = in_valid && in_ready;
  assign we = accept && loading;

  // One search step on the boundary just read: b[mid] <= a moves lo above mid.
  always_comb begin
    logic [AW:0] mid;
    mid  = (lo + hi) >> 1;
    lo_n = lo;
    hi_n = hi;
    if ($signed(rdata) <= a) lo_n = mid + 1'b1;
    else                     hi_n = mid;
  end

  // Next probe address.
  always_comb begin
    logic [AW:0] s;
    if (state == S_SEARCH) s = (lo_n + hi_n) >> 1;
    else                   s = num_bounds >> 1;
    raddr = s[AW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      lo       <= '0;
      hi       <= '0;
      a        <= '0;
      a_last   <= 1'b0;
      load_idx <= '0;
    end else begin
      case (state)
        S_IDLE: if (accept) begin
          if (loading) begin
            load_idx <= in_data.last ? '0 : load_idx + 1'b1;
          end else begin
            a      <= $signed(in_data.data[31:0]);
            a_last <= in_data.last;
            lo     <= '0;
            hi     <= num_bounds;
            state  <= (num_bounds == '0) ? S_OUT : S_SEARCH;
          end
        end
        S_SEARCH: begin
          lo <= lo_n;
          hi <= hi_n;
          if (lo_n >= hi_n) state <= S_OUT;
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign out_valid     = (state == S_OUT);
  assign out_data.last = a_last;
  assign out_data.data = WORD_W'(lo);
  assign idle          = (state == S_IDLE);
endmodule
