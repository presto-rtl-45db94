// parquet_decoder: the decoder unit, turning Parquet-encoded column pages into values.
//
// Raw feature columns are stored as Apache Parquet files. This unit decodes the value
// section of a data page, read from DRAM as a little-endian byte stream packed 8 bytes per
// 64-bit word, into one value per output word. Three job modes:
//
//   MODE_DEC_PLAIN    PLAIN encoding of INT32 (p0[3:0] = 4, sign-extended to 64 bits) or
//                     INT64 (p0[3:0] = 8) values.
//   MODE_LOAD_TABLE   a PLAIN-encoded dictionary page, decoded as above and written into
//                     the on-chip dictionary at entries 0,1,2,... instead of being output.
//   MODE_DEC_RLEDICT  an RLE_DICTIONARY data page: one byte giving the index bit width,
//                     then the RLE / bit-packed hybrid runs. Each run starts with a ULEB128
//                     header h; h odd: (h>>1)*8 indices bit-packed LSB first; h even: h>>1
//                     repeats of one index stored in ceil(width/8) little-endian bytes.
//                     Every index is replaced by its dictionary entry.
//
// p1[31:0] is the number of values in the page. The unit outputs exactly that many values
// (the final one flagged `last`), discards what is left of the input (padding of the last
// word, padding values of the last bit-packed group) and becomes idle when the input word
// flagged `last` has been consumed. If the input ends early, `err` is set.
//
// The paper names a hardwired decoder for Parquet files and says decoding is less parallel
// than the transformations; the choice of encodings handled here, and the restriction to
// required (non-nullable, non-repeated) columns with page headers already stripped and no
// compression, are this design's. Sparse features are therefore decoded as their flat
// value column.
//
// Timing: PLAIN: one value per cycle (INT32 and INT64). Dictionary pages: one input byte
// per cycle, one value per cycle out of a run; dictionary read is synchronous, so values
// leave through an output register. job_start pulses once at the start of a job.
module parquet_decoder
  import presto_pkg::*;
#(
  parameter int unsigned DICT_DEPTH = 4096
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      job_start,
  input  job_mode_e mode,
  input  word_t     p0,
  input  word_t     p1,
  input  logic      in_valid,
  output logic      in_ready,
  input  elem_t     in_data,
  output logic      out_valid,
  input  logic      out_ready,
  output elem_t     out_data,
  output logic      idle,
  output logic      err
);
  localparam int unsigned DAW = $clog2(DICT_DEPTH);

  typedef enum logic [2:0] {
    S_IDLE, S_PLAIN, S_BW, S_HDR, S_RLEVAL, S_RLEOUT, S_BP, S_DRAIN
  } state_e;
  state_e state;

  word_t        dict [DICT_DEPTH];

  // current input word
  word_t        wbuf;
  logic         wvalid, wlast;
  logic         in_done;   // the word flagged `last` has been consumed
  logic [2:0]   bi;        // next byte within wbuf
  logic         half;      // INT32 PLAIN: next value is the upper half

  // page bookkeeping
  logic [31:0]  remaining;
  logic [5:0]   bw;        // index bit width
  logic [31:0]  hdr;
  logic [4:0]   hshift;
  logic [34:0]  cnt;       // values left in the current run
  logic [31:0]  rval;      // RLE run value
  logic [2:0]   vb;        // RLE value bytes read
  logic [39:0]  acc;       // bit-packed accumulator
  logic [5:0]   nbits;
  logic [DAW-1:0] load_idx;

  // output register
  logic         ov;
  elem_t        od;

  wire  [7:0]   cur_byte = wbuf[8*bi +: 8];
  wire          vw8      = (p0[3:0] == 4'd8);
  wire          loading  = (mode == MODE_LOAD_TABLE);
  wire          can_out  = !ov || out_ready;
  wire  [2:0]   nvb      = 3'((bw + 6'd7) >> 3);
  wire  [31:0]  bmask    = (bw >= 6'd32) ? 32'hFFFF_FFFF : ((32'd1 << bw) - 1);

  // ---- what happens this cycle ----
  logic         byte_take, word_done, emit, emit_dict;
  word_t        emit_val;
  logic [31:0]  emit_idx;
  always_comb begin
    byte_take = 1'b0;
    word_done = 1'b0;
    emit      = 1'b0;
    emit_dict = 1'b0;
    emit_val  = '0;
    emit_idx  = '0;
    case (state)
      S_PLAIN: if (wvalid && (loading || can_out)) begin
        emit      = 1'b1;
        emit_val  = vw8 ? wbuf : (half ? {{32{wbuf[63]}}, wbuf[63:32]}
                                       : {{32{wbuf[31]}}, wbuf[31:0]});
        word_done = vw8 || half;
      end
      S_BW, S_HDR, S_RLEVAL: byte_take = wvalid;
      S_RLEOUT: if (can_out) begin
        emit      = 1'b1;
        emit_dict = 1'b1;
        emit_idx  = rval;
      end
      S_BP: begin
        if (nbits >= bw) begin
          if (can_out) begin
            emit      = 1'b1;
            emit_dict = 1'b1;
            emit_idx  = acc[31:0] & bmask;
          end
        end else begin
          byte_take = wvalid;
        end
      end
      S_DRAIN: word_done = wvalid;
      default: ;
    endcase
    if (byte_take && bi == 3'd7) word_done = 1'b1;
  end

  // waiting for input that will never come
  wire needs_byte = (state == S_PLAIN) || (state == S_BW) || (state == S_HDR) ||
                    (state == S_RLEVAL) || (state == S_BP && nbits < bw);
  wire starved    = needs_byte && !wvalid && in_done;

  assign in_ready = (state != S_IDLE) && !in_done && (!wvalid || word_done);
  wire accept = in_valid && in_ready;

  // dictionary: write while loading, synchronous read into the output register
  always_ff @(posedge clk) begin
    if (state == S_PLAIN && emit && loading) dict[load_idx] <= emit_val;
    if (emit && !loading) begin
      od.data <= emit_dict ? dict[emit_idx[DAW-1:0]] : emit_val;
      od.last <= (remaining == 32'd1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      wbuf <= '0; wvalid <= 1'b0; wlast <= 1'b0; bi <= '0; half <= 1'b0;
      remaining <= '0; bw <= '0; hdr <= '0; hshift <= '0; cnt <= '0;
      rval <= '0; vb <= '0; acc <= '0; nbits <= '0; load_idx <= '0;
      ov <= 1'b0; err <= 1'b0; in_done <= 1'b0;
    end else begin
      // output register
      if (emit && !loading) ov <= 1'b1;
      else if (out_ready)   ov <= 1'b0;

      // input word
      if (accept) begin
        wbuf <= in_data.data; wlast <= in_data.last; wvalid <= 1'b1; bi <= '0; half <= 1'b0;
      end else if (word_done) begin
        wvalid <= 1'b0;
      end
      if (byte_take && !word_done) bi <= bi + 1'b1;

      if (emit) remaining <= remaining - 1'b1;
      if (word_done && wlast) in_done <= 1'b1;

      if (job_start) begin
        remaining <= p1[31:0];
        load_idx  <= '0;
        err       <= 1'b0;
        wvalid    <= 1'b0;
        in_done   <= 1'b0;
        if (p1[31:0] == '0)               state <= S_DRAIN;
        else if (mode == MODE_DEC_RLEDICT) state <= S_BW;
        else                               state <= S_PLAIN;
      end else if (emit && remaining == 32'd1) begin
        // page complete: drop what is left of the input
        state <= (in_done || (word_done && wlast)) ? S_IDLE : S_DRAIN;
      end else if (state == S_DRAIN && (in_done || (word_done && wlast))) begin
        state <= S_IDLE;
      end else if (starved) begin
        // input ended before the page was complete
        state <= S_IDLE;
        err   <= 1'b1;
      end else begin
        case (state)
          S_PLAIN: if (emit) begin
            half <= vw8 ? 1'b0 : ~half;
            if (loading) load_idx <= load_idx + 1'b1;
          end
          S_BW: if (byte_take) begin
            bw     <= cur_byte[5:0];
            hdr    <= '0;
            hshift <= '0;
            state  <= S_HDR;
          end
          S_HDR: if (byte_take) begin
            logic [31:0] h;
            h = hdr | (32'(cur_byte[6:0]) << hshift);
            if (cur_byte[7]) begin
              hdr    <= h;
              hshift <= hshift + 5'd7;
            end else begin
              hdr    <= '0;
              hshift <= '0;
              if (h[0]) begin
                cnt   <= 35'({h[31:1], 3'b000});
                acc   <= '0;
                nbits <= '0;
                state <= (h[31:1] == '0) ? S_HDR : S_BP;
              end else begin
                cnt   <= 35'(h[31:1]);
                rval  <= '0;
                vb    <= '0;
                if (h[31:1] == '0)  state <= S_HDR;
                else if (nvb == '0) state <= S_RLEOUT;
                else                state <= S_RLEVAL;
              end
            end
          end
          S_RLEVAL: if (byte_take) begin
            rval <= rval | (32'(cur_byte) << (5'(vb) * 5'd8));
            vb   <= vb + 1'b1;
            if (vb + 1'b1 == nvb) state <= S_RLEOUT;
          end
          S_RLEOUT: if (emit) begin
            cnt <= cnt - 1'b1;
            if (cnt == 35'd1) state <= S_HDR;
          end
          S_BP: begin
            if (emit) begin
              acc   <= acc >> bw;
              nbits <= nbits - bw;
              cnt   <= cnt - 1'b1;
              if (cnt == 35'd1) state <= S_HDR;
            end else if (byte_take) begin
              acc   <= acc | (40'(cur_byte) << nbits);
              nbits <= nbits + 6'd8;
            end
          end
          default: ;
        endcase
      end
    end
  end

  assign out_valid = ov;
  assign out_data  = od;
  assign idle      = (state == S_IDLE) && !ov;
endmodule
