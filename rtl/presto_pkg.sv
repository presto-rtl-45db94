// presto_pkg: types and constants shared by the in-storage preprocessing accelerator.
//
// The accelerator sits on the FPGA of a computational SSD. Every processing element (PE)
// owns one read channel and one write channel into the FPGA's DRAM ("global memory"),
// streams feature values through a small double-buffered on-chip feature buffer and a
// dedicated kernel (Parquet decoder, Bucketize, SigridHash or Log), and writes the results
// back to DRAM. The paper names these units; the bus widths, the job descriptor and the
// memory handshake defined here are this design's own choices.
//
// Memory channel timing: a request is taken on a cycle where valid && ready. Read data
// returns in request order, some cycles later, as a one-cycle rsp_valid pulse with no
// back-pressure; a PE only issues a read for which its feature buffer has room.
package presto_pkg;

  // DRAM word and address widths. One word is 64 bits; addresses count words.
  localparam int unsigned WORD_W = 64;
  localparam int unsigned ADDR_W = 32;
  localparam int unsigned CNT_W  = 32;

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [CNT_W-1:0]  cnt_t;

  // Read request / response, write request (AXI-like split channels).
  typedef struct packed {
    logic  valid;
    addr_t addr;
  } rd_req_t;

  typedef struct packed {
    logic  valid;
    word_t data;
  } rd_rsp_t;

  typedef struct packed {
    logic  valid;
    addr_t addr;
    word_t data;
  } wr_req_t;

  // Kinds of processing element.
  typedef enum logic [1:0] {
    PE_DECODE    = 2'd0,
    PE_BUCKETIZE = 2'd1,
    PE_SIGRID    = 2'd2,
    PE_LOG       = 2'd3
  } pe_kind_e;

  // Job modes. A PE ignores modes that do not belong to its kind.
  typedef enum logic [2:0] {
    MODE_RUN        = 3'd0,  // transform n_in words from src into dst
    MODE_LOAD_TABLE = 3'd1,  // Bucketize: load bucket boundaries; Decoder: load dictionary page
    MODE_DEC_PLAIN  = 3'd2,  // Decoder: PLAIN page -> values
    MODE_DEC_RLEDICT = 3'd3  // Decoder: RLE/bit-packed dictionary indices -> dictionary values
  } job_mode_e;

  // Job descriptor, written by the host through the control registers.
  typedef struct packed {
    job_mode_e mode;
    addr_t     src;    // first DRAM word to read
    addr_t     dst;    // first DRAM word to write
    cnt_t      n_in;   // number of words to read
    word_t     p0;     // kernel parameter 0 (see each kernel)
    word_t     p1;     // kernel parameter 1
  } job_t;

  // Streaming element between feature buffer and kernel.
  typedef struct packed {
    logic  last;
    word_t data;
  } elem_t;

  // ln(2) in unsigned Q0.32, round(ln2 * 2^32).
  localparam logic [31:0] LN2_Q32 = 32'hB172_17F8;

  // Multiplier of the 128-to-64-bit hash mix used by SigridHash.
  localparam logic [63:0] HASH_MUL = 64'h9DDF_EA08_EB38_2D69;

endpackage
