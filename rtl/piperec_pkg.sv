// piperec_pkg: types and constants shared by the streaming ETL engine.
//
// The engine moves 64-byte words. Each word is split into W = 8 lanes of
// 64 bits, the lane count printed for the fused stateless stage. A word
// always belongs to one column of the columnar input: a dense column holds
// IEEE-754 float32 values in the low half of each lane, a sparse column holds
// 8 ASCII hex characters per lane (first character in the lowest byte). The
// sideband `word_user_t` travels with every word and says which column it
// belongs to and whether it is dense or sparse. Lane size, float format and
// character order are this design's choices; the 64-byte word and W = 8 come
// from the paper.
package piperec_pkg;

  localparam int unsigned W      = 8;          // lanes per word
  localparam int unsigned ELEM_W = 64;         // bits per lane
  localparam int unsigned DATA_W = W * ELEM_W; // 512-bit word
  localparam int unsigned COL_W  = 10;         // column id width (up to 1024 columns)
  localparam int unsigned ADDR_W = 64;         // byte address
  localparam int unsigned LEN_W  = 32;         // length in words

  typedef logic [ELEM_W-1:0]       elem_t;
  typedef logic [W-1:0][ELEM_W-1:0] word_t;

  // Sideband of a stream word.
  typedef struct packed {
    logic             sparse;   // 1: sparse (categorical) column, 0: dense
    logic [COL_W-1:0] col;      // column id (for sparse: index of the sparse column)
    logic             last;     // last word of the whole stream
  } word_user_t;

  // Operating mode of the stateful vocabulary operator.
  typedef enum logic [1:0] {
    VOCAB_BYPASS = 2'd0,        // Pipeline I: no vocabulary
    VOCAB_FIT    = 2'd1,        // VocabGen: build the table
    VOCAB_APPLY  = 2'd2         // VocabMap: look values up
  } vocab_mode_e;

  // Column descriptor handed to the read DMA engine.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;    // byte address of the column chunk (virtual)
    logic [LEN_W-1:0]  words;   // number of 64-byte words
    logic              sparse;
    logic [COL_W-1:0]  col;
    logic              last;    // last descriptor of the stream
    logic              net;     // 1: read from remote memory (RDMA), 0: local/host
  } desc_t;

  // Memory read request / write beat toward an arbiter.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [15:0]       len;     // words in the burst
  } rd_req_t;

  typedef struct packed {
    logic [ADDR_W-1:0] addr;    // address of this beat
    word_t             data;
    logic              last;    // last beat of the burst
  } wr_beat_t;

  localparam logic [31:0] FP_ZERO = 32'h0000_0000;

endpackage
