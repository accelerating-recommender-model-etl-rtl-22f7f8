// etl_pipeline: one ETL pipeline as loaded into a dynamic region.
//
//   dma_source -> stage_a -> vocab_unit -> batch_packer
//   (M-1: Clamp, Log | M-2: Hex2Int, Modulus)  (M-3 Gen / M-4 Map)
//
// The read DMA engine streams column words from local/host or remote memory,
// the fused stateless stage transforms them at one word per cycle, the
// vocabulary operator maps sparse values to indices (or is bypassed for a
// stateless pipeline), and the packer writes batches to the GPU staging
// buffers. Every link is valid/ready, so a missing GPU credit stalls the
// packer, the stage and finally the DMA engine, which stops issuing reads.
// Run-time settings (Modulus range, vocabulary mode, staging buffers) come
// from the control plane and are held stable while a stream runs.
module etl_pipeline
  import piperec_pkg::*;
#(
  parameter int unsigned NUM_COLS      = 26,
  parameter int unsigned VOCAB_DEPTH   = 8192,
  parameter int unsigned N_BUF         = 2,
  parameter int unsigned BATCH_WORDS   = 16384,
  parameter int unsigned BURST         = 64,
  parameter int unsigned LOG_FRAC_BITS = 20
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // control plane
  input  logic [31:0]                  divisor,
  input  vocab_mode_e                  mode,
  input  logic                         vocab_clear,
  input  logic [N_BUF-1:0][ADDR_W-1:0] buf_base,
  input  logic                         credit_return,
  input  logic                         desc_valid,
  output logic                         desc_ready,
  input  desc_t                        desc,
  // memory / network read side
  output logic                         rd_req_valid,
  output logic                         rd_req_net,
  input  logic                         rd_req_ready,
  output rd_req_t                      rd_req,
  input  logic                         rd_data_valid,
  input  word_t                        rd_data,
  // GPU write side
  output logic                         wr_valid,
  input  logic                         wr_ready,
  output wr_beat_t                     wr_beat,
  // status
  output logic                         done_valid,
  output logic [$clog2(N_BUF)-1:0]     done_buf,
  output logic [31:0]                  done_words,
  output logic                         done_last,
  output logic                         vocab_busy,
  output logic [31:0]                  stall_cycles,
  output logic [31:0]                  vocab_overflows,
  output logic [31:0]                  vocab_misses,
  output logic [31:0]                  vocab_new,
  output logic [W-1:0]                 bad_hex,
  output logic                         src_idle
);

  logic       s_valid, s_ready, a_valid, a_ready, v_valid, v_ready;
  word_t      s_data, a_data, v_data;
  word_user_t s_user, a_user, v_user;

  dma_source #(.BURST(BURST)) u_src (
    .clk, .rst_n, .desc_valid, .desc_ready, .desc,
    .rd_req_valid, .rd_req_net, .rd_req_ready, .rd_req, .rd_data_valid, .rd_data,
    .out_valid(s_valid), .out_ready(s_ready), .out_data(s_data), .out_user(s_user),
    .idle(src_idle));

  stage_a #(.LOG_FRAC_BITS(LOG_FRAC_BITS)) u_stage_a (
    .clk, .rst_n, .divisor,
    .in_valid(s_valid), .in_ready(s_ready), .in_data(s_data), .in_user(s_user),
    .out_valid(a_valid), .out_ready(a_ready), .out_data(a_data), .out_user(a_user),
    .out_bad(bad_hex));

  vocab_unit #(.NUM_COLS(NUM_COLS), .DEPTH(VOCAB_DEPTH)) u_vocab (
    .clk, .rst_n, .mode, .clear(vocab_clear), .busy(vocab_busy),
    .in_valid(a_valid), .in_ready(a_ready), .in_data(a_data), .in_user(a_user),
    .out_valid(v_valid), .out_ready(v_ready), .out_data(v_data), .out_user(v_user),
    .overflow_count(vocab_overflows), .miss_count(vocab_misses), .new_count(vocab_new));

  batch_packer #(.N_BUF(N_BUF), .BATCH_WORDS(BATCH_WORDS), .WR_BURST(BURST)) u_pack (
    .clk, .rst_n, .buf_base, .credit_return,
    .in_valid(v_valid), .in_ready(v_ready), .in_data(v_data), .in_user(v_user),
    .wr_valid, .wr_ready, .wr_beat,
    .done_valid, .done_buf, .done_words, .done_last, .credits(),
    .stall_cycles, .batches());

endmodule
