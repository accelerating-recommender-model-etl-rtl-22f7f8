// piperec_top: the FPGA side of the streaming ETL engine (one vFPGA).
//
// N_PIPES ETL pipelines, each in its own dynamic region, share the I/O and
// memory subsystem:
//   * the local arbiter (RD/WR arbiter + DMA) carries their reads of
//     on-board/host memory and their batch writes toward GPU memory, through
//     the MMU's TLB, to the memory port of the shell;
//   * the network arbiter carries reads of remote memory to the RDMA stack.
// A pipeline sends a read to the network arbiter when its current column
// descriptor is marked remote. The shell, RDMA stack, memories, GPU and CPU
// control plane are outside this module: their signals are ports. Per
// pipeline, the control plane sets the Modulus range, the vocabulary mode,
// the GPU staging buffers, and pushes column descriptors; the GPU returns
// one credit per freed staging buffer and sees one completion per batch.
module piperec_top
  import piperec_pkg::*;
#(
  parameter int unsigned N_PIPES       = 1,
  parameter int unsigned NUM_COLS      = 26,
  parameter int unsigned VOCAB_DEPTH   = 8192,
  parameter int unsigned N_BUF         = 2,
  parameter int unsigned BATCH_WORDS   = 16384,
  parameter int unsigned BURST         = 64,
  parameter int unsigned TLB_ENTRIES   = 16,
  parameter int unsigned PAGE_BITS     = 21
) (
  input  logic                                      clk,
  input  logic                                      rst_n,
  // control plane, per pipeline
  input  logic        [N_PIPES-1:0][31:0]           divisor,
  input  vocab_mode_e [N_PIPES-1:0]                 mode,
  input  logic        [N_PIPES-1:0]                 vocab_clear,
  input  logic        [N_PIPES-1:0][N_BUF-1:0][ADDR_W-1:0] buf_base,
  input  logic        [N_PIPES-1:0]                 desc_valid,
  output logic        [N_PIPES-1:0]                 desc_ready,
  input  desc_t       [N_PIPES-1:0]                 desc,
  // control plane, TLB fill
  input  logic                                      tlb_wr_en,
  input  logic        [$clog2(TLB_ENTRIES)-1:0]     tlb_wr_idx,
  input  logic                                      tlb_wr_valid,
  input  logic        [ADDR_W-PAGE_BITS-1:0]        tlb_wr_vpn,
  input  logic        [ADDR_W-PAGE_BITS-1:0]        tlb_wr_ppn,
  // GPU: credits back, batch completions out
  input  logic        [N_PIPES-1:0]                 credit_return,
  output logic        [N_PIPES-1:0]                 done_valid,
  output logic        [N_PIPES-1:0][$clog2(N_BUF)-1:0] done_buf,
  output logic        [N_PIPES-1:0][31:0]           done_words,
  output logic        [N_PIPES-1:0]                 done_last,
  // memory port of the shell (on-board / host memory, P2P writes to the GPU)
  output logic                                      mem_rd_req_valid,
  input  logic                                      mem_rd_req_ready,
  output rd_req_t                                   mem_rd_req,
  input  logic                                      mem_rd_data_valid,
  input  word_t                                     mem_rd_data,
  output logic                                      mem_wr_valid,
  input  logic                                      mem_wr_ready,
  output wr_beat_t                                  mem_wr_beat,
  // network port (RDMA stack, reads of remote memory)
  output logic                                      net_rd_req_valid,
  input  logic                                      net_rd_req_ready,
  output rd_req_t                                   net_rd_req,
  input  logic                                      net_rd_data_valid,
  input  word_t                                     net_rd_data,
  // status
  output logic        [N_PIPES-1:0]                 vocab_busy,
  output logic        [N_PIPES-1:0][31:0]           stall_cycles,
  output logic        [N_PIPES-1:0][31:0]           vocab_overflows,
  output logic        [N_PIPES-1:0][31:0]           vocab_misses,
  output logic        [N_PIPES-1:0][31:0]           vocab_new,
  output logic        [N_PIPES-1:0][W-1:0]          bad_hex,
  output logic        [N_PIPES-1:0]                 src_idle,
  output logic        [31:0]                        tlb_miss_count
);

  logic    [N_PIPES-1:0] p_rd_valid, p_rd_net, p_rd_ready, p_rd_data_valid;
  rd_req_t [N_PIPES-1:0] p_rd_req;
  logic    [N_PIPES-1:0] p_wr_valid, p_wr_ready;
  wr_beat_t [N_PIPES-1:0] p_wr_beat;

  logic    [N_PIPES-1:0] l_rd_valid, l_rd_ready, l_rd_dv;
  logic    [N_PIPES-1:0] n_rd_valid, n_rd_ready, n_rd_dv;
  word_t                 l_rd_data, n_rd_data;

  for (genvar p = 0; p < N_PIPES; p++) begin : g_pipe
    word_t rdata;
    assign l_rd_valid[p] = p_rd_valid[p] && !p_rd_net[p];
    assign n_rd_valid[p] = p_rd_valid[p] &&  p_rd_net[p];
    assign p_rd_ready[p] = p_rd_net[p] ? n_rd_ready[p] : l_rd_ready[p];
    // a pipeline never has reads in flight on both ports at once
    assign p_rd_data_valid[p] = l_rd_dv[p] || n_rd_dv[p];
    assign rdata = n_rd_dv[p] ? n_rd_data : l_rd_data;

    etl_pipeline #(
      .NUM_COLS(NUM_COLS), .VOCAB_DEPTH(VOCAB_DEPTH), .N_BUF(N_BUF),
      .BATCH_WORDS(BATCH_WORDS), .BURST(BURST)
    ) u_pipe (
      .clk, .rst_n,
      .divisor(divisor[p]), .mode(mode[p]), .vocab_clear(vocab_clear[p]),
      .buf_base(buf_base[p]), .credit_return(credit_return[p]),
      .desc_valid(desc_valid[p]), .desc_ready(desc_ready[p]), .desc(desc[p]),
      .rd_req_valid(p_rd_valid[p]), .rd_req_net(p_rd_net[p]), .rd_req_ready(p_rd_ready[p]),
      .rd_req(p_rd_req[p]), .rd_data_valid(p_rd_data_valid[p]), .rd_data(rdata),
      .wr_valid(p_wr_valid[p]), .wr_ready(p_wr_ready[p]), .wr_beat(p_wr_beat[p]),
      .done_valid(done_valid[p]), .done_buf(done_buf[p]), .done_words(done_words[p]),
      .done_last(done_last[p]), .vocab_busy(vocab_busy[p]), .stall_cycles(stall_cycles[p]),
      .vocab_overflows(vocab_overflows[p]), .vocab_misses(vocab_misses[p]),
      .vocab_new(vocab_new[p]), .bad_hex(bad_hex[p]), .src_idle(src_idle[p]));
  end

  // local / host memory side: arbiter then MMU
  logic     a_rd_valid, a_rd_ready, a_wr_valid, a_wr_ready;
  rd_req_t  a_rd_req;
  wr_beat_t a_wr_beat;

  rdwr_arbiter #(.N(N_PIPES)) u_local_arb (
    .clk, .rst_n,
    .rd_req_valid(l_rd_valid), .rd_req_ready(l_rd_ready), .rd_req(p_rd_req),
    .rd_data_valid(l_rd_dv), .rd_data(l_rd_data),
    .wr_valid(p_wr_valid), .wr_ready(p_wr_ready), .wr_beat(p_wr_beat),
    .m_rd_req_valid(a_rd_valid), .m_rd_req_ready(a_rd_ready), .m_rd_req(a_rd_req),
    .m_rd_data_valid(mem_rd_data_valid), .m_rd_data(mem_rd_data),
    .m_wr_valid(a_wr_valid), .m_wr_ready(a_wr_ready), .m_wr_beat(a_wr_beat));

  mmu_tlb #(.ENTRIES(TLB_ENTRIES), .PAGE_BITS(PAGE_BITS)) u_mmu (
    .clk, .rst_n, .tlb_wr_en, .tlb_wr_idx, .tlb_wr_valid, .tlb_wr_vpn, .tlb_wr_ppn,
    .s_rd_req_valid(a_rd_valid), .s_rd_req_ready(a_rd_ready), .s_rd_req(a_rd_req),
    .m_rd_req_valid(mem_rd_req_valid), .m_rd_req_ready(mem_rd_req_ready), .m_rd_req(mem_rd_req),
    .rd_miss(),
    .s_wr_valid(a_wr_valid), .s_wr_ready(a_wr_ready), .s_wr_beat(a_wr_beat),
    .m_wr_valid(mem_wr_valid), .m_wr_ready(mem_wr_ready), .m_wr_beat(mem_wr_beat),
    .wr_miss(), .miss_count(tlb_miss_count));

  // network side: reads of remote memory only
  wr_beat_t [N_PIPES-1:0] n_wr_none;
  assign n_wr_none = '0;
  rdwr_arbiter #(.N(N_PIPES)) u_net_arb (
    .clk, .rst_n,
    .rd_req_valid(n_rd_valid), .rd_req_ready(n_rd_ready), .rd_req(p_rd_req),
    .rd_data_valid(n_rd_dv), .rd_data(n_rd_data),
    .wr_valid('0), .wr_ready(), .wr_beat(n_wr_none),
    .m_rd_req_valid(net_rd_req_valid), .m_rd_req_ready(net_rd_req_ready), .m_rd_req(net_rd_req),
    .m_rd_data_valid(net_rd_data_valid), .m_rd_data(net_rd_data),
    .m_wr_valid(), .m_wr_ready(1'b0), .m_wr_beat());

endmodule
