// mmu_tlb: address translation between the pipelines' virtual addresses and
// the physical addresses of on-board or host memory.
//
// A fully associative TLB of ENTRIES entries maps virtual page numbers to
// physical page numbers for pages of 2^PAGE_BITS bytes; the control plane
// fills it through the `tlb_wr_*` port. Two independent translation paths,
// one for read requests and one for write beats, sit in the request streams:
// the page offset passes unchanged, the page number is replaced on a hit,
// and a miss leaves the address untranslated, raises the matching miss
// output for that cycle and counts in `miss_count` (page-fault handling
// belongs to the shell). Translation is combinational, valid/ready pass
// straight through. The paper gives the MMU's role; TLB size, page size and
// the miss behaviour are this design's choices.
module mmu_tlb
  import piperec_pkg::*;
#(
  parameter int unsigned ENTRIES   = 16,
  parameter int unsigned PAGE_BITS = 21
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        tlb_wr_en,
  input  logic [$clog2(ENTRIES)-1:0]  tlb_wr_idx,
  input  logic                        tlb_wr_valid,
  input  logic [ADDR_W-PAGE_BITS-1:0] tlb_wr_vpn,
  input  logic [ADDR_W-PAGE_BITS-1:0] tlb_wr_ppn,
  // read requests
  input  logic    s_rd_req_valid,
  output logic    s_rd_req_ready,
  input  rd_req_t s_rd_req,
  output logic    m_rd_req_valid,
  input  logic    m_rd_req_ready,
  output rd_req_t m_rd_req,
  output logic    rd_miss,
  // write beats
  input  logic     s_wr_valid,
  output logic     s_wr_ready,
  input  wr_beat_t s_wr_beat,
  output logic     m_wr_valid,
  input  logic     m_wr_ready,
  output wr_beat_t m_wr_beat,
  output logic     wr_miss,
  output logic [31:0] miss_count
);

  localparam int unsigned PN_W = ADDR_W - PAGE_BITS;

  logic            v_q   [ENTRIES];
  logic [PN_W-1:0] vpn_q [ENTRIES];
  logic [PN_W-1:0] ppn_q [ENTRIES];

  function automatic logic [ADDR_W:0] xlate(logic [ADDR_W-1:0] a);  // {hit, addr}
    logic [ADDR_W:0] r;
    r = {1'b0, a};
    for (int e = 0; e < ENTRIES; e++)
      if (v_q[e] && vpn_q[e] == a[ADDR_W-1:PAGE_BITS])
        r = {1'b1, ppn_q[e], a[PAGE_BITS-1:0]};
    return r;
  endfunction

  logic [ADDR_W:0] rx, wx;
  assign rx = xlate(s_rd_req.addr);
  assign wx = xlate(s_wr_beat.addr);

  assign m_rd_req_valid = s_rd_req_valid;
  assign s_rd_req_ready = m_rd_req_ready;
  always_comb begin
    m_rd_req      = s_rd_req;
    m_rd_req.addr = rx[ADDR_W-1:0];
  end
  assign rd_miss = s_rd_req_valid && !rx[ADDR_W];

  assign m_wr_valid = s_wr_valid;
  assign s_wr_ready = m_wr_ready;
  always_comb begin
    m_wr_beat      = s_wr_beat;
    m_wr_beat.addr = wx[ADDR_W-1:0];
  end
  assign wr_miss = s_wr_valid && !wx[ADDR_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) begin
        v_q[e]   <= 1'b0;
        vpn_q[e] <= '0;
        ppn_q[e] <= '0;
      end
      miss_count <= '0;
    end else begin
      if (tlb_wr_en) begin
        v_q[tlb_wr_idx]   <= tlb_wr_valid;
        vpn_q[tlb_wr_idx] <= tlb_wr_vpn;
        ppn_q[tlb_wr_idx] <= tlb_wr_ppn;
      end
      miss_count <= miss_count
                  + ((rd_miss && m_rd_req_ready) ? 32'd1 : 32'd0)
                  + ((wr_miss && m_wr_ready) ? 32'd1 : 32'd0);
    end
  end

endmodule
