// tb_mmu_tlb: self-checking test of the MMU's TLB (4 entries, 4 KiB pages).
// Entries are written, then random read and write addresses are translated:
// a mapped page must get its physical page with the offset kept, an
// unmapped one must pass unchanged and raise the miss flag; invalidating an
// entry turns its page into a miss. Handshakes must pass straight through.
module tb_mmu_tlb;
  import piperec_pkg::*;
  localparam int E = 4, PB = 12, PN = ADDR_W - PB;
  logic clk = 0, rst_n = 0;
  logic tlb_wr_en = 0, tlb_wr_valid = 0;
  logic [1:0] tlb_wr_idx = 0;
  logic [PN-1:0] tlb_wr_vpn = 0, tlb_wr_ppn = 0;
  logic s_rd_req_valid = 0, s_rd_req_ready, m_rd_req_valid, m_rd_req_ready = 0, rd_miss;
  rd_req_t s_rd_req = '0, m_rd_req;
  logic s_wr_valid = 0, s_wr_ready, m_wr_valid, m_wr_ready = 0, wr_miss;
  wr_beat_t s_wr_beat = '0, m_wr_beat;
  logic [31:0] miss_count;
  int checks = 0, failures = 0;
  longint map [longint];

  mmu_tlb #(.ENTRIES(E), .PAGE_BITS(PB)) dut (.*);
  always #5 clk = ~clk;

  task automatic fill(int idx, longint vpn, longint ppn, bit v);
    @(negedge clk);
    tlb_wr_en = 1; tlb_wr_idx = 2'(idx); tlb_wr_vpn = PN'(vpn); tlb_wr_ppn = PN'(ppn); tlb_wr_valid = v;
    @(negedge clk) tlb_wr_en = 0;
  endtask

  task automatic probe(int n);
    repeat (n) begin
      automatic longint vpn = $urandom_range(0, 7);
      automatic longint a = (vpn << PB) | $urandom_range(0, (1 << PB) - 1);
      automatic longint want = map.exists(vpn) ? ((map[vpn] << PB) | (a & ((1 << PB) - 1))) : a;
      @(negedge clk);
      s_rd_req_valid = $urandom_range(0, 1); s_rd_req.addr = ADDR_W'(a); s_rd_req.len = 16'd4;
      s_wr_valid = $urandom_range(0, 1); s_wr_beat.addr = ADDR_W'(a ^ 64'h40); s_wr_beat.data = '1;
      m_rd_req_ready = $urandom_range(0, 1); m_wr_ready = $urandom_range(0, 1);
      #1;
      checks += 6;
      if (m_rd_req.addr != ADDR_W'(want)) begin failures++; $display("rd %h -> %h, want %h", a, m_rd_req.addr, want); end
      if (m_wr_beat.addr != ADDR_W'(want ^ 64'h40)) begin failures++; $display("wr addr"); end
      if (rd_miss != (s_rd_req_valid && !map.exists(vpn))) begin failures++; $display("rd miss flag"); end
      if (wr_miss != (s_wr_valid && !map.exists(vpn))) begin failures++; $display("wr miss flag"); end
      if (m_rd_req_valid != s_rd_req_valid || s_rd_req_ready != m_rd_req_ready) begin failures++; $display("rd handshake"); end
      if (m_wr_valid != s_wr_valid || s_wr_ready != m_wr_ready || m_rd_req.len != 16'd4) begin failures++; $display("wr handshake"); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    probe(10);
    fill(0, 1, 64'h777, 1); map[1] = 64'h777;
    fill(1, 3, 64'h12345, 1); map[3] = 64'h12345;
    fill(3, 6, 64'h2, 1); map[6] = 64'h2;
    probe(200);
    fill(1, 3, 0, 0); map.delete(3);
    probe(200);
    checks++;
    if (miss_count == 0) begin failures++; $display("no misses counted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
