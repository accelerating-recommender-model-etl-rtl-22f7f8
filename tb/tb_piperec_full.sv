// tb_piperec_full: the ETL engine at its default (paper) size: one pipeline,
// 26 sparse columns of 8192 vocabulary entries (Pipeline II), 1 MiB batches
// of 16384 words, bursts of 64 words, a 16-entry TLB with 2 MiB pages.
// After reset the vocabulary tables clear themselves (26 x 8192 cycles).
// Then three jobs run, each checked word by word in the GPU model against a
// reference model:
//  1. stateless (bypass): 13 dense columns and 3 sparse columns, 16500 words
//     in all, so that one full 16384-word batch and one short batch are
//     written;
//  2. fit: 13 dense columns and 26 sparse columns (Criteo layout) of 4 words,
//     hex values reduced mod 8192 and indexed in order of first appearance;
//  3. apply: new data of the same layout; unseen values give the OOV index.
// The GPU holds its first two buffers long enough for the packer to stall.
// Data and buffers sit in pages mapped by the TLB.
module tb_piperec_full;
  import piperec_pkg::*;
  localparam int NC = 26, VD = 8192, BATCH = 16384, PB = 21;
  localparam elem_t OOV = elem_t'(14'h3FFF);
  logic clk = 0, rst_n = 0;
  logic [0:0][31:0] divisor = 32'd8192;
  vocab_mode_e [0:0] mode = VOCAB_BYPASS;
  logic [0:0] vocab_clear = '0, credit_return = '0;
  logic [0:0][1:0][ADDR_W-1:0] buf_base;
  logic [0:0] desc_valid = '0, desc_ready;
  desc_t [0:0] desc = '0;
  logic tlb_wr_en = 0, tlb_wr_valid = 0;
  logic [3:0] tlb_wr_idx = '0;
  logic [ADDR_W-PB-1:0] tlb_wr_vpn = '0, tlb_wr_ppn = '0;
  logic [0:0] done_valid, done_last;
  logic [0:0][0:0] done_buf;
  logic [0:0][31:0] done_words;
  logic mem_rd_req_valid, mem_rd_req_ready = 0, mem_rd_data_valid = 0;
  rd_req_t mem_rd_req;
  word_t mem_rd_data = '0;
  logic mem_wr_valid, mem_wr_ready = 0;
  wr_beat_t mem_wr_beat;
  logic net_rd_req_valid, net_rd_req_ready = 1, net_rd_data_valid = 0;
  rd_req_t net_rd_req;
  word_t net_rd_data = '0;
  logic [0:0] vocab_busy, src_idle;
  logic [0:0][31:0] stall_cycles, vocab_overflows, vocab_misses, vocab_new;
  logic [0:0][W-1:0] bad_hex;
  logic [31:0] tlb_miss_count;
  int checks = 0, failures = 0;

  piperec_top dut (.*);
  always #5 clk = ~clk;

  localparam longint DATA_VA = 64'h10_0000_0000, BUF_VA = 64'h20_0000_0000;
  assign buf_base[0][0] = ADDR_W'(BUF_VA);
  assign buf_base[0][1] = ADDR_W'(BUF_VA + 64'h10_0000);

  longint tlb [longint];
  function automatic longint phys(longint va);
    longint vpn = va >> PB;
    return tlb.exists(vpn) ? ((tlb[vpn] << PB) | (va & ((64'd1 << PB) - 1))) : va;
  endfunction

  function automatic real f2r(logic [31:0] b);
    int e = int'(b[30:23]);
    if (e == 0) return 0.0;
    return (b[31] ? -1.0 : 1.0) * (1.0 + real'(b[22:0]) / 8388608.0) * (2.0 ** (e - 127));
  endfunction

  function automatic logic [63:0] hexstr(logic [31:0] v);
    logic [63:0] s;
    for (int c = 0; c < 8; c++) begin
      logic [3:0] n = v[31 - 4*c -: 4];
      s[8*c +: 8] = (n < 10) ? 8'h30 + 8'(n) : 8'h61 + 8'(n) - 8'd10;
    end
    return s;
  endfunction

  // ---------------- memory model ----------------
  word_t mem [longint];
  rd_req_t mpend[$];
  always @(posedge clk) begin
    if (mem_rd_req_valid && mem_rd_req_ready) mpend.push_back(mem_rd_req);
    if (mem_wr_valid && mem_wr_ready) mem[longint'(mem_wr_beat.addr)] = mem_wr_beat.data;
    mem_rd_req_ready <= ($urandom_range(0, 7) != 0);
    mem_wr_ready     <= ($urandom_range(0, 7) != 0);
  end
  initial forever begin
    @(posedge clk);
    if (mpend.size() != 0) begin
      automatic rd_req_t r = mpend.pop_front();
      for (int b = 0; b < r.len; b++) begin
        #1 mem_rd_data_valid = 1;
        mem_rd_data = mem.exists(longint'(r.addr) + 64 * b) ? mem[longint'(r.addr) + 64 * b] : '0;
        @(posedge clk);
        #1 mem_rd_data_valid = 0;
      end
    end
  end

  // ---------------- reference model ----------------
  int dict [NC][int];
  int exp_over = 0, exp_miss = 0;
  word_t exp_q[$];
  bit exp_sparse[$];

  function automatic word_t ref_word(word_t x, bit sparse, int col);
    word_t r = '0;
    for (int i = 0; i < W; i++) begin
      if (!sparse) r[i] = x[i];
      else begin
        automatic logic [31:0] v = 0;
        automatic int m;
        for (int c = 0; c < 8; c++) begin
          automatic logic [7:0] ch = x[i][8*c +: 8];
          v = {v[27:0], (ch <= 8'h39) ? 4'(ch - 8'h30) : 4'(ch - 8'h57)};
        end
        m = int'(v % divisor[0]);
        if (mode[0] == VOCAB_BYPASS) r[i] = elem_t'(m);
        else if (m >= VD) begin r[i] = OOV; exp_over++; end
        else if (dict[col].exists(m)) r[i] = elem_t'(dict[col][m]);
        else if (mode[0] == VOCAB_FIT) begin
          automatic int n = dict[col].num();
          dict[col][m] = n;
          r[i] = elem_t'(n);
        end else begin r[i] = OOV; exp_miss++; end
      end
    end
    return r;
  endfunction

  // ---------------- GPU model ----------------
  int lasts = 0, words_ok = 0, full_batches = 0, hold_long = 2;
  initial forever begin
    @(posedge clk);
    if (done_valid[0]) begin
      automatic int d = (hold_long != 0) ? 3000 : $urandom_range(10, 200);
      if (hold_long != 0) hold_long--;
      if (done_last[0]) lasts++;
      if (done_words[0] == 32'(BATCH)) full_batches++;
      for (int k = 0; k < int'(done_words[0]); k++) begin
        automatic longint a = phys(longint'(buf_base[0][done_buf[0]]) + 64 * k);
        automatic word_t got = mem.exists(a) ? mem[a] : 'x;
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("unexpected word"); end
        else begin
          automatic word_t x = exp_q.pop_front();
          automatic bit sp = exp_sparse.pop_front();
          automatic bit ok = 1;
          for (int i = 0; i < W; i++) begin
            if (sp) ok &= (got[i] === x[i]);
            else begin
              automatic real xr = f2r(x[i][31:0]);
              automatic real want = $ln(1.0 + ((xr < 0) ? 0.0 : xr));
              automatic real gr = f2r(got[i][31:0]);
              automatic real err = (gr > want) ? gr - want : want - gr;
              ok &= (err <= 2e-6 + 2e-5 * want);
            end
          end
          if (!ok) begin failures++; if (failures < 10) $display("batch word %0d wrong", k); end
          else words_ok++;
        end
        mem.delete(a);
      end
      fork
        begin
          repeat (d) @(negedge clk);
          credit_return[0] = 1;
          @(negedge clk) credit_return[0] = 0;
        end
      join_none
    end
  end

  // ---------------- control plane ----------------
  longint next_addr = DATA_VA;
  task automatic column(int words, bit sparse, int col, bit last);
    desc_t dd;
    dd.addr = ADDR_W'(next_addr); dd.words = LEN_W'(words); dd.sparse = sparse;
    dd.col = COL_W'(col); dd.last = last; dd.net = 1'b0;
    for (int k = 0; k < words; k++) begin
      automatic word_t w;
      for (int i = 0; i < W; i++)
        w[i] = sparse ? hexstr($urandom)
                      : {32'h0, 1'($urandom), 8'($urandom_range(100, 150)), 23'($urandom)};
      mem[phys(next_addr + 64 * k)] = w;
      exp_q.push_back(ref_word(w, sparse, col));
      exp_sparse.push_back(sparse);
    end
    next_addr += 64 * words;
    @(negedge clk);
    desc[0] = dd; desc_valid[0] = 1;
    do @(posedge clk); while (!desc_ready[0]);
    @(negedge clk) desc_valid[0] = 0;
  endtask

  task automatic wait_end(int l0);
    while (lasts == l0) @(posedge clk);
    repeat (10) @(posedge clk);
  endtask

  task automatic tlb_fill(int idx, longint va, longint pa);
    @(negedge clk);
    tlb_wr_en = 1; tlb_wr_idx = 4'(idx); tlb_wr_valid = 1;
    tlb_wr_vpn = (ADDR_W-PB)'(va >> PB); tlb_wr_ppn = (ADDR_W-PB)'(pa >> PB);
    tlb[va >> PB] = pa >> PB;
    @(negedge clk) tlb_wr_en = 0;
  endtask

  initial begin
    int cycles_clear = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    tlb_fill(0, DATA_VA, 64'h1_0000_0000);
    tlb_fill(1, DATA_VA + 64'h20_0000, 64'h1_0020_0000);
    tlb_fill(2, BUF_VA, 64'h3_0000_0000);
    @(posedge clk);
    while (vocab_busy[0]) begin @(posedge clk); cycles_clear++; end
    $display("vocabulary clear took %0d cycles", cycles_clear);
    // 1. stateless job
    mode[0] = VOCAB_BYPASS;
    for (int c = 0; c < 13; c++) column(1000, 0, c, 0);
    for (int c = 0; c < 3; c++) column(1166, 1, c, c == 2);
    wait_end(0);
    // 2. fit, 3. apply
    mode[0] = VOCAB_FIT;
    for (int c = 0; c < 13; c++) column(4, 0, c, 0);
    for (int c = 0; c < NC; c++) column(4, 1, c, c == NC - 1);
    wait_end(1);
    mode[0] = VOCAB_APPLY;
    for (int c = 0; c < 13; c++) column(4, 0, c, 0);
    for (int c = 0; c < NC; c++) column(4, 1, c, c == NC - 1);
    wait_end(2);

    checks += 7;
    if (cycles_clear < NC * VD - 16) begin failures++; $display("clear too short"); end
    if (exp_q.size() != 0) begin failures++; $display("%0d words missing", exp_q.size()); end
    if (full_batches == 0) begin failures++; $display("no full batch"); end
    if (stall_cycles[0] == 0) begin failures++; $display("no credit stall"); end
    if (vocab_overflows[0] != 32'(exp_over) || vocab_misses[0] != 32'(exp_miss) || exp_miss == 0)
      begin failures++; $display("vocabulary counters %0d/%0d %0d/%0d", vocab_overflows[0], exp_over, vocab_misses[0], exp_miss); end
    if (tlb_miss_count != 0) begin failures++; $display("TLB misses"); end
    begin
      automatic int entries = 0;
      for (int c = 0; c < NC; c++) entries += dict[c].num();
      if (vocab_new[0] != 32'(entries)) begin failures++; $display("new entries %0d vs %0d", vocab_new[0], entries); end
    end
    $display("words checked %0d, full batches %0d, stall cycles %0d, new entries %0d, misses %0d",
             words_ok, full_batches, stall_cycles[0], vocab_new[0], vocab_misses[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
