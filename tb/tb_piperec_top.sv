// tb_piperec_top: end-to-end test of the FPGA ETL engine with two concurrent
// pipelines (each: 4 sparse columns of 64 vocabulary entries, batches of 8
// words, bursts of 4; TLB of 4 entries with 64 KiB pages).
// Models around the top: on-board memory behind the memory port (reads and
// the GPU's staging buffers, addressed physically), remote memory behind the
// network port, a GPU per pipeline that checks each completed batch against
// a reference model and returns credits (the first two after a long delay),
// and a control plane that fills the TLB and pushes column descriptors.
// Pipeline 0 runs a Pipeline-II-like job (fit, then apply on new data);
// pipeline 1 runs a stateless job (bypass) and then a fit, with one column
// in remote memory. Pipeline 0's pages are mapped in the TLB, pipeline 1's
// are not (they pass unchanged and count as misses).
// Each mechanism is counted and a failure is counted for any that never
// happens: credit stall, both staging buffers in use, short (stream-end)
// batch, bypass / fit / apply words, mode switch, vocabulary overflow and
// miss, network read, read and write arbitration contention, TLB hit and
// TLB miss.
module tb_piperec_top;
  import piperec_pkg::*;
  localparam int NP = 2, NC = 4, VD = 64, BATCH = 8, BURST = 4, TE = 4, PB = 16;
  localparam elem_t OOV = elem_t'(7'h7F);
  logic clk = 0, rst_n = 0;
  logic [NP-1:0][31:0] divisor;
  vocab_mode_e [NP-1:0] mode;
  logic [NP-1:0] vocab_clear = '0, credit_return = '0;
  logic [NP-1:0][1:0][ADDR_W-1:0] buf_base;
  logic [NP-1:0] desc_valid = '0, desc_ready;
  desc_t [NP-1:0] desc = '0;
  logic tlb_wr_en = 0, tlb_wr_valid = 0;
  logic [1:0] tlb_wr_idx = '0;
  logic [ADDR_W-PB-1:0] tlb_wr_vpn = '0, tlb_wr_ppn = '0;
  logic [NP-1:0] done_valid, done_last;
  logic [NP-1:0][0:0] done_buf;
  logic [NP-1:0][31:0] done_words;
  logic mem_rd_req_valid, mem_rd_req_ready = 0, mem_rd_data_valid = 0;
  rd_req_t mem_rd_req;
  word_t mem_rd_data = '0;
  logic mem_wr_valid, mem_wr_ready = 0;
  wr_beat_t mem_wr_beat;
  logic net_rd_req_valid, net_rd_req_ready = 0, net_rd_data_valid = 0;
  rd_req_t net_rd_req;
  word_t net_rd_data = '0;
  logic [NP-1:0] vocab_busy, src_idle;
  logic [NP-1:0][31:0] stall_cycles, vocab_overflows, vocab_misses, vocab_new;
  logic [NP-1:0][W-1:0] bad_hex;
  logic [31:0] tlb_miss_count;
  int checks = 0, failures = 0;

  piperec_top #(.N_PIPES(NP), .NUM_COLS(NC), .VOCAB_DEPTH(VD), .BATCH_WORDS(BATCH),
                .BURST(BURST), .TLB_ENTRIES(TE), .PAGE_BITS(PB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    divisor[0] = 32'd80;  divisor[1] = 32'd100;
    mode[0] = VOCAB_FIT;  mode[1] = VOCAB_BYPASS;
  end
  // virtual layout: pipeline p data at DATA_VA[p], buffers at BUF_VA[p]
  localparam longint DATA_VA [NP] = '{64'h1_0000_0000, 64'h2_0000_0000};
  localparam longint BUF_VA  [NP] = '{64'h3_0000_0000, 64'h4_0000_0000};
  localparam longint REMOTE  = 64'h9_0000_0000;
  assign buf_base[0][0] = ADDR_W'(BUF_VA[0]);  assign buf_base[0][1] = ADDR_W'(BUF_VA[0] + 64'h8000);
  assign buf_base[1][0] = ADDR_W'(BUF_VA[1]);  assign buf_base[1][1] = ADDR_W'(BUF_VA[1] + 64'h8000);

  // mechanism counters
  int n_stall_cyc, n_both_bufs, n_short_batch, n_bypass_w, n_fit_w, n_apply_w, n_mode_sw;
  logic [NP-1:0][31:0] prev_stall = '0;
  int n_net_rd, n_rd_contention, n_wr_contention, n_tlb_hit;

  // ---------------- TLB model ----------------
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

  // ---------------- memory and network models ----------------
  word_t mem [longint];
  rd_req_t mpend[$], npend[$];
  always @(posedge clk) begin
    if (mem_rd_req_valid && mem_rd_req_ready) begin
      mpend.push_back(mem_rd_req);
      if (tlb.exists(longint'(mem_rd_req.addr) >> PB) == 0 && mem_rd_req.addr[ADDR_W-1:PB] == (DATA_VA[0] >> PB))
        begin failures++; $display("pipeline 0 read left untranslated"); end
      if ((longint'(mem_rd_req.addr) >> PB) == (64'h5_0000_0000 >> PB)) n_tlb_hit++;
    end
    if (net_rd_req_valid && net_rd_req_ready) begin npend.push_back(net_rd_req); n_net_rd++; end
    if (mem_wr_valid && mem_wr_ready) mem[longint'(mem_wr_beat.addr)] = mem_wr_beat.data;
    mem_rd_req_ready <= ($urandom_range(0, 3) != 0);
    net_rd_req_ready <= ($urandom_range(0, 2) != 0);
    mem_wr_ready     <= ($urandom_range(0, 4) != 0);
    if (dut.l_rd_valid == '1) n_rd_contention++;
    if (dut.p_wr_valid == '1) n_wr_contention++;
    for (int p = 0; p < NP; p++) if (stall_cycles[p] != prev_stall[p]) n_stall_cyc++;
    prev_stall <= stall_cycles;
  end
  initial forever begin
    @(posedge clk);
    if (mpend.size() != 0 && $urandom_range(0, 1) == 0) begin
      automatic rd_req_t r = mpend.pop_front();
      for (int b = 0; b < r.len; b++) begin
        #1 mem_rd_data_valid = 1;
        mem_rd_data = mem.exists(longint'(r.addr) + 64 * b) ? mem[longint'(r.addr) + 64 * b] : '0;
        @(posedge clk);
        #1 mem_rd_data_valid = 0;
      end
    end
  end
  initial forever begin
    @(posedge clk);
    if (npend.size() != 0 && $urandom_range(0, 5) == 0) begin
      automatic rd_req_t r = npend.pop_front();
      for (int b = 0; b < r.len; b++) begin
        #1 net_rd_data_valid = 1;
        net_rd_data = mem.exists(longint'(r.addr) + 64 * b) ? mem[longint'(r.addr) + 64 * b] : '0;
        @(posedge clk);
        #1 net_rd_data_valid = 0;
      end
    end
  end

  // ---------------- reference model, per pipeline ----------------
  int dict [NP][NC][int];
  int exp_over [NP], exp_miss [NP];
  word_t exp_q [NP][$];
  bit exp_sparse [NP][$];

  function automatic word_t ref_word(int p, word_t x, bit sparse, int col);
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
        m = int'(v % divisor[p]);
        if (mode[p] == VOCAB_BYPASS) r[i] = elem_t'(m);
        else if (m >= VD) begin r[i] = OOV; exp_over[p]++; end
        else if (dict[p][col].exists(m)) r[i] = elem_t'(dict[p][col][m]);
        else if (mode[p] == VOCAB_FIT) begin
          automatic int n = dict[p][col].num();
          dict[p][col][m] = n;
          r[i] = elem_t'(n);
        end else begin r[i] = OOV; exp_miss[p]++; end
      end
    end
    return r;
  endfunction

  // ---------------- GPU model, per pipeline ----------------
  int lasts [NP], held [NP], words_ok [NP], hold_long [NP];
  for (genvar g = 0; g < NP; g++) begin : g_gpu
    initial begin
      hold_long[g] = 2;
      forever begin
        @(posedge clk);
        if (done_valid[g]) begin
          automatic int d = (hold_long[g] != 0) ? 150 : $urandom_range(2, 16);
          if (hold_long[g] != 0) hold_long[g]--;
          held[g]++;
          if (held[g] == 2) n_both_bufs++;
          if (done_last[g]) lasts[g]++;
          if (done_words[g] != 32'(BATCH)) n_short_batch++;
          for (int k = 0; k < int'(done_words[g]); k++) begin
            automatic longint a = phys(longint'(buf_base[g][done_buf[g]]) + 64 * k);
            automatic word_t got = mem.exists(a) ? mem[a] : 'x;
            checks++;
            if (exp_q[g].size() == 0) begin failures++; $display("pipe %0d: unexpected word", g); end
            else begin
              automatic word_t x = exp_q[g].pop_front();
              automatic bit sp = exp_sparse[g].pop_front();
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
              if (!ok) begin failures++; $display("pipe %0d: batch word %0d wrong", g, k); end
              else words_ok[g]++;
            end
            mem.delete(a);
          end
          fork
            begin
              repeat (d) @(negedge clk);
              credit_return[g] = 1; held[g]--;
              @(negedge clk) credit_return[g] = 0;
            end
          join_none
        end
      end
    end
  end

  // ---------------- control plane ----------------
  longint next_addr [NP];
  task automatic column(int p, int words, bit sparse, int col, bit last, bit net, int vmax);
    desc_t dd;
    longint base = net ? REMOTE + 64'h1000 * p : next_addr[p];
    dd.addr = ADDR_W'(base); dd.words = LEN_W'(words); dd.sparse = sparse;
    dd.col = COL_W'(col); dd.last = last; dd.net = net;
    for (int k = 0; k < words; k++) begin
      automatic word_t w;
      for (int i = 0; i < W; i++)
        w[i] = sparse ? hexstr($urandom_range(0, vmax))
                      : {32'h0, 1'($urandom), 8'($urandom_range(100, 150)), 23'($urandom)};
      mem[net ? base + 64 * k : phys(base + 64 * k)] = w;
      exp_q[p].push_back(ref_word(p, w, sparse, col));
      exp_sparse[p].push_back(sparse);
      case (mode[p])
        VOCAB_BYPASS: n_bypass_w++;
        VOCAB_FIT:    n_fit_w++;
        default:      n_apply_w++;
      endcase
    end
    if (!net) next_addr[p] += 64 * words + 256;
    @(negedge clk);
    desc[p] = dd; desc_valid[p] = 1;
    do @(posedge clk); while (!desc_ready[p]);
    @(negedge clk) desc_valid[p] = 0;
  endtask

  task automatic job(int p, vocab_mode_e m, int vmax, bit use_net);
    automatic int l0 = lasts[p];
    if (mode[p] != m) n_mode_sw++;
    mode[p] = m;
    column(p, 7, 0, 0, 0, 0, 0);
    column(p, 9, 1, 1, 0, use_net, vmax);
    column(p, 12, 1, 2, 0, 0, vmax);
    column(p, 5, 1, 3, 1, 0, vmax);
    while (lasts[p] == l0) @(posedge clk);
    repeat (10) @(posedge clk);
  endtask

  task automatic tlb_fill(int idx, longint va, longint pa);
    @(negedge clk);
    tlb_wr_en = 1; tlb_wr_idx = 2'(idx); tlb_wr_valid = 1;
    tlb_wr_vpn = (ADDR_W-PB)'(va >> PB); tlb_wr_ppn = (ADDR_W-PB)'(pa >> PB);
    tlb[va >> PB] = pa >> PB;
    @(negedge clk) tlb_wr_en = 0;
  endtask

  initial begin
    next_addr[0] = DATA_VA[0]; next_addr[1] = DATA_VA[1];
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    tlb_fill(0, DATA_VA[0], 64'h5_0000_0000);
    tlb_fill(2, BUF_VA[0], 64'h6_0000_0000);
    @(posedge clk);
    while (vocab_busy != '0) @(posedge clk);
    fork
      begin job(0, VOCAB_FIT, 120, 0); job(0, VOCAB_APPLY, 400, 0); end
      begin job(1, VOCAB_BYPASS, 400, 0); job(1, VOCAB_FIT, 150, 1); end
    join
    repeat (200) @(posedge clk);

    for (int p = 0; p < NP; p++) begin
      checks += 4;
      if (exp_q[p].size() != 0) begin failures++; $display("pipe %0d: %0d words missing", p, exp_q[p].size()); end
      if (vocab_overflows[p] != 32'(exp_over[p])) begin failures++; $display("pipe %0d overflow count", p); end
      if (vocab_misses[p] != 32'(exp_miss[p])) begin failures++; $display("pipe %0d miss count", p); end
      if (!src_idle[p] || bad_hex[p] != '0) begin failures++; $display("pipe %0d not idle", p); end
    end
    $display("mechanisms: stall=%0d both_bufs=%0d short_batch=%0d bypass=%0d fit=%0d apply=%0d mode_switch=%0d",
             n_stall_cyc, n_both_bufs, n_short_batch, n_bypass_w, n_fit_w, n_apply_w, n_mode_sw);
    $display("            overflow=%0d miss=%0d net_read=%0d rd_contention=%0d wr_contention=%0d tlb_hit=%0d tlb_miss=%0d",
             vocab_overflows[0] + vocab_overflows[1], vocab_misses[0] + vocab_misses[1], n_net_rd,
             n_rd_contention, n_wr_contention, n_tlb_hit, tlb_miss_count);
    foreach (lasts[p]) $display("pipe %0d: %0d words checked", p, words_ok[p]);
    checks += 13;
    if (n_stall_cyc == 0)      begin failures++; $display("never: credit stall"); end
    if (n_both_bufs == 0)      begin failures++; $display("never: both buffers in use"); end
    if (n_short_batch == 0)    begin failures++; $display("never: short batch"); end
    if (n_bypass_w == 0)       begin failures++; $display("never: bypass"); end
    if (n_fit_w == 0)          begin failures++; $display("never: fit"); end
    if (n_apply_w == 0)        begin failures++; $display("never: apply"); end
    if (n_mode_sw == 0)        begin failures++; $display("never: mode switch"); end
    if (vocab_overflows == '0) begin failures++; $display("never: overflow"); end
    if (vocab_misses == '0)    begin failures++; $display("never: vocabulary miss"); end
    if (n_net_rd == 0)         begin failures++; $display("never: network read"); end
    if (n_rd_contention == 0 || n_wr_contention == 0) begin failures++; $display("never: arbitration contention"); end
    if (n_tlb_hit == 0)        begin failures++; $display("never: TLB hit"); end
    if (tlb_miss_count == 0)   begin failures++; $display("never: TLB miss"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
