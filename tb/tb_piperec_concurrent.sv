// tb_piperec_concurrent: seven pipelines on one card, each running the
// stateless Pipeline I on the synthetic wide layout (504 dense and 42 sparse
// columns), every other parameter at its default. This is the largest
// concurrent configuration of the evaluation.
// Each pipeline gets its own Modulus range, its own data and its own pair of
// staging buffers; one word per column (8 rows) is streamed, so each
// pipeline moves 546 words and ends with one short batch. All pipelines
// share the memory port through the local arbiter, and three of them read
// one column each through the network port. A GPU model per pipeline checks
// every word of every batch against the reference model
// (ln(1 + max(x, 0)), hex % range). The test reports the cycles from the
// end of the vocabulary clear to the last completion; with one single-word
// descriptor per column, descriptor issue dominates that figure.
module tb_piperec_concurrent;
  import piperec_pkg::*;
  localparam int NP = 7, ND = 504, NS = 42;
  logic clk = 0, rst_n = 0;
  logic [NP-1:0][31:0] divisor;
  vocab_mode_e [NP-1:0] mode;
  logic [NP-1:0] vocab_clear = '0, credit_return = '0;
  logic [NP-1:0][1:0][ADDR_W-1:0] buf_base;
  logic [NP-1:0] desc_valid = '0, desc_ready;
  desc_t [NP-1:0] desc = '0;
  logic tlb_wr_en = 0, tlb_wr_valid = 0;
  logic [3:0] tlb_wr_idx = '0;
  logic [ADDR_W-22:0] tlb_wr_vpn = '0, tlb_wr_ppn = '0;
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

  piperec_top #(.N_PIPES(NP)) dut (.*);
  always #5 clk = ~clk;

  for (genvar g = 0; g < NP; g++) begin : g_cfg
    assign divisor[g] = 32'd1000 + 32'd777 * g;
    assign mode[g] = VOCAB_BYPASS;
    assign buf_base[g][0] = ADDR_W'(64'h40_0000_0000 + 64'h100_0000 * g);
    assign buf_base[g][1] = ADDR_W'(64'h40_0080_0000 + 64'h100_0000 * g);
  end

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
  int mem_busy_cycles = 0, rd_beats = 0, wr_beats = 0;
  always @(posedge clk) begin
    if (mem_rd_req_valid && mem_rd_req_ready) mpend.push_back(mem_rd_req);
    if (net_rd_req_valid && net_rd_req_ready) npend.push_back(net_rd_req);
    if (mem_wr_valid && mem_wr_ready) begin mem[longint'(mem_wr_beat.addr)] = mem_wr_beat.data; wr_beats++; end
    if (mem_rd_data_valid) rd_beats++;
    mem_rd_req_ready <= 1'b1;
    net_rd_req_ready <= ($urandom_range(0, 1) != 0);
    mem_wr_ready     <= 1'b1;
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
  initial forever begin
    @(posedge clk);
    if (npend.size() != 0) begin
      automatic rd_req_t r = npend.pop_front();
      repeat ($urandom_range(5, 20)) @(posedge clk);
      for (int b = 0; b < r.len; b++) begin
        #1 net_rd_data_valid = 1;
        net_rd_data = mem.exists(longint'(r.addr) + 64 * b) ? mem[longint'(r.addr) + 64 * b] : '0;
        @(posedge clk);
        #1 net_rd_data_valid = 0;
      end
    end
  end

  // ---------------- reference and GPU models ----------------
  word_t exp_q [NP][$];
  bit exp_sparse [NP][$];
  int lasts [NP], words_ok [NP];

  function automatic word_t ref_word(int p, word_t x, bit sparse);
    word_t r = '0;
    for (int i = 0; i < W; i++) begin
      if (!sparse) r[i] = x[i];
      else begin
        automatic logic [31:0] v = 0;
        for (int c = 0; c < 8; c++) begin
          automatic logic [7:0] ch = x[i][8*c +: 8];
          v = {v[27:0], (ch <= 8'h39) ? 4'(ch - 8'h30) : 4'(ch - 8'h57)};
        end
        r[i] = elem_t'(v % divisor[p]);
      end
    end
    return r;
  endfunction

  for (genvar g = 0; g < NP; g++) begin : g_gpu
    initial forever begin
      @(posedge clk);
      if (done_valid[g]) begin
        if (done_last[g]) lasts[g]++;
        for (int k = 0; k < int'(done_words[g]); k++) begin
          automatic longint a = longint'(buf_base[g][done_buf[g]]) + 64 * k;
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
            if (!ok) begin failures++; if (failures < 10) $display("pipe %0d: word %0d wrong", g, k); end
            else words_ok[g]++;
          end
          mem.delete(a);
        end
        fork
          begin
            repeat ($urandom_range(5, 50)) @(negedge clk);
            credit_return[g] = 1;
            @(negedge clk) credit_return[g] = 0;
          end
        join_none
      end
    end
  end

  // ---------------- control plane ----------------
  task automatic column(int p, bit sparse, int col, bit last, bit net);
    desc_t dd;
    longint a = (net ? 64'h80_0000_0000 : 64'h10_0000_0000) + 64'h100_0000 * p + 64 * col;
    automatic word_t w;
    for (int i = 0; i < W; i++)
      w[i] = sparse ? hexstr($urandom)
                    : {32'h0, 1'($urandom), 8'($urandom_range(100, 150)), 23'($urandom)};
    mem[a] = w;
    exp_q[p].push_back(ref_word(p, w, sparse));
    exp_sparse[p].push_back(sparse);
    dd.addr = ADDR_W'(a); dd.words = LEN_W'(1); dd.sparse = sparse;
    dd.col = COL_W'(col); dd.last = last; dd.net = net;
    @(negedge clk);
    desc[p] = dd; desc_valid[p] = 1;
    do @(posedge clk); while (!desc_ready[p]);
    @(negedge clk) desc_valid[p] = 0;
  endtask

  int t_start, t_end;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    while (vocab_busy != '0) @(posedge clk);
    t_start = 0;
    fork
      begin
        automatic int ended = 0;
        while (ended < NP) begin
          @(posedge clk);
          t_start++;
          ended = 0;
          for (int p = 0; p < NP; p++) ended += (lasts[p] != 0);
        end
      end
    join_none
    for (int p = 0; p < NP; p++) begin
      fork
        automatic int q = p;
        begin
          for (int c = 0; c < ND; c++) column(q, 0, c, 0, 0);
          for (int c = 0; c < NS; c++) column(q, 1, ND + c, c == NS - 1, (q % 3 == 0) && c == 5);
        end
      join_none
    end
    wait fork;
    repeat (20) @(posedge clk);
    for (int p = 0; p < NP; p++) begin
      checks += 3;
      if (exp_q[p].size() != 0) begin failures++; $display("pipe %0d: %0d words missing", p, exp_q[p].size()); end
      if (words_ok[p] != ND + NS) begin failures++; $display("pipe %0d: %0d words right", p, words_ok[p]); end
      if (lasts[p] != 1 || !src_idle[p]) begin failures++; $display("pipe %0d: stream end", p); end
    end
    $display("%0d pipelines moved %0d words in %0d cycles (memory port: %0d read beats, %0d write beats)",
             NP, NP * (ND + NS), t_start, rd_beats, wr_beats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
