// tb_etl_pipeline: end-to-end test of one pipeline (4 sparse columns of 64
// vocabulary entries, batches of 8 words, read bursts of 4).
// A memory model holds column data (dense float32 and hex-string sparse
// columns) and serves reads with random delays; a GPU model takes write
// beats with random ready, and on each batch completion reads the batch
// back from its staging buffer and compares it word by word with a
// reference model (ln(1 + max(x, 0)), hex % range, first-appearance
// vocabulary indices), then returns the credit after a random delay (once
// after a long one, so the packer must stall). Three passes run in turn:
//  1. bypass: stateless pipeline (Pipeline I);
//  2. fit: vocabulary built, some values above the table range (overflow);
//  3. apply: new data mapped with the fitted tables, unseen values are OOV.
// One descriptor of each pass is read through the network port.
module tb_etl_pipeline;
  import piperec_pkg::*;
  localparam int NC = 4, VD = 64, BATCH = 8, BURST = 4;
  localparam elem_t OOV = elem_t'(7'h7F);
  logic clk = 0, rst_n = 0;
  logic [31:0] divisor = 32'd80;
  vocab_mode_e mode = VOCAB_BYPASS;
  logic vocab_clear = 0, credit_return = 0;
  logic [1:0][ADDR_W-1:0] buf_base;
  logic desc_valid = 0, desc_ready;
  desc_t desc = '0;
  logic rd_req_valid, rd_req_net, rd_req_ready = 0, rd_data_valid = 0;
  rd_req_t rd_req;
  word_t rd_data = '0;
  logic wr_valid, wr_ready = 0;
  wr_beat_t wr_beat;
  logic done_valid, done_last, vocab_busy, src_idle;
  logic [0:0] done_buf;
  logic [31:0] done_words, stall_cycles, vocab_overflows, vocab_misses, vocab_new;
  logic [W-1:0] bad_hex;
  int checks = 0, failures = 0;

  etl_pipeline #(.NUM_COLS(NC), .VOCAB_DEPTH(VD), .BATCH_WORDS(BATCH), .BURST(BURST)) dut (.*);
  always #5 clk = ~clk;
  assign buf_base[0] = 64'h7000_0000;
  assign buf_base[1] = 64'h7100_0000;

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

  // ---------------- memory model (local and network ports share it) ------
  word_t mem [longint];
  rd_req_t pend[$];
  int net_reqs = 0;
  always @(posedge clk) begin
    if (rd_req_valid && rd_req_ready) begin
      pend.push_back(rd_req);
      if (rd_req_net) net_reqs++;
    end
    rd_req_ready <= ($urandom_range(0, 3) != 0);
  end
  initial forever begin
    @(posedge clk);
    if (pend.size() != 0 && $urandom_range(0, 2) == 0) begin
      automatic rd_req_t r = pend.pop_front();
      for (int b = 0; b < r.len; b++) begin
        #1 rd_data_valid = 1;
        rd_data = mem.exists(longint'(r.addr) + 64 * b) ? mem[longint'(r.addr) + 64 * b] : '0;
        @(posedge clk);
        #1 rd_data_valid = 0;
      end
    end
  end

  // ---------------- reference model ----------------
  int dict [NC][int];
  int exp_over = 0, exp_miss = 0;
  word_t exp_q[$]; bit exp_sparse[$];

  function automatic word_t ref_word(word_t x, word_user_t u);
    word_t r = '0;
    for (int i = 0; i < W; i++) begin
      if (!u.sparse) r[i] = x[i];   // dense lanes are checked as reals
      else begin
        automatic logic [31:0] v = 0;
        automatic int m;
        for (int c = 0; c < 8; c++) begin
          automatic logic [7:0] ch = x[i][8*c +: 8];
          v = {v[27:0], (ch <= 8'h39) ? 4'(ch - 8'h30) : 4'(ch - 8'h57)};
        end
        m = int'(v % divisor);
        if (mode == VOCAB_BYPASS) r[i] = elem_t'(m);
        else if (m >= VD) begin r[i] = OOV; exp_over++; end
        else if (dict[u.col].exists(m)) r[i] = elem_t'(dict[u.col][m]);
        else if (mode == VOCAB_FIT) begin
          automatic int n = dict[u.col].num();
          dict[u.col][m] = n;
          r[i] = elem_t'(n);
        end else begin r[i] = OOV; exp_miss++; end
      end
    end
    return r;
  endfunction

  // ---------------- GPU model ----------------
  word_t gpu [longint];
  int batches_seen = 0, words_seen = 0, lasts_seen = 0, long_hold = 1;
  always @(posedge clk) begin
    if (wr_valid && wr_ready) gpu[longint'(wr_beat.addr)] = wr_beat.data;
    wr_ready <= ($urandom_range(0, 3) != 0);
  end
  initial forever begin
    @(posedge clk);
    if (done_valid) begin
      automatic int d = long_hold ? 80 : $urandom_range(2, 12);
      long_hold = 0;
      batches_seen++;
      if (done_last) lasts_seen++;
      for (int k = 0; k < int'(done_words); k++) begin
        automatic longint a = longint'(buf_base[done_buf]) + 64 * k;
        automatic word_t got = gpu.exists(a) ? gpu[a] : 'x;
        checks++;
        words_seen++;
        if (exp_q.size() == 0) begin failures++; $display("unexpected word in batch"); end
        else begin
          automatic word_t x = exp_q.pop_front();
          automatic bit sp = exp_sparse.pop_front();
          for (int i = 0; i < W; i++) begin
            if (sp) begin
              if (got[i] !== x[i]) begin failures++; $display("sparse lane %0d: %0d vs %0d", i, got[i], x[i]); end
            end else begin
              automatic real xr = f2r(x[i][31:0]);
              automatic real want = $ln(1.0 + ((xr < 0) ? 0.0 : xr));
              automatic real g = f2r(got[i][31:0]);
              automatic real err = (g > want) ? g - want : want - g;
              if (err > 2e-6 + 2e-5 * want) begin failures++; $display("dense lane %0d: %g vs %g", i, g, want); end
            end
          end
        end
        gpu.delete(a);
      end
      fork
        begin repeat (d) @(negedge clk); credit_return = 1; @(negedge clk); credit_return = 0; end
      join_none
    end
  end

  // ---------------- stimulus ----------------
  longint next_addr = 64'h1_0000_0000;
  task automatic column(int words, bit sparse, int col, bit last, bit net, int vmax);
    desc_t dd;
    dd.addr = ADDR_W'(next_addr); dd.words = LEN_W'(words); dd.sparse = sparse;
    dd.col = COL_W'(col); dd.last = last; dd.net = net;
    for (int k = 0; k < words; k++) begin
      automatic word_t w;
      for (int i = 0; i < W; i++)
        w[i] = sparse ? hexstr($urandom_range(0, vmax))
                      : {32'h0, 1'($urandom), 8'($urandom_range(100, 150)), 23'($urandom)};
      mem[next_addr + 64 * k] = w;
      exp_q.push_back(ref_word(w, '{sparse: sparse, col: COL_W'(col), last: 1'b0}));
      exp_sparse.push_back(sparse);
    end
    next_addr += 64 * words + 4096;
    @(negedge clk);
    desc = dd; desc_valid = 1;
    do @(posedge clk); while (!desc_ready);
    @(negedge clk) desc_valid = 0;
  endtask

  task automatic pass(vocab_mode_e m, int vmax);
    automatic int l0 = lasts_seen;
    mode = m;
    column(10, 0, 0, 0, 0, 0);
    column(9, 1, 1, 0, 1, vmax);
    column(13, 1, 2, 0, 0, vmax);
    column(6, 1, 3, 1, 0, vmax);
    while (lasts_seen == l0) @(posedge clk);
    repeat (20) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    while (vocab_busy) @(posedge clk);
    pass(VOCAB_BYPASS, 400);
    pass(VOCAB_FIT, 120);
    pass(VOCAB_APPLY, 400);
    checks += 7;
    if (exp_q.size() != 0) begin failures++; $display("%0d words never reached the GPU", exp_q.size()); end
    if (stall_cycles == 0) begin failures++; $display("no credit stall"); end
    if (exp_over == 0 || vocab_overflows != 32'(exp_over)) begin failures++; $display("overflows %0d vs %0d", vocab_overflows, exp_over); end
    if (exp_miss == 0 || vocab_misses != 32'(exp_miss)) begin failures++; $display("misses %0d vs %0d", vocab_misses, exp_miss); end
    if (net_reqs == 0) begin failures++; $display("no network reads"); end
    if (!src_idle || bad_hex != '0) begin failures++; $display("source busy or bad hex"); end
    if (lasts_seen != 3) begin failures++; $display("stream ends %0d", lasts_seen); end
    $display("batches %0d words %0d stall %0d overflow %0d miss %0d new %0d",
             batches_seen, words_seen, stall_cycles, vocab_overflows, vocab_misses, vocab_new);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
