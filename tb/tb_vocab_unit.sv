// tb_vocab_unit: self-checking test of the VocabGen/VocabMap operator
// (reduced to 3 sparse columns of 64 values).
//  * fit: random sparse words (values 0..79, so some overflow the 64-entry
//    range) and dense words; sparse lanes must come back as the index of the
//    value's first appearance in its column (reference kept here), dense
//    words unchanged, overflowing lanes as all-ones;
//  * apply: new words whose values are partly unseen; seen values map to the
//    fit index, unseen ones to all-ones and count as misses;
//  * bypass: words pass unchanged;
//  * timing: with the output always ready, a sparse word takes 2W+2 cycles in
//    fit (II = 2 per lane) and W+2 in apply (II = 1 per lane).
module tb_vocab_unit;
  import piperec_pkg::*;
  localparam int NC = 3, D = 64;
  localparam elem_t OOV = elem_t'(7'h7F);
  logic clk = 0, rst_n = 0, clear = 0, busy;
  vocab_mode_e mode = VOCAB_FIT;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  word_t in_data = '0, out_data;
  word_user_t in_user = '0, out_user;
  logic [31:0] overflow_count, miss_count, new_count;
  int checks = 0, failures = 0;
  int dict [NC][int];
  int exp_over = 0, exp_miss = 0;
  word_t exp_q[$]; word_user_t u_q[$];
  int lat_fit = -1, lat_apply = -1;

  vocab_unit #(.NUM_COLS(NC), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      automatic word_t e = exp_q.pop_front();
      automatic word_user_t u = u_q.pop_front();
      if (out_data !== e || out_user !== u) begin failures++; $display("mismatch %h vs %h", out_data, e); end
    end
  end

  function automatic word_t ref_word(word_t d, word_user_t u);
    word_t r = d;
    if (mode == VOCAB_BYPASS || !u.sparse) return d;
    for (int i = 0; i < W; i++) begin
      automatic int v = int'(d[i]);
      if (v >= D) begin r[i] = OOV; exp_over++; end
      else if (dict[u.col].exists(v)) r[i] = elem_t'(dict[u.col][v]);
      else if (mode == VOCAB_FIT) begin
        automatic int n = dict[u.col].num();
        dict[u.col][v] = n;
        r[i] = elem_t'(n);
      end else begin r[i] = OOV; exp_miss++; end
    end
    return r;
  endfunction

  // sends one word and returns cycles from acceptance to the output
  // input handshakes are recorded on the clock edge, with pre-edge values
  int n_acc = 0;
  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    exp_q.push_back(ref_word(in_data, in_user)); u_q.push_back(in_user);
    n_acc++;
  end

  task automatic send(word_t d, word_user_t u, output int lat);
    int n0 = n_acc;
    in_valid = 1; in_data = d; in_user = u;
    do begin @(posedge clk); #1; end while (n_acc == n0);
    in_valid = 0;
    lat = 0;
    while (exp_q.size() != 0) begin @(posedge clk); #1; lat++; end
  endtask

  task automatic rnd_word(output word_t d, output word_user_t u, input int maxv);
    u.sparse = ($urandom_range(0, 3) != 0);
    u.col = 10'($urandom_range(0, NC - 1));
    u.last = 0;
    for (int i = 0; i < W; i++) d[i] = u.sparse ? elem_t'($urandom_range(0, maxv)) : {$urandom, $urandom};
  endtask

  initial begin
    word_t d; word_user_t u; int lat;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (busy) @(posedge clk);
    // fit
    mode = VOCAB_FIT;
    for (int n = 0; n < 80; n++) begin
      rnd_word(d, u, 79);
      send(d, u, lat);
      if (u.sparse && lat_fit < 0) lat_fit = lat;
    end
    // fit with a stalled consumer
    fork
      for (int n = 0; n < 30; n++) begin rnd_word(d, u, 70); send(d, u, lat); end
      repeat (2000) begin @(negedge clk); out_ready = ($urandom_range(0, 2) != 0); end
    join_any
    out_ready = 1;
    repeat (30) @(posedge clk);
    checks++;
    if (new_count != (dict[0].num() + dict[1].num() + dict[2].num())) begin failures++; $display("new_count %0d", new_count); end
    // apply
    mode = VOCAB_APPLY;
    for (int n = 0; n < 60; n++) begin
      rnd_word(d, u, 79);
      send(d, u, lat);
      if (u.sparse && lat_apply < 0) lat_apply = lat;
    end
    checks += 2;
    if (overflow_count != 32'(exp_over)) begin failures++; $display("overflow %0d vs %0d", overflow_count, exp_over); end
    if (miss_count != 32'(exp_miss)) begin failures++; $display("miss %0d vs %0d", miss_count, exp_miss); end
    checks += 2;
    if (exp_miss == 0 || exp_over == 0) begin failures++; $display("miss/overflow never happened"); end
    // bypass
    mode = VOCAB_BYPASS;
    for (int n = 0; n < 20; n++) begin rnd_word(d, u, 79); send(d, u, lat); end
    checks += 2;
    if (lat_fit != 2*W + 2) begin failures++; $display("fit word latency %0d", lat_fit); end
    if (lat_apply != W + 2) begin failures++; $display("apply word latency %0d", lat_apply); end
    $display("fit word %0d cycles, apply word %0d cycles", lat_fit, lat_apply);
    // clear empties the table: everything misses afterwards
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    while (busy) @(posedge clk);
    for (int c = 0; c < NC; c++) dict[c].delete();
    mode = VOCAB_APPLY;
    exp_miss = 0; exp_over = 0;
    for (int n = 0; n < 10; n++) begin
      u = '{sparse: 1'b1, col: 10'(n % NC), last: 1'b0};
      for (int i = 0; i < W; i++) d[i] = elem_t'($urandom_range(0, D - 1));
      send(d, u, lat);
    end
    checks++;
    if (miss_count != 32'(exp_miss)) begin failures++; $display("miss after clear %0d vs %0d", miss_count, exp_miss); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
