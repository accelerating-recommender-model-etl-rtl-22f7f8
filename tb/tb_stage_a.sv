// tb_stage_a: self-checking test of the fused stateless stage.
// Interleaved dense and sparse words are streamed while the consumer's ready
// is toggled at random. Dense lanes must come out as ln(1 + max(x, 0))
// (checked against real arithmetic), sparse lanes as hex value % divisor,
// in input order. The paper's Figure-12 example row (0xbe589b51, 0x00000000,
// 17, -1 -> 39761, 0, 2.89, 0) is sent first. A final burst with ready held
// high checks II = 1: N words leave in N + 33 cycles.
module tb_stage_a;
  import piperec_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] divisor = 32'd65536;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  word_t in_data = '0, out_data;
  word_user_t in_user = '0, out_user;
  logic [W-1:0] out_bad;
  int checks = 0, failures = 0;
  word_t in_q[$]; word_user_t u_q[$];

  stage_a dut (.*);
  always #5 clk = ~clk;

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

  task automatic check_word(word_t x, word_user_t u);
    checks++;
    if (out_user != u) begin failures++; $display("user mismatch"); end
    for (int i = 0; i < W; i++) begin
      checks++;
      if (u.sparse) begin
        automatic logic [31:0] v = 0;
        for (int c = 0; c < 8; c++) begin
          automatic logic [7:0] ch = x[i][8*c +: 8];
          v = {v[27:0], (ch <= 8'h39) ? 4'(ch - 8'h30) : 4'(ch - 8'h57)};
        end
        if (out_data[i] != {32'h0, v % divisor}) begin
          failures++; $display("sparse lane %0d: %0d vs %0d", i, out_data[i], v % divisor);
        end
      end else begin
        automatic real xr = f2r(x[i][31:0]);
        automatic real want = $ln(1.0 + ((xr < 0) ? 0.0 : xr));
        automatic real got = f2r(out_data[i][31:0]);
        automatic real err = (got > want) ? got - want : want - got;
        if (err > 2e-6 + 2e-5 * want) begin failures++; $display("dense lane %0d: %g vs %g", i, got, want); end
      end
    end
  endtask

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (in_q.size() == 0) begin failures++; checks++; $display("unexpected output"); end
    else check_word(in_q.pop_front(), u_q.pop_front());
  end

  // input handshakes are recorded on the clock edge, with pre-edge values
  int n_acc = 0;
  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    in_q.push_back(in_data); u_q.push_back(in_user);
    n_acc++;
  end

  task automatic send(word_t d, word_user_t u, bit rnd_ready);
    int n0 = n_acc;
    in_valid = 1; in_data = d; in_user = u;
    do begin
      out_ready = rnd_ready ? ($urandom_range(0, 2) != 0) : 1'b1;
      @(posedge clk); #1;
    end while (n_acc == n0);
    in_valid = 0;
  endtask

  initial begin
    word_t d; word_user_t u;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // Figure 12 row, as one sparse word and one dense word
    d = '0; for (int i = 0; i < W; i++) d[i] = hexstr(32'h0);
    d[0] = hexstr(32'hbe589b51);
    u = '{sparse: 1'b1, col: 10'd0, last: 1'b0};
    send(d, u, 0);
    d = '0; d[0] = 64'h4188_0000; d[1] = 64'hBF80_0000;   // 17, -1
    u = '{sparse: 1'b0, col: 10'd1, last: 1'b0};
    send(d, u, 0);
    out_ready = 1;
    repeat (40) @(posedge clk);
    // random traffic with stalls
    for (int n = 0; n < 600; n++) begin
      u.sparse = $urandom_range(0, 1);
      u.col = 10'($urandom_range(0, 38));
      u.last = 0;
      for (int i = 0; i < W; i++)
        d[i] = u.sparse ? hexstr($urandom) : {32'h0, 1'($urandom), 8'($urandom_range(90, 160)), 23'($urandom)};
      send(d, u, 1);
      if ($urandom_range(0, 9) == 0) @(posedge clk);
    end
    out_ready = 1;
    repeat (50) @(posedge clk);
    // throughput: 64 back-to-back words with ready high
    begin
      int t0, cnt;
      cnt = 0;
      fork
        begin
          for (int n = 0; n < 64; n++) begin
            for (int i = 0; i < W; i++) d[i] = hexstr($urandom);
            send(d, '{sparse: 1'b1, col: 10'd3, last: 1'b0}, 0);
          end
        end
        begin
          t0 = 0;
          while (cnt < 64) begin
            @(posedge clk);
            t0++;
            if (out_valid && out_ready) cnt++;
          end
        end
      join
      checks++;
      if (t0 > 64 + 34) begin failures++; $display("II check: 64 words took %0d cycles", t0); end
    end
    repeat (5) @(posedge clk);
    checks++;
    if (in_q.size() != 0) begin failures++; $display("%0d words lost", in_q.size()); end
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
