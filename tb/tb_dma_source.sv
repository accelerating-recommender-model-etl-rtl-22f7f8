// tb_dma_source: self-checking test of the read DMA engine (BURST = 8,
// MAX_OUTSTANDING = 2). A memory model accepts read requests with random
// ready, and returns their beats in order after a random delay, each beat's
// lanes holding its own byte address. Three descriptors (one of them from
// remote memory, lengths not multiples of the burst) are streamed with the
// consumer's ready toggled at random. Checks: every word arrives once, in
// address order, with the right column tag and stream-last flag; requests
// never exceed the burst or the buffer credit; remote descriptors use the
// network port.
module tb_dma_source;
  import piperec_pkg::*;
  localparam int BURST = 8, MO = 2;
  logic clk = 0, rst_n = 0;
  logic desc_valid = 0, desc_ready;
  desc_t desc = '0;
  logic rd_req_valid, rd_req_net, rd_req_ready = 0;
  rd_req_t rd_req;
  logic rd_data_valid = 0;
  word_t rd_data = '0;
  logic out_valid, out_ready = 0, idle;
  word_t out_data;
  word_user_t out_user;
  int checks = 0, failures = 0;

  dma_source #(.BURST(BURST), .MAX_OUTSTANDING(MO)) dut (.*);
  always #5 clk = ~clk;

  // memory model
  typedef struct { longint addr; int len; bit net; } req_s;
  req_s pend[$];
  int net_reqs = 0;
  always @(posedge clk) begin
    if (rd_req_valid && rd_req_ready) begin
      pend.push_back('{longint'(rd_req.addr), int'(rd_req.len), rd_req_net});
      checks++;
      if (rd_req.len == 0 || rd_req.len > BURST) begin failures++; $display("bad burst %0d", rd_req.len); end
      if (rd_req_net) net_reqs++;
    end
    rd_req_ready <= ($urandom_range(0, 2) != 0);
  end
  initial begin
    forever begin
      @(posedge clk);
      if (pend.size() != 0 && $urandom_range(0, 3) == 0) begin
        automatic req_s r = pend.pop_front();
        for (int b = 0; b < r.len; b++) begin
          #1 rd_data_valid = 1;
          for (int i = 0; i < W; i++) rd_data[i] = elem_t'(r.addr + 64 * b + i);
          @(posedge clk);
          #1 rd_data_valid = 0;
          if ($urandom_range(0, 3) == 0) @(posedge clk);
        end
      end
    end
  end

  // expected words
  typedef struct { longint addr; word_user_t u; } exp_s;
  exp_s exp_q[$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected word"); end
    else begin
      automatic exp_s e = exp_q.pop_front();
      automatic word_t w;
      for (int i = 0; i < W; i++) w[i] = elem_t'(e.addr + i);
      if (out_data !== w || out_user !== e.u) begin
        failures++; $display("word %h user %h, expected addr %h user %h", out_data[0], out_user, e.addr, e.u);
      end
    end
  end
  always @(negedge clk) out_ready = ($urandom_range(0, 2) != 0);

  task automatic push_desc(longint a, int words, bit sparse, int col, bit last, bit net);
    desc.addr = ADDR_W'(a); desc.words = LEN_W'(words); desc.sparse = sparse;
    desc.col = COL_W'(col); desc.last = last; desc.net = net;
    for (int k = 0; k < words; k++)
      exp_q.push_back('{a + 64 * k, '{sparse: sparse, col: COL_W'(col), last: last && (k == words - 1)}});
    desc_valid = 1;
    do @(posedge clk); while (!desc_ready);
    #1 desc_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    push_desc(64'h1000_0000, 21, 0, 0, 0, 0);
    push_desc(64'h2000_0000, 8, 1, 5, 0, 1);
    push_desc(64'h3000_0000, 13, 1, 6, 1, 0);
    while (exp_q.size() != 0) @(posedge clk);
    repeat (20) @(posedge clk);
    checks += 2;
    if (!idle) begin failures++; $display("not idle at the end"); end
    if (net_reqs != 1) begin failures++; $display("network requests %0d", net_reqs); end
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
