// tb_rdwr_arbiter: self-checking test of the round-robin read/write arbiter
// with three requesters. Each requester issues read bursts tagged with its
// own number in the address; the port model returns beats in order. Every
// requester must receive exactly its own beats, in order. Writes: each
// requester sends bursts of 1-4 beats; the port must see whole bursts
// without interleaving, and every beat once. Under full load the read
// grants must rotate (no requester granted twice while another waits).
module tb_rdwr_arbiter;
  import piperec_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] rd_req_valid = 0, rd_req_ready, rd_data_valid;
  rd_req_t [N-1:0] rd_req = '0;
  word_t rd_data;
  logic [N-1:0] wr_valid = 0, wr_ready;
  wr_beat_t [N-1:0] wr_beat = '0;
  logic m_rd_req_valid, m_rd_req_ready = 0, m_rd_data_valid = 0;
  rd_req_t m_rd_req;
  word_t m_rd_data = '0;
  logic m_wr_valid, m_wr_ready = 0;
  wr_beat_t m_wr_beat;
  int checks = 0, failures = 0;

  rdwr_arbiter #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  // port model: reads
  rd_req_t port_q[$];
  always @(posedge clk) begin
    if (m_rd_req_valid && m_rd_req_ready) port_q.push_back(m_rd_req);
    m_rd_req_ready <= ($urandom_range(0, 3) != 0);
  end
  initial forever begin
    @(posedge clk);
    if (port_q.size() != 0) begin
      automatic rd_req_t r = port_q.pop_front();
      for (int b = 0; b < r.len; b++) begin
        #1 m_rd_data_valid = 1; m_rd_data = '0; m_rd_data[0] = r.addr + 64'(b);
        @(posedge clk);
        #1 m_rd_data_valid = 0;
      end
    end
  end

  // requesters: reads
  int rd_issued [N], rd_got [N];
  longint rd_exp [N][$];
  for (genvar g = 0; g < N; g++) begin : g_req
    always @(posedge clk) if (rst_n) begin
      if (rd_req_valid[g] && rd_req_ready[g]) begin
        for (int b = 0; b < rd_req[g].len; b++) rd_exp[g].push_back(longint'(rd_req[g].addr) + b);
        rd_issued[g]++;
        rd_req_valid[g] <= 1'b0;
      end else if (!rd_req_valid[g] && rd_issued[g] < 20 && $urandom_range(0, 1) == 1) begin
        rd_req_valid[g] <= 1'b1;
        rd_req[g].addr <= ADDR_W'((g << 24) | (rd_issued[g] << 8));
        rd_req[g].len  <= 16'($urandom_range(1, 4));
      end
      if (rd_data_valid[g]) begin
        checks++;
        if (rd_exp[g].size() == 0 || longint'(rd_data[0]) != rd_exp[g].pop_front()) begin
          failures++; $display("requester %0d got %h", g, rd_data[0]);
        end
        rd_got[g]++;
      end
    end
  end

  // requesters: writes
  int wr_sent [N];
  for (genvar g = 0; g < N; g++) begin : g_wr
    int left = 0;
    always @(posedge clk) if (rst_n) begin
      if (wr_valid[g] && wr_ready[g]) begin
        wr_sent[g]++;
        wr_beat[g].data[0] <= wr_beat[g].data[0] + 1;
        if (wr_beat[g].last) wr_valid[g] <= 1'b0;
        else begin left = left - 1; wr_beat[g].last <= (left == 1); end
      end else if (!wr_valid[g] && wr_sent[g] < 30) begin
        left = $urandom_range(1, 4);
        wr_valid[g] <= 1'b1;
        wr_beat[g].addr <= ADDR_W'(g);
        wr_beat[g].last <= (left == 1);
      end
    end
  end
  int port_wr [N], owner = -1;
  always @(posedge clk) begin
    if (m_wr_valid && m_wr_ready) begin
      automatic int g = int'(m_wr_beat.addr);
      checks++;
      if (owner != -1 && owner != g) begin failures++; $display("write bursts interleaved"); end
      if (longint'(m_wr_beat.data[0]) != longint'(port_wr[g])) begin failures++; $display("write beat order %0d", g); end
      port_wr[g]++;
      owner = m_wr_beat.last ? -1 : g;
    end
    m_wr_ready <= ($urandom_range(0, 2) != 0);
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (3000) @(posedge clk);
    for (int g = 0; g < N; g++) begin
      checks += 3;
      if (rd_issued[g] != 20) begin failures++; $display("requester %0d issued %0d", g, rd_issued[g]); end
      if (rd_exp[g].size() != 0) begin failures++; $display("requester %0d missing beats", g); end
      if (port_wr[g] != wr_sent[g] || wr_sent[g] < 30) begin failures++; $display("writes %0d: %0d/%0d", g, port_wr[g], wr_sent[g]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // fairness: with all three requesting, grants rotate
  int last_g = -1;
  always @(posedge clk) if (rst_n && m_rd_req_valid && m_rd_req_ready && rd_req_valid == '1) begin
    automatic int g = int'(m_rd_req.addr >> 24);
    checks++;
    if (last_g != -1 && g != (last_g + 1) % N) begin failures++; $display("grant %0d after %0d", g, last_g); end
  end
  always @(posedge clk) if (rst_n && m_rd_req_valid && m_rd_req_ready) last_g <= int'(m_rd_req.addr >> 24);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
