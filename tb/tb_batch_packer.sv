// tb_batch_packer: self-checking test of the batch packer (N_BUF = 2,
// BATCH_WORDS = 8, WR_BURST = 4). A GPU model accepts write beats with
// random ready, checks each beat's address (buffer base + 64 * offset), data
// order and burst-last flags, and returns a credit some cycles after each
// batch completion, with a long pause once so that both buffers are in use
// and the packer must stall. A 27-word stream ends with user.last, so the
// last batch is short (3 words).
module tb_batch_packer;
  import piperec_pkg::*;
  localparam int NB = 2, BW = 8, WB = 4, TOTAL = 27;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0][ADDR_W-1:0] buf_base;
  logic credit_return = 0;
  logic in_valid = 0, in_ready;
  word_t in_data = '0;
  word_user_t in_user = '0;
  logic wr_valid, wr_ready = 0;
  wr_beat_t wr_beat;
  logic done_valid, done_last;
  logic [0:0] done_buf;
  logic [31:0] done_words, stall_cycles, batches;
  logic [1:0] credits;
  int checks = 0, failures = 0;

  batch_packer #(.N_BUF(NB), .BATCH_WORDS(BW), .WR_BURST(WB)) dut (.*);
  always #5 clk = ~clk;
  assign buf_base[0] = 64'hA000_0000;
  assign buf_base[1] = 64'hB000_0000;

  int beats = 0, dones = 0, n_acc = 0;
  always @(posedge clk) if (rst_n && in_valid && in_ready) n_acc++;
  always @(posedge clk) begin
    if (wr_valid && wr_ready) begin
      automatic int batch = beats / BW, off = beats % BW;
      checks += 3;
      if (wr_beat.addr != buf_base[batch % NB] + 64 * off) begin failures++; $display("beat %0d addr %h", beats, wr_beat.addr); end
      if (wr_beat.data[0] != elem_t'(beats)) begin failures++; $display("beat %0d data %0d", beats, wr_beat.data[0]); end
      if (wr_beat.last != ((off % WB == WB - 1) || off == BW - 1 || beats == TOTAL - 1)) begin failures++; $display("beat %0d last", beats); end
      beats++;
    end
    if (done_valid) begin
      automatic int want = (dones == TOTAL / BW) ? TOTAL % BW : BW;
      checks += 3;
      if (done_words != 32'(want)) begin failures++; $display("done words %0d", done_words); end
      if (done_buf != 1'(dones % NB)) begin failures++; $display("done buf %0d", done_buf); end
      if (done_last != (dones == TOTAL / BW)) begin failures++; $display("done last"); end
      dones++;
    end
  end
  always @(negedge clk) wr_ready = ($urandom_range(0, 3) != 0);

  // GPU: frees a buffer a while after it was filled; holds batch 0 long
  initial begin
    forever begin
      @(posedge clk);
      if (done_valid) begin
        automatic int d = (batches == 1) ? 60 : $urandom_range(3, 10);
        fork
          begin repeat (d) @(negedge clk); credit_return = 1; @(negedge clk); credit_return = 0; end
        join_none
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < TOTAL; n++) begin
      in_valid = 1;
      in_data = '0; in_data[0] = elem_t'(n);
      in_user = '{sparse: 1'b0, col: '0, last: n == TOTAL - 1};
      begin
        automatic int n0 = n_acc;
        do begin @(posedge clk); #1; end while (n_acc == n0);
      end
      in_valid = 0;
      if ($urandom_range(0, 3) == 0) begin @(posedge clk); #1; end
    end
    repeat (100) @(posedge clk);
    checks += 4;
    if (beats != TOTAL) begin failures++; $display("beats %0d", beats); end
    if (dones != (TOTAL + BW - 1) / BW || batches != 32'(dones)) begin failures++; $display("batches %0d", dones); end
    if (stall_cycles == 0) begin failures++; $display("no credit stall happened"); end
    if (credits != 2'(NB)) begin failures++; $display("credits %0d at end", credits); end
    $display("stall cycles %0d", stall_cycles);
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
