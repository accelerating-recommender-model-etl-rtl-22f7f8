// batch_packer: format-aware packer that writes training-ready batches into
// the GPU's staging buffers, with credit-based rate matching.
//
// The GPU side owns N_BUF staging buffers (two: double buffering, so the
// trainer works on batch i while batch i+1 arrives). The packer holds one
// credit per free buffer; all buffers are free after reset. A batch is
// started only when a credit is available; the packer then writes the next
// BATCH_WORDS processed words to consecutive 64-byte addresses of the next
// buffer in turn, split into write bursts of WR_BURST beats. A batch also ends
// early on the stream's last word. At the end of a batch it reports the
// buffer number and word count (`done_*`, the completion the GPU waits on).
// The GPU hands a buffer back with a one-cycle `credit_return` pulse once it
// has copied it out. Without a credit the input is refused, which stalls the
// whole pipeline upstream: `stall_cycles` counts cycles spent so.
// Double buffering and "write only when the GPU notifies a free buffer"
// follow the paper; batch size, burst split and the completion format are
// this design's choices.
module batch_packer
  import piperec_pkg::*;
#(
  parameter int unsigned N_BUF       = 2,
  parameter int unsigned BATCH_WORDS = 16384,
  parameter int unsigned WR_BURST    = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [N_BUF-1:0][ADDR_W-1:0] buf_base,   // GPU staging buffer addresses
  input  logic                     credit_return,  // GPU freed one buffer
  // processed stream
  input  logic                     in_valid,
  output logic                     in_ready,
  input  word_t                    in_data,
  input  word_user_t               in_user,
  // write beats toward the GPU (through the memory arbiter)
  output logic                     wr_valid,
  input  logic                     wr_ready,
  output wr_beat_t                 wr_beat,
  // batch completion
  output logic                     done_valid,
  output logic [$clog2(N_BUF)-1:0] done_buf,
  output logic [31:0]              done_words,
  output logic                     done_last,      // batch ended the stream
  output logic [$clog2(N_BUF+1)-1:0] credits,
  output logic [31:0]              stall_cycles,
  output logic [31:0]              batches
);

  localparam int unsigned BW = $clog2(N_BUF) > 0 ? $clog2(N_BUF) : 1;
  localparam int unsigned CW = $clog2(N_BUF + 1);

  logic            run_q;
  logic [BW-1:0]   buf_q;
  logic [31:0]     off_q;
  logic [CW-1:0]   cred_q;

  wire start    = !run_q && in_valid && (cred_q != '0);
  wire end_word = (off_q == 32'(BATCH_WORDS - 1)) || in_user.last;

  assign in_ready = run_q && wr_ready;
  assign wr_valid = run_q && in_valid;
  assign wr_beat.addr = buf_base[buf_q] + ADDR_W'(off_q) * ADDR_W'(DATA_W / 8);
  assign wr_beat.data = in_data;
  assign wr_beat.last = end_word || (off_q % 32'(WR_BURST) == 32'(WR_BURST - 1));

  wire fire = in_valid && in_ready;
  assign credits = cred_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q        <= 1'b0;
      buf_q        <= '0;
      off_q        <= '0;
      cred_q       <= CW'(N_BUF);
      done_valid   <= 1'b0;
      done_buf     <= '0;
      done_words   <= '0;
      done_last    <= 1'b0;
      stall_cycles <= '0;
      batches      <= '0;
    end else begin
      done_valid <= 1'b0;
      cred_q <= cred_q + (credit_return ? CW'(1) : CW'(0)) - (start ? CW'(1) : CW'(0));
      if (!run_q && in_valid && cred_q == '0) stall_cycles <= stall_cycles + 1;
      if (start) begin
        run_q <= 1'b1;
        off_q <= '0;
      end
      if (fire) begin
        off_q <= off_q + 1;
        if (end_word) begin
          run_q      <= 1'b0;
          done_valid <= 1'b1;
          done_buf   <= buf_q;
          done_words <= off_q + 1;
          done_last  <= in_user.last;
          batches    <= batches + 1;
          buf_q      <= (buf_q == BW'(N_BUF - 1)) ? '0 : buf_q + 1'b1;
        end
      end
    end
  end

  a_credit_bound: assert property (@(posedge clk) disable iff (!rst_n) cred_q <= CW'(N_BUF));

endmodule
