// dma_source: read DMA engine that feeds one ETL pipeline from memory or the
// network ("Data Source (Memory/Network)").
//
// The control plane hands it column descriptors (virtual address, length in
// 64-byte words, column id, dense/sparse, last-of-stream, and whether the
// column lives in remote memory). For each descriptor it issues read bursts
// of up to BURST words, on the local/host port or on the network port. A
// burst is issued only when the receive buffer has room for all of it
// (credit), so returning data never has to be refused; responses come back
// in order on the port that was asked, and a switch between the two ports
// waits until all earlier bursts have returned. Every returning word is
// tagged with its column sideband and pushed to the output stream; the last
// word of a descriptor marked `last` carries user.last.
// Descriptor format, burst size and the credit scheme are this design's
// choices; the paper states only that the pipeline reads from memory or the
// network through DMA with credit-based backpressure.
module dma_source
  import piperec_pkg::*;
#(
  parameter int unsigned BURST           = 64,
  parameter int unsigned MAX_OUTSTANDING = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  // descriptors
  input  logic       desc_valid,
  output logic       desc_ready,
  input  desc_t      desc,
  // read requests
  output logic       rd_req_valid,
  output logic       rd_req_net,      // 1: network port, 0: local/host port
  input  logic       rd_req_ready,
  output rd_req_t    rd_req,
  // read data (in order, cannot be refused)
  input  logic       rd_data_valid,
  input  word_t      rd_data,
  // output stream
  output logic       out_valid,
  input  logic       out_ready,
  output word_t      out_data,
  output word_user_t out_user,
  output logic       idle
);

  localparam int unsigned BUF_WORDS = BURST * MAX_OUTSTANDING;
  localparam int unsigned CNT_W     = $clog2(BUF_WORDS + 1);

  typedef struct packed {
    logic [15:0] len;
    word_user_t  user;      // user.last = this burst ends the stream
  } meta_t;

  // current descriptor
  logic              act_q;
  desc_t             d_q;
  logic [LEN_W-1:0]  left_q;         // words still to request
  logic              net_q;          // port of the bursts in flight
  logic [CNT_W-1:0]  credit_q;       // words reserved in the data buffer

  assign desc_ready = !act_q;

  logic [15:0] blen;
  assign blen = (left_q > LEN_W'(BURST)) ? 16'(BURST) : 16'(left_q);

  logic meta_in_ready, meta_out_valid, meta_pop;
  meta_t meta_out;
  logic [$clog2(MAX_OUTSTANDING+1)-1:0] meta_cnt;

  wire port_ok   = (meta_cnt == '0) || (net_q == d_q.net);
  wire have_cred = (credit_q + CNT_W'(blen)) <= CNT_W'(BUF_WORDS);
  assign rd_req_valid = act_q && (left_q != '0) && port_ok && have_cred && meta_in_ready;
  assign rd_req_net   = d_q.net;
  assign rd_req.addr  = d_q.addr;
  assign rd_req.len   = blen;

  wire req_fire = rd_req_valid && rd_req_ready;

  meta_t meta_in;
  always_comb begin
    meta_in.len         = blen;
    meta_in.user.sparse = d_q.sparse;
    meta_in.user.col    = d_q.col;
    meta_in.user.last   = d_q.last && (left_q == LEN_W'(blen));
  end

  sync_fifo #(.WIDTH($bits(meta_t)), .DEPTH(MAX_OUTSTANDING)) u_meta (
    .clk, .rst_n, .in_valid(req_fire), .in_ready(meta_in_ready), .in_data(meta_in),
    .out_valid(meta_out_valid), .out_ready(meta_pop), .out_data(meta_out), .count(meta_cnt));

  // returning beats
  logic [15:0] beat_q;
  assign meta_pop = rd_data_valid && meta_out_valid && (beat_q == meta_out.len - 1'b1);

  word_user_t tag;
  always_comb begin
    tag      = meta_out.user;
    tag.last = meta_out.user.last && (beat_q == meta_out.len - 1'b1);
  end

  logic buf_in_ready, buf_out_valid;
  logic [$clog2(BUF_WORDS+1)-1:0] buf_cnt;
  logic [DATA_W+$bits(word_user_t)-1:0] buf_out;
  sync_fifo #(.WIDTH(DATA_W + $bits(word_user_t)), .DEPTH(BUF_WORDS)) u_buf (
    .clk, .rst_n, .in_valid(rd_data_valid), .in_ready(buf_in_ready), .in_data({tag, rd_data}),
    .out_valid(buf_out_valid), .out_ready(out_ready), .out_data(buf_out), .count(buf_cnt));

  assign out_valid = buf_out_valid;
  assign {out_user, out_data} = buf_out;
  wire out_fire = out_valid && out_ready;

  assign idle = !act_q && (meta_cnt == '0) && !buf_out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q    <= 1'b0;
      d_q      <= '0;
      left_q   <= '0;
      net_q    <= 1'b0;
      credit_q <= '0;
      beat_q   <= '0;
    end else begin
      if (desc_valid && desc_ready) begin
        act_q  <= desc.words != '0;
        d_q    <= desc;
        left_q <= desc.words;
      end
      if (req_fire) begin
        d_q.addr <= d_q.addr + ADDR_W'(blen) * ADDR_W'(DATA_W / 8);
        left_q   <= left_q - LEN_W'(blen);
        net_q    <= d_q.net;
        if (left_q == LEN_W'(blen)) act_q <= 1'b0;
      end
      credit_q <= credit_q + (req_fire ? CNT_W'(blen) : '0) - (out_fire ? CNT_W'(1) : '0);
      if (rd_data_valid) beat_q <= meta_pop ? '0 : beat_q + 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    rd_data_valid |-> (buf_in_ready && meta_out_valid));

endmodule
