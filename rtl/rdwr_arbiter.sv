// rdwr_arbiter: shares one memory (or network) port among N pipelines.
//
// Reads: the requests of the N pipelines are granted round-robin, one per
// cycle; the number of the granted pipeline and its burst length go into an
// order FIFO, and since the port returns read data in request order, the
// head of that FIFO says which pipeline each returning beat belongs to.
// Writes: a pipeline granted the write side keeps it until the last beat of
// its burst, so bursts never interleave; the next grant is round-robin.
// The port's ready signals are the credits of the far side. Round-robin and
// in-order response routing are this design's choices; the paper gives the
// arbiters, their place and their credit-based interfaces.
module rdwr_arbiter
  import piperec_pkg::*;
#(
  parameter int unsigned N         = 1,
  parameter int unsigned ORDER_DEP = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // pipeline side
  input  logic    [N-1:0]      rd_req_valid,
  output logic    [N-1:0]      rd_req_ready,
  input  rd_req_t [N-1:0]      rd_req,
  output logic    [N-1:0]      rd_data_valid,
  output word_t                rd_data,
  input  logic    [N-1:0]      wr_valid,
  output logic    [N-1:0]      wr_ready,
  input  wr_beat_t [N-1:0]     wr_beat,
  // port side
  output logic                 m_rd_req_valid,
  input  logic                 m_rd_req_ready,
  output rd_req_t              m_rd_req,
  input  logic                 m_rd_data_valid,
  input  word_t                m_rd_data,
  output logic                 m_wr_valid,
  input  logic                 m_wr_ready,
  output wr_beat_t             m_wr_beat
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  function automatic logic [IW-1:0] rr_pick(logic [N-1:0] req, logic [IW-1:0] ptr);
    logic [IW-1:0] g;
    g = ptr;
    for (int k = N - 1; k >= 0; k--) begin
      int unsigned j;
      j = (int'(ptr) + k) % N;
      if (req[j]) g = IW'(j);
    end
    return g;
  endfunction

  // ---------------- reads ----------------
  logic [IW-1:0] rptr_q, rgnt;
  logic          ord_in_ready, ord_out_valid;
  logic [IW+15:0] ord_out;
  logic [15:0]   rbeat_q;

  assign rgnt           = rr_pick(rd_req_valid, rptr_q);
  assign m_rd_req_valid = |rd_req_valid && ord_in_ready;
  assign m_rd_req       = rd_req[rgnt];
  always_comb begin
    rd_req_ready = '0;
    rd_req_ready[rgnt] = m_rd_req_ready && ord_in_ready;
  end
  wire rfire = m_rd_req_valid && m_rd_req_ready;

  wire ord_pop = m_rd_data_valid && (rbeat_q == ord_out[15:0] - 1'b1);
  sync_fifo #(.WIDTH(IW + 16), .DEPTH(ORDER_DEP)) u_order (
    .clk, .rst_n, .in_valid(rfire), .in_ready(ord_in_ready), .in_data({rgnt, m_rd_req.len}),
    .out_valid(ord_out_valid), .out_ready(ord_pop), .out_data(ord_out), .count());

  always_comb begin
    rd_data_valid = '0;
    if (m_rd_data_valid && ord_out_valid) rd_data_valid[ord_out[IW+15:16]] = 1'b1;
  end
  assign rd_data = m_rd_data;

  // ---------------- writes ----------------
  logic          wlock_q;
  logic [IW-1:0] wown_q, wptr_q, wsel;
  assign wsel       = wlock_q ? wown_q : rr_pick(wr_valid, wptr_q);
  assign m_wr_valid = wr_valid[wsel];
  assign m_wr_beat  = wr_beat[wsel];
  always_comb begin
    wr_ready = '0;
    wr_ready[wsel] = m_wr_ready;
  end
  wire wfire = m_wr_valid && m_wr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rptr_q  <= '0;
      rbeat_q <= '0;
      wlock_q <= 1'b0;
      wown_q  <= '0;
      wptr_q  <= '0;
    end else begin
      if (rfire) rptr_q <= (rgnt == IW'(N - 1)) ? '0 : rgnt + 1'b1;
      if (m_rd_data_valid) rbeat_q <= ord_pop ? '0 : rbeat_q + 1'b1;
      if (wfire) begin
        if (m_wr_beat.last) begin
          wlock_q <= 1'b0;
          wptr_q  <= (wsel == IW'(N - 1)) ? '0 : wsel + 1'b1;
        end else begin
          wlock_q <= 1'b1;
          wown_q  <= wsel;
        end
      end
    end
  end

  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    m_rd_data_valid |-> ord_out_valid);

endmodule
