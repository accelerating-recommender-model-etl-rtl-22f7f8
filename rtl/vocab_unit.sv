// vocab_unit: the stateful vocabulary operator (VocabGen in fit mode,
// VocabMap in apply mode) with its broadcast/gather around a shared table.
//
// Words of dense columns, and every word in bypass mode (Pipeline I), pass
// through unchanged. A word of a sparse column is taken apart lane by lane
// (the broadcast of the lanes onto the one shared table) and the resulting
// indices are put back into the same lane positions (the gather) before the
// word leaves, so order is kept. Per lane value v of sparse column c:
//   fit   : read entry (c, v); if it is valid its index is the result,
//           otherwise the column's next index (order of first appearance,
//           starting at 0) is written and is the result. The write must land
//           before the next read, so a lane takes 2 cycles (II = 2).
//   apply : read entry (c, v) and use its index; reads are pipelined so a
//           lane takes 1 cycle (II = 1). An unseen value gives OOV_IDX and
//           counts in `miss_count`.
// A value >= DEPTH has no entry: the result is OOV_IDX and it counts in
// `overflow_count`; a column whose indices are used up counts the same way.
// Fit-then-apply, the first-appearance order and the on-chip IIs (2 and 1)
// follow the paper; the index origin, the OOV marker, emitting indices in fit
// mode too, and lane-serial access to a single table (instead of P
// partitions) are this design's choices.
//
// Handshake: valid/ready on both sides; one output register.
module vocab_unit
  import piperec_pkg::*;
#(
  parameter int unsigned NUM_COLS = 26,
  parameter int unsigned DEPTH    = 8192
) (
  input  logic        clk,
  input  logic        rst_n,
  input  vocab_mode_e mode,           // held stable while streaming
  input  logic        clear,          // clear the table and the index counters
  output logic        busy,           // table clear in progress
  input  logic        in_valid,
  output logic        in_ready,
  input  word_t       in_data,
  input  word_user_t  in_user,
  output logic        out_valid,
  input  logic        out_ready,
  output word_t       out_data,
  output word_user_t  out_user,
  output logic [31:0] overflow_count,
  output logic [31:0] miss_count,
  output logic [31:0] new_count       // entries created by fit
);

  localparam int unsigned IDX_W  = $clog2(DEPTH) + 1;
  localparam int unsigned VAL_W  = $clog2(DEPTH);
  localparam int unsigned CIDX_W = (NUM_COLS > 1) ? $clog2(NUM_COLS) : 1;
  localparam int unsigned TA_W   = $clog2(NUM_COLS * DEPTH);
  localparam int unsigned LANE_W = $clog2(W);
  localparam logic [IDX_W-1:0] OOV_IDX = '1;

  typedef enum logic [1:0] {S_IDLE, S_LANE, S_WB, S_OUT} state_e;
  state_e state_q;

  word_t                    cur_q, res_q;
  word_user_t               user_q;
  logic [LANE_W:0]          rd_lane_q;     // next lane to read
  logic [LANE_W:0]          wb_lane_q;     // lane whose read data arrives now
  logic                     pend_q;        // a read was issued last cycle
  logic [IDX_W-1:0]         next_idx_q [NUM_COLS];

  // table
  logic              t_busy, t_rd_en, t_hit, t_wr_en;
  logic [TA_W-1:0]   t_rd_addr, t_wr_addr;
  logic [IDX_W-1:0]  t_rd_idx, t_wr_idx;

  vocab_table #(.NUM_COLS(NUM_COLS), .DEPTH(DEPTH), .IDX_W(IDX_W), .ADDR_W(TA_W)) u_table (
    .clk, .rst_n, .clear, .busy(t_busy),
    .rd_en(t_rd_en), .rd_addr(t_rd_addr), .rd_hit(t_hit), .rd_idx(t_rd_idx),
    .wr_en(t_wr_en), .wr_addr(t_wr_addr), .wr_idx(t_wr_idx));
  assign busy = t_busy;

  function automatic logic [TA_W-1:0] entry_addr(logic [COL_W-1:0] col, elem_t v);
    return TA_W'(TA_W'(col) * TA_W'(DEPTH) + TA_W'(v[VAL_W-1:0]));
  endfunction

  logic [CIDX_W-1:0] cidx;
  assign cidx = CIDX_W'(user_q.col);

  logic out_free;
  assign out_free = !out_valid || out_ready;

  wire bypass_word = (mode == VOCAB_BYPASS) || !in_user.sparse;
  assign in_ready = (state_q == S_IDLE) && !t_busy && (bypass_word ? out_free : 1'b1);

  // lane to read this cycle and whether it needs the table
  elem_t rd_val;
  logic  rd_oob, rd_go, col_ok;
  assign col_ok = user_q.col < COL_W'(NUM_COLS);
  assign rd_val = cur_q[rd_lane_q[LANE_W-1:0]];
  assign rd_oob = (rd_val >= elem_t'(DEPTH)) || !col_ok;
  // apply: read every cycle; fit: read only when no write-back is pending
  assign rd_go  = (state_q == S_LANE) && (rd_lane_q < (LANE_W+1)'(W));

  always_comb begin
    t_rd_en   = rd_go && !rd_oob;
    t_rd_addr = entry_addr(user_q.col, rd_val);
  end

  // write-back of lane wb_lane_q (fit mode, miss)
  logic fit_new, col_full;
  assign col_full = next_idx_q[cidx] >= IDX_W'(DEPTH);
  assign fit_new  = (state_q == S_WB) && pend_q && !t_hit && (mode == VOCAB_FIT) && !col_full;
  assign t_wr_en   = fit_new;
  assign t_wr_addr = entry_addr(user_q.col, cur_q[wb_lane_q[LANE_W-1:0]]);
  assign t_wr_idx  = next_idx_q[cidx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q        <= S_IDLE;
      cur_q          <= '0;
      res_q          <= '0;
      user_q         <= '0;
      rd_lane_q      <= '0;
      wb_lane_q      <= '0;
      pend_q         <= 1'b0;
      out_valid      <= 1'b0;
      out_data       <= '0;
      out_user       <= '0;
      overflow_count <= '0;
      miss_count     <= '0;
      new_count      <= '0;
      for (int c = 0; c < NUM_COLS; c++) next_idx_q[c] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (clear) begin
        for (int c = 0; c < NUM_COLS; c++) next_idx_q[c] <= '0;
        overflow_count <= '0;
        miss_count     <= '0;
        new_count      <= '0;
      end
      unique case (state_q)
        S_IDLE: if (in_valid && in_ready) begin
          if (bypass_word) begin
            out_valid <= 1'b1;
            out_data  <= in_data;
            out_user  <= in_user;
          end else begin
            cur_q     <= in_data;
            user_q    <= in_user;
            res_q     <= '0;
            rd_lane_q <= '0;
            pend_q    <= 1'b0;
            state_q   <= S_LANE;
          end
        end
        S_LANE: begin
          // collect the read issued last cycle (apply mode pipelines reads)
          if (pend_q) begin
            res_q[wb_lane_q[LANE_W-1:0]] <= t_hit ? elem_t'(t_rd_idx) : elem_t'(OOV_IDX);
            if (!t_hit) miss_count <= miss_count + 1;
          end
          pend_q <= 1'b0;
          if (rd_go) begin
            if (rd_oob) begin
              res_q[rd_lane_q[LANE_W-1:0]] <= elem_t'(OOV_IDX);
              overflow_count <= overflow_count + 1;
            end else begin
              pend_q    <= 1'b1;
              wb_lane_q <= rd_lane_q;
              if (mode == VOCAB_FIT) state_q <= S_WB;
            end
            rd_lane_q <= rd_lane_q + 1'b1;
          end else begin
            state_q <= S_OUT;   // last read (if any) is collected above
          end
        end
        S_WB: begin   // fit mode: read data of wb_lane_q is here
          pend_q <= 1'b0;
          if (t_hit) begin
            res_q[wb_lane_q[LANE_W-1:0]] <= elem_t'(t_rd_idx);
          end else if (!col_full) begin
            res_q[wb_lane_q[LANE_W-1:0]] <= elem_t'(next_idx_q[cidx]);
            next_idx_q[cidx] <= next_idx_q[cidx] + 1'b1;
            new_count <= new_count + 1;
          end else begin
            res_q[wb_lane_q[LANE_W-1:0]] <= elem_t'(OOV_IDX);
            overflow_count <= overflow_count + 1;
          end
          state_q <= S_LANE;
        end
        S_OUT: if (out_free) begin
          out_valid <= 1'b1;
          out_data  <= res_q;
          out_user  <= user_q;
          state_q   <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
