// vocab_table: on-chip vocabulary memory of the stateful VocabGen/VocabMap
// operator.
//
// One entry per (sparse column, value) pair: NUM_COLS x DEPTH entries, the
// value range DEPTH being the Modulus range. An entry holds a valid bit and
// the index assigned to that value. The table is a plain RAM with one read
// port (registered data, one-cycle latency) and one write port, which is what
// gives VocabGen its two-cycle read-after-write initiation interval. After
// reset, and whenever `clear` is pulsed, a sweep writes every entry invalid,
// one entry per cycle, while `busy` is high; reads and writes are ignored
// meanwhile. The sweep is this design's choice (the paper does not say how
// a table is reset between fits).
module vocab_table #(
  parameter int unsigned NUM_COLS = 26,
  parameter int unsigned DEPTH    = 8192,
  parameter int unsigned IDX_W    = $clog2(DEPTH) + 1,
  parameter int unsigned ADDR_W   = $clog2(NUM_COLS * DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  output logic              busy,
  input  logic              rd_en,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic              rd_hit,      // entry valid (cycle after rd_en)
  output logic [IDX_W-1:0]  rd_idx,
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [IDX_W-1:0]  wr_idx
);

  localparam int unsigned ENTRIES = NUM_COLS * DEPTH;

  logic [IDX_W:0] mem [ENTRIES];          // {valid, index}

  logic [ADDR_W-1:0] sweep_q;
  logic              busy_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b1;
      sweep_q <= '0;
    end else if (clear) begin
      busy_q  <= 1'b1;
      sweep_q <= '0;
    end else if (busy_q) begin
      sweep_q <= sweep_q + 1'b1;
      if (sweep_q == ADDR_W'(ENTRIES - 1)) busy_q <= 1'b0;
    end
  end
  assign busy = busy_q;

  always_ff @(posedge clk) begin
    if (busy_q)     mem[sweep_q] <= '0;
    else if (wr_en) mem[wr_addr] <= {1'b1, wr_idx};
  end

  logic [IDX_W:0] rd_q;
  always_ff @(posedge clk) begin
    if (rd_en) rd_q <= mem[rd_addr];
  end
  assign rd_hit = rd_q[IDX_W];
  assign rd_idx = rd_q[IDX_W-1:0];

endmodule
