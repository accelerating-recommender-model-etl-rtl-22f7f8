// stage_a: the fused stateless stage (Clamp -> Logarithm for dense columns,
// Hex2Int -> Modulus for sparse columns), W = 8 lanes, II = 1.
//
// Every accepted word is fed to both the dense path (clamp_op, log_op) and
// the sparse path (hex2int_op, modulus_op); the shorter path is padded with
// registers so both have latency LAT, and the word's sideband selects which
// result leaves. Words therefore keep their order and one word is accepted
// per cycle. Fusing the four operators into one stage and W = 8 follow the
// paper; the parallel-paths-and-select structure is this design's.
//
// Handshake: valid/ready. The whole pipeline advances when the output is
// empty or accepted (en = !out_valid || out_ready) and `in_ready` equals that
// enable, so a stalled consumer freezes the stage (backpressure).
// `out_bad` marks sparse lanes that held a non-hex character.
module stage_a
  import piperec_pkg::*;
#(
  parameter int unsigned LOG_FRAC_BITS = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] divisor,      // Modulus range, frozen while streaming
  input  logic        in_valid,
  output logic        in_ready,
  input  word_t       in_data,
  input  word_user_t  in_user,
  output logic        out_valid,
  input  logic        out_ready,
  output word_t       out_data,
  output word_user_t  out_user,
  output logic [W-1:0] out_bad
);

  localparam int unsigned DENSE_LAT  = 1 + LOG_FRAC_BITS + 3;
  localparam int unsigned SPARSE_LAT = 1 + 32;
  localparam int unsigned LAT = (DENSE_LAT > SPARSE_LAT) ? DENSE_LAT : SPARSE_LAT;

  logic en;
  assign en       = !out_valid || out_ready;
  assign in_ready = en;

  // dense path
  logic  c_valid, l_valid, d_valid;
  word_t c_data,  l_data,  d_data;
  clamp_op u_clamp (.clk, .rst_n, .en, .in_valid, .in_data,
                    .out_valid(c_valid), .out_data(c_data));
  log_op #(.FRAC_BITS(LOG_FRAC_BITS)) u_log (.clk, .rst_n, .en,
                    .in_valid(c_valid), .in_data(c_data),
                    .out_valid(l_valid), .out_data(l_data));
  delay_line #(.WIDTH(1 + DATA_W), .DEPTH(LAT - DENSE_LAT)) u_dpad (
    .clk, .rst_n, .en, .d({l_valid, l_data}), .q({d_valid, d_data}));

  // sparse path
  logic         h_valid, m_valid, s_valid;
  word_t        h_data,  m_data,  s_data;
  logic [W-1:0] h_bad, s_bad;
  hex2int_op u_h2i (.clk, .rst_n, .en, .in_valid, .in_data,
                    .out_valid(h_valid), .out_data(h_data), .out_bad(h_bad));
  modulus_op u_mod (.clk, .rst_n, .en, .divisor,
                    .in_valid(h_valid), .in_data(h_data),
                    .out_valid(m_valid), .out_data(m_data));
  delay_line #(.WIDTH(1 + DATA_W), .DEPTH(LAT - SPARSE_LAT)) u_spad (
    .clk, .rst_n, .en, .d({m_valid, m_data}), .q({s_valid, s_data}));
  // bad-character flags ride alongside the 32 modulus stages
  delay_line #(.WIDTH(W), .DEPTH(LAT - 1)) u_bpad (
    .clk, .rst_n, .en, .d(h_bad), .q(s_bad));

  // sideband travels the full latency
  word_user_t u_q;
  delay_line #(.WIDTH($bits(word_user_t)), .DEPTH(LAT)) u_upad (
    .clk, .rst_n, .en, .d(in_user), .q(u_q));

  assign out_valid = u_q.sparse ? s_valid : d_valid;
  assign out_data  = u_q.sparse ? s_data  : d_data;
  assign out_user  = u_q;
  assign out_bad   = u_q.sparse ? s_bad : '0;

  // both paths see the same valid sequence
  a_paths_aligned: assert property (@(posedge clk) disable iff (!rst_n) s_valid == d_valid);

endmodule
