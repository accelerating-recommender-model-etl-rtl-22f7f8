// log_op: the Logarithm operator, ln(x + 1), on a word of dense values.
//
// Every lane holds a non-negative float32 (Clamp runs first). The lane goes
// through a fixed pipeline, so a word enters every cycle (II=1):
//   stage 0          y = x + 1 as an unnormalised-free float: 24-bit mantissa
//                    m in [1,2) and integer exponent E = exp(y) - 127;
//   stages 1..F      log2(m) one bit per stage by repeated squaring: square m,
//                    if the square is >= 2 the next bit is 1 and it is halved;
//   stage F+1        L = E + log2(m) (fixed point, F fraction bits) times ln 2;
//   stage F+2        leading-one search and repacking into float32.
// The paper only says a hardware math library computes the logarithm with
// II=1; this squaring datapath, the truncating rounding (error below 1e-5
// relative) and the handling of inf/NaN (passed unchanged) and subnormals
// (read as 0) are this design's choices. Natural log follows the paper's
// worked example (17 -> 2.89).
//
// Interface: `en` advances all stages. Latency: FRAC_BITS + 3.
module log_op
  import piperec_pkg::*;
#(
  parameter int unsigned FRAC_BITS = 20
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  in_valid,
  input  word_t in_data,
  output logic  out_valid,
  output word_t out_data
);

  localparam int unsigned F      = FRAC_BITS;
  localparam int unsigned PROD_W = 8 + F + 32;
  localparam logic [31:0] LN2_Q32 = 32'hB172_17F8;   // ln 2 * 2^32

  typedef struct packed {
    logic         special;   // input was inf/NaN: pass through
    logic [31:0]  raw;
    logic [7:0]   e;         // integer part of log2(y)
    logic [23:0]  m;         // mantissa of y, 1.23 fixed point
    logic [F-1:0] frac;      // log2(m) bits found so far
  } lane_t;

  lane_t [W-1:0] st_q [F+1];
  logic          vld_q [F+1];

  // ---- stage 0: y = x + 1 ----------------------------------------------
  function automatic lane_t add_one(elem_t x);
    lane_t       r;
    logic [7:0]  ex;
    logic [23:0] mx;
    logic [24:0] sum;
    int unsigned sh;
    r       = '0;
    r.raw   = x[31:0];
    ex      = x[30:23];
    mx      = (ex == 8'd0) ? 24'd0 : {1'b1, x[22:0]};
    r.special = (ex == 8'hFF);
    if (ex >= 8'd127) begin
      sh = int'(ex) - 127;
      if (sh >= 24) begin
        r.m = mx;
        r.e = 8'(sh);
      end else begin
        sum = {1'b0, mx} + ({1'b0, 24'h80_0000} >> sh);
        if (sum[24]) begin
          r.m = sum[24:1];
          r.e = 8'(sh + 1);
        end else begin
          r.m = sum[23:0];
          r.e = 8'(sh);
        end
      end
    end else begin
      sh  = 127 - int'(ex);
      r.m = 24'h80_0000 + ((sh >= 24) ? 24'd0 : (mx >> sh));
      r.e = 8'd0;
    end
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q[0] <= 1'b0;
      st_q[0]  <= '0;
    end else if (en) begin
      vld_q[0] <= in_valid;
      for (int i = 0; i < W; i++) st_q[0][i] <= add_one(in_data[i]);
    end
  end

  // ---- stages 1..F: one log2 fraction bit per stage ---------------------
  // square the mantissa; a square >= 2 gives fraction bit `b` = 1 and halves
  function automatic lane_t sq_step(lane_t l, int b);
    lane_t       r = l;
    logic [47:0] sq = l.m * l.m;               // Q2.46
    r.m = sq[47] ? sq[47:24] : sq[46:23];
    r.frac[b] = sq[47];
    return r;
  endfunction

  for (genvar s = 0; s < F; s++) begin : g_sq
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld_q[s+1] <= 1'b0;
        st_q[s+1]  <= '0;
      end else if (en) begin
        vld_q[s+1] <= vld_q[s];
        for (int i = 0; i < W; i++) st_q[s+1][i] <= sq_step(st_q[s][i], F - 1 - s);
      end
    end
  end

  // ---- stage F+1: multiply by ln 2 --------------------------------------
  logic [W-1:0][PROD_W-1:0] prod_q;
  logic [W-1:0]             spec_q;
  logic [W-1:0][31:0]       raw_q;
  logic                     vld_p_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_p_q <= 1'b0;
      prod_q  <= '0;
      spec_q  <= '0;
      raw_q   <= '0;
    end else if (en) begin
      vld_p_q <= vld_q[F];
      for (int i = 0; i < W; i++) begin
        prod_q[i] <= PROD_W'({st_q[F][i].e, st_q[F][i].frac}) * PROD_W'(LN2_Q32);
        spec_q[i] <= st_q[F][i].special;
        raw_q[i]  <= st_q[F][i].raw;
      end
    end
  end

  // ---- stage F+2: repack as float32 --------------------------------------
  function automatic logic [31:0] to_float(logic [PROD_W-1:0] p);
    int          lead;
    logic [PROD_W-1:0] n;
    lead = -1;
    for (int b = 0; b < PROD_W; b++) if (p[b]) lead = b;
    if (lead < 0) return FP_ZERO;
    n = p << (PROD_W - 1 - lead);
    // value = p * 2^-(F+32); exponent = lead - (F+32)
    return {1'b0, 8'(lead - int'(F) - 32 + 127), n[PROD_W-2 -: 23]};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (en) begin
      out_valid <= vld_p_q;
      for (int i = 0; i < W; i++)
        out_data[i] <= {32'h0, spec_q[i] ? raw_q[i] : to_float(prod_q[i])};
    end
  end

endmodule
