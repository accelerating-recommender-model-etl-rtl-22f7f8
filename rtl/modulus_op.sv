// modulus_op: the Modulus operator on a word of sparse values.
//
// Each lane holds an unsigned 32-bit value (from Hex2Int) in its low half.
// The lane is reduced to value mod `divisor`, the bounded range that later
// sizes the vocabulary. The remainder is computed by restoring division
// unrolled into STAGES = 32 register stages, one quotient bit per stage, so a
// word enters every cycle (II=1) and leaves 32 enabled cycles later. The
// paper only names a "math library"; the restoring-division structure is this
// design's. The divisor is a run-time setting held stable while data flows;
// a divisor of 0 leaves values unchanged (this design's choice).
//
// Interface: `en` advances all stages together. Latency: STAGES.
module modulus_op
  import piperec_pkg::*;
#(
  parameter int unsigned STAGES = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic [31:0] divisor,
  input  logic        in_valid,
  input  word_t       in_data,
  output logic        out_valid,
  output word_t       out_data
);

  // Per stage: the remaining dividend bits (shifted out MSB first) and the
  // partial remainder of each lane.
  logic [W-1:0][31:0] dvd_q [STAGES+1];
  logic [W-1:0][32:0] rem_q [STAGES+1];
  logic               vld_q [STAGES+1];

  always_comb begin
    vld_q[0] = in_valid;
    for (int i = 0; i < W; i++) begin
      dvd_q[0][i] = in_data[i][31:0];
      rem_q[0][i] = '0;
    end
  end

  // one restoring step: shifted-in remainder, minus the divisor if it fits
  function automatic logic [32:0] rem_step(logic [32:0] r, logic [31:0] d);
    return (r >= {1'b0, d}) ? r - {1'b0, d} : r;
  endfunction

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld_q[s+1] <= 1'b0;
        dvd_q[s+1] <= '0;
        rem_q[s+1] <= '0;
      end else if (en) begin
        vld_q[s+1] <= vld_q[s];
        for (int i = 0; i < W; i++) begin
          rem_q[s+1][i] <= rem_step({rem_q[s][i][31:0], dvd_q[s][i][31]}, divisor);
          dvd_q[s+1][i] <= {dvd_q[s][i][30:0], 1'b0};
        end
      end
    end
  end

  // Divisor 0 would leave every bit in the remainder: that is the value itself.
  always_comb begin
    out_valid = vld_q[STAGES];
    for (int i = 0; i < W; i++) out_data[i] = {32'h0, rem_q[STAGES][i][31:0]};
  end

endmodule
