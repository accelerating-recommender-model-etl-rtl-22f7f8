// clamp_op: the Clamp operator on a word of dense values.
//
// Every lane holds a float32 in its low 32 bits. A lane whose sign bit is set
// (and that is not a NaN) is replaced by +0.0; every other lane passes
// unchanged. This is the "clip negatives to zero with a ternary operator"
// operator; the lanes are independent, so a word is taken every cycle (II=1).
// Treating -0.0 and keeping NaN are this design's choices.
//
// Interface: `en` advances the single register stage (stall when low).
// `in_valid/in_data` are sampled when `en` is high; `out_valid/out_data`
// appear one enabled cycle later. Latency: 1.
module clamp_op
  import piperec_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  in_valid,
  input  word_t in_data,
  output logic  out_valid,
  output word_t out_data
);

  function automatic elem_t clamp_lane(elem_t x);
    logic is_nan;
    is_nan = (x[30:23] == 8'hFF) && (x[22:0] != '0);
    return (x[31] && !is_nan) ? elem_t'(FP_ZERO) : {32'h0, x[31:0]};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (en) begin
      out_valid <= in_valid;
      for (int i = 0; i < W; i++) out_data[i] <= clamp_lane(in_data[i]);
    end
  end

endmodule
