// hex2int_op: the Hex2Int operator on a word of sparse values.
//
// Every lane holds 8 ASCII characters of a fixed-length hex string, the first
// (most significant) digit in the lowest byte. Each character is translated
// to its 4-bit value and the eight nibbles are concatenated into a 32-bit
// unsigned integer, written zero-extended into the lane. This is the
// ASCII-to-nibble-and-concatenate scheme of the paper, with II=1. Accepting
// upper- and lower-case digits and flagging other characters in `out_bad`
// (the lane's value then uses 0 for that digit) are this design's choices.
//
// Interface: `en` advances the single register stage. Latency: 1.
module hex2int_op
  import piperec_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         in_valid,
  input  word_t        in_data,
  output logic         out_valid,
  output word_t        out_data,
  output logic [W-1:0] out_bad
);

  function automatic logic [4:0] nibble(logic [7:0] c);   // {bad, value}
    if (c >= 8'h30 && c <= 8'h39)      return {1'b0, 4'(c - 8'h30)};
    else if (c >= 8'h61 && c <= 8'h66) return {1'b0, 4'(c - 8'h57)};
    else if (c >= 8'h41 && c <= 8'h46) return {1'b0, 4'(c - 8'h37)};
    else                               return 5'b1_0000;
  endfunction

  // eight characters, first in the lowest byte, to a 32-bit value
  function automatic logic [31:0] lane_value(elem_t x);
    logic [31:0] v = '0;
    logic [4:0]  n;
    for (int c = 0; c < 8; c++) begin
      n = nibble(x[8*c +: 8]);
      v = {v[27:0], n[3:0]};
    end
    return v;
  endfunction

  function automatic logic lane_bad(elem_t x);
    logic       bad = 1'b0;
    logic [4:0] n;
    for (int c = 0; c < 8; c++) begin
      n   = nibble(x[8*c +: 8]);
      bad = bad | n[4];
    end
    return bad;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_bad   <= '0;
    end else if (en) begin
      out_valid <= in_valid;
      for (int i = 0; i < W; i++) begin
        out_data[i] <= {32'h0, lane_value(in_data[i])};
        out_bad[i]  <= lane_bad(in_data[i]);
      end
    end
  end

endmodule
