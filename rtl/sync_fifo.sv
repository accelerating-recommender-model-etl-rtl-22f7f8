// sync_fifo: single-clock first-in first-out buffer of DEPTH entries of
// WIDTH bits with valid/ready on both sides and an occupancy count.
// Data leave from a register array (no read latency beyond the registers).
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [WIDTH-1:0]       in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [WIDTH-1:0]       out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp_q, rp_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = cnt_q < ($clog2(DEPTH+1))'(DEPTH);
  assign out_valid = cnt_q != '0;
  assign out_data  = mem[rp_q];
  assign count     = cnt_q;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wp_q <= inc(wp_q);
      if (pop)  rp_q <= inc(rp_q);
      cnt_q <= cnt_q + ($clog2(DEPTH+1))'(push) - ($clog2(DEPTH+1))'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp_q] <= in_data;
  end

endmodule
