// delay_line: DEPTH register stages for a bus of WIDTH bits, advanced by a
// shared enable. Used to give the dense and sparse paths of the fused
// stateless stage the same latency. DEPTH = 0 is a wire.
module delay_line #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] r [DEPTH];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < DEPTH; i++) r[i] <= '0;
      end else if (en) begin
        r[0] <= d;
        for (int i = 1; i < DEPTH; i++) r[i] <= r[i-1];
      end
    end
    assign q = r[DEPTH-1];
  end
endmodule
