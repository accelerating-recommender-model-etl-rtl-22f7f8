// tb_vocab_table: self-checking test of vocab_table (reduced to 3 columns of
// 32 entries). Checks that the clear sweep takes one cycle per entry and
// leaves every entry invalid, that written entries read back one cycle
// later with their index, and that a later clear erases them again.
module tb_vocab_table;
  localparam int NC = 3, D = 32, IW = 6, AW = 7;
  logic clk = 0, rst_n = 0, clear = 0, busy, rd_en = 0, rd_hit, wr_en = 0;
  logic [AW-1:0] rd_addr = '0, wr_addr = '0;
  logic [IW-1:0] rd_idx, wr_idx = '0;
  int checks = 0, failures = 0;
  logic [IW:0] model [NC*D];

  vocab_table #(.NUM_COLS(NC), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic wait_clear();
    int n = 0;
    while (busy) begin @(posedge clk); n++; end
    checks++;
    if (n < NC*D - 1 || n > NC*D + 1) begin failures++; $display("sweep took %0d cycles", n); end
    foreach (model[i]) model[i] = '0;
  endtask

  task automatic read_all();
    for (int a = 0; a < NC*D; a++) begin
      @(negedge clk); rd_en = 1; rd_addr = AW'(a);
      @(negedge clk); rd_en = 0;
      checks++;
      if ({rd_hit, rd_idx} != model[a]) begin failures++; $display("addr %0d: %b/%0d vs %b", a, rd_hit, rd_idx, model[a]); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    wait_clear();
    read_all();
    for (int k = 0; k < 60; k++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'($urandom_range(0, NC*D - 1)); wr_idx = IW'($urandom_range(0, D - 1));
      model[wr_addr] = {1'b1, wr_idx};
    end
    @(negedge clk) wr_en = 0;
    read_all();
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    wait_clear();
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
