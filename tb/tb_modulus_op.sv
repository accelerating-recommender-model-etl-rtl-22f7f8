// tb_modulus_op: self-checking test of modulus_op.
// For several divisors (65536 as in the paper's example, 8192, random ones,
// 1 and 0) random values are streamed with the enable toggled at random;
// each lane must equal value % divisor (value itself for divisor 0) and
// leave exactly 32 enabled cycles after it entered (II = 1: a new word may
// enter every cycle).
module tb_modulus_op;
  import piperec_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, in_valid = 0, out_valid;
  logic [31:0] divisor = 32'd65536;
  word_t in_data = '0, out_data;
  int checks = 0, failures = 0, ecycle = 0;
  word_t exp_q[$]; int t_q[$];

  modulus_op dut (.*);
  always #5 clk = ~clk;

  logic en_prev = 0;
  always @(posedge clk) begin
    en_prev <= en;
    if (en) ecycle <= ecycle + 1;
  end

  task automatic check_out();
    if (en_prev && out_valid) begin
      checks += 2;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        automatic word_t e = exp_q.pop_front();
        automatic int t = t_q.pop_front();
        if (out_data !== e) begin failures++; $display("data %h vs %h (div %0d)", out_data, e, divisor); end
        if (ecycle - t != 32) begin failures++; $display("latency %0d", ecycle - t); end
      end
    end
  endtask

  initial begin
    logic [31:0] divs [6] = '{32'd65536, 32'd8192, 32'd0, 32'd1, 32'd0, 32'd0};
    divs[4] = $urandom_range(2, 1 << 20);
    divs[5] = $urandom | 32'h8000_0000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (divs[d]) begin
      divisor = divs[d];
      for (int n = 0; n < 400; n++) begin
        @(negedge clk);
        check_out();
        en = (d == 0) ? 1'b1 : ($urandom_range(0, 3) != 0);
        in_valid = n < 300;
        for (int i = 0; i < W; i++) in_data[i] = {$urandom, (n == 0 && i == 0) ? 32'd3193477969 : $urandom};
        if (en && in_valid) begin
          word_t e;
          for (int i = 0; i < W; i++)
            e[i] = {32'h0, (divisor == 0) ? in_data[i][31:0] : in_data[i][31:0] % divisor};
          if (d == 0 && n == 0) begin checks++; if (e[0] != 64'd39761) failures++; end
          exp_q.push_back(e); t_q.push_back(ecycle);
        end
      end
      en = 1; in_valid = 0;
      repeat (40) begin @(negedge clk); check_out(); end
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d words lost", exp_q.size()); end
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
