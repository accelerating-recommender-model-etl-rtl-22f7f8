// tb_hex2int_op: self-checking test of hex2int_op.
// Each lane gets the 8-character hex spelling (random upper/lower case) of a
// random 32-bit value, occasionally with one non-hex character; the output
// must be the value (and the bad flag), one enabled cycle later. The
// paper's worked example "be589b51" -> 3193477969 is included.
module tb_hex2int_op;
  import piperec_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, in_valid = 0, out_valid;
  word_t in_data = '0, out_data;
  logic [W-1:0] out_bad;
  int checks = 0, failures = 0, ecycle = 0;
  word_t exp_q[$]; logic [W-1:0] bad_q[$]; int t_q[$];

  hex2int_op dut (.*);
  always #5 clk = ~clk;

  function automatic logic [7:0] hexchar(logic [3:0] n, bit upper);
    if (n < 10) return 8'h30 + 8'(n);
    return (upper ? 8'h41 : 8'h61) + 8'(n) - 8'd10;
  endfunction

  logic en_prev = 0;
  always @(posedge clk) begin
    en_prev <= en;
    if (en) ecycle <= ecycle + 1;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      word_t e; logic [W-1:0] b;
      @(negedge clk);
      if (en_prev && out_valid) begin
        checks += 3;
        if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
        else begin
          automatic word_t ee = exp_q.pop_front();
          automatic logic [W-1:0] bb = bad_q.pop_front();
          automatic int t = t_q.pop_front();
          if (out_data !== ee) begin failures++; $display("data %h vs %h", out_data, ee); end
          if (out_bad !== bb) begin failures++; $display("bad %b vs %b", out_bad, bb); end
          if (ecycle - t != 1) begin failures++; $display("latency %0d", ecycle - t); end
        end
      end
      en = ($urandom_range(0, 3) != 0);
      in_valid = ($urandom_range(0, 4) != 0) && n < 1900;
      for (int i = 0; i < W; i++) begin
        automatic logic [31:0] v = (n == 0 && i == 0) ? 32'hbe589b51 : $urandom;
        e[i] = {32'h0, v};
        b[i] = 1'b0;
        for (int c = 0; c < 8; c++)
          in_data[i][8*c +: 8] = hexchar(v[31 - 4*c -: 4], $urandom_range(0, 1) == 1);
        if ($urandom_range(0, 15) == 0) begin
          automatic int c = $urandom_range(0, 7);
          in_data[i][8*c +: 8] = 8'h67;                // 'g'
          e[i][31 - 4*c -: 4] = 4'h0;
          b[i] = 1'b1;
        end
      end
      if (n == 0) begin
        checks++;
        if (e[0] != 64'd3193477969) failures++;
      end
      if (en && in_valid) begin exp_q.push_back(e); bad_q.push_back(b); t_q.push_back(ecycle); end
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
