// tb_clamp_op: self-checking test of clamp_op.
// Random float32 lanes (negative, positive, zeros, NaN, inf) are pushed with
// the enable toggled at random; each output word is compared with a
// reference computed here and must appear exactly one enabled cycle after
// its input.
module tb_clamp_op;
  import piperec_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, in_valid = 0, out_valid;
  word_t in_data = '0, out_data;
  int checks = 0, failures = 0, ecycle = 0;
  word_t exp_q[$]; int t_q[$];

  clamp_op dut (.*);
  always #5 clk = ~clk;

  function automatic logic [31:0] rnd_float();
    case ($urandom_range(0, 5))
      0: return 32'h8000_0000;                       // -0.0
      1: return 32'h7FC0_0001 | ($urandom & 32'h8000_0000); // NaN
      2: return {$urandom_range(0,1) == 1, 8'hFF, 23'h0};   // +-inf
      default: return $urandom;
    endcase
  endfunction

  function automatic elem_t ref_clamp(logic [31:0] x);
    bit nan = (x[30:23] == 8'hFF) && (x[22:0] != 0);
    if (x[31] && !nan) return 64'h0;
    return {32'h0, x};
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
      @(negedge clk);
      if (en_prev && out_valid) begin
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
        else begin
          automatic word_t e = exp_q.pop_front();
          automatic int t = t_q.pop_front();
          if (out_data !== e) begin failures++; $display("data mismatch %h vs %h", out_data, e); end
          checks++;
          if (ecycle - t != 1) begin failures++; $display("latency %0d", ecycle - t); end
        end
      end
      en = ($urandom_range(0, 3) != 0);
      in_valid = ($urandom_range(0, 4) != 0) && n < 1900;
      for (int i = 0; i < W; i++) in_data[i] = {$urandom, rnd_float()};
      if (en && in_valid) begin
        word_t e;
        for (int i = 0; i < W; i++) e[i] = ref_clamp(in_data[i][31:0]);
        exp_q.push_back(e); t_q.push_back(ecycle);
      end
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
