// tb_log_op: self-checking test of log_op.
// Non-negative float32 lanes over the whole exponent range (plus 0, the
// paper's example 17 -> 2.89, values near 0 and 1, inf and NaN) are streamed
// with the enable toggled; every result is converted back to a real number
// and compared with ln(1 + x) computed here, to within 2e-6 + 2e-5 * ln(1 + x)
// (20 fraction bits of log2: absolute error near 1e-6 for small results).
// Latency must be FRAC_BITS + 3 = 23 enabled cycles.
module tb_log_op;
  import piperec_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, in_valid = 0, out_valid;
  word_t in_data = '0, out_data;
  int checks = 0, failures = 0, ecycle = 0;
  word_t in_q[$]; int t_q[$];
  real maxerr = 0.0;

  log_op dut (.*);
  always #5 clk = ~clk;

  function automatic real f2r(logic [31:0] b);
    real m;
    int  e;
    e = int'(b[30:23]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    return (b[31] ? -1.0 : 1.0) * m * (2.0 ** (e - 127));
  endfunction

  function automatic logic [31:0] rnd_in(int n, int i);
    if (n == 0 && i == 0) return 32'h4188_0000;   // 17.0
    if (n == 0 && i == 1) return 32'h0;
    if (n == 0 && i == 2) return 32'h7F80_0000;   // +inf
    if (n == 0 && i == 3) return 32'h7FC0_0000;   // NaN
    case ($urandom_range(0, 3))
      0: return {1'b0, 8'($urandom_range(100, 140)), 23'($urandom)};
      1: return {1'b0, 8'($urandom_range(1, 254)), 23'($urandom)};
      2: return {1'b0, 8'($urandom_range(120, 128)), 23'($urandom)};
      default: return {1'b0, 8'($urandom_range(127, 160)), 23'($urandom)};
    endcase
  endfunction

  logic en_prev = 0;
  always @(posedge clk) begin
    en_prev <= en;
    if (en) ecycle <= ecycle + 1;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      if (en_prev && out_valid) begin
        if (in_q.size() == 0) begin failures++; checks++; $display("unexpected output"); end
        else begin
          automatic word_t x = in_q.pop_front();
          automatic int t = t_q.pop_front();
          checks++;
          if (ecycle - t != 23) begin failures++; $display("latency %0d", ecycle - t); end
          for (int i = 0; i < W; i++) begin
            automatic logic [31:0] xi = x[i][31:0], yi = out_data[i][31:0];
            checks++;
            if (xi[30:23] == 8'hFF) begin
              if (yi != xi) begin failures++; $display("special %h -> %h", xi, yi); end
            end else begin
              automatic real want = $ln(1.0 + f2r(xi));
              automatic real got = f2r(yi);
              automatic real err = got - want;
              if (err < 0) err = -err;
              if (want > 1.0 && err / want > maxerr) maxerr = err / want;
              if (err > 2e-6 + 2e-5 * want) begin
                failures++; $display("ln(1+%g) = %g, got %g", f2r(xi), want, got);
              end
            end
            if (xi == 32'h4188_0000) begin
              checks++;
              if (f2r(yi) < 2.885 || f2r(yi) > 2.895) begin failures++; $display("17 -> %g", f2r(yi)); end
            end
          end
        end
      end
      en = (n < 100) ? 1'b1 : ($urandom_range(0, 3) != 0);
      in_valid = n < 1400;
      for (int i = 0; i < W; i++) in_data[i] = {$urandom, rnd_in(n, i)};
      if (en && in_valid) begin in_q.push_back(in_data); t_q.push_back(ecycle); end
    end
    checks++;
    if (in_q.size() != 0) begin failures++; $display("%0d words lost", in_q.size()); end
    $display("max relative error above 1.0: %g", maxerr);
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
