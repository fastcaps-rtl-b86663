// tb_fx_div: self-checking test of the log-domain divider a/b = exp(ln a - ln b).
// 400 random operand pairs of both signs (magnitudes 0.05..20) plus a = 0 and
// b = 0 are streamed one per cycle. Quotients must be within 0.5 % + 3 LSB of
// a/b (0 for a = 0, saturated for b = 0) and arrive 15 cycles after the input.
module tb_fx_div;
  import caps_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  acc_t a, b, q;
  int checks = 0, failures = 0, cyc = 0;
  real ref_q [$];
  int  t_q [$];

  fx_div dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .q);
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    real r, got, tol; int t;
    r = ref_q.pop_front(); t = t_q.pop_front();
    checks++;
    got = real'(q) / 1024.0;
    if (r > 1.0e8) begin
      if (q != ACC_MAX) begin failures++; $display("div by 0 gave %0d", q); end
    end else begin
      tol = 0.005 * (r < 0 ? -r : r) + 3.0 / 1024;
      if (got - r > tol || r - got > tol || cyc - t != 15) begin
        failures++;
        $display("div mismatch: got %f exp %f latency %0d", got, r, cyc - t);
      end
    end
  end

  function automatic acc_t rnd_val();
    acc_t v;
    v = acc_t'($urandom_range(51, 20 * 1024));
    return $urandom_range(0, 1) ? -v : v;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      a = rnd_val(); b = rnd_val();
      if (n == 0) a = 0;
      if (n == 1) begin a = 1024; b = 0; end
      // keep quotients inside the 16-bit word range used downstream
      if (n > 1) while ((real'(a) / real'(b)) > 30.0 || (real'(a) / real'(b)) < -30.0) b = rnd_val();
      in_valid = 1;
      ref_q.push_back(b == 0 ? 1.0e9 : real'(a) / real'(b));
      t_q.push_back(cyc);
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(posedge clk);
    if (ref_q.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
