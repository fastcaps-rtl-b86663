// tb_fx_exp: self-checking test of the Taylor-series exponential.
// 400 arguments (random in [-8, 4] plus fixed corner points) are streamed one
// per cycle; each result is compared with exp() of the same fixed-point value
// within 0.1 % + 2 LSB, and must arrive exactly 7 cycles after its input.
module tb_fx_exp;
  import caps_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  acc_t x, y;
  int checks = 0, failures = 0, cyc = 0;
  real  ref_q [$];
  int   t_q [$];

  fx_exp dut (.clk, .rst_n, .in_valid, .x, .out_valid, .y);
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    real r, got; int t;
    r = ref_q.pop_front(); t = t_q.pop_front();
    got = real'(y) / 1024.0;
    checks++;
    if ((got - r > 0.001 * r + 2.0 / 1024) || (r - got > 0.001 * r + 2.0 / 1024) || cyc - t != 7) begin
      failures++;
      $display("exp mismatch: got %f exp %f latency %0d", got, r, cyc - t);
    end
  end

  initial begin
    real pts [6] = '{0.0, 0.5, -0.5, 0.693, -2.3, 3.0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      if (n < 6) x = acc_t'($rtoi(pts[n] * 1024.0));
      else       x = acc_t'(int'($urandom_range(0, 12 * 1024)) - 8 * 1024);
      in_valid = 1;
      ref_q.push_back($exp(real'(x) / 1024.0));
      t_q.push_back(cyc);
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
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
