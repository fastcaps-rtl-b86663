// tb_fx_log: self-checking test of the natural-logarithm unit.
// 400 positive arguments spread over five decades plus zero and a negative
// value are streamed one per cycle. Results must be within 3 LSB of ln() of
// the input (LOG_NEG_INF for x <= 0) and arrive 7 cycles after the input.
module tb_fx_log;
  import caps_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  acc_t x, y;
  int checks = 0, failures = 0, cyc = 0;
  real  ref_q [$];
  int   t_q [$];

  fx_log dut (.clk, .rst_n, .in_valid, .x, .out_valid, .y);
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    real r, got; int t;
    r = ref_q.pop_front(); t = t_q.pop_front();
    checks++;
    if (r < -1.0e6) begin
      if (y != LOG_NEG_INF || cyc - t != 7) begin failures++; $display("log(<=0) gave %0d", y); end
    end else begin
      got = real'(y) / 1024.0;
      if (got - r > 3.0 / 1024 || r - got > 3.0 / 1024 || cyc - t != 7) begin
        failures++;
        $display("log mismatch: got %f exp %f latency %0d", got, r, cyc - t);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      case (n)
        0: x = 0;
        1: x = -5;
        2: x = 1024;
        3: x = 1;
        4: x = 32'h7fffffff;
        default: x = acc_t'($urandom_range(1, 1 << ($urandom_range(1, 30))));
      endcase
      in_valid = 1;
      ref_q.push_back(x <= 0 ? -1.0e9 : $ln(real'(x) / 1024.0));
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
