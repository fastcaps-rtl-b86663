// tb_softmax_unit: self-checking test of the Softmax unit.
// Streams 100 logit vectors (ten classes, random in [-4, 4], one all-equal
// vector) one per cycle. Every output must be within 0.01 of the
// floating-point softmax and arrive exactly 23 cycles after its input.
module tb_softmax_unit;
  import caps_pkg::*;
  localparam int N = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  acc_t b [N], c [N];
  int checks = 0, failures = 0, cyc = 0;
  real ref_q [$];
  int  t_q [$];

  softmax_unit #(.N(N)) dut (.clk, .rst_n, .in_valid, .b, .out_valid, .c);
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    int t;
    t = t_q.pop_front();
    checks++;
    if (cyc - t != 23) begin failures++; $display("latency %0d", cyc - t); end
    for (int j = 0; j < N; j++) begin
      real r, got;
      r = ref_q.pop_front();
      got = real'(c[j]) / 1024.0;
      checks++;
      if (got - r > 0.01 || r - got > 0.01) begin
        failures++; $display("class %0d: got %f exp %f", j, got, r);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      real e [N], sum;
      @(negedge clk);
      sum = 0;
      for (int j = 0; j < N; j++) begin
        b[j] = (n == 0) ? 0 : acc_t'(int'($urandom_range(0, 8192)) - 4096);
        e[j] = $exp(real'(b[j]) / 1024.0);
        sum += e[j];
      end
      for (int j = 0; j < N; j++) ref_q.push_back(e[j] / sum);
      in_valid = 1;
      t_q.push_back(cyc);
    end
    @(negedge clk) in_valid = 0;
    repeat (30) @(posedge clk);
    if (t_q.size() != 0) begin failures++; $display("missing outputs"); end
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
