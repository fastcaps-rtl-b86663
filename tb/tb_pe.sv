// tb_pe: self-checking test of one processing element.
// Streams 200 random operand sets back to back, one per cycle, and compares
// every result with the rounded sum of the nine products computed here. It
// also checks that each result appears exactly 2 cycles after its inputs.
module tb_pe;
  import caps_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  fx_t a [PE_LANES], b [PE_LANES];
  acc_t sum;
  int checks = 0, failures = 0;
  int cyc = 0;
  acc_t exp_q [$];
  int   t_q [$];

  pe dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .sum);

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    acc_t e; int t;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = exp_q.pop_front(); t = t_q.pop_front();
      if (sum !== e || cyc - t != 2) begin
        failures++;
        $display("mismatch: got %0d exp %0d latency %0d", sum, e, cyc - t);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      longint s;
      @(negedge clk);
      s = 0;
      for (int l = 0; l < PE_LANES; l++) begin
        a[l] = fx_t'($urandom);
        b[l] = (n < 5) ? 16'sh7fff : fx_t'($urandom);
        if (n < 5) a[l] = 16'sh8000;
        s += longint'(a[l]) * longint'(b[l]);
      end
      in_valid = 1;
      exp_q.push_back(acc_t'((s + 512) >>> 10));
      t_q.push_back(cyc);
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
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
