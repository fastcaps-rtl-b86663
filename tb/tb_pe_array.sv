// tb_pe_array: self-checking test of the 10-PE array.
// Every PE gets different random operands; each of the ten sums is compared
// with a reference dot product, and all PEs must answer together 2 cycles
// after the request.
module tb_pe_array;
  import caps_pkg::*;
  localparam int N = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  fx_t a [N][PE_LANES], b [N][PE_LANES];
  acc_t sum [N];
  int checks = 0, failures = 0, cyc = 0;
  acc_t exp_q [$];
  int t_q [$];

  pe_array #(.N_PE(N)) dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .sum);
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    int t;
    t = t_q.pop_front();
    checks++;
    if (cyc - t != 2) begin failures++; $display("latency %0d", cyc - t); end
    for (int p = 0; p < N; p++) begin
      acc_t e;
      e = exp_q.pop_front();
      checks++;
      if (sum[p] !== e) begin failures++; $display("PE %0d got %0d exp %0d", p, sum[p], e); end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      for (int p = 0; p < N; p++) begin
        longint s; s = 0;
        for (int l = 0; l < PE_LANES; l++) begin
          a[p][l] = fx_t'($urandom); b[p][l] = fx_t'($urandom);
          s += longint'(a[p][l]) * longint'(b[p][l]);
        end
        exp_q.push_back(acc_t'((s + 512) >>> 10));
      end
      in_valid = (n % 3 != 2);
      if (!in_valid) repeat (N) void'(exp_q.pop_back());
      else t_q.push_back(cyc);
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
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
