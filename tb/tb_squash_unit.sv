// tb_squash_unit: self-checking test of the Squash unit.
// Squashes 60 vectors (16- and 8-dimensional, random elements in [-2, 2],
// plus a zero vector and a short vector) and compares every element with
// |s|^2/(1+|s|^2) * s/|s| computed in floating point, within 0.01 + 2 %.
// Elements beyond n_dim must be 0. It also checks the cycle count from start
// to done against the schedule: n_dim (Sq_Sum) + 1 + 23 (sqrt and first
// division) + n_dim + 15 (element divisions) + 1.
module tb_squash_unit;
  import caps_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic [4:0] n_dim;
  acc_t s [N], v [N];
  int checks = 0, failures = 0;

  squash_unit #(.N_DIM(N)) dut (.clk, .rst_n, .start, .n_dim, .s, .busy, .done, .v);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      real sq, r, got;
      int lat, nd;
      @(negedge clk);
      nd = (n % 2 == 0) ? 16 : 8;
      n_dim = 5'(nd);
      sq = 0;
      for (int k = 0; k < N; k++) begin
        s[k] = acc_t'(int'($urandom_range(0, 4096)) - 2048);
        if (n == 0) s[k] = 0;
        if (n == 1) s[k] = (k == 3) ? 200 : 0;
        if (k < nd) sq += (real'(s[k]) / 1024.0) ** 2;
      end
      start = 1;
      @(negedge clk) start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat > 2 * nd + 41) begin failures++; $display("squash took %0d cycles", lat); end
      for (int k = 0; k < N; k++) begin
        r = (k < nd && sq > 0) ? sq / (1.0 + sq) * (real'(s[k]) / 1024.0) / $sqrt(sq) : 0.0;
        got = real'(v[k]) / 1024.0;
        checks++;
        if (got - r > 0.01 + 0.02 * (r < 0 ? -r : r) || r - got > 0.01 + 0.02 * (r < 0 ? -r : r)) begin
          failures++;
          $display("vec %0d elem %0d: got %f exp %f", n, k, got, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
