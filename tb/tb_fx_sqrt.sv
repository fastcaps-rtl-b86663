// tb_fx_sqrt: self-checking test of the digit-by-digit square root.
// For 300 inputs (zero, one, the largest value, a negative value and random
// values over the whole range) the result must equal floor(sqrt(x * 2^FW))
// exactly, and done must come 22 cycles after start.
module tb_fx_sqrt;
  import caps_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  acc_t x, y;
  int checks = 0, failures = 0;

  fx_sqrt dut (.clk, .rst_n, .start, .x, .busy, .done, .y);

  function automatic longint isqrt(input longint v);
    longint r;
    r = longint'($sqrt(real'(v)));
    while (r * r > v) r--;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int lat;
      longint e;
      @(negedge clk);
      case (n)
        0: x = 0;
        1: x = 1024;
        2: x = 32'h7fffffff;
        3: x = -100;
        default: x = acc_t'($urandom_range(0, 1 << $urandom_range(1, 30)));
      endcase
      start = 1;
      @(negedge clk) start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      e = (x < 0) ? 0 : isqrt(longint'(x) * 1024);
      checks++;
      if (longint'(y) != e || lat != 22) begin
        failures++;
        $display("sqrt(%0d): got %0d exp %0d latency %0d", x, y, e, lat);
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
