// tb_index_control: self-checking test of the index control & activation
// module.
// An index memory model holds the lists of four output channels (one of them
// fully pruned). For each channel the test fetches the list and checks the
// count, the pointer to the next channel, the fetch time (cnt + 2 cycles)
// and, for every surviving kernel, the kernel, data and
// output addresses against the layout formulas. The activation is checked
// with and without ReLU, including saturation.
module tb_index_control;
  import caps_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  conv_cfg_t cfg;
  logic fetch = 0, fetch_done;
  logic [15:0] fetch_ptr = 0, cnt, next_ptr, idx_raddr;
  fx_t idx_rdata;
  logic [16:0] kbase = 0, k_addr, d_addr, o_addr;
  logic [15:0] n = 0, oc = 0;
  logic [7:0] ky = 0, kx = 0, iy = 0, ix = 0, oy = 0, ox = 0;
  acc_t act_in = 0;
  fx_t act_out;
  int checks = 0, failures = 0;
  fx_t imem [64];

  always_ff @(posedge clk) idx_rdata <= imem[idx_raddr[5:0]];

  index_control #(.K(9), .MAX_IC(16), .IA(16), .WA(17), .AA(17)) dut (
    .clk, .rst_n, .cfg, .fetch, .fetch_ptr, .fetch_done, .cnt, .next_ptr,
    .idx_raddr, .idx_rdata, .kbase, .n, .ky, .kx, .iy, .ix, .oc, .oy, .ox,
    .k_addr, .d_addr, .o_addr, .act_in, .act_out);

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    int lists [4][$] = '{'{3, 0, 5}, '{}, '{7}, '{1, 2, 4, 6, 8, 9}};
    int p;
    cfg = '{in_ch: 16'd10, in_h: 8'd12, in_w: 8'd13, out_ch: 16'd4, out_h: 8'd4, out_w: 8'd5,
            stride: 4'd2, relu: 1'b1, in_base: 24'd100, out_base: 24'd3000,
            w_base: 24'd0, idx_base: 24'd0};
    p = 0;
    for (int c = 0; c < 4; c++) begin
      imem[p++] = fx_t'(lists[c].size());
      foreach (lists[c][m]) imem[p++] = fx_t'(lists[c][m]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    p = 0;
    for (int c = 0; c < 4; c++) begin
      int lat;
      @(negedge clk);
      fetch = 1; fetch_ptr = 16'(p);
      @(negedge clk) fetch = 0;
      lat = 1;
      while (!fetch_done) begin @(negedge clk); lat++; end
      chk("fetch time", lat, lists[c].size() + 2);
      chk("count", cnt, lists[c].size());
      chk("next pointer", next_ptr, p + 1 + lists[c].size());
      kbase = 17'(500 + 81 * c);
      foreach (lists[c][m]) begin
        n = 16'(m); ky = 8'($urandom_range(0, 8)); kx = 8'($urandom_range(0, 8));
        iy = 8'($urandom_range(0, 11)); ix = 8'($urandom_range(0, 12));
        oc = 16'(c); oy = 8'($urandom_range(0, 3)); ox = 8'($urandom_range(0, 4));
        #1;
        chk("kernel address", k_addr, 500 + 81 * c + m * 81 + ky * 9 + kx);
        chk("data address", d_addr, 100 + lists[c][m] * 156 + iy * 13 + ix);
        chk("output address", o_addr, 3000 + c * 20 + oy * 5 + ox);
      end
      p = p + 1 + lists[c].size();
    end
    // activation
    for (int r = 0; r < 2; r++) begin
      cfg.relu = 1'(r);
      foreach (lists[0][m]) ;
      for (int t = 0; t < 20; t++) begin
        longint e;
        act_in = acc_t'(int'($urandom_range(0, 100000)) - 50000);
        #1;
        e = (r && act_in < 0) ? 0 : act_in;
        if (e > 32767) e = 32767;
        if (e < -32768) e = -32768;
        chk("activation", act_out, e);
      end
    end
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
