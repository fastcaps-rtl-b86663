// tb_conv_module: self-checking test of the pruned convolution module.
// Runs two small layers back to back with K = 9 and ten PEs:
//   A: 2 input channels of 11x23, stride 1, 3 output channels whose surviving
//      kernels are {0,1}, {} (fully pruned) and {1}, ReLU on; the 15-pixel
//      output rows need one full and one partial group of ten pixels.
//   B: 3 input channels of 13x13, stride 2, 2 output channels with kernels
//      {2,0} and {1}, no ReLU.
// Memory models have the 1-cycle read latency of the on-chip RAMs. Every
// output word is compared bit for bit with a reference that rounds each
// nine-product kernel row the way a PE does. Also checked: nothing outside
// the output maps is written, the number of kernel rows computed, the number
// of partial pixel groups, and the cycle count of each layer against
//   1 + sum over channels (cnt + 3) + sum over groups (1 + cnt*K*(Ls + 4) + n_valid)
// with Ls = 9*stride + 9 input words per kernel row (18 or 27).
module tb_conv_module;
  import caps_pkg::*;
  localparam int N_PE = 10, K = 9, L = 27;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, a_we, pe_valid, pe_ovalid;
  conv_cfg_t cfg;
  logic [11:0] w_raddr, a_raddr, a_waddr;
  logic [9:0]  idx_raddr;
  fx_t w_rdata, idx_rdata, a_rdata, a_wdata;
  fx_t pe_a [N_PE][PE_LANES], pe_b [N_PE][PE_LANES];
  acc_t pe_sum [N_PE];
  logic [31:0] kernel_rows_done, partial_groups;
  fx_t wmem [4096], imem [1024], amem [4096];
  int checks = 0, failures = 0, writes = 0;

  always_ff @(posedge clk) begin
    w_rdata <= wmem[w_raddr];
    idx_rdata <= imem[idx_raddr];
    a_rdata <= amem[a_raddr];
    if (a_we) begin amem[a_waddr] <= a_wdata; writes <= writes + 1; end
  end

  conv_module #(.N_PE(N_PE), .K(K), .SMAX(2), .MAX_IC(8), .IA(10), .WA(12), .AA(12)) dut (
    .clk, .rst_n, .start, .cfg, .busy, .done, .w_raddr, .w_rdata, .idx_raddr, .idx_rdata,
    .a_raddr, .a_rdata, .a_we, .a_waddr, .a_wdata, .pe_valid, .pe_a, .pe_b,
    .pe_ovalid, .pe_sum, .kernel_rows_done, .partial_groups);
  pe_array #(.N_PE(N_PE)) u_pe (.clk, .rst_n, .in_valid(pe_valid), .a(pe_a), .b(pe_b),
    .out_valid(pe_ovalid), .sum(pe_sum));

  typedef int list_t [$];

  task automatic run_layer(input conv_cfg_t c, input list_t lists [], output int cycles);
    int p, wp;
    p = int'(c.idx_base);
    foreach (lists[o]) begin
      imem[p++] = fx_t'(lists[o].size());
      foreach (lists[o][m]) imem[p++] = fx_t'(lists[o][m]);
    end
    wp = int'(c.w_base);
    foreach (lists[o]) foreach (lists[o][m])
      for (int t = 0; t < K * K; t++) wmem[wp++] = fx_t'(int'($urandom_range(0, 512)) - 256);
    for (int i = 0; i < int'(c.in_ch) * c.in_h * c.in_w; i++)
      amem[int'(c.in_base) + i] = fx_t'(int'($urandom_range(0, 2048)) - 1024);
    for (int i = 0; i < int'(c.out_ch) * c.out_h * c.out_w; i++) amem[int'(c.out_base) + i] = 16'h5a5a;
    @(negedge clk);
    cfg = c; start = 1;
    @(negedge clk) start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  task automatic check_layer(input conv_cfg_t c, input list_t lists [], input int cycles,
                             input int rows0, input int part0);
    int kb, expc, rows, part;
    kb = int'(c.w_base);
    expc = 1; rows = 0; part = 0;
    foreach (lists[o]) begin
      expc += lists[o].size() + 3;
      for (int oy = 0; oy < c.out_h; oy++)
        for (int ox0 = 0; ox0 < c.out_w; ox0 += N_PE) begin
          int nv;
          nv = (c.out_w - ox0 > N_PE) ? N_PE : c.out_w - ox0;
          if (nv < N_PE) part++;
          expc += 1 + lists[o].size() * K * ((N_PE - 1) * int'(c.stride) + K + 4) + nv;
          rows += lists[o].size() * K;
        end
      for (int oy = 0; oy < c.out_h; oy++)
        for (int ox = 0; ox < c.out_w; ox++) begin
          longint acc, e;
          acc = 0;
          foreach (lists[o][m])
            for (int ky = 0; ky < K; ky++) begin
              longint rs;
              rs = 0;
              for (int kx = 0; kx < K; kx++)
                rs += longint'(wmem[kb + m * K * K + ky * K + kx]) *
                      longint'(amem[int'(c.in_base) + lists[o][m] * c.in_h * c.in_w +
                                    (oy * c.stride + ky) * c.in_w + ox * c.stride + kx]);
              acc += (rs + 512) >>> 10;
            end
          e = (c.relu && acc < 0) ? 0 : acc;
          if (e > 32767) e = 32767;
          if (e < -32768) e = -32768;
          checks++;
          if (longint'(amem[int'(c.out_base) + o * c.out_h * c.out_w + oy * c.out_w + ox]) != e) begin
            failures++;
            $display("oc %0d (%0d,%0d): got %0d exp %0d", o, oy, ox,
                     amem[int'(c.out_base) + o * c.out_h * c.out_w + oy * c.out_w + ox], e);
          end
        end
      kb += lists[o].size() * K * K;
    end
    checks += 3;
    if (cycles != expc) begin failures++; $display("layer took %0d cycles, expected %0d", cycles, expc); end
    if (int'(kernel_rows_done) - rows0 != rows) begin failures++; $display("kernel rows %0d exp %0d", int'(kernel_rows_done) - rows0, rows); end
    if (int'(partial_groups) - part0 != part) begin failures++; $display("partial groups %0d exp %0d", int'(partial_groups) - part0, part); end
  endtask

  initial begin
    conv_cfg_t ca, cb;
    list_t la [], lb [];
    int cyc, r0, p0, w0;
    la = new[3]; la[0] = '{0, 1}; la[1] = '{}; la[2] = '{1};
    lb = new[2]; lb[0] = '{2, 0}; lb[1] = '{1};
    ca = '{in_ch: 16'd2, in_h: 8'd11, in_w: 8'd23, out_ch: 16'd3, out_h: 8'd3, out_w: 8'd15,
           stride: 4'd1, relu: 1'b1, in_base: 24'd0, out_base: 24'd1000, w_base: 24'd0, idx_base: 24'd0};
    cb = '{in_ch: 16'd3, in_h: 8'd13, in_w: 8'd13, out_ch: 16'd2, out_h: 8'd3, out_w: 8'd3,
           stride: 4'd2, relu: 1'b0, in_base: 24'd2000, out_base: 24'd3000, w_base: 24'd243, idx_base: 24'd6};
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(ca, la, cyc);
    check_layer(ca, la, cyc, 0, 0);
    checks++;
    if (writes != 3 * 3 * 15) begin failures++; $display("layer A wrote %0d words", writes); end
    r0 = int'(kernel_rows_done); p0 = int'(partial_groups); w0 = writes;
    run_layer(cb, lb, cyc);
    check_layer(cb, lb, cyc, r0, p0);
    checks++;
    if (writes - w0 != 2 * 3 * 3) begin failures++; $display("layer B wrote %0d words", writes - w0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
