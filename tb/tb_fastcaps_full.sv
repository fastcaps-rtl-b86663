// tb_fastcaps_full: end-to-end run of the accelerator at its default, full
// size: the MNIST CapsNet with a 28x28 image, 256 conv1 channels, 7 primary
// capsule types (56 channels, 6x6 positions, 252 capsules) and 10 digit
// capsules of 16 dimensions, 3 routing iterations, 10 PEs. The pruned network
// is random: about one conv1 channel in seven and one PrimaryCaps channel are
// fully pruned, the other PrimaryCaps channels keep 1..8 of their 256 input
// kernels. The checks are those of tb_fastcaps_top: all 104 416 activations
// bit for bit, the digit capsules against a floating-point model, the class,
// and that each mechanism occurred. It also counts the cycles of each phase
// and routing step through hierarchical references, prints them, and checks
// both convolution phases against the schedule's cycle formula.
module tb_fastcaps_full;
  import caps_pkg::*;
  localparam int IMG_H = 28, IMG_W = 28, K = 9, C1 = 256, S1 = 1, N_PTYPE = 7, IN_DIM = 8, S2 = 2;
  localparam int N_CLASS = 10, OUT_DIM = 16, N_ITER = 3, N_PE = 10, NSURV = 8;
  localparam int WATCHDOG = 20000000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int H1 = (IMG_H - K) / S1 + 1, W1 = (IMG_W - K) / S1 + 1;
  localparam int H2 = (H1 - K) / S2 + 1, W2 = (W1 - K) / S2 + 1;
  localparam int C2 = N_PTYPE * IN_DIM, GRID = H2 * W2, N_IN = N_PTYPE * GRID;
  localparam int A1 = IMG_H * IMG_W, A2 = A1 + C1 * H1 * W1;
  localparam int RA = $clog2(N_IN * OUT_DIM), RW = N_CLASS * IN_DIM * DW;
  localparam int AA = $clog2(A2 + C2 * H2 * W2);

  logic host_we = 0, host_r_we = 0, start = 0, busy, done;
  logic [1:0] host_mem = 0;
  logic [23:0] host_addr = 0, l2_w_base = 0, l2_idx_base = 0;
  fx_t host_wdata = 0, host_rdata;
  logic [RA-1:0] host_r_addr = 0;
  logic [RW-1:0] host_r_wdata = 0;
  logic [AA-1:0] host_raddr = 0;
  acc_t v_out [N_CLASS][OUT_DIM];
  logic [$clog2(N_CLASS)-1:0] class_out;
  logic [31:0] kernel_rows_done, partial_groups, agreement_count, squash_count, owner_switches;
  logic [7:0] routing_iters;
  int checks = 0, failures = 0;

  fastcaps_top dut (.*);

  // model of the memory contents
  fx_t img [IMG_H * IMG_W];
  fx_t a1 [C1 * H1 * W1];
  fx_t a2 [C2 * H2 * W2];
  fx_t wts [$];
  fx_t idx [$];
  int  list1 [C1][$];
  int  list2 [C2][$];
  logic [RW-1:0] rw [N_IN * OUT_DIM];

  task automatic host_write(input int mem, input int addr, input fx_t data);
    @(negedge clk);
    host_we = 1; host_mem = 2'(mem); host_addr = 24'(addr); host_wdata = data;
    @(negedge clk) host_we = 0;
  endtask

  function automatic fx_t sat16(input longint v);
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return fx_t'(v);
  endfunction

  // reference convolution, rounding each nine-product kernel row like a PE
  task automatic ref_conv(input int ic_n, input int ih, input int iw, input int oc_n,
                          input int oh, input int ow, input int st, input bit relu,
                          input int wbase, ref fx_t in [], ref fx_t out [],
                          ref int lists [][$], output int neg);
    int kb;
    kb = wbase; neg = 0;
    for (int o = 0; o < oc_n; o++) begin
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          longint acc;
          acc = 0;
          foreach (lists[o][m])
            for (int ky = 0; ky < K; ky++) begin
              longint rs; rs = 0;
              for (int kx = 0; kx < K; kx++)
                rs += longint'(wts[kb + m * K * K + ky * K + kx]) *
                      longint'(in[lists[o][m] * ih * iw + (y * st + ky) * iw + x * st + kx]);
              acc += (rs + 512) >>> 10;
            end
          if (acc < 0) neg++;
          out[o * oh * ow + y * ow + x] = sat16((relu && acc < 0) ? 0 : acc);
        end
      kb += lists[o].size() * K * K;
    end
  endtask

  function automatic void squash_r(input int n, inout real x [OUT_DIM]);
    real sq;
    sq = 0;
    for (int k = 0; k < n; k++) sq += x[k] * x[k];
    for (int k = 0; k < n; k++) x[k] = (sq > 0) ? sq / (1 + sq) * x[k] / $sqrt(sq) : 0;
  endfunction

  int pruned_kernels = 0, empty_channels = 0, relu_clamps = 0;

  // Cycles spent in each phase of the process control unit (1 Conv1,
  // 2 PrimaryCaps, 3 routing) and in each routing step (state encoding of
  // routing_module: 1-4 primary load and squash, 5-6 Matmul, 7-8 Softmax,
  // 9-12 Fully Connected, 13-14 Squash, 15-17 Agreement).
  int ph_cyc [4], step_cyc [6];
  always @(posedge clk) if (rst_n) begin
    int ph, rs;
    ph = int'(dut.u_pcu.ph);
    rs = int'(dut.u_routing.st);
    if (ph >= 1 && ph <= 3) ph_cyc[ph]++;
    if (rs >= 1 && rs <= 4) step_cyc[0]++;
    else if (rs <= 6 && rs >= 5) step_cyc[1]++;
    else if (rs <= 8 && rs >= 7) step_cyc[2]++;
    else if (rs <= 12 && rs >= 9) step_cyc[3]++;
    else if (rs <= 14 && rs >= 13) step_cyc[4]++;
    else if (rs <= 17 && rs >= 15) step_cyc[5]++;
  end

  // Cycle count of one layer predicted by the convolution schedule, plus the
  // cycle in which the process control unit registers conv_start.
  function automatic int conv_cycles(input int ow, input int oh, input int st, ref int lists [][$]);
    int c;
    c = 2;
    foreach (lists[o]) begin
      c += lists[o].size() + 3;
      for (int ox0 = 0; ox0 < ow; ox0 += N_PE)
        c += oh * (1 + lists[o].size() * K * ((N_PE - 1) * st + K + 4) + ((ow - ox0 > N_PE) ? N_PE : ow - ox0));
    end
    return c;
  endfunction

  initial begin
    int neg1, neg2, cyc, w2base, i2base, bj, rows;
    real best, second;
    fx_t img_d [], a1_d [], a2_d [];
    int l1 [][$], l2 [][$];
    real u [N_IN][OUT_DIM], uh [N_IN][N_CLASS][OUT_DIM], b [N_IN][N_CLASS];
    real c [N_IN][N_CLASS], s [N_CLASS][OUT_DIM];

    // ---- pruned network: surviving kernels, weights, index lists ----
    for (int o = 0; o < C1; o++) begin
      if (o % 7 == 3) begin empty_channels++; pruned_kernels++; end
      else list1[o].push_back(0);
    end
    for (int o = 0; o < C2; o++) begin
      int n;
      n = (o == 1) ? 0 : $urandom_range(1, NSURV);
      if (n == 0) empty_channels++;
      pruned_kernels += C1 - n;
      while (list2[o].size() < n) begin
        int ch; bit dup;
        ch = $urandom_range(0, C1 - 1);
        dup = 0;
        foreach (list2[o][m]) if (list2[o][m] == ch) dup = 1;
        if (!dup) list2[o].push_back(ch);
      end
    end
    for (int o = 0; o < C1; o++) begin
      idx.push_back(fx_t'(list1[o].size()));
      foreach (list1[o][m]) idx.push_back(fx_t'(list1[o][m]));
      foreach (list1[o][m]) repeat (K * K) wts.push_back(fx_t'(int'($urandom_range(0, 512)) - 256));
    end
    i2base = idx.size(); w2base = wts.size();
    for (int o = 0; o < C2; o++) begin
      idx.push_back(fx_t'(list2[o].size()));
      foreach (list2[o][m]) idx.push_back(fx_t'(list2[o][m]));
      foreach (list2[o][m]) repeat (K * K) wts.push_back(fx_t'(int'($urandom_range(0, 200)) - 100));
    end
    for (int i = 0; i < IMG_H * IMG_W; i++) img[i] = fx_t'($urandom_range(0, 1023));
    for (int a = 0; a < N_IN * OUT_DIM; a++)
      for (int e = 0; e < N_CLASS * IN_DIM; e++) rw[a][e*DW +: DW] = DW'(int'($urandom_range(0, 1024)) - 512);
    $display("surviving kernels %0d, pruned %0d, index words %0d", wts.size() / (K * K), pruned_kernels, idx.size());

    // ---- load the on-chip memories through the host port ----
    repeat (3) @(posedge clk);
    rst_n = 1;
    l2_w_base = 24'(w2base); l2_idx_base = 24'(i2base);
    foreach (wts[a]) host_write(0, a, wts[a]);
    foreach (idx[a]) host_write(1, a, idx[a]);
    foreach (img[a]) host_write(2, a, img[a]);
    for (int a = 0; a < N_IN * OUT_DIM; a++) begin
      @(negedge clk);
      host_r_we = 1; host_r_addr = RA'(a); host_r_wdata = rw[a];
      @(negedge clk) host_r_we = 0;
    end

    // ---- run one image ----
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    $display("one image took %0d cycles", cyc);

    // ---- reference: both convolutions bit-exact ----
    img_d = new[IMG_H * IMG_W]; foreach (img_d[i]) img_d[i] = img[i];
    a1_d = new[C1 * H1 * W1]; a2_d = new[C2 * H2 * W2];
    l1 = new[C1]; foreach (l1[o]) l1[o] = list1[o];
    l2 = new[C2]; foreach (l2[o]) l2[o] = list2[o];
    ref_conv(1, IMG_H, IMG_W, C1, H1, W1, S1, 1'b1, 0, img_d, a1_d, l1, neg1);
    ref_conv(C1, H1, W1, C2, H2, W2, S2, 1'b0, w2base, a1_d, a2_d, l2, neg2);
    relu_clamps = neg1;
    for (int a = 0; a < C1 * H1 * W1 + C2 * H2 * W2; a++) begin
      fx_t e;
      @(negedge clk) host_raddr = AA'(A1 + a);
      @(negedge clk);
      e = (a < C1 * H1 * W1) ? a1_d[a] : a2_d[a - C1 * H1 * W1];
      checks++;
      if (host_rdata !== e) begin
        failures++;
        if (failures < 10) $display("activation %0d: got %0d exp %0d", A1 + a, host_rdata, e);
      end
    end

    // ---- reference: routing in floating point ----
    for (int i = 0; i < N_IN; i++) begin
      for (int d = 0; d < OUT_DIM; d++)
        u[i][d] = (d < IN_DIM) ? real'(a2_d[((i / GRID) * IN_DIM + d) * GRID + i % GRID]) / 1024.0 : 0;
      squash_r(IN_DIM, u[i]);
      for (int j = 0; j < N_CLASS; j++) begin
        b[i][j] = 0;
        for (int k = 0; k < OUT_DIM; k++) begin
          uh[i][j][k] = 0;
          for (int d = 0; d < IN_DIM; d++)
            uh[i][j][k] += real'(fx_t'(rw[i * OUT_DIM + k][(j * IN_DIM + d)*DW +: DW])) / 1024.0 * u[i][d];
        end
      end
    end
    for (int it = 0; it < N_ITER; it++) begin
      for (int i = 0; i < N_IN; i++) begin
        real sum; sum = 0;
        for (int j = 0; j < N_CLASS; j++) sum += $exp(b[i][j]);
        for (int j = 0; j < N_CLASS; j++) c[i][j] = $exp(b[i][j]) / sum;
      end
      for (int j = 0; j < N_CLASS; j++) begin
        for (int k = 0; k < OUT_DIM; k++) begin
          s[j][k] = 0;
          for (int i = 0; i < N_IN; i++) s[j][k] += c[i][j] * uh[i][j][k];
        end
        squash_r(OUT_DIM, s[j]);
      end
      if (it < N_ITER - 1)
        for (int i = 0; i < N_IN; i++)
          for (int j = 0; j < N_CLASS; j++)
            for (int k = 0; k < OUT_DIM; k++) b[i][j] += uh[i][j][k] * s[j][k];
    end
    best = -1; second = -1; bj = 0;
    for (int j = 0; j < N_CLASS; j++) begin
      real len2; len2 = 0;
      for (int k = 0; k < OUT_DIM; k++) begin
        real got;
        len2 += s[j][k] * s[j][k];
        got = real'(v_out[j][k]) / 1024.0;
        checks++;
        if (got - s[j][k] > 0.04 || s[j][k] - got > 0.04) begin
          failures++; $display("v[%0d][%0d]: got %f exp %f", j, k, got, s[j][k]);
        end
      end
      if (len2 > best) begin second = best; best = len2; bj = j; end
      else if (len2 > second) second = len2;
    end
    if (best - second > 0.02) begin
      checks++;
      if (int'(class_out) != bj) begin failures++; $display("class %0d exp %0d", class_out, bj); end
    end
    $display("predicted class %0d (reference %0d)", class_out, bj);

    // ---- cycle counts ----
    $display("cycles: Conv1 %0d, PrimaryCaps %0d, routing %0d (primary squash %0d, Matmul %0d, Softmax %0d, FC %0d, Squash %0d, Agreement %0d)",
             ph_cyc[1], ph_cyc[2], ph_cyc[3], step_cyc[0], step_cyc[1], step_cyc[2], step_cyc[3], step_cyc[4], step_cyc[5]);
    checks += 2;
    if (ph_cyc[1] != conv_cycles(W1, H1, S1, l1)) begin failures++; $display("Conv1 took %0d cycles, expected %0d", ph_cyc[1], conv_cycles(W1, H1, S1, l1)); end
    if (ph_cyc[2] != conv_cycles(W2, H2, S2, l2)) begin failures++; $display("PrimaryCaps took %0d cycles, expected %0d", ph_cyc[2], conv_cycles(W2, H2, S2, l2)); end

    // ---- mechanisms ----
    rows = 0;
    for (int o = 0; o < C1; o++) rows += list1[o].size() * K * H1 * ((W1 + N_PE - 1) / N_PE);
    for (int o = 0; o < C2; o++) rows += list2[o].size() * K * H2 * ((W2 + N_PE - 1) / N_PE);
    $display("mechanisms: pruned kernels skipped %0d, empty channels %0d, partial pixel groups %0d, ReLU clamps %0d, agreement updates %0d, squash ops %0d, PE array hand-overs %0d, routing passes with agreement %0d",
             pruned_kernels, empty_channels, partial_groups, relu_clamps, agreement_count, squash_count, owner_switches, routing_iters);
    checks += 9;
    if (int'(kernel_rows_done) != rows) begin failures++; $display("kernel rows %0d exp %0d", kernel_rows_done, rows); end
    if (pruned_kernels == 0) begin failures++; $display("no kernel was pruned"); end
    if (empty_channels == 0) begin failures++; $display("no channel was fully pruned"); end
    if (partial_groups == 0) begin failures++; $display("no partial pixel group"); end
    if (relu_clamps == 0) begin failures++; $display("ReLU never clamped"); end
    if (agreement_count != 32'((N_ITER - 1) * N_IN)) begin failures++; $display("agreement count %0d", agreement_count); end
    if (squash_count != 32'(N_IN + N_ITER * N_CLASS)) begin failures++; $display("squash count %0d", squash_count); end
    if (owner_switches != 1) begin failures++; $display("PE array hand-overs %0d", owner_switches); end
    if (routing_iters != 8'(N_ITER - 1)) begin failures++; $display("routing iterations %0d", routing_iters); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
