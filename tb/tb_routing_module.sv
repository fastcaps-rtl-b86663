// tb_routing_module: self-checking test of the dynamic routing module.
// A reduced layer (20 primary capsules = 5 types x 4 positions, 8 -> 16
// dimensions, 10 classes, 3 iterations) runs with the real PE array and
// squash unit. 20 capsules are not a multiple of nine, so the last
// fully-connected chunk of each iteration is partial. The primary capsules
// and W are random; a floating-point model of the same algorithm (squash of
// u_i, u_hat = W u, softmax, weighted sum, squash, agreement) gives the
// expected digit capsules. Checked: every v_j element within 0.03, the
// predicted class when the reference has a clear winner, and the event
// counters (squash operations, agreement updates, iterations, partial chunks).
// Two images are run to check that b is cleared between images.
module tb_routing_module;
  import caps_pkg::*;
  localparam int N_IN = 20, NC = 10, ID = 8, OD = 16, IT = 3, GRID = 4;
  localparam int RA = $clog2(N_IN * OD), RW = NC * ID * DW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, pe_valid, pe_ovalid, sq_start, sq_done, sq_busy;
  logic [11:0] a_raddr;
  fx_t a_rdata;
  logic [RA-1:0] r_raddr;
  logic [RW-1:0] r_rdata;
  fx_t pe_a [NC][PE_LANES], pe_b [NC][PE_LANES];
  acc_t pe_sum [NC];
  logic [4:0] sq_n_dim;
  acc_t sq_s [OD], sq_v [OD];
  acc_t v_out [NC][OD];
  logic [3:0] class_out;
  logic [7:0] iter_count;
  logic [31:0] agreement_count, squash_count, fc_partial_chunks;
  fx_t amem [4096];
  logic [RW-1:0] rmem [N_IN * OD];
  int checks = 0, failures = 0;

  always_ff @(posedge clk) begin
    a_rdata <= amem[a_raddr];
    r_rdata <= rmem[r_raddr];
  end

  routing_module #(.N_IN(N_IN), .N_CLASS(NC), .IN_DIM(ID), .OUT_DIM(OD), .N_ITER(IT),
                   .N_PE(NC), .GRID(GRID), .AA(12)) dut (
    .clk, .rst_n, .start, .u_base(12'd100), .busy, .done, .a_raddr, .a_rdata, .r_raddr, .r_rdata,
    .pe_valid, .pe_a, .pe_b, .pe_ovalid, .pe_sum, .sq_start, .sq_n_dim, .sq_s, .sq_done, .sq_v,
    .v_out, .class_out, .iter_count, .agreement_count, .squash_count, .fc_partial_chunks);
  pe_array #(.N_PE(NC)) u_pe (.clk, .rst_n, .in_valid(pe_valid), .a(pe_a), .b(pe_b),
    .out_valid(pe_ovalid), .sum(pe_sum));
  squash_unit #(.N_DIM(OD)) u_sq (.clk, .rst_n, .start(sq_start), .n_dim(sq_n_dim), .s(sq_s),
    .busy(sq_busy), .done(sq_done), .v(sq_v));

  function automatic void squash_r(input int n, inout real x [OD]);
    real sq;
    sq = 0;
    for (int k = 0; k < n; k++) sq += x[k] * x[k];
    for (int k = 0; k < n; k++) x[k] = (sq > 0) ? sq / (1 + sq) * x[k] / $sqrt(sq) : 0;
  endfunction

  task automatic run_image(input int img);
    real u [N_IN][OD], uh [N_IN][NC][OD], b [N_IN][NC], c [N_IN][NC], s [NC][OD];
    real best, second;
    int bj, cyc;
    logic [31:0] ag0, sq0;
    for (int t = 0; t < N_IN / GRID; t++)
      for (int d = 0; d < ID; d++)
        for (int p = 0; p < GRID; p++)
          amem[100 + (t * ID + d) * GRID + p] = fx_t'(int'($urandom_range(0, 3072)) - 1536);
    for (int a = 0; a < N_IN * OD; a++)
      for (int e = 0; e < NC * ID; e++) rmem[a][e*DW +: DW] = DW'(int'($urandom_range(0, 1024)) - 512);
    // reference
    for (int i = 0; i < N_IN; i++) begin
      for (int d = 0; d < OD; d++)
        u[i][d] = (d < ID) ? real'(amem[100 + ((i / GRID) * ID + d) * GRID + i % GRID]) / 1024.0 : 0;
      squash_r(ID, u[i]);
      for (int j = 0; j < NC; j++)
        for (int k = 0; k < OD; k++) begin
          uh[i][j][k] = 0;
          for (int d = 0; d < ID; d++)
            uh[i][j][k] += real'(fx_t'(rmem[i * OD + k][(j * ID + d)*DW +: DW])) / 1024.0 * u[i][d];
        end
      for (int j = 0; j < NC; j++) b[i][j] = 0;
    end
    for (int it = 0; it < IT; it++) begin
      for (int i = 0; i < N_IN; i++) begin
        real sum; sum = 0;
        for (int j = 0; j < NC; j++) sum += $exp(b[i][j]);
        for (int j = 0; j < NC; j++) c[i][j] = $exp(b[i][j]) / sum;
      end
      for (int j = 0; j < NC; j++) begin
        for (int k = 0; k < OD; k++) begin
          s[j][k] = 0;
          for (int i = 0; i < N_IN; i++) s[j][k] += c[i][j] * uh[i][j][k];
        end
        squash_r(OD, s[j]);
      end
      if (it < IT - 1)
        for (int i = 0; i < N_IN; i++)
          for (int j = 0; j < NC; j++)
            for (int k = 0; k < OD; k++) b[i][j] += uh[i][j][k] * s[j][k];
    end
    ag0 = agreement_count; sq0 = squash_count;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    $display("image %0d: routing took %0d cycles", img, cyc);
    best = -1; second = -1; bj = 0;
    for (int j = 0; j < NC; j++) begin
      real len2; len2 = 0;
      for (int k = 0; k < OD; k++) begin
        real got;
        len2 += s[j][k] * s[j][k];
        got = real'(v_out[j][k]) / 1024.0;
        checks++;
        if (got - s[j][k] > 0.03 || s[j][k] - got > 0.03) begin
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
    checks += 4;
    if (squash_count - sq0 != N_IN + IT * NC) begin failures++; $display("squash count %0d", squash_count - sq0); end
    if (agreement_count - ag0 != (IT - 1) * N_IN) begin failures++; $display("agreement count %0d", agreement_count - ag0); end
    if (iter_count != 8'(IT - 1)) begin failures++; $display("iterations %0d", iter_count); end
    if (fc_partial_chunks != 32'(IT * (img + 1))) begin failures++; $display("partial chunks %0d", fc_partial_chunks); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_image(0);
    run_image(1);
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
