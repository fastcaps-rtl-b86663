// softmax_unit: softmax over the N routing logits b_i1..b_iN of one lower
// capsule, c_ij = exp(b_ij) / sum_k exp(b_ik), laid out as in the paper's
// Softmax figure:
//   - N exponential lanes (fx_exp, the Taylor polynomial of Eq. 2), one per
//     class, drawn there as a PE array;
//   - an adder tree summing the N exponentials;
//   - log of each exponential and log of the sum, a subtraction, and exp:
//     the log-domain division of Eq. 3.
// The paper executes the exp polynomial on the shared PE array. Here each
// lane has its own fixed-coefficient Horner pipeline, which lets a new
// capsule enter every cycle; that is this design's choice.
//
// Interface: in_valid with b (FW fractional bits); out_valid with c (FW
// fractional bits, each in [0, 1]) in the same order as the inputs.
// Timing: fully pipelined, latency 7 (exp) + 1 (sum) + 7 (log) + 1 (subtract)
// + 7 (exp) = 23 cycles, one capsule per cycle.
module softmax_unit
  import caps_pkg::*;
#(
  parameter int N = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  acc_t b [N],
  output logic out_valid,
  output acc_t c [N]
);
  acc_t e [N], e_q [N], le [N], d_q [N];
  acc_t sum_q, lsum;
  logic ev [N], lv [N], cv [N];
  logic sv_q, lsv, dv_q;

  // Stage 1: exponentials.
  for (genvar j = 0; j < N; j++) begin : g_exp
    fx_exp u_exp (.clk, .rst_n, .in_valid, .x(b[j]), .out_valid(ev[j]), .y(e[j]));
  end

  // Stage 2: adder tree (saturating).
  acc_t tree_sum;
  always_comb begin
    logic signed [63:0] t;
    t = '0;
    for (int j = 0; j < N; j++) t = t + 64'(e[j]);
    tree_sum = sat_acc(t);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sv_q <= 1'b0; sum_q <= '0;
      for (int j = 0; j < N; j++) e_q[j] <= '0;
    end else begin
      sv_q  <= ev[0];
      sum_q <= tree_sum;
      for (int j = 0; j < N; j++) e_q[j] <= e[j];
    end
  end

  // Stage 3: logarithms of each exponential and of the sum.
  for (genvar j = 0; j < N; j++) begin : g_log
    fx_log u_log (.clk, .rst_n, .in_valid(sv_q), .x(e_q[j]), .out_valid(lv[j]), .y(le[j]));
  end
  fx_log u_log_sum (.clk, .rst_n, .in_valid(sv_q), .x(sum_q), .out_valid(lsv), .y(lsum));

  // Stage 4: subtract, stage 5: exp.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dv_q <= 1'b0;
      for (int j = 0; j < N; j++) d_q[j] <= '0;
    end else begin
      dv_q <= lsv;
      for (int j = 0; j < N; j++) d_q[j] <= le[j] - lsum;
    end
  end

  for (genvar j = 0; j < N; j++) begin : g_out
    fx_exp u_exp (.clk, .rst_n, .in_valid(dv_q), .x(d_q[j]), .out_valid(cv[j]), .y(c[j]));
  end
  assign out_valid = cv[0];
endmodule
