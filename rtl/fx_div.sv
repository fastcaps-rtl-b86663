// fx_div: pipelined fixed-point division in the log domain, the paper's
// Eq. 3:  a / b = exp(log(a) - log(b)).
//
// Signs are taken off first and put back on the result (log() needs positive
// arguments; this sign handling is this design's choice). Two fx_log units
// work on |a| and |b| side by side, one register subtracts, and fx_exp
// turns the difference back. a = 0 gives 0; b = 0 saturates.
//
// Interface: in_valid/a/b in, out_valid/q out, all FW fractional bits.
// Timing: fully pipelined, latency 7 (log) + 1 (subtract) + 7 (exp) = 15
// cycles, one quotient per cycle.
//
// Lint note: verilator reports rst_n as used both asynchronously (the
// registers' reset) and synchronously; the synchronous use is only the
// 'disable iff' of the lock-step assertion, which is not logic.
module fx_div
  import caps_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  acc_t a,
  input  acc_t b,
  output logic out_valid,
  output acc_t q
);
  localparam int LAT = 15;

  acc_t la, lb, diff_q, e;
  logic lv_a, lv_b, dv_q, ev;
  logic neg_q [LAT];
  logic az_q  [LAT];
  logic bz_q  [LAT];

  fx_log u_log_a (.clk, .rst_n, .in_valid, .x(a < 0 ? -a : a), .out_valid(lv_a), .y(la));
  fx_log u_log_b (.clk, .rst_n, .in_valid, .x(b < 0 ? -b : b), .out_valid(lv_b), .y(lb));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      diff_q <= '0; dv_q <= 1'b0;
      for (int s = 0; s < LAT; s++) begin neg_q[s] <= 1'b0; az_q[s] <= 1'b0; bz_q[s] <= 1'b0; end
    end else begin
      dv_q   <= lv_a;
      diff_q <= la - lb;
      neg_q[0] <= a[AW-1] ^ b[AW-1];
      az_q[0]  <= (a == 0);
      bz_q[0]  <= (b == 0);
      for (int s = 1; s < LAT; s++) begin
        neg_q[s] <= neg_q[s-1]; az_q[s] <= az_q[s-1]; bz_q[s] <= bz_q[s-1];
      end
    end
  end

  fx_exp u_exp (.clk, .rst_n, .in_valid(dv_q), .x(diff_q), .out_valid(ev), .y(e));

  always_comb begin
    if (az_q[LAT-1])      q = '0;
    else if (bz_q[LAT-1]) q = neg_q[LAT-1] ? ACC_MIN : ACC_MAX;
    else                  q = neg_q[LAT-1] ? -e : e;
  end
  assign out_valid = ev;

  // The two log units run in lock step.
  a_lock_step: assert property (@(posedge clk) disable iff (!rst_n) lv_a == lv_b);
endmodule
