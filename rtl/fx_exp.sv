// fx_exp: pipelined exponential e^x for fixed-point x (FW fractional bits).
//
// The core is the paper's Taylor form around a = 0.5 (its Eq. 2):
//   e^x = e^a (0.60653 + x(0.60659 + x(0.30260 + x(0.10347 + x(0.02118 + 0.00833x)))))
// with the factor e^a = 1.64872 multiplied into the six coefficients beforehand,
// so that the polynomial costs 5 multiplications and 5 additions (Horner form).
// Folded coefficients (Q16): 1.00000, 1.00010, 0.49890, 0.17059, 0.03492, 0.01373.
//
// Range reduction is this design's addition: the paper's polynomial is only
// accurate for arguments near a (it turns negative near x = -2.3, which
// softmax and the log-domain division reach). Here x = k*ln2 + r with
// r in [0, ln2); the polynomial is evaluated on r and the result shifted by k.
//
// Interface: in_valid/x in, out_valid/y out. y has FW fractional bits and
// saturates at ACC_MAX; it underflows to 0 for very negative x.
// Timing: fully pipelined, latency LAT = 7 cycles, one result per cycle.
module fx_exp
  import caps_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  acc_t x,
  output logic out_valid,
  output acc_t y
);
  localparam int LAT = 7;
  localparam logic signed [31:0] LOG2E_Q16 = 32'sd94548;
  localparam logic signed [31:0] LN2_Q16   = 32'sd45426;
  // Eq. 2 coefficients times e^0.5, Q16, highest order first.
  localparam logic signed [31:0] C [6] = '{32'sd900, 32'sd2289, 32'sd11180,
                                           32'sd32696, 32'sd65543, 32'sd65536};

  logic               v_q [LAT];
  logic signed [31:0] r_q [6];     // reduced argument, Q16
  logic signed [7:0]  k_q [6];     // power-of-two exponent
  logic signed [31:0] p_q [1:5];   // Horner partial result, Q16

  // Stage 0: range reduction.
  logic signed [63:0] t;
  logic signed [31:0] k_full;
  logic signed [7:0]  k0;
  logic signed [63:0] r0;
  always_comb begin
    t = 64'(x) * 64'(LOG2E_Q16);
    k_full = 32'(t >>> (FW + 16));
    if (k_full > 32'sd40)       k0 = 8'sd40;
    else if (k_full < -32'sd40) k0 = -8'sd40;
    else                        k0 = k_full[7:0];
    r0 = (64'(x) <<< (16 - FW)) - 64'(k0) * 64'(LN2_Q16);
    if (r0 < 0)          r0 = '0;
    if (r0 > 64'sd65535) r0 = 64'sd65535;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < LAT; s++) v_q[s] <= 1'b0;
      for (int s = 0; s < 6; s++) begin r_q[s] <= '0; k_q[s] <= '0; end
      for (int s = 1; s <= 5; s++) p_q[s] <= '0;
      y <= '0;
    end else begin
      v_q[0] <= in_valid;
      for (int s = 1; s < LAT; s++) v_q[s] <= v_q[s-1];
      r_q[0] <= r0[31:0];
      k_q[0] <= k0;
      for (int s = 1; s < 6; s++) begin r_q[s] <= r_q[s-1]; k_q[s] <= k_q[s-1]; end
      // Stages 1..5: Horner steps p = C[s] + p*r.
      p_q[1] <= C[1] + 32'((64'(C[0]) * 64'(r_q[0])) >>> 16);
      for (int s = 2; s <= 5; s++)
        p_q[s] <= C[s] + 32'((64'(p_q[s-1]) * 64'(r_q[s-1])) >>> 16);
      // Stage 6: scale by 2^k and convert Q16 -> FW.
      y <= scale(p_q[5], k_q[5]);
    end
  end

  function automatic acc_t scale(input logic signed [31:0] p, input logic signed [7:0] k);
    int sh;
    sh = int'(k) - (16 - FW);
    if (sh >= 14)       return ACC_MAX;
    else if (sh >= 0)   return acc_t'(p <<< sh);
    else if (-sh > 20)  return '0;
    else                return acc_t'((p + (32'sd1 <<< (-sh - 1))) >>> (-sh));
  endfunction

  assign out_valid = v_q[LAT-1];
endmodule
