// fx_log: pipelined natural logarithm ln(x) for fixed-point x (FW fractional
// bits), as used by the log-domain division and the Squash and Softmax units.
//
// The paper uses log() but does not say how it is built; this is the
// simplest scheme that works. A leading-one detector writes x = 2^e * (1+f)
// with f in [0,1). ln(1+f) comes from a fifth-order least-squares polynomial in
// Horner form (5 multiplications, the same cost as the exp polynomial), and
// ln(x) = e*ln2 + ln(1+f). Maximum polynomial error is about 2e-5.
//
// Interface: in_valid/x in, out_valid/y out, y with FW fractional bits. For
// x <= 0 the result is LOG_NEG_INF.
// Timing: fully pipelined, latency 7 cycles, one result per cycle.
module fx_log
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
  localparam logic signed [31:0] LN2_Q16 = 32'sd45426;
  // ln(1+f) ~ sum c_i f^i, Q16, highest order first.
  localparam logic signed [31:0] C [6] = '{32'sd1973, -32'sd8528, 32'sd18568,
                                           -32'sd32058, 32'sd65471, 32'sd1};

  logic               v_q [LAT];
  logic signed [31:0] f_q [6];     // mantissa fraction, Q16
  logic signed [7:0]  e_q [6];     // exponent relative to FW
  logic               z_q [6];     // input was <= 0
  logic signed [31:0] p_q [1:5];

  // Stage 0: normalisation.
  logic [4:0]  msb;
  logic [31:0] norm;
  always_comb begin
    msb = '0;
    for (int i = 0; i < 31; i++) if (x[i]) msb = 5'(i);
    norm = 32'(x) << (5'd30 - msb);   // leading one at bit 30
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < LAT; s++) v_q[s] <= 1'b0;
      for (int s = 0; s < 6; s++) begin f_q[s] <= '0; e_q[s] <= '0; z_q[s] <= 1'b0; end
      for (int s = 1; s <= 5; s++) p_q[s] <= '0;
      y <= '0;
    end else begin
      v_q[0] <= in_valid;
      for (int s = 1; s < LAT; s++) v_q[s] <= v_q[s-1];
      f_q[0] <= 32'({16'd0, norm[29:14]});
      e_q[0] <= 8'(int'(msb) - FW);
      z_q[0] <= (x <= 0);
      for (int s = 1; s < 6; s++) begin
        f_q[s] <= f_q[s-1]; e_q[s] <= e_q[s-1]; z_q[s] <= z_q[s-1];
      end
      p_q[1] <= C[1] + 32'((64'(C[0]) * 64'(f_q[0])) >>> 16);
      for (int s = 2; s <= 5; s++)
        p_q[s] <= C[s] + 32'((64'(p_q[s-1]) * 64'(f_q[s-1])) >>> 16);
      if (z_q[5]) y <= LOG_NEG_INF;
      else        y <= acc_t'((32'(e_q[5]) * LN2_Q16 + p_q[5] + (32'sd1 <<< (15 - FW))) >>> (16 - FW));
    end
  end

  assign out_valid = v_q[LAT-1];
endmodule
