// fx_sqrt: square root of a non-negative fixed-point number (FW fractional
// bits), the sqrt() / ^0.5 node of the Squash module.
//
// The paper names the operation but not its circuit. This is a plain
// restoring digit-by-digit integer square root of x * 2^FW, one result bit
// per cycle, so the result again has FW fractional bits (truncated).
//
// Interface: pulse start with x; busy stays high until done pulses with y.
// Negative inputs give 0.
// Timing: done comes RBITS+1 = 22 cycles after start.
//
// The result has 21 significant bits (the square root of a 32-bit value
// scaled by 2^FW), so the upper 11 bits of y are always zero.
module fx_sqrt
  import caps_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  acc_t x,
  output logic busy,
  output logic done,
  output acc_t y
);
  localparam int OBITS = 2 * ((AW - 1 + FW + 1) / 2);  // operand bits (even)
  localparam int RBITS = OBITS / 2;                    // root bits

  logic [OBITS-1:0] op_q;     // remaining operand, shifted two bits per step
  logic [RBITS+2:0] rem_q;    // partial remainder
  logic [RBITS-1:0] root_q;
  logic [5:0]       cnt_q;

  logic [RBITS+2:0] trial, rem_next;
  always_comb begin
    rem_next = {rem_q[RBITS:0], op_q[OBITS-1 -: 2]};
    trial    = {1'b0, root_q, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_q <= '0; rem_q <= '0; root_q <= '0; cnt_q <= '0;
      busy <= 1'b0; done <= 1'b0; y <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        op_q   <= (x < 0) ? '0 : OBITS'(x) << FW;
        rem_q  <= '0;
        root_q <= '0;
        cnt_q  <= 6'(RBITS);
        busy   <= 1'b1;
      end else if (busy) begin
        op_q <= op_q << 2;
        if (rem_next >= trial) begin
          rem_q  <= rem_next - trial;
          root_q <= {root_q[RBITS-2:0], 1'b1};
        end else begin
          rem_q  <= rem_next;
          root_q <= {root_q[RBITS-2:0], 1'b0};
        end
        cnt_q <= cnt_q - 6'd1;
        if (cnt_q == 6'd1) begin
          busy <= 1'b0;
          done <= 1'b1;
          y    <= acc_t'(rem_next >= trial ? {root_q[RBITS-2:0], 1'b1} : {root_q[RBITS-2:0], 1'b0});
        end
      end
    end
  end
endmodule
