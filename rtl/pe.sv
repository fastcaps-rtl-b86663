// pe: one processing element of the shared PE array.
//
// Nine element-wise 16-bit multiplications followed by an adder tree that sums
// the nine products, as the paper describes for each PE. The products (2*FW
// fractional bits) are summed at full precision and the sum is rounded back to
// FW fractional bits once, at the tree output.
//
// Timing: two register stages (products, then tree sum). A result appears
// exactly 2 cycles after in_valid and one operation can start every cycle.
// The pipeline depth is this design's choice; the paper gives none.
module pe
  import caps_pkg::*;
#(
  parameter int LANES = PE_LANES
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  a [LANES],
  input  fx_t  b [LANES],
  output logic out_valid,
  output acc_t sum
);
  localparam int NP = 1 << $clog2(LANES);  // tree width, padded to a power of two
  localparam int LV = $clog2(LANES);

  logic signed [39:0] prod_q [NP];
  logic               v_q;
  logic signed [39:0] tree [LV+1][NP];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0;
      for (int l = 0; l < NP; l++) prod_q[l] <= '0;
    end else begin
      v_q <= in_valid;
      for (int l = 0; l < NP; l++)
        prod_q[l] <= (l < LANES) ? 40'(a[l]) * 40'(b[l]) : '0;
    end
  end

  // Pairwise adder tree.
  always_comb begin
    for (int l = 0; l < NP; l++) tree[0][l] = prod_q[l];
    for (int s = 1; s <= LV; s++)
      for (int l = 0; l < NP; l++)
        tree[s][l] = (l < (NP >> s)) ? tree[s-1][2*l] + tree[s-1][2*l+1] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sum       <= '0;
    end else begin
      out_valid <= v_q;
      sum       <= sat_acc(64'((tree[LV][0] + (40'sd1 <<< (FW-1))) >>> FW));
    end
  end
endmodule
