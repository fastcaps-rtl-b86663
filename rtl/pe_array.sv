// pe_array: the array of processing elements shared by the convolution and
// dynamic routing modules.
//
// N_PE independent PEs (the paper builds 10), each a 9-lane multiply and adder
// tree (see pe.sv). All PEs start together on in_valid; each gets its own nine
// operand pairs and returns its own sum 2 cycles later. The owner (convolution
// or routing) decides what the lanes mean: ten output pixels of one kernel row
// in a convolution, ten digit classes during routing.
module pe_array
  import caps_pkg::*;
#(
  parameter int N_PE  = 10,
  parameter int LANES = PE_LANES
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  a [N_PE][LANES],
  input  fx_t  b [N_PE][LANES],
  output logic out_valid,
  output acc_t sum [N_PE]
);
  logic v [N_PE];

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    pe #(.LANES(LANES)) u_pe (
      .clk, .rst_n, .in_valid,
      .a(a[p]), .b(b[p]),
      .out_valid(v[p]), .sum(sum[p])
    );
  end

  assign out_valid = v[0];
endmodule
