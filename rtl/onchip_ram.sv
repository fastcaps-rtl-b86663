// onchip_ram: one on-chip memory of the accelerator (weights, index,
// activations or dynamic routing parameters).
//
// The paper keeps every parameter and activation on chip to avoid off-chip
// transfers; it does not describe the memories further. This is a plain
// simple-dual-port RAM written as an array so that synthesis maps it to block
// RAM: one write port and one read port, both synchronous.
//
// Interface: we/waddr/wdata write on the clock edge; raddr is sampled on the
// edge and rdata is valid the next cycle (1-cycle read latency). A read of the
// address being written returns the old data. The contents are not reset;
// they are loaded through the write port before use.
module onchip_ram #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 1024,
  localparam int ABITS = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [ABITS-1:0] waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [ABITS-1:0] raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
