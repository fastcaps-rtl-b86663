// tb_onchip_ram: self-checking test of the on-chip RAM.
// Fills a 256-word memory with random data, reads every word back with the
// 1-cycle read latency, then writes and reads the same address in one cycle
// (the read must return the old word).
module tb_onchip_ram;
  localparam int D = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [7:0] waddr = 0, raddr = 0;
  logic [15:0] wdata = 0, rdata;
  logic [15:0] model [D];
  int checks = 0, failures = 0;

  onchip_ram #(.WIDTH(16), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1; waddr = 8'(i); wdata = 16'($urandom); model[i] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk) raddr = 8'(D - 1 - i);
      @(negedge clk);
      checks++;
      if (rdata !== model[D - 1 - i]) begin failures++; $display("addr %0d", D - 1 - i); end
    end
    for (int i = 0; i < 20; i++) begin
      @(negedge clk);
      we = 1; waddr = 8'($urandom); raddr = waddr; wdata = 16'($urandom);
      @(negedge clk);
      we = 0;
      checks++;
      if (rdata !== model[raddr]) begin failures++; $display("read-during-write at %0d", raddr); end
      model[waddr] = wdata;
      @(negedge clk);
      checks++;
      if (rdata !== model[raddr]) begin failures++; $display("after write at %0d", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
