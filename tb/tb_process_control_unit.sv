// tb_process_control_unit: self-checking test of the layer sequencer.
// Behavioural stand-ins answer conv_start with conv_done and route_start with
// route_done after random delays. The test runs three images and checks the
// order of the phases (conv1, conv2, routing), that each start is a single
// pulse, that the convolution module sees cfg1 then cfg2, who owns the PE
// array in each phase, the done pulse, and the PE-array hand-over count.
module tb_process_control_unit;
  import caps_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, conv_start, conv_done = 0, route_start, route_done = 0;
  conv_cfg_t cfg1, cfg2, conv_cfg;
  pe_owner_e pe_owner;
  logic [31:0] owner_switches;
  int checks = 0, failures = 0;

  process_control_unit dut (.clk, .rst_n, .start, .cfg1, .cfg2, .busy, .done, .pe_owner,
    .conv_start, .conv_cfg, .conv_done, .route_start, .route_done, .owner_switches);

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wait_pulse(ref logic sig, input string what);
    int n = 0;
    while (!sig && n < 100) begin @(negedge clk); n++; end
    chk({what, " seen"}, sig);
    @(negedge clk);
    chk({what, " is one cycle"}, !sig);
  endtask

  initial begin
    cfg1 = '0; cfg1.out_ch = 16'd11; cfg1.relu = 1'b1;
    cfg2 = '0; cfg2.out_ch = 16'd22;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int img = 0; img < 3; img++) begin
      @(negedge clk);
      chk("idle before start", !busy && pe_owner == PE_OWNER_NONE);
      start = 1;
      @(negedge clk) start = 0;
      chk("conv1 config", conv_cfg.out_ch == 16'd11 && conv_cfg.relu);
      wait_pulse(conv_start, "conv1 start");
      chk("conv owns PE array in conv1", pe_owner == PE_OWNER_CONV);
      repeat ($urandom_range(1, 20)) @(negedge clk);
      conv_done = 1; @(negedge clk) conv_done = 0;
      chk("conv2 config", conv_cfg.out_ch == 16'd22 && !conv_cfg.relu);
      chk("conv2 start", conv_start);
      @(negedge clk);
      chk("conv owns PE array in conv2", pe_owner == PE_OWNER_CONV);
      repeat ($urandom_range(1, 20)) @(negedge clk);
      conv_done = 1; @(negedge clk) conv_done = 0;
      chk("routing start", route_start);
      chk("routing owns PE array", pe_owner == PE_OWNER_ROUTING);
      repeat ($urandom_range(1, 20)) @(negedge clk);
      chk("busy while routing", busy);
      route_done = 1; @(negedge clk) route_done = 0;
      wait_pulse(done, "done");
      chk("hand-over count", owner_switches == 32'(2 * img + 1));
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
