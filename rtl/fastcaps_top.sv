// fastcaps_top: the kernel-pruned CapsNet inference accelerator.
//
// One image goes through the three CapsNet layers: a KxK convolution with
// ReLU (C1 channels), the PrimaryCaps KxK convolution (N_PTYPE capsule types of
// IN_DIM channels each, stride S2) and the DigitCaps layer with dynamic
// routing (N_CLASS capsules of OUT_DIM dimensions, N_ITER iterations). Only the
// kernels that survived pruning are stored and computed.
//
// Blocks (after the paper's accelerator figure):
//   on-chip memory    weights, index, activations (16-bit words) and the
//                     dynamic routing parameters W (one N_CLASS x IN_DIM word
//                     per capsule and output dimension)
//   process control   sequences conv1, PrimaryCaps and routing; owns the PE
//                     array and memory port multiplexers
//   convolution       with the index control & activation module inside
//   dynamic routing   Matmul, Softmax, Fully connected, Agreement
//   squash module     shared by primary and digit capsules
//   PE array          N_PE PEs of nine multipliers and an adder tree
//
// Default sizes: the paper's MNIST network (28x28 input, 9x9 kernels, 256
// conv1 channels, 252 surviving primary capsules = 7 types x 6x6, 10 x 16
// digit capsules, 10 PEs). Stride 1 then 2, N_ITER = 3, the weight memory
// depth (MAX_KERNELS surviving kernels) and the index memory depth are this
// design's choices.
//
// Activation memory map: image at 0, conv1 output at A1, PrimaryCaps output
// at A2 (channel-major, row-major). Layer-1 kernels start at weight address 0
// and layer-1 index entries at index address 0; where layer 2 starts depends
// on how many kernels survived and is given by l2_w_base / l2_idx_base.
//
// Host side: while idle, host_we writes one 16-bit word into the memory
// chosen by host_mem (0 weights, 1 index, 2 activations), host_r_we writes
// one routing-parameter word, and host_raddr reads the activation memory
// (host_rdata one cycle later). start runs one image; done pulses when
// v_out / class_out are valid.
//
// Lint note: verilator reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the 'disable iff' of the
// single-owner assertion on the PE array, which is not logic.
module fastcaps_top
  import caps_pkg::*;
#(
  parameter int IMG_H       = 28,
  parameter int IMG_W       = 28,
  parameter int K           = 9,
  parameter int C1          = 256,
  parameter int S1          = 1,
  parameter int N_PTYPE     = 7,
  parameter int IN_DIM      = 8,
  parameter int S2          = 2,
  parameter int N_CLASS     = 10,
  parameter int OUT_DIM     = 16,
  parameter int N_ITER      = 3,
  parameter int N_PE        = 10,
  parameter int MAX_KERNELS = 1024,
  parameter int IDX_DEPTH   = 16384,
  // derived sizes
  localparam int H1     = (IMG_H - K) / S1 + 1,
  localparam int W1     = (IMG_W - K) / S1 + 1,
  localparam int H2     = (H1 - K) / S2 + 1,
  localparam int W2     = (W1 - K) / S2 + 1,
  localparam int C2     = N_PTYPE * IN_DIM,
  localparam int GRID   = H2 * W2,
  localparam int N_IN   = N_PTYPE * GRID,
  localparam int A1     = IMG_H * IMG_W,
  localparam int A2     = A1 + C1 * H1 * W1,
  localparam int ACT_DEPTH = A2 + C2 * H2 * W2,
  localparam int W_DEPTH = MAX_KERNELS * K * K,
  localparam int R_DEPTH = N_IN * OUT_DIM,
  localparam int AA     = $clog2(ACT_DEPTH),
  localparam int WA     = $clog2(W_DEPTH),
  localparam int IA     = $clog2(IDX_DEPTH),
  localparam int RA     = $clog2(R_DEPTH),
  localparam int RW     = N_CLASS * IN_DIM * DW
) (
  input  logic          clk,
  input  logic          rst_n,
  // host loading
  input  logic          host_we,
  input  logic [1:0]    host_mem,
  input  logic [23:0]   host_addr,
  input  fx_t           host_wdata,
  input  logic          host_r_we,
  input  logic [RA-1:0] host_r_addr,
  input  logic [RW-1:0] host_r_wdata,
  input  logic [AA-1:0] host_raddr,
  output fx_t           host_rdata,
  // layer-2 placement in the weight and index memories
  input  logic [23:0]   l2_w_base,
  input  logic [23:0]   l2_idx_base,
  // run
  input  logic          start,
  output logic          busy,
  output logic          done,
  output acc_t          v_out [N_CLASS][OUT_DIM],
  output logic [$clog2(N_CLASS)-1:0] class_out,
  // event counters
  output logic [31:0]   kernel_rows_done,
  output logic [31:0]   partial_groups,
  output logic [7:0]    routing_iters,
  output logic [31:0]   agreement_count,
  output logic [31:0]   squash_count,
  output logic [31:0]   owner_switches
);
  // ---------------- layer descriptors ----------------
  conv_cfg_t cfg1, cfg2;
  always_comb begin
    cfg1 = '{in_ch: 16'd1, in_h: 8'(IMG_H), in_w: 8'(IMG_W),
             out_ch: 16'(C1), out_h: 8'(H1), out_w: 8'(W1), stride: 4'(S1), relu: 1'b1,
             in_base: 24'd0, out_base: 24'(A1), w_base: 24'd0, idx_base: 24'd0};
    cfg2 = '{in_ch: 16'(C1), in_h: 8'(H1), in_w: 8'(W1),
             out_ch: 16'(C2), out_h: 8'(H2), out_w: 8'(W2), stride: 4'(S2), relu: 1'b0,
             in_base: 24'(A1), out_base: 24'(A2), w_base: l2_w_base, idx_base: l2_idx_base};
  end

  // ---------------- process control ----------------
  pe_owner_e owner;
  logic      conv_start, conv_done, conv_busy, route_start, route_done, route_busy;
  conv_cfg_t conv_cfg;

  process_control_unit u_pcu (
    .clk, .rst_n, .start, .cfg1, .cfg2, .busy, .done, .pe_owner(owner),
    .conv_start, .conv_cfg, .conv_done, .route_start, .route_done, .owner_switches);

  // ---------------- memories ----------------
  logic          w_we, i_we, a_we;
  logic [WA-1:0] w_waddr, w_raddr;
  logic [IA-1:0] i_waddr, i_raddr;
  logic [AA-1:0] a_waddr, a_raddr;
  logic [DW-1:0] w_wdata, i_wdata, a_wdata, w_rdata, i_rdata, a_rdata;
  logic [RA-1:0] r_raddr;
  logic [RW-1:0] r_rdata;

  onchip_ram #(.WIDTH(DW), .DEPTH(W_DEPTH))   u_weight_mem (.clk, .we(w_we), .waddr(w_waddr),
    .wdata(w_wdata), .raddr(w_raddr), .rdata(w_rdata));
  onchip_ram #(.WIDTH(DW), .DEPTH(IDX_DEPTH)) u_index_mem  (.clk, .we(i_we), .waddr(i_waddr),
    .wdata(i_wdata), .raddr(i_raddr), .rdata(i_rdata));
  onchip_ram #(.WIDTH(DW), .DEPTH(ACT_DEPTH)) u_act_mem    (.clk, .we(a_we), .waddr(a_waddr),
    .wdata(a_wdata), .raddr(a_raddr), .rdata(a_rdata));
  onchip_ram #(.WIDTH(RW), .DEPTH(R_DEPTH))   u_route_mem  (.clk, .we(host_r_we && !busy),
    .waddr(host_r_addr), .wdata(host_r_wdata), .raddr(r_raddr), .rdata(r_rdata));

  // ---------------- convolution ----------------
  logic [WA-1:0] cv_w_raddr;
  logic [IA-1:0] cv_i_raddr;
  logic [AA-1:0] cv_a_raddr, cv_a_waddr, rt_a_raddr;
  logic          cv_a_we;
  fx_t           cv_a_wdata;
  logic          cv_pe_v, rt_pe_v, pe_v, pe_ov;
  fx_t           cv_pe_a [N_PE][PE_LANES], cv_pe_b [N_PE][PE_LANES];
  fx_t           rt_pe_a [N_PE][PE_LANES], rt_pe_b [N_PE][PE_LANES];
  fx_t           pe_a [N_PE][PE_LANES], pe_b [N_PE][PE_LANES];
  acc_t          pe_sum [N_PE];

  conv_module #(.N_PE(N_PE), .K(K), .SMAX((S1 > S2) ? S1 : S2), .MAX_IC(C1),
                .IA(IA), .WA(WA), .AA(AA)) u_conv (
    .clk, .rst_n, .start(conv_start), .cfg(conv_cfg), .busy(conv_busy), .done(conv_done),
    .w_raddr(cv_w_raddr), .w_rdata(fx_t'(w_rdata)),
    .idx_raddr(cv_i_raddr), .idx_rdata(fx_t'(i_rdata)),
    .a_raddr(cv_a_raddr), .a_rdata(fx_t'(a_rdata)),
    .a_we(cv_a_we), .a_waddr(cv_a_waddr), .a_wdata(cv_a_wdata),
    .pe_valid(cv_pe_v), .pe_a(cv_pe_a), .pe_b(cv_pe_b), .pe_ovalid(pe_ov), .pe_sum,
    .kernel_rows_done, .partial_groups);

  // ---------------- dynamic routing and squash ----------------
  logic  sq_start, sq_done, sq_busy;
  logic [$clog2(OUT_DIM+1)-1:0] sq_n_dim;
  acc_t  sq_s [OUT_DIM], sq_v [OUT_DIM];
  logic [31:0] fc_partial_chunks;

  routing_module #(.N_IN(N_IN), .N_CLASS(N_CLASS), .IN_DIM(IN_DIM), .OUT_DIM(OUT_DIM),
                   .N_ITER(N_ITER), .N_PE(N_PE), .GRID(GRID), .AA(AA)) u_routing (
    .clk, .rst_n, .start(route_start), .u_base(AA'(A2)), .busy(route_busy), .done(route_done),
    .a_raddr(rt_a_raddr), .a_rdata(fx_t'(a_rdata)), .r_raddr, .r_rdata,
    .pe_valid(rt_pe_v), .pe_a(rt_pe_a), .pe_b(rt_pe_b), .pe_ovalid(pe_ov), .pe_sum,
    .sq_start, .sq_n_dim, .sq_s, .sq_done, .sq_v,
    .v_out, .class_out, .iter_count(routing_iters), .agreement_count, .squash_count,
    .fc_partial_chunks);

  squash_unit #(.N_DIM(OUT_DIM)) u_squash (
    .clk, .rst_n, .start(sq_start), .n_dim(sq_n_dim), .s(sq_s),
    .busy(sq_busy), .done(sq_done), .v(sq_v));

  // ---------------- shared PE array ----------------
  always_comb begin
    pe_v = 1'b0;
    pe_a = cv_pe_a;
    pe_b = cv_pe_b;
    if (owner == PE_OWNER_CONV) begin
      pe_v = cv_pe_v;
    end else if (owner == PE_OWNER_ROUTING) begin
      pe_v = rt_pe_v; pe_a = rt_pe_a; pe_b = rt_pe_b;
    end
  end

  pe_array #(.N_PE(N_PE)) u_pe_array (
    .clk, .rst_n, .in_valid(pe_v), .a(pe_a), .b(pe_b), .out_valid(pe_ov), .sum(pe_sum));

  // ---------------- memory port multiplexers ----------------
  always_comb begin
    w_we = host_we && !busy && host_mem == 2'd0;
    i_we = host_we && !busy && host_mem == 2'd1;
    w_waddr = WA'(host_addr); w_wdata = host_wdata;
    i_waddr = IA'(host_addr); i_wdata = host_wdata;
    w_raddr = cv_w_raddr;
    i_raddr = cv_i_raddr;
    if (owner == PE_OWNER_CONV) begin
      a_we = cv_a_we; a_waddr = cv_a_waddr; a_wdata = cv_a_wdata; a_raddr = cv_a_raddr;
    end else begin
      a_we = host_we && !busy && host_mem == 2'd2;
      a_waddr = AA'(host_addr); a_wdata = host_wdata;
      a_raddr = (owner == PE_OWNER_ROUTING) ? rt_a_raddr : host_raddr;
    end
  end
  assign host_rdata = fx_t'(a_rdata);

  // The PE array has one owner at a time.
  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n) !(cv_pe_v && rt_pe_v));
endmodule
