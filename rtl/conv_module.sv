// conv_module: the Convolution Module. Computes one kernel-pruned convolution
// layer described by cfg (conv_cfg_t), reading the input feature map and the
// surviving kernels from on-chip memory and writing the output feature map
// back.
//
// Data flow (after the paper's convolution figure): the index control module
// supplies the surviving input channels of each output channel and the memory
// addresses; a Kernel Buffer holds one KxK kernel row, a Data Buffer holds the
// input row segment that N_PE neighbouring output pixels need, and the PE
// array computes N_PE dot products of length K per step (PE p gets the kernel
// row and the K inputs of output pixel ox0+p). The Output Buffer accumulates
// the PE sums; after all surviving kernels and all K rows it goes through the
// activation to the output memory. Pruned kernels are never read or
// computed: the loop runs only over the surviving ones.
//
// The mapping of the ten PEs to ten neighbouring output pixels, the loop
// order (output channel, output row, group of N_PE pixels, surviving kernel,
// kernel row) and the absence of a bias are this design's choices; the paper
// gives the blocks but not the schedule.
//
// Timing: one layer takes
//   1 + sum over output channels of (cnt + 3)                 (index fetch)
//     + sum over pixel groups of (1 + cnt*K*(Ls + 4) + n_valid)
// cycles, where cnt is the number of surviving kernels of the group's output
// channel, Ls = (N_PE-1)*stride + K is the number of input words one kernel
// row needs (18 for stride 1, 27 for stride 2; the data buffer holds
// L = (N_PE-1)*SMAX + K; the kernel buffer loads in parallel), the 4 extra
// cycles per kernel row are drain,
// issue and the 2-cycle PE latency, and n_valid is the number of output
// pixels of the group (N_PE, fewer in the last group of a row).
//
// Interface: start pulses with cfg stable until done. Memory read ports have
// a 1-cycle latency. The PE array port is a request (pe_valid, pe_a, pe_b) and
// a response (pe_ovalid, pe_sum) 2 cycles later.
module conv_module
  import caps_pkg::*;
#(
  parameter int N_PE   = 10,
  parameter int K      = 9,
  parameter int SMAX   = 2,      // largest supported stride
  parameter int MAX_IC = 256,
  parameter int IA     = 16,
  parameter int WA     = 17,
  parameter int AA     = 17
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  conv_cfg_t     cfg,
  output logic          busy,
  output logic          done,
  // weight memory
  output logic [WA-1:0] w_raddr,
  input  fx_t           w_rdata,
  // index memory
  output logic [IA-1:0] idx_raddr,
  input  fx_t           idx_rdata,
  // activation memory
  output logic [AA-1:0] a_raddr,
  input  fx_t           a_rdata,
  output logic          a_we,
  output logic [AA-1:0] a_waddr,
  output fx_t           a_wdata,
  // shared PE array
  output logic          pe_valid,
  output fx_t           pe_a [N_PE][PE_LANES],
  output fx_t           pe_b [N_PE][PE_LANES],
  input  logic          pe_ovalid,
  input  acc_t          pe_sum [N_PE],
  // event counters
  output logic [31:0]   kernel_rows_done,
  output logic [31:0]   partial_groups
);
  localparam int L    = (N_PE - 1) * SMAX + K;  // data buffer length
  localparam int LMAX = (L > K) ? L : K;

  typedef enum logic [3:0] {C_IDLE, C_FETCH, C_GROUP, C_LOAD, C_DRAIN, C_ISSUE, C_WAIT, C_WRITE} state_e;
  state_e st;

  logic [15:0]   oc_q, n_q, cnt_q;
  logic [7:0]    oy_q, ox0_q, ky_q, c_q, wp_q;
  logic [IA-1:0] iptr_q;
  logic [WA-1:0] kbase_q;
  logic          cap_v, fetch_q;
  logic [7:0]    cap_c;
  fx_t           kbuf [K];       // Kernel Buffer
  fx_t           dbuf [L];       // Data Buffer
  acc_t          obuf [N_PE];    // Output Buffer

  // index control and activation
  logic          fetch, fetch_done;
  logic [15:0]   ic_cnt;
  logic [IA-1:0] next_ptr;
  logic [WA-1:0] k_addr;
  logic [AA-1:0] d_addr, o_addr;
  logic [7:0]    ix, iy, ox;
  logic [7:0]    n_valid;
  logic [7:0]    n_load;         // words loaded per kernel row for this stride
  acc_t          act_in;
  fx_t           act_out;

  index_control #(.K(K), .MAX_IC(MAX_IC), .IA(IA), .WA(WA), .AA(AA)) u_idx (
    .clk, .rst_n, .cfg,
    .fetch, .fetch_ptr(iptr_q), .fetch_done, .cnt(ic_cnt), .next_ptr,
    .idx_raddr, .idx_rdata,
    .kbase(kbase_q), .n(n_q), .ky(ky_q), .kx(c_q), .iy, .ix,
    .oc(oc_q), .oy(oy_q), .ox, .k_addr, .d_addr, .o_addr,
    .act_in, .act_out
  );

  always_comb begin
    logic [15:0] ixw;
    iy  = 8'(oy_q * cfg.stride + ky_q);
    ixw = 16'(ox0_q) * 16'(cfg.stride) + 16'(c_q);
    ix  = (ixw >= 16'(cfg.in_w)) ? cfg.in_w - 8'd1 : ixw[7:0];
    ox  = ox0_q + wp_q;
    n_valid = (cfg.out_w - ox0_q > 8'(N_PE)) ? 8'(N_PE) : cfg.out_w - ox0_q;
    n_load  = 8'((N_PE - 1) * int'(cfg.stride) + K);
    if (n_load > 8'(LMAX) || cfg.stride > 4'(SMAX)) n_load = 8'(LMAX);
    act_in = obuf[wp_q[$clog2(N_PE)-1:0]];
  end

  assign fetch    = fetch_q;
  assign w_raddr  = k_addr;
  assign a_raddr  = d_addr;
  assign a_we     = (st == C_WRITE);
  assign a_waddr  = o_addr;
  assign a_wdata  = act_out;
  assign pe_valid = (st == C_ISSUE);
  always_comb
    for (int p = 0; p < N_PE; p++)
      for (int l = 0; l < PE_LANES; l++) begin
        pe_a[p][l] = (l < K) ? kbuf[l] : '0;
        pe_b[p][l] = (l < K) ? dbuf[p * int'(cfg.stride) + l] : '0;
      end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; done <= 1'b0;
      oc_q <= '0; n_q <= '0; cnt_q <= '0; oy_q <= '0; ox0_q <= '0; ky_q <= '0;
      c_q <= '0; wp_q <= '0; iptr_q <= '0; kbase_q <= '0; cap_v <= 1'b0; cap_c <= '0; fetch_q <= 1'b0;
      kernel_rows_done <= '0; partial_groups <= '0;
      for (int i = 0; i < K; i++) kbuf[i] <= '0;
      for (int i = 0; i < L; i++) dbuf[i] <= '0;
      for (int p = 0; p < N_PE; p++) obuf[p] <= '0;
    end else begin
      done  <= 1'b0;
      cap_v <= 1'b0;
      fetch_q <= 1'b0;
      // capture memory data one cycle after the address
      if (cap_v) begin
        if (cap_c < 8'(K)) kbuf[cap_c[$clog2(K)-1:0]] <= w_rdata;
        if (cap_c < 8'(L)) dbuf[cap_c[$clog2(L)-1:0]] <= a_rdata;
      end
      case (st)
        C_IDLE: if (start) begin
          oc_q <= '0; iptr_q <= IA'(cfg.idx_base); kbase_q <= WA'(cfg.w_base);
          fetch_q <= 1'b1;
          st <= C_FETCH;
        end
        C_FETCH: if (fetch_done) begin
          cnt_q <= ic_cnt; oy_q <= '0; ox0_q <= '0;
          st <= C_GROUP;
        end
        C_GROUP: begin
          for (int p = 0; p < N_PE; p++) obuf[p] <= '0;
          n_q <= '0; ky_q <= '0; c_q <= '0; wp_q <= '0;
          if (n_valid < 8'(N_PE)) partial_groups <= partial_groups + 1'b1;
          st <= (cnt_q == '0) ? C_WRITE : C_LOAD;
        end
        C_LOAD: begin
          cap_v <= 1'b1; cap_c <= c_q;
          if (c_q == n_load - 1'b1) st <= C_DRAIN;
          else c_q <= c_q + 1'b1;
        end
        C_DRAIN: st <= C_ISSUE;  // last buffer word lands at the end of this cycle
        C_ISSUE: st <= C_WAIT;
        C_WAIT: if (pe_ovalid) begin
          for (int p = 0; p < N_PE; p++) obuf[p] <= sat_acc(64'(obuf[p]) + 64'(pe_sum[p]));
          kernel_rows_done <= kernel_rows_done + 1'b1;
          c_q <= '0;
          if (ky_q == 8'(K - 1)) begin
            ky_q <= '0;
            if (n_q == cnt_q - 1'b1) st <= C_WRITE;
            else begin n_q <= n_q + 1'b1; st <= C_LOAD; end
          end else begin
            ky_q <= ky_q + 1'b1; st <= C_LOAD;
          end
        end
        C_WRITE: begin
          if (wp_q == n_valid - 1'b1) begin
            wp_q <= '0;
            if (ox0_q + 8'(N_PE) < cfg.out_w) begin
              ox0_q <= ox0_q + 8'(N_PE); st <= C_GROUP;
            end else if (oy_q + 1'b1 < cfg.out_h) begin
              ox0_q <= '0; oy_q <= oy_q + 1'b1; st <= C_GROUP;
            end else if (oc_q + 1'b1 < cfg.out_ch) begin
              oc_q <= oc_q + 1'b1;
              iptr_q <= next_ptr;
              kbase_q <= kbase_q + WA'(cnt_q) * WA'(K * K);
              fetch_q <= 1'b1;
              st <= C_FETCH;
            end else begin
              done <= 1'b1; st <= C_IDLE;
            end
          end else wp_q <= wp_q + 1'b1;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  assign busy = (st != C_IDLE);
endmodule
