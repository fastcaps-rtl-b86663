// index_control: the Index Control Module & Activation Module of the
// convolution datapath.
//
// Kernel pruning (LAKP) keeps whole KxK kernels, so only one index per
// surviving kernel is stored: for every output channel, the index memory holds
// a count followed by the input-channel numbers of its surviving kernels:
//     idx[p] = cnt, idx[p+1..p+cnt] = input channels, next channel at p+cnt+1.
// The surviving kernels themselves sit back to back in the weight memory, in
// the same order, KxK words each (row-major). The paper states that only the
// indices of surviving kernels are kept; this exact layout is this design's
// own.
//
// The module
//   - fetches the index list of one output channel into a local list buffer
//     (fetch/fetch_done, one index word per cycle through the index memory
//     read port, 1-cycle read latency; the read address is combinational);
//   - maps (surviving kernel n, kernel row/column, input row/column, output
//     position) to the kernel-buffer, data-buffer and output-buffer memory
//     addresses, combinationally (the dashed lines of the paper's figure);
//   - applies the activation (ReLU when cfg.relu is set) and saturates the
//     result to a 16-bit word on its way to the output memory.
// Timing: fetch_done comes cnt + 2 cycles after fetch.
module index_control
  import caps_pkg::*;
#(
  parameter int K      = 9,
  parameter int MAX_IC = 256,
  parameter int IA     = 16,   // index memory address bits
  parameter int WA     = 17,   // weight memory address bits
  parameter int AA     = 17    // activation memory address bits
) (
  input  logic          clk,
  input  logic          rst_n,
  input  conv_cfg_t     cfg,
  // list fetch
  input  logic          fetch,
  input  logic [IA-1:0] fetch_ptr,
  output logic          fetch_done,
  output logic [15:0]   cnt,
  output logic [IA-1:0] next_ptr,
  output logic [IA-1:0] idx_raddr,
  input  fx_t           idx_rdata,
  // address mapping
  input  logic [WA-1:0] kbase,       // first weight of the channel's kernels
  input  logic [15:0]   n,           // surviving kernel number
  input  logic [7:0]    ky,
  input  logic [7:0]    kx,
  input  logic [7:0]    iy,
  input  logic [7:0]    ix,
  input  logic [15:0]   oc,
  input  logic [7:0]    oy,
  input  logic [7:0]    ox,
  output logic [WA-1:0] k_addr,
  output logic [AA-1:0] d_addr,
  output logic [AA-1:0] o_addr,
  // activation
  input  acc_t          act_in,
  output fx_t           act_out
);
  typedef enum logic [1:0] {F_IDLE, F_CNT, F_LIST} fstate_e;
  fstate_e st;
  logic [15:0]   list_q [MAX_IC];
  logic [15:0]   rd_q;          // words requested so far
  logic [15:0]   wr_q;          // list entries stored so far
  logic          rv_q;          // read data valid next cycle
  logic [IA-1:0] ptr_q;

  // Index memory address: the count word when a fetch is accepted, then the
  // list words one after the other.
  always_comb begin
    if (st == F_IDLE) idx_raddr = fetch_ptr;
    else              idx_raddr = ptr_q + IA'(rd_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= F_IDLE; rd_q <= '0; wr_q <= '0; rv_q <= 1'b0; ptr_q <= '0;
      cnt <= '0; fetch_done <= 1'b0;
    end else begin
      fetch_done <= 1'b0;
      rv_q <= 1'b0;
      case (st)
        F_IDLE: if (fetch) begin
          ptr_q <= fetch_ptr;
          rd_q  <= 16'd1;
          rv_q  <= 1'b1;
          st    <= F_CNT;
        end
        F_CNT: if (rv_q) begin
          cnt  <= 16'(idx_rdata);
          wr_q <= '0;
          if (idx_rdata == '0) begin
            fetch_done <= 1'b1; st <= F_IDLE;
          end else begin
            rv_q <= 1'b1;            // first list word is being read
            rd_q <= 16'd2;
            st   <= F_LIST;
          end
        end
        F_LIST: begin
          if (rd_q <= cnt) begin
            rv_q <= 1'b1;
            rd_q <= rd_q + 1'b1;
          end
          if (rv_q) begin
            list_q[wr_q[$clog2(MAX_IC)-1:0]] <= 16'(idx_rdata);
            wr_q <= wr_q + 1'b1;
            if (wr_q + 1'b1 == cnt) begin fetch_done <= 1'b1; st <= F_IDLE; end
          end
        end
        default: st <= F_IDLE;
      endcase
    end
  end

  assign next_ptr = ptr_q + IA'(cnt) + 1'b1;

  // Address mapping.
  logic [15:0] ic;
  assign ic = list_q[n[$clog2(MAX_IC)-1:0]];
  always_comb begin
    k_addr = kbase + WA'(n) * WA'(K * K) + WA'(ky) * WA'(K) + WA'(kx);
    d_addr = AA'(cfg.in_base) + AA'(ic) * AA'(cfg.in_h) * AA'(cfg.in_w)
           + AA'(iy) * AA'(cfg.in_w) + AA'(ix);
    o_addr = AA'(cfg.out_base) + AA'(oc) * AA'(cfg.out_h) * AA'(cfg.out_w)
           + AA'(oy) * AA'(cfg.out_w) + AA'(ox);
  end

  // Activation module.
  assign act_out = sat_fx((cfg.relu && act_in < 0) ? '0 : act_in);
endmodule
