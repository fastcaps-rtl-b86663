// routing_module: the Dynamic Routing Module. Turns the primary capsules u_i
// (IN_DIM-dimensional, read from the activation memory) into the N_CLASS
// digit capsules v_j (OUT_DIM-dimensional) with the routing-by-agreement
// loop of CapsNet:
//   Matmul       u_hat[i][j] = W[i][j] . squash(u_i)      (once per image)
//   b[i][j] = 0
//   repeat N_ITER times:
//     Softmax    c[i][:] = softmax(b[i][:])
//     Fully conn s[j]    = sum_i c[i][j] * u_hat[i][j]
//     Squash     v[j]    = squash(s[j])          (external squash_unit)
//     Agreement  b[i][j] += u_hat[i][j] . v[j]   (skipped after the last pass)
//
// Every step except Squash runs on the shared PE array, with PE j always
// working for digit class j (N_PE must equal N_CLASS):
//   Matmul:    per (i, k) PE j takes the IN_DIM weights W[i][j][k][:] and
//              u_i, one cycle per output dimension k, fully pipelined.
//   FC:        capsules are taken nine at a time into the data buffer (u_hat)
//              and the parameter buffer (c); then per output dimension k PE j
//              sums the nine products c[i][j] * u_hat[i][j][k].
//   Agreement: per capsule i, PE j forms the dot product u_hat[i][j] . v[j]
//              in ceil(OUT_DIM/9) passes.
// The paper reorders the Agreement loops so that PEs work on groups of
// capsules (its Code 2); here the PEs split the work by class instead, so no
// two PEs ever write the same b[i][j] either. The Softmax unit is internal
// (softmax_unit). Squashing the primary capsules before Matmul follows the
// original CapsNet; the paper does not mention it. N_ITER = 3 is likewise the
// original CapsNet's value.
//
// Buffers (the Dynamic Routing Buffers): u_hat memory (one word per capsule
// holding all N_CLASS x OUT_DIM predictions), b memory, c memory, all with a
// 1-cycle registered read.
//
// Interface: start pulses; the activation memory read port (a_raddr/a_rdata)
// and the routing parameter memory read port (r_raddr/r_rdata, one word =
// W[i][:][k][:]) have a 1-cycle latency. done pulses when v_out and class_out
// (index of the longest v_j) are valid; they hold until the next start.
module routing_module
  import caps_pkg::*;
#(
  parameter int N_IN    = 252,
  parameter int N_CLASS = 10,
  parameter int IN_DIM  = 8,
  parameter int OUT_DIM = 16,
  parameter int N_ITER  = 3,
  parameter int N_PE    = 10,
  parameter int GRID    = 36,    // primary capsule positions per capsule type
  parameter int AA      = 17,
  localparam int RA     = $clog2(N_IN * OUT_DIM),
  localparam int RW     = N_CLASS * IN_DIM * DW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AA-1:0] u_base,
  output logic          busy,
  output logic          done,
  // activation memory read port
  output logic [AA-1:0] a_raddr,
  input  fx_t           a_rdata,
  // dynamic routing parameter memory read port
  output logic [RA-1:0] r_raddr,
  input  logic [RW-1:0] r_rdata,
  // shared PE array
  output logic          pe_valid,
  output fx_t           pe_a [N_PE][PE_LANES],
  output fx_t           pe_b [N_PE][PE_LANES],
  input  logic          pe_ovalid,
  input  acc_t          pe_sum [N_PE],
  // squash module
  output logic          sq_start,
  output logic [$clog2(OUT_DIM+1)-1:0] sq_n_dim,
  output acc_t          sq_s [OUT_DIM],
  input  logic          sq_done,
  input  acc_t          sq_v [OUT_DIM],
  // results
  output acc_t          v_out [N_CLASS][OUT_DIM],
  output logic [$clog2(N_CLASS)-1:0] class_out,
  // event counters
  output logic [7:0]    iter_count,
  output logic [31:0]   agreement_count,
  output logic [31:0]   squash_count,
  output logic [31:0]   fc_partial_chunks
);
  localparam int IW    = $clog2(N_IN + 1);
  localparam int NPASS = (OUT_DIM + PE_LANES - 1) / PE_LANES;

  typedef logic [N_CLASS-1:0][OUT_DIM-1:0][DW-1:0] uhat_word_t;
  typedef logic [N_CLASS-1:0][AW-1:0]              b_word_t;
  typedef logic [N_CLASS-1:0][DW-1:0]              c_word_t;
  typedef logic [N_CLASS-1:0][IN_DIM-1:0][DW-1:0]  w_word_t;

  typedef enum logic [4:0] {
    R_IDLE, R_ULOAD, R_UDRAIN, R_USQ, R_USQW, R_MM, R_MMWR,
    R_SM, R_SMW, R_FCLOAD, R_FCDRAIN, R_FCMAC, R_FCW,
    R_SQ, R_SQW, R_AGRD, R_AGP, R_AGW, R_FINAL
  } state_e;
  state_e st;

  // ---------------- buffers ----------------
  uhat_word_t uh_mem [N_IN];
  b_word_t    b_mem  [N_IN];
  c_word_t    c_mem  [N_IN];
  uhat_word_t uh_rdata;
  b_word_t    b_rdata;
  c_word_t    c_rdata;
  logic [IW-1:0] uh_raddr, b_raddr, c_raddr, uh_waddr, b_waddr, c_waddr;
  logic          uh_we, b_we, c_we;
  uhat_word_t    uh_wdata;
  b_word_t       b_wdata;
  c_word_t       c_wdata;

  always_ff @(posedge clk) begin
    if (uh_we) uh_mem[uh_waddr] <= uh_wdata;
    if (b_we)  b_mem[b_waddr]   <= b_wdata;
    if (c_we)  c_mem[c_waddr]   <= c_wdata;
    uh_rdata <= uh_mem[uh_raddr];
    b_rdata  <= b_mem[b_raddr];
    c_rdata  <= c_mem[c_raddr];
  end

  // ---------------- softmax ----------------
  logic sm_iv, sm_ov;
  acc_t sm_b [N_CLASS], sm_c [N_CLASS];
  softmax_unit #(.N(N_CLASS)) u_softmax (
    .clk, .rst_n, .in_valid(sm_iv), .b(sm_b), .out_valid(sm_ov), .c(sm_c));

  // ---------------- state ----------------
  logic [IW-1:0] i_q, o_q;          // capsule being issued / collected
  logic [7:0]    t_q, pos_q;        // primary capsule type and position
  logic [7:0]    c_q, r_q;          // issue / result counters
  logic          rd_v;              // read data valid this cycle
  logic [7:0]    rd_c;              // which element the read data belongs to
  fx_t           ubuf [IN_DIM];     // primary capsule (squashed in place)
  fx_t           uh_buf [N_CLASS][OUT_DIM];
  uhat_word_t    dbuf [PE_LANES];   // FC data buffer: nine u_hat words
  c_word_t       pbuf [PE_LANES];   // FC parameter buffer: nine c words
  acc_t          s_acc [N_CLASS][OUT_DIM];
  acc_t          ag_tmp [N_CLASS];
  uhat_word_t    ag_uh;
  b_word_t       ag_b;
  logic [7:0]    j_q;

  // Signed element views.
  function automatic fx_t uh_el(input uhat_word_t w, input int j, input int k);
    return fx_t'(w[j][k]);
  endfunction

  always_comb begin
    a_raddr = AA'(u_base) + AA'((int'(t_q) * IN_DIM + int'(c_q)) * GRID + int'(pos_q));
    r_raddr = RA'(int'(i_q) * OUT_DIM + int'(c_q));
  end

  // PE array operands.
  always_comb begin
    w_word_t w;
    w = w_word_t'(r_rdata);
    for (int p = 0; p < N_PE; p++)
      for (int l = 0; l < PE_LANES; l++) begin
        pe_a[p][l] = '0;
        pe_b[p][l] = '0;
      end
    pe_valid = 1'b0;
    case (st)
      R_MM: if (rd_v) begin
        pe_valid = 1'b1;
        for (int p = 0; p < N_PE; p++)
          for (int l = 0; l < IN_DIM; l++) begin
            pe_a[p][l] = fx_t'(w[p][l]);
            pe_b[p][l] = ubuf[l];
          end
      end
      R_FCMAC: if (c_q < 8'(OUT_DIM)) begin
        pe_valid = 1'b1;
        for (int p = 0; p < N_PE; p++)
          for (int l = 0; l < PE_LANES; l++) begin
            pe_a[p][l] = fx_t'(pbuf[l][p]);
            pe_b[p][l] = uh_el(dbuf[l], p, int'(c_q));
          end
      end
      R_AGP: begin
        pe_valid = 1'b1;
        for (int p = 0; p < N_PE; p++)
          for (int l = 0; l < PE_LANES; l++)
            if (int'(c_q) * PE_LANES + l < OUT_DIM) begin
              pe_a[p][l] = uh_el(rd_v ? uh_rdata : ag_uh, p, int'(c_q) * PE_LANES + l);
              pe_b[p][l] = sat_fx(v_out[p][int'(c_q) * PE_LANES + l]);
            end
      end
      default: ;
    endcase
  end

  // Memory port control.
  always_comb begin
    uh_raddr = '0; b_raddr = '0; c_raddr = '0;
    uh_we = 1'b0; b_we = 1'b0; c_we = 1'b0;
    uh_waddr = i_q; b_waddr = i_q; c_waddr = o_q;
    uh_wdata = '0; b_wdata = '0; c_wdata = '0;
    sm_iv = 1'b0;
    for (int j = 0; j < N_CLASS; j++) sm_b[j] = acc_t'(b_rdata[j]);
    case (st)
      R_MMWR: begin
        uh_we = 1'b1; b_we = 1'b1;
        for (int j = 0; j < N_CLASS; j++)
          for (int k = 0; k < OUT_DIM; k++) uh_wdata[j][k] = uh_buf[j][k];
      end
      R_SM, R_SMW: begin
        b_raddr = i_q;
        sm_iv = rd_v;
      end
      R_FCLOAD: begin
        uh_raddr = i_q + IW'(c_q);
        c_raddr  = i_q + IW'(c_q);
      end
      R_AGRD: begin
        uh_raddr = i_q; b_raddr = i_q;
      end
      R_AGW: if (pe_ovalid && r_q == 8'(NPASS - 1)) begin
        b_we = 1'b1;
        for (int j = 0; j < N_CLASS; j++)
          b_wdata[j] = sat_acc(64'(acc_t'(ag_b[j])) + 64'(ag_tmp[j]) + 64'(pe_sum[j]));
      end
      default: ;
    endcase
    if (sm_ov) begin
      c_we = 1'b1;
      for (int j = 0; j < N_CLASS; j++) c_wdata[j] = sat_fx(sm_c[j]);
    end
  end

  // Squash port.
  always_comb begin
    sq_start = (st == R_USQ) || (st == R_SQ);
    sq_n_dim = (st == R_USQ) ? ($clog2(OUT_DIM+1))'(IN_DIM) : ($clog2(OUT_DIM+1))'(OUT_DIM);
    for (int k = 0; k < OUT_DIM; k++) begin
      if (st == R_USQ || st == R_USQW) sq_s[k] = (k < IN_DIM) ? acc_t'(ubuf[k]) : '0;
      else                             sq_s[k] = s_acc[j_q][k];
    end
  end

  // Class decision: longest output capsule.
  logic [$clog2(N_CLASS)-1:0] best;
  always_comb begin
    logic signed [63:0] len2, best_len2;
    best = '0; best_len2 = -1;
    for (int j = 0; j < N_CLASS; j++) begin
      len2 = '0;
      for (int k = 0; k < OUT_DIM; k++) len2 += 64'(v_out[j][k]) * 64'(v_out[j][k]);
      if (len2 > best_len2) begin best_len2 = len2; best = ($clog2(N_CLASS))'(j); end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= R_IDLE; done <= 1'b0;
      i_q <= '0; o_q <= '0; t_q <= '0; pos_q <= '0; c_q <= '0; r_q <= '0;
      rd_v <= 1'b0; rd_c <= '0; j_q <= '0; class_out <= '0;
      iter_count <= '0; agreement_count <= '0; squash_count <= '0; fc_partial_chunks <= '0;
      ag_uh <= '0; ag_b <= '0;
      for (int d = 0; d < IN_DIM; d++) ubuf[d] <= '0;
      for (int l = 0; l < PE_LANES; l++) begin dbuf[l] <= '0; pbuf[l] <= '0; end
      for (int j = 0; j < N_CLASS; j++) begin
        ag_tmp[j] <= '0;
        for (int k = 0; k < OUT_DIM; k++) begin
          uh_buf[j][k] <= '0; s_acc[j][k] <= '0; v_out[j][k] <= '0;
        end
      end
    end else begin
      done <= 1'b0;
      rd_v <= 1'b0;
      case (st)
        R_IDLE: if (start) begin
          i_q <= '0; t_q <= '0; pos_q <= '0; c_q <= '0; iter_count <= '0;
          st <= R_ULOAD;
        end
        // ---- load and squash one primary capsule ----
        R_ULOAD: begin
          rd_v <= 1'b1; rd_c <= c_q;
          if (c_q == 8'(IN_DIM - 1)) st <= R_UDRAIN;
          else c_q <= c_q + 1'b1;
        end
        R_UDRAIN: st <= R_USQ;
        R_USQ: begin squash_count <= squash_count + 1'b1; st <= R_USQW; end
        R_USQW: if (sq_done) begin
          for (int d = 0; d < IN_DIM; d++) ubuf[d] <= sat_fx(sq_v[d]);
          c_q <= '0; r_q <= '0;
          st <= R_MM;
        end
        // ---- Matmul: u_hat[i][:][k] on the PE array, k = 0..OUT_DIM-1 ----
        R_MM: begin
          if (c_q < 8'(OUT_DIM)) begin
            rd_v <= 1'b1;
            c_q  <= c_q + 1'b1;
          end
          if (pe_ovalid) begin
            for (int j = 0; j < N_CLASS; j++) uh_buf[j][r_q[$clog2(OUT_DIM)-1:0]] <= sat_fx(pe_sum[j]);
            r_q <= r_q + 1'b1;
            if (r_q == 8'(OUT_DIM - 1)) st <= R_MMWR;
          end
        end
        R_MMWR: begin
          c_q <= '0;
          if (i_q == IW'(N_IN - 1)) begin
            i_q <= '0; o_q <= '0; st <= R_SM;
          end else begin
            i_q <= i_q + 1'b1;
            if (pos_q == 8'(GRID - 1)) begin pos_q <= '0; t_q <= t_q + 1'b1; end
            else pos_q <= pos_q + 1'b1;
            st <= R_ULOAD;
          end
        end
        // ---- Softmax over all capsules, one per cycle ----
        R_SM: begin
          rd_v <= 1'b1;
          if (i_q == IW'(N_IN - 1)) st <= R_SMW;
          else i_q <= i_q + 1'b1;
        end
        R_SMW: ;
        // ---- Fully connected ----
        R_FCLOAD: begin
          rd_v <= 1'b1; rd_c <= c_q;
          if (c_q == 8'(PE_LANES - 1)) st <= R_FCDRAIN;
          else c_q <= c_q + 1'b1;
        end
        R_FCDRAIN: begin c_q <= '0; r_q <= '0; st <= R_FCMAC; end
        R_FCMAC: begin
          if (c_q < 8'(OUT_DIM)) c_q <= c_q + 1'b1;
          if (pe_ovalid) begin
            for (int j = 0; j < N_CLASS; j++)
              s_acc[j][r_q[$clog2(OUT_DIM)-1:0]] <=
                sat_acc(64'(s_acc[j][r_q[$clog2(OUT_DIM)-1:0]]) + 64'(pe_sum[j]));
            r_q <= r_q + 1'b1;
            if (r_q == 8'(OUT_DIM - 1)) st <= R_FCW;
          end
        end
        R_FCW: begin
          c_q <= '0;
          if (int'(i_q) + PE_LANES >= N_IN) begin
            j_q <= '0; st <= R_SQ;
          end else begin
            i_q <= i_q + IW'(PE_LANES);
            if (int'(i_q) + 2 * PE_LANES > N_IN) fc_partial_chunks <= fc_partial_chunks + 1'b1;
            st <= R_FCLOAD;
          end
        end
        // ---- Squash each digit capsule ----
        R_SQ: begin squash_count <= squash_count + 1'b1; st <= R_SQW; end
        R_SQW: if (sq_done) begin
          for (int k = 0; k < OUT_DIM; k++) v_out[j_q][k] <= sq_v[k];
          if (j_q == 8'(N_CLASS - 1)) begin
            if (int'(iter_count) == N_ITER - 1) st <= R_FINAL;
            else begin i_q <= '0; st <= R_AGRD; end
          end else begin
            j_q <= j_q + 1'b1; st <= R_SQ;
          end
        end
        // ---- Agreement ----
        R_AGRD: begin rd_v <= 1'b1; c_q <= '0; r_q <= '0; st <= R_AGP; end  // u_hat, b read
        R_AGP: begin
          if (rd_v) begin ag_uh <= uh_rdata; ag_b <= b_rdata; end
          if (c_q == 8'(NPASS - 1)) st <= R_AGW;
          c_q <= c_q + 1'b1;
        end
        R_AGW: if (pe_ovalid) begin
          for (int j = 0; j < N_CLASS; j++) ag_tmp[j] <= (r_q == 0) ? pe_sum[j] : ag_tmp[j] + pe_sum[j];
          r_q <= r_q + 1'b1;
          if (r_q == 8'(NPASS - 1)) begin
            agreement_count <= agreement_count + 1'b1;
            if (i_q == IW'(N_IN - 1)) begin
              i_q <= '0; o_q <= '0; iter_count <= iter_count + 1'b1; st <= R_SM;
            end else begin
              i_q <= i_q + 1'b1; st <= R_AGRD;
            end
          end
        end
        R_FINAL: begin class_out <= best; done <= 1'b1; st <= R_IDLE; end
        default: st <= R_IDLE;
      endcase

      // FC buffer capture (one cycle after the read address)
      if (st == R_FCLOAD || st == R_FCDRAIN) begin
        if (rd_v) begin
          if (int'(i_q) + int'(rd_c) < N_IN) begin
            dbuf[rd_c[$clog2(PE_LANES)-1:0]] <= uh_rdata;
            pbuf[rd_c[$clog2(PE_LANES)-1:0]] <= c_rdata;
          end else begin
            dbuf[rd_c[$clog2(PE_LANES)-1:0]] <= '0;
            pbuf[rd_c[$clog2(PE_LANES)-1:0]] <= '0;
          end
        end
      end
      // primary capsule capture
      if ((st == R_ULOAD || st == R_UDRAIN) && rd_v) ubuf[rd_c[$clog2(IN_DIM)-1:0]] <= a_rdata;
      // softmax results
      if (sm_ov) begin
        o_q <= o_q + 1'b1;
        if (o_q == IW'(N_IN - 1)) begin
          i_q <= '0; c_q <= '0;
          for (int j = 0; j < N_CLASS; j++)
            for (int k = 0; k < OUT_DIM; k++) s_acc[j][k] <= '0;
          st <= R_FCLOAD;
        end
      end
    end
  end

  assign busy = (st != R_IDLE);

  initial begin
    assert (N_PE == N_CLASS) else $error("routing_module: N_PE must equal N_CLASS");
    assert (IN_DIM <= PE_LANES) else $error("routing_module: IN_DIM must fit one PE");
  end
endmodule
