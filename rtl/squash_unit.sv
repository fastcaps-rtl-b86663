// squash_unit: the capsule Squash non-linearity
//     v = |s|^2 / (1 + |s|^2) * s / |s|
// built the way the paper's Squash figure draws it: only squares, additions,
// sqrt, log and exp, with every division done in the log domain
// (exp(log a - log b), fx_div).
//
// Steps, one after the other:
//   1. Sq_Sum: |s|^2 accumulated one element per cycle (square, then add with
//      feedback).
//   2. Scale f = |s|^2 / (1 + |s|^2) (log(Sq_Sum), log(1 + Sq_Sum), subtract,
//      exp). At the same time |s| = Sq_Sum^0.5 (fx_sqrt).
//   3. For each element: t_k = s_k * f, then v_k = t_k / |s| (log, subtract,
//      exp). One element enters the divider per cycle.
// One fx_div is shared by steps 2 and 3. Following the paper, the squash runs
// outside the PE array. The schedule and the sharing are this design's
// choices.
//
// Interface: start with the vector s (the first n_dim of N_DIM elements are
// used) and hold s until done; done pulses for one cycle with v valid, and v
// holds until the next start. Elements beyond n_dim come out as 0.
// Timing: about n_dim + 23 + n_dim + 15 cycles (sqrt 22 cycles, divider 15).
//
// Lint note: the report that rst_n is used both asynchronously and
// synchronously comes from the assertion inside the fx_div instance.
module squash_unit
  import caps_pkg::*;
#(
  parameter int N_DIM = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [$clog2(N_DIM+1)-1:0] n_dim,
  input  acc_t                     s [N_DIM],
  output logic                     busy,
  output logic                     done,
  output acc_t                     v [N_DIM]
);
  typedef enum logic [2:0] {S_IDLE, S_SQSUM, S_SCALE, S_WAIT, S_ISSUE, S_COLLECT} state_e;
  localparam int CW = $clog2(N_DIM+1);

  state_e  st;
  logic [CW-1:0] n_q, k_q, o_q;
  acc_t    sq_q, f_q, norm_q;
  logic    f_ok, n_ok;

  logic    div_v, div_ov, sqrt_start, sqrt_busy, sqrt_done;
  acc_t    div_a, div_b, div_q, sqrt_y;

  fx_div  u_div  (.clk, .rst_n, .in_valid(div_v), .a(div_a), .b(div_b),
                  .out_valid(div_ov), .q(div_q));
  fx_sqrt u_sqrt (.clk, .rst_n, .start(sqrt_start), .x(sq_q), .busy(sqrt_busy),
                  .done(sqrt_done), .y(sqrt_y));

  always_comb begin
    div_v = 1'b0; div_a = '0; div_b = '0; sqrt_start = 1'b0;
    if (st == S_SCALE) begin
      div_v = 1'b1; div_a = sq_q; div_b = sq_q + ONE; sqrt_start = 1'b1;
    end else if (st == S_ISSUE) begin
      div_v = 1'b1; div_a = fmul(s[k_q], f_q); div_b = norm_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; n_q <= '0; k_q <= '0; o_q <= '0;
      sq_q <= '0; f_q <= '0; norm_q <= '0; f_ok <= 1'b0; n_ok <= 1'b0;
      done <= 1'b0;
      for (int i = 0; i < N_DIM; i++) v[i] <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          n_q <= n_dim; k_q <= '0; sq_q <= '0;
          for (int i = 0; i < N_DIM; i++) v[i] <= '0;
          st <= S_SQSUM;
        end
        S_SQSUM: begin
          sq_q <= sq_q + fmul(s[k_q], s[k_q]);
          k_q  <= k_q + 1'b1;
          if (k_q == n_q - 1'b1) st <= S_SCALE;
        end
        S_SCALE: begin
          f_ok <= 1'b0; n_ok <= 1'b0;
          st <= S_WAIT;
        end
        S_WAIT: begin
          if (div_ov)    begin f_q <= div_q;     f_ok <= 1'b1; end
          if (sqrt_done) begin norm_q <= sqrt_y; n_ok <= 1'b1; end
          if (f_ok && n_ok) begin k_q <= '0; o_q <= '0; st <= S_ISSUE; end
        end
        S_ISSUE: begin
          k_q <= k_q + 1'b1;
          if (k_q == n_q - 1'b1) st <= S_COLLECT;
        end
        default: ;  // S_COLLECT handled below
      endcase
      if ((st == S_ISSUE || st == S_COLLECT) && div_ov) begin
        v[o_q] <= div_q;
        o_q    <= o_q + 1'b1;
        if (o_q == n_q - 1'b1) begin st <= S_IDLE; done <= 1'b1; end
      end
    end
  end

  assign busy = (st != S_IDLE);
endmodule
