// weight_merger: turns the raster cores' inlier counts into sample weights.
//
// After a sample iteration it visits the active cores in order and computes
//   w = alpha * N/Nb + beta * N/Nr + gamma * c
// (the paper's weight equation; alpha + beta + gamma = 1, all Q0.16, c the
// detection confidence of the sample's box). The two ratios come from two
// sequential dividers working in parallel (N * 2^16 / Nb and N * 2^16 / Nr,
// a zero denominator giving 0, results clipped to 1.0). Each weight leaves
// as a one-cycle w_valid pulse with the sample's index (base + core), about
// 40 cycles per core, for the sorter and the convergence test. `done`
// pulses after the last core.
module weight_merger
  import mc_pkg::*;
#(
  parameter int N_CORES = 20,
  parameter int N       = 620,
  parameter int AW      = $clog2(N),
  parameter int CW      = $clog2(N_CORES + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [AW-1:0]        base,
  input  logic [CW-1:0]        n_active,
  input  score_t [N_CORES-1:0] scores,
  input  bbox_t  [N_CORES-1:0] core_box,
  input  wgt_t                 alpha,
  input  wgt_t                 beta,
  input  wgt_t                 gamma,
  output logic                 w_valid,
  output logic [AW-1:0]        w_idx,
  output wgt_t                 w_value,
  output logic                 done
);
  localparam int NW = CNT_W + 18;

  typedef enum logic [1:0] {M_IDLE, M_DIV, M_WAIT, M_OUT} mstate_e;
  mstate_e st;

  logic [CW-1:0] c;
  score_t        sc;
  logic          dstart;
  logic [1:0]    ddone, dseen;
  logic signed [NW-1:0] q_b, q_r;
  logic [1:0]    dbusy_unused;

  assign sc = scores[c];

  sdiv_seq #(.NW(NW), .DW(CNT_W + 1)) u_div_b (
    .clk, .rst_n, .start(dstart), .num(NW'({sc.n, 16'b0})), .den($signed({1'b0, sc.nb})),
    .busy(dbusy_unused[0]), .done(ddone[0]), .quo(q_b));
  sdiv_seq #(.NW(NW), .DW(CNT_W + 1)) u_div_r (
    .clk, .rst_n, .start(dstart), .num(NW'({sc.n, 16'b0})), .den($signed({1'b0, sc.nr})),
    .busy(dbusy_unused[1]), .done(ddone[1]), .quo(q_r));

  function automatic logic [16:0] ratio(input logic signed [NW-1:0] q, input cnt_t den);
    if (den == 0)          return 17'd0;
    if (q > 65536)         return 17'd65536;
    return 17'(q);
  endfunction

  logic [16:0] rb, rr;
  logic [35:0] wsum;
  always_comb begin
    rb   = ratio(q_b, sc.nb);
    rr   = ratio(q_r, sc.nr);
    wsum = 36'(alpha) * rb + 36'(beta) * rr + 36'(gamma) * {1'b0, core_box[c].conf};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= M_IDLE;
      c       <= '0;
      dstart  <= 1'b0;
      dseen   <= '0;
      w_valid <= 1'b0;
      w_idx   <= '0;
      w_value <= '0;
      done    <= 1'b0;
    end else begin
      dstart  <= 1'b0;
      w_valid <= 1'b0;
      done    <= 1'b0;
      case (st)
        M_IDLE: if (start) begin
          c  <= '0;
          st <= (n_active == 0) ? M_IDLE : M_DIV;
          if (n_active == 0) done <= 1'b1;
        end
        M_DIV: begin
          dstart <= 1'b1;
          dseen  <= '0;
          st     <= M_WAIT;
        end
        M_WAIT: begin
          if ((dseen | ddone) == 2'b11) st <= M_OUT;
          else dseen <= dseen | ddone;
        end
        M_OUT: begin
          w_valid <= 1'b1;
          w_idx   <= AW'(32'(base) + 32'(c));
          w_value <= (wsum[35:16] > 20'hFFFF) ? 16'hFFFF : wsum[31:16];
          if (c == n_active - 1'b1) begin
            done <= 1'b1;
            st   <= M_IDLE;
          end else begin
            c  <= c + 1'b1;
            st <= M_DIV;
          end
        end
        default: st <= M_IDLE;
      endcase
    end
  end
endmodule
