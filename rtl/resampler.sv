// resampler: importance sampling from the weight-sorted sample list.
//
// Works on the K heaviest samples (K = k_top, the paper's "top x%"; K = N
// resamples from all). Three phases:
//  1. sum:   S = sum of the K sorted weights (K cycles);
//  2. build: the cumulative weights Phi(k) go into the CDF memory and, in
//     the same pass, a threshold table with constant step is filled:
//     t_j = j*S/NT, start[j] = first k with Phi(k) > t_j (K + NT cycles);
//  3. draw:  for each of the N new samples a 32-bit random number u gives
//     r = u*S/2^32 (uniform in [0,S), which saves normalising the CDF).
//     Coarse search: because the step is constant, the region j with
//     t_j <= r < t_j+1 is simply the top LOG_NT bits of u; one read of the
//     threshold memory gives start[j]. Fine search: CDF reads from
//     start[j] upward until the first k with r < Phi(k).
// Each draw leaves as (o_dst = draw number, o_src = original index of
// sorted slot k) on o_valid/o_ready; o_src is the sorter's combinational
// read data, wired straight through while srt_pos holds k. n_reads
// counts threshold plus CDF memory reads of the last run, the figure the
// paper's threshold memory is there to cut. Random numbers: xorshift32 (own choice), seeded on start.
// NT = 32 thresholds is an own choice (the paper gives no count).
module resampler
  import mc_pkg::*;
#(
  parameter int N      = 620,
  parameter int LOG_NT = 5,
  parameter int AW     = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW:0]   k_top,
  input  logic [31:0]   seed,
  // sorter read port
  output logic [AW-1:0] srt_pos,
  input  logic [AW-1:0] srt_idx,
  input  wgt_t          srt_w,
  // new sample indices
  output logic          o_valid,
  input  logic          o_ready,
  output logic [AW-1:0] o_dst,
  output logic [AW-1:0] o_src,
  output logic          done,
  output logic [31:0]   n_reads
);
  localparam int NT = 1 << LOG_NT;

  typedef enum logic [3:0] {R_IDLE, R_SUM, R_BUILD, R_DRAW, R_THR, R_THR2, R_CRD, R_CHK, R_OUT} rstate_e;
  rstate_e st;

  logic [31:0]   cdf   [N];
  logic [AW-1:0] thr_s [NT];

  logic [AW:0]       kk;        // number of samples used (>= 1)
  logic [AW-1:0]     k;
  logic [LOG_NT:0]   j;
  logic [31:0]       s_tot, cum;
  logic [31:0]       rng;
  logic [31:0]       r;
  logic [AW-1:0]     dst;
  logic [31:0]       cdf_q;
  logic [AW-1:0]     thr_q;

  function automatic logic [31:0] xs32(input logic [31:0] v);
    logic [31:0] t;
    t = v ^ (v << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  logic [31:0] cum_nx, t_j;
  always_comb begin
    cum_nx = cum + 32'(srt_w);
    t_j    = 32'((64'(j) * 64'(s_tot)) >> LOG_NT);
  end

  // memories: synchronous read
  logic          cdf_we, thr_we;
  logic [AW-1:0] cdf_wa, cdf_ra;
  logic [31:0]   cdf_wd;
  logic [LOG_NT-1:0] thr_wa, thr_ra;
  always_ff @(posedge clk) begin
    if (cdf_we) cdf[cdf_wa] <= cdf_wd;
    if (thr_we) thr_s[thr_wa] <= k;
    cdf_q <= cdf[cdf_ra];
    thr_q <= thr_s[thr_ra];
  end

  assign srt_pos = k;
  assign o_valid = (st == R_OUT);
  assign o_dst   = dst;
  assign o_src   = srt_idx;

  // build phase: write Phi(k) once, then one threshold per cycle
  logic build_thr;
  assign build_thr = (st == R_BUILD) && (j < (LOG_NT+1)'(NT)) && (cum_nx > t_j);
  assign cdf_we = (st == R_BUILD) && !build_thr;
  assign cdf_wa = k;
  assign cdf_wd = cum_nx;
  assign thr_we = build_thr;
  assign thr_wa = j[LOG_NT-1:0];
  assign thr_ra = rng[31 -: LOG_NT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= R_IDLE;
      kk      <= '0;
      k       <= '0;
      j       <= '0;
      s_tot   <= '0;
      cum     <= '0;
      rng     <= 32'h1;
      r       <= '0;
      dst     <= '0;
      cdf_ra  <= '0;
      done    <= 1'b0;
      n_reads <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        R_IDLE: if (start) begin
          kk      <= (k_top == 0) ? (AW+1)'(1) : (k_top > (AW+1)'(N)) ? (AW+1)'(N) : k_top;
          k       <= '0;
          cum     <= '0;
          rng     <= (seed == 0) ? 32'h2545F491 : seed;
          n_reads <= '0;
          st      <= R_SUM;
        end
        R_SUM: begin
          cum <= cum_nx;
          if (32'(k) == 32'(kk) - 1) begin
            s_tot <= cum_nx;
            cum   <= '0;
            k     <= '0;
            j     <= '0;
            st    <= R_BUILD;
          end else k <= k + 1'b1;
        end
        R_BUILD: begin
          if (build_thr) begin
            j <= j + 1'b1;
          end else begin
            cum <= cum_nx;
            if (32'(k) == 32'(kk) - 1) begin
              dst <= '0;
              st  <= R_DRAW;
            end else k <= k + 1'b1;
          end
        end
        R_DRAW: begin
          rng <= xs32(rng);                 // new random number u
          st  <= R_THR;
        end
        R_THR: begin                        // coarse: threshold read in flight
          r  <= 32'((64'(rng) * 64'(s_tot)) >> 32);
          st <= R_THR2;
        end
        R_THR2: begin
          n_reads <= n_reads + 1;
          k       <= thr_q;
          cdf_ra  <= thr_q;
          st      <= R_CRD;
        end
        R_CRD: begin                        // fine: CDF read in flight
          n_reads <= n_reads + 1;
          st      <= R_CHK;
        end
        R_CHK: begin
          if (r < cdf_q || 32'(k) >= 32'(kk) - 1) begin
            st <= R_OUT;
          end else begin
            k      <= k + 1'b1;
            cdf_ra <= k + 1'b1;
            st     <= R_CRD;
          end
        end
        R_OUT: if (o_ready) begin
          if (32'(dst) == N - 1) begin
            done <= 1'b1;
            st   <= R_IDLE;
          end else begin
            dst <= dst + 1'b1;
            st  <= R_DRAW;
          end
        end
        default: st <= R_IDLE;
      endcase
    end
  end
endmodule
