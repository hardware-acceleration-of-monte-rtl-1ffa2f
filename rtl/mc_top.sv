// mc_top: Monte-Carlo 6DoF pose estimation accelerator (second stage of the
// detect-then-sample pipeline).
//
// Given detection boxes with confidences (loaded into the detection table),
// the object's triangle model (loaded into the vertex distributor) and the
// depth image (read through the depth port), it runs iterative likelihood
// weighting over N samples:
//   init:  the sample initializer fills the sample list;
//   per Monte-Carlo iteration, per sample iteration of N_CORES samples:
//     transformation matrix distributor -> one sample per raster core;
//     depth distributor -> each core's box of observed depth;
//     object vertex distributor -> all triangles, one raster iteration each;
//     weight merger -> one weight per sample, inserted into the sorter;
//   then: converged when the mean weight >= tau (or after max_iter
//     iterations); else resampler + diffuser build the next list in the
//     other ping-pong bank and the banks swap.
// On `done` the heaviest sample of the last iteration is on best_*.
// The detection table and the stats counters are this design's own
// additions; block order and loops follow the paper's system diagram.
// Interface: configuration inputs are sampled while running and must stay
// stable; the depth port accepts one read per cycle and answers after
// RD_LAT cycles.
module mc_top
  import mc_pkg::*;
#(
  parameter int N       = 620,
  parameter int N_CORES = 20,
  parameter int MAX_BW  = 256,
  parameter int MAX_BH  = 192,
  parameter int MAX_TRI = 4096,
  parameter int N_BOX   = 64,
  parameter int RD_LAT  = 2,
  parameter int LOG_NT  = 5,
  parameter int AW      = $clog2(N),
  parameter int TW      = $clog2(MAX_TRI),
  parameter int CW      = $clog2(N_CORES + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration
  input  cam_t                 cam,
  input  depth_t               eps,
  input  wgt_t                 alpha,
  input  wgt_t                 beta,
  input  wgt_t                 gamma,
  input  wgt_t                 tau,
  input  logic [AW:0]          k_top,
  input  logic [7:0]           max_iter,
  input  logic [BOXID_W:0]     num_box,
  input  logic [TW:0]          num_tri,
  input  coord_t               init_z,
  input  coord_t               z_spread,
  input  logic [15:0]          delta_t,
  input  logic [15:0]          delta_r,
  input  logic [31:0]          seed,
  // detection table load (CNN output)
  input  logic                 box_we,
  input  logic [BOXID_W-1:0]   box_addr,
  input  bbox_t                box_data,
  // object model load
  input  logic                 mdl_we,
  input  logic [TW-1:0]        mdl_addr,
  input  tri_t                 mdl_data,
  // depth image memory
  output logic                 depth_rd_req,
  output logic [ADDR_IMG_W-1:0] depth_rd_addr,
  input  depth_t               depth_rd_data,
  // control and result
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output logic                 converged,
  output logic [7:0]           iterations,
  output pose_t                best_pose,
  output logic [BOXID_W-1:0]   best_box,
  output wgt_t                 best_weight,
  // activity counters (cumulative since start)
  output logic [31:0]          stat_culled,
  output logic [31:0]          stat_depth_reads,
  output logic [31:0]          stat_shared_px,
  output logic [31:0]          stat_tri_waits,
  output logic [31:0]          stat_resample_reads,
  output logic [31:0]          stat_sample_iters
);
  // ---------------- detection table ----------------
  bbox_t boxes [N_BOX];
  always_ff @(posedge clk) begin
    if (box_we) boxes[box_addr] <= box_data;
  end

  // ---------------- controller state ----------------
  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_ITER, S_TMAT, S_DEPTH, S_RASTER, S_MERGE,
    S_CHECK, S_RESAMPLE, S_FLUSH, S_BEST, S_BEST2
  } cstate_e;
  cstate_e st;

  logic          bank;
  logic [AW-1:0] base;
  logic [CW-1:0] n_act;
  logic [47:0]   wsum;
  logic          go_init, go_tmat, go_depth, go_vert, go_merge, go_res;

  // ---------------- sample list ----------------
  logic [AW-1:0] sl_rd_addr, sl_rd2_addr, sl_wr_addr;
  sample_t       sl_rd_data, sl_rd2_data, sl_wr_data;
  logic          sl_wr_en, sl_wr_cur;

  sample_list_mem #(.N(N)) u_list (
    .clk, .bank, .rd_addr(sl_rd_addr), .rd_data(sl_rd_data),
    .rd2_addr(sl_rd2_addr), .rd2_data(sl_rd2_data),
    .wr_en(sl_wr_en), .wr_cur(sl_wr_cur), .wr_addr(sl_wr_addr), .wr_data(sl_wr_data));

  // ---------------- sample initializer ----------------
  logic [BOXID_W-1:0] ini_box_id;
  logic               ini_wr_en, ini_done;
  logic [AW-1:0]      ini_wr_addr;
  sample_t            ini_wr_data;

  sample_initializer #(.N(N)) u_init (
    .clk, .rst_n, .start(go_init), .seed, .num_box, .cam, .init_z, .z_spread,
    .box_id(ini_box_id), .box_in(boxes[ini_box_id]),
    .wr_en(ini_wr_en), .wr_addr(ini_wr_addr), .wr_data(ini_wr_data), .done(ini_done));

  // ---------------- transformation matrix distributor ----------------
  logic [AW-1:0]       tm_addr;
  logic [BOXID_W-1:0]  tm_box_id;
  logic [N_CORES-1:0]  load_en;
  tmat_t               load_mat;
  bbox_t               load_box;
  bbox_t [N_CORES-1:0] core_box;
  logic                tm_done;

  tmat_distributor #(.N_CORES(N_CORES), .N(N), .MAX_BW(MAX_BW), .MAX_BH(MAX_BH)) u_tmat (
    .clk, .rst_n, .start(go_tmat), .base, .n_active(n_act),
    .smp_addr(tm_addr), .smp_data(sl_rd_data),
    .box_id(tm_box_id), .box_in(boxes[tm_box_id]),
    .load_en, .load_mat, .load_box, .core_box, .done(tm_done));

  // ---------------- depth distributor ----------------
  logic [N_CORES-1:0] px_mask;
  xy_t                px_x, px_y;
  depth_t             px_depth;
  logic               dd_done;
  logic [31:0]        dd_reads;

  depth_distributor #(.N_CORES(N_CORES), .RD_LAT(RD_LAT)) u_depth (
    .clk, .rst_n, .start(go_depth), .core_box, .n_active(n_act),
    .rd_req(depth_rd_req), .rd_addr(depth_rd_addr), .rd_data(depth_rd_data),
    .px_mask, .px_x, .px_y, .px_depth, .done(dd_done), .n_reads(dd_reads));

  // ---------------- object vertex distributor ----------------
  logic [N_CORES-1:0] tri_valid, tri_ready;
  tri_t               tri_data;
  logic               tri_last, vd_done;

  vertex_distributor #(.N_CORES(N_CORES), .MAX_TRI(MAX_TRI)) u_vert (
    .clk, .rst_n, .mdl_we, .mdl_addr, .mdl_data, .num_tri,
    .start(go_vert), .n_active(n_act), .done(vd_done),
    .tri_valid, .tri_ready, .tri_data, .tri_last);

  // ---------------- raster cores ----------------
  logic   [N_CORES-1:0] score_valid, culled;
  score_t [N_CORES-1:0] scores;

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    raster_core #(.MAX_BW(MAX_BW), .MAX_BH(MAX_BH)) u_core (
      .clk, .rst_n, .cam, .eps,
      .load(load_en[c]), .load_mat, .load_box,
      .dpx_valid(px_mask[c]), .dpx_x(px_x), .dpx_y(px_y), .dpx_depth(px_depth),
      .tri_valid(tri_valid[c]), .tri_ready(tri_ready[c]), .tri_in(tri_data), .tri_last,
      .score_valid(score_valid[c]), .score(scores[c]), .culled(culled[c]));
  end

  // ---------------- weight merger + sorter ----------------
  logic          w_valid, wm_done;
  logic [AW-1:0] w_idx;
  wgt_t          w_value;

  weight_merger #(.N_CORES(N_CORES), .N(N)) u_merge (
    .clk, .rst_n, .start(go_merge), .base, .n_active(n_act),
    .scores, .core_box, .alpha, .beta, .gamma,
    .w_valid, .w_idx, .w_value, .done(wm_done));

  logic          srt_clear;
  logic [AW-1:0] srt_pos, res_pos, srt_idx;
  wgt_t          srt_w;
  logic [AW:0]   srt_count;

  index_sorter #(.N(N)) u_sort (
    .clk, .rst_n, .clear(srt_clear), .ins_valid(w_valid), .ins_idx(w_idx), .ins_w(w_value),
    .rd_pos(srt_pos), .rd_idx(srt_idx), .rd_w(srt_w), .count(srt_count));

  // ---------------- resampler + diffuser ----------------
  logic          rs_valid, rs_ready, rs_done;
  logic [AW-1:0] rs_dst, rs_src;
  logic [31:0]   rs_reads;

  resampler #(.N(N), .LOG_NT(LOG_NT)) u_res (
    .clk, .rst_n, .start(go_res), .k_top, .seed(seed ^ {24'b0, iterations}),
    .srt_pos(res_pos), .srt_idx, .srt_w,
    .o_valid(rs_valid), .o_ready(rs_ready), .o_dst(rs_dst), .o_src(rs_src),
    .done(rs_done), .n_reads(rs_reads));

  logic [AW-1:0] df_rd_addr, df_wr_addr;
  logic          df_wr_en;
  sample_t       df_wr_data;

  diffuser #(.N(N)) u_diff (
    .clk, .rst_n, .seed_load(go_init), .seed, .delta_t, .delta_r,
    .i_valid(rs_valid), .i_ready(rs_ready), .i_dst(rs_dst), .i_src(rs_src),
    .rd_addr(df_rd_addr), .rd_data(sl_rd_data),
    .wr_en(df_wr_en), .wr_addr(df_wr_addr), .wr_data(df_wr_data));

  // ---------------- shared-port muxes ----------------
  assign sl_rd_addr  = (st == S_TMAT) ? tm_addr : df_rd_addr;
  assign sl_wr_en    = (st == S_INIT) ? ini_wr_en : df_wr_en;
  assign sl_wr_cur   = (st == S_INIT);
  assign sl_wr_addr  = (st == S_INIT) ? ini_wr_addr : df_wr_addr;
  assign sl_wr_data  = (st == S_INIT) ? ini_wr_data : df_wr_data;
  assign srt_pos     = (st == S_RESAMPLE) ? res_pos : '0;
  assign sl_rd2_addr = srt_idx;

  // ---------------- controller ----------------
  logic [7:0] flush;
  logic [N_CORES-1:0] act_mask;
  always_comb begin
    for (int c = 0; c < N_CORES; c++) act_mask[c] = (c < int'(n_act));
  end

  function automatic logic [31:0] popc(input logic [N_CORES-1:0] v);
    logic [31:0] s;
    s = '0;
    for (int c = 0; c < N_CORES; c++) s = s + 32'(v[c]);
    return s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      bank <= 1'b0; base <= '0; n_act <= '0; wsum <= '0;
      go_init <= 1'b0; go_tmat <= 1'b0; go_depth <= 1'b0; go_vert <= 1'b0;
      go_merge <= 1'b0; go_res <= 1'b0; srt_clear <= 1'b0;
      busy <= 1'b0; done <= 1'b0; converged <= 1'b0; iterations <= '0;
      best_pose <= '0; best_box <= '0; best_weight <= '0;
      flush <= '0;
      stat_culled <= '0; stat_depth_reads <= '0; stat_shared_px <= '0;
      stat_tri_waits <= '0; stat_resample_reads <= '0; stat_sample_iters <= '0;
    end else begin
      go_init <= 1'b0; go_tmat <= 1'b0; go_depth <= 1'b0; go_vert <= 1'b0;
      go_merge <= 1'b0; go_res <= 1'b0; srt_clear <= 1'b0; done <= 1'b0;

      // activity counters
      stat_culled <= stat_culled + popc(culled);
      if (popc(px_mask) > 1) stat_shared_px <= stat_shared_px + 1;
      if (tri_valid != '0 && (tri_valid & tri_ready) != tri_valid)
        stat_tri_waits <= stat_tri_waits + 1;
      if (w_valid) wsum <= wsum + 48'(w_value);

      case (st)
        S_IDLE: if (start) begin
          busy <= 1'b1; converged <= 1'b0; iterations <= '0; bank <= 1'b0;
          stat_culled <= '0; stat_depth_reads <= '0; stat_shared_px <= '0;
          stat_tri_waits <= '0; stat_resample_reads <= '0; stat_sample_iters <= '0;
          go_init <= 1'b1;
          st <= S_INIT;
        end
        S_INIT: if (ini_done) st <= S_ITER;
        S_ITER: begin                         // new Monte-Carlo iteration
          base <= '0;
          wsum <= '0;
          srt_clear <= 1'b1;
          n_act <= (N < N_CORES) ? CW'(N) : CW'(N_CORES);
          go_tmat <= 1'b1;
          st <= S_TMAT;
        end
        S_TMAT: if (tm_done) begin            // new sample iteration
          go_depth <= 1'b1;
          st <= S_DEPTH;
        end
        S_DEPTH: if (dd_done) begin
          stat_depth_reads <= stat_depth_reads + dd_reads;
          go_vert <= 1'b1;
          st <= S_RASTER;
        end
        S_RASTER: if (!go_vert && (score_valid & act_mask) == act_mask) begin
          go_merge <= 1'b1;
          st <= S_MERGE;
        end
        S_MERGE: if (wm_done) begin
          stat_sample_iters <= stat_sample_iters + 1;
          if (32'(base) + 32'(n_act) >= N) begin
            st <= S_CHECK;
          end else begin
            base <= base + AW'(n_act);
            n_act <= (32'(base) + 2 * 32'(n_act) > N) ? CW'(N - 32'(base) - 32'(n_act)) : n_act;
            go_tmat <= 1'b1;
            st <= S_TMAT;
          end
        end
        S_CHECK: begin
          iterations <= iterations + 1'b1;
          if (wsum >= 48'(tau) * 48'(N) || iterations + 1'b1 >= max_iter) begin
            converged <= (wsum >= 48'(tau) * 48'(N));
            st <= S_BEST;                     // sorter slot 0 -> sample list
          end else begin
            go_res <= 1'b1;
            st <= S_RESAMPLE;
          end
        end
        S_RESAMPLE: if (rs_done) begin
          stat_resample_reads <= stat_resample_reads + rs_reads;
          flush <= 8'd4;
          st <= S_FLUSH;
        end
        S_FLUSH: begin                        // let the last diffuser write land
          if (flush == 0) begin
            bank <= ~bank;
            st <= S_ITER;
          end else flush <= flush - 1'b1;
        end
        S_BEST: st <= S_BEST2;                // rd2 read in flight
        S_BEST2: begin
          best_pose   <= sl_rd2_data.pose;
          best_box    <= sl_rd2_data.box;
          best_weight <= srt_w;
          busy <= 1'b0;
          done <= 1'b1;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
