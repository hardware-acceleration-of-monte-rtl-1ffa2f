// mc_top_full_tb: the accelerator at its full default size (620 samples,
// 20 raster cores, 256 x 192 region memories), with no parameter changed.
//
// Same scene as the reduced end-to-end test: a 60 mm cube (12 triangles)
// 800 mm from a 600 px focal-length camera in front of a wall at 1000 mm,
// depth delivered by a behavioural memory with a 2-cycle latency, and two
// overlapping detections. One run of two Monte-Carlo iterations, so the
// full flow is exercised: initialisation, 31 sample iterations of 20
// samples, weighting and sorting of all 620 samples, resampling and
// diffusion into the other bank, and a second round of 31 sample
// iterations. Checked: done, iteration and sample-iteration counts, one
// weight per sample, that the best weight and pose reported are those
// of a top-weighted sample of the last iteration, and that backface
// culling removes 40..60% of the triangles (the cube is closed and convex).
module mc_top_full_tb;
  import mc_pkg::*;
  localparam int N = 620, NC = 20, RD_LAT = 2;
  localparam int AW = $clog2(N);
  localparam int TW = $clog2(4096);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cam_t cam;
  depth_t eps;
  wgt_t alpha, beta, gamma, tau, best_weight;
  logic [AW:0] k_top;
  logic [7:0] max_iter, iterations;
  logic [BOXID_W:0] num_box;
  logic [TW:0] num_tri;
  coord_t init_z, z_spread;
  logic [15:0] delta_t, delta_r;
  logic [31:0] seed;
  logic box_we, mdl_we, depth_rd_req, start, busy, done, converged;
  logic [BOXID_W-1:0] box_addr, best_box;
  bbox_t box_data;
  logic [TW-1:0] mdl_addr;
  tri_t mdl_data;
  logic [ADDR_IMG_W-1:0] depth_rd_addr;
  depth_t depth_rd_data;
  pose_t best_pose;
  logic [31:0] stat_culled, stat_depth_reads, stat_shared_px, stat_tri_waits;
  logic [31:0] stat_resample_reads, stat_sample_iters;

  mc_top dut (.*);

  // ---- behavioural depth image memory ----
  function automatic depth_t scene_depth(int a);
    int x, y;
    x = a % 640; y = a / 640;
    if (a % 37 == 5) return 0;
    if (x >= 298 && x < 343 && y >= 218 && y < 263) return 16'd770;
    return 16'd1000;
  endfunction
  depth_t dpipe [RD_LAT];
  always_ff @(posedge clk) begin
    dpipe[0] <= depth_rd_req ? scene_depth(int'(depth_rd_addr)) : 16'd0;
    for (int i = 1; i < RD_LAT; i++) dpipe[i] <= dpipe[i-1];
  end
  assign depth_rd_data = dpipe[RD_LAT-1];

  int checks = 0, failures = 0;
  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- monitors ----
  int n_bank_swaps = 0, n_iter_starts = 0;
  longint cyc = 0, cyc_iter = 0;
  int wcount [N];
  wgt_t wlast [N];
  logic bank_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.bank != bank_q) n_bank_swaps++;
    bank_q <= dut.bank;
    cyc++;
    if (dut.srt_clear) begin
      if (n_iter_starts > 0) $display("Monte-Carlo iteration took %0d cycles", cyc - cyc_iter);
      cyc_iter = cyc;
      n_iter_starts++;
      for (int i = 0; i < N; i++) wcount[i] = 0;
    end
    if (dut.w_valid) begin
      wcount[dut.w_idx]++;
      wlast[dut.w_idx] = dut.w_value;
    end
  end

  // ---- cube model ----
  function automatic vec3_t corner(int a, int s, int u, int v);
    int c [3];
    vec3_t p;
    c[a] = s * 30; c[(a + 1) % 3] = u * 30; c[(a + 2) % 3] = v * 30;
    p.x = coord_t'(c[0] * 16); p.y = coord_t'(c[1] * 16); p.z = coord_t'(c[2] * 16);
    return p;
  endfunction

  task automatic load_scene();
    int k;
    bbox_t b [2];
    k = 0;
    for (int a = 0; a < 3; a++)
      for (int s = -1; s <= 1; s += 2) begin
        tri_t t1, t2;
        // outward normal by the right-hand rule: reverse order on the - face
        t1 = '{v0: corner(a, s, -1, -1), v1: corner(a, s, 1, -1), v2: corner(a, s, 1, 1)};
        t2 = '{v0: corner(a, s, -1, -1), v1: corner(a, s, 1, 1), v2: corner(a, s, -1, 1)};
        if (s < 0) begin
          vec3_t tmp;
          tmp = t1.v1; t1.v1 = t1.v2; t1.v2 = tmp;
          tmp = t2.v1; t2.v1 = t2.v2; t2.v2 = tmp;
        end
        @(negedge clk); mdl_we = 1; mdl_addr = TW'(k); mdl_data = t1; k++;
        @(negedge clk); mdl_we = 1; mdl_addr = TW'(k); mdl_data = t2; k++;
      end
    @(negedge clk); mdl_we = 0;
    b[0] = '{x0: 290, y0: 210, x1: 350, y1: 270, conf: 16'd58982};
    b[1] = '{x0: 305, y0: 200, x1: 365, y1: 255, conf: 16'd32768};
    for (int i = 0; i < 2; i++) begin
      @(negedge clk); box_we = 1; box_addr = BOXID_W'(i); box_data = b[i];
    end
    @(negedge clk); box_we = 0;
  endtask

  task automatic run(int exp_iters, bit exp_conv);
    int t0;
    wgt_t wmax;
    bit found;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    t0 = n_iter_starts;
    while (!done) @(negedge clk);
    $display("last Monte-Carlo iteration and best-sample fetch took %0d cycles", cyc - cyc_iter);
    $display("run: iterations=%0d converged=%0d best_w=%0d box=%0d pose=(%0d,%0d,%0d) mm/16",
             iterations, converged, best_weight, best_box, int'(best_pose.x), int'(best_pose.y), int'(best_pose.z));
    $display("     culled=%0d depth_reads=%0d shared_px=%0d tri_waits=%0d resample_reads=%0d sample_iters=%0d",
             stat_culled, stat_depth_reads, stat_shared_px, stat_tri_waits, stat_resample_reads,
             stat_sample_iters);
    checks += 6;
    if (int'(iterations) != exp_iters) begin failures++; $display("iterations %0d exp %0d", iterations, exp_iters); end
    if (converged != exp_conv) begin failures++; $display("converged %0d", converged); end
    if (n_iter_starts - t0 != exp_iters) begin failures++; $display("MC iterations %0d", n_iter_starts - t0); end
    if (stat_sample_iters != 32'(31 * exp_iters)) begin failures++; $display("sample iterations %0d", stat_sample_iters); end
    if (stat_depth_reads > 32'(31 * exp_iters * 75 * 70)) begin failures++; $display("too many depth reads"); end
    if (busy) begin failures++; $display("busy after done"); end
    wmax = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (wcount[i] != 1) begin failures++; $display("sample %0d got %0d weights", i, wcount[i]); end
      if (wlast[i] > wmax) wmax = wlast[i];
    end
    found = 0;
    for (int i = 0; i < N; i++) begin
      sample_t s;
      s = dut.bank ? dut.u_list.mem1[i] : dut.u_list.mem0[i];
      if (wlast[i] == wmax && s.pose == best_pose && s.box == best_box) found = 1;
    end
    checks += 3;
    if (best_weight != wmax) begin failures++; $display("best weight %0d exp %0d", best_weight, wmax); end
    if (!found) begin failures++; $display("best pose is not a sample with the top weight"); end
    if (wmax == 0) begin failures++; $display("all weights zero"); end
  endtask

  initial begin
    start = 0; box_we = 0; mdl_we = 0; box_addr = 0; box_data = '0; mdl_addr = 0; mdl_data = '0;
    cam.fx = 16'd9600; cam.fy = 16'd9600; cam.cx = 16'sd5120; cam.cy = 16'sd3840;
    eps = 16'd12;
    alpha = 16'd21845; beta = 16'd21845; gamma = 16'd21845;
    tau = 16'hFFFF; k_top = (AW+1)'(62); max_iter = 8'd3; num_box = 2; num_tri = 12;
    init_z = coord_t'(800 * 16); z_spread = coord_t'(20 * 16);
    delta_t = 16'd80; delta_r = 16'd910; seed = 32'hC0FFEE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_scene();

    max_iter = 8'd2;
    run(2, 0);
    checks += 3;
    if (n_bank_swaps != 1) begin failures++; $display("bank swaps %0d exp 1", n_bank_swaps); end
    // a closed convex model shows at most half of its faces: about half of
    // all triangles offered must be culled
    checks++;
    $display("culled %0d of %0d triangles offered", stat_culled, 2 * N * 12);
    if (stat_culled * 10 < 32'(2 * N * 12 * 4) || stat_culled * 10 > 32'(2 * N * 12 * 6)) begin
      failures++; $display("culled fraction outside 40..60%%");
    end
    if (stat_resample_reads == 0) begin failures++; $display("no resampling reads"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
