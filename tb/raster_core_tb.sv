// raster_core_tb: self-checking test of one raster core.
//
// Scenes: (1) a square of two triangles facing the camera plus the same
// square wound the other way (must be culled), with a flat observation that
// matches on the left half only; (2) a tilted triangle, with the observation
// equal to the expected rendered depth on a checkerboard and 50 mm off
// elsewhere; (3) scene 2 turned 90 degrees about the optical axis.
// The reference model projects the vertices with the same integer
// truncation (u = fx*X/Z + cx in 1/16 px), tests pixel centres with exact
// integer edge functions and interpolates depth with real barycentric
// weights; with eps = 10 mm the counts do not depend on sub-mm rounding.
// Checked: N, Nr, Nb and the number of culled triangles.
module raster_core_tb;
  import mc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cam_t   cam;
  depth_t eps;
  logic   load;
  tmat_t  load_mat;
  bbox_t  load_box;
  logic   dpx_valid;
  xy_t    dpx_x, dpx_y;
  depth_t dpx_depth;
  logic   tri_valid, tri_ready, tri_last;
  tri_t   tri_in;
  logic   score_valid;
  score_t score;
  logic   culled;

  raster_core dut (.*);

  int checks = 0, failures = 0;
  int culled_cnt = 0;
  always @(posedge clk) if (culled) culled_cnt++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scene description
  tri_t   tris [4];
  int     ntri;
  int     obs [640][480];

  // ---------------- reference model ----------------
  function automatic longint proj(longint f, longint a, longint z, longint c);
    return (f * a) / z + c;    // SV integer division truncates toward zero
  endfunction

  function automatic longint rotc(tmat_t m, int row, vec3_t v);
    longint acc;
    acc = longint'(m.r[row][0]) * longint'(v.x) + longint'(m.r[row][1]) * longint'(v.y)
        + longint'(m.r[row][2]) * longint'(v.z);
    return (acc >>> 14) + longint'(row == 0 ? m.t.x : row == 1 ? m.t.y : m.t.z);
  endfunction

  longint cx3 [3], cy3 [3], cz3 [3];
  longint su [3], sv [3];

  // returns 1 when the triangle is front facing and projects; fills su/sv/cz3
  function automatic bit ref_setup(tmat_t m, tri_t t);
    vec3_t vv [3];
    longint e1 [3], e2 [3], n [3], d;
    vv[0] = t.v0; vv[1] = t.v1; vv[2] = t.v2;
    for (int i = 0; i < 3; i++) begin
      cx3[i] = rotc(m, 0, vv[i]); cy3[i] = rotc(m, 1, vv[i]); cz3[i] = rotc(m, 2, vv[i]);
    end
    e1[0] = cx3[1]-cx3[0]; e1[1] = cy3[1]-cy3[0]; e1[2] = cz3[1]-cz3[0];
    e2[0] = cx3[2]-cx3[0]; e2[1] = cy3[2]-cy3[0]; e2[2] = cz3[2]-cz3[0];
    n[0] = e1[1]*e2[2] - e1[2]*e2[1];
    n[1] = e1[2]*e2[0] - e1[0]*e2[2];
    n[2] = e1[0]*e2[1] - e1[1]*e2[0];
    d = n[0]*cx3[0] + n[1]*cy3[0] + n[2]*cz3[0];
    if (d >= 0) return 0;
    for (int i = 0; i < 3; i++) begin
      su[i] = proj(cam.fx, cx3[i], cz3[i], cam.cx);
      sv[i] = proj(cam.fy, cy3[i], cz3[i], cam.cy);
    end
    return 1;
  endfunction

  function automatic longint edgef(int a, int b, longint pu, longint pv);
    return (su[b]-su[a])*(pv-sv[a]) - (sv[b]-sv[a])*(pu-su[a]);
  endfunction

  // covered? and rendered depth in mm (real) at pixel (x,y)
  function automatic bit ref_pix(int x, int y, output real zmm);
    longint pu, pv, e0, e1, e2, a;
    pu = x*16 + 8; pv = y*16 + 8;
    a  = (su[1]-su[0])*(sv[2]-sv[0]) - (su[2]-su[0])*(sv[1]-sv[0]);
    e0 = edgef(1, 2, pu, pv); e1 = edgef(2, 0, pu, pv); e2 = edgef(0, 1, pu, pv);
    zmm = 0.0;
    if (a == 0) return 0;
    if (a > 0 && (e0 < 0 || e1 < 0 || e2 < 0)) return 0;
    if (a < 0 && (e0 > 0 || e1 > 0 || e2 > 0)) return 0;
    zmm = (real'(e0) * cz3[0] + real'(e1) * cz3[1] + real'(e2) * cz3[2]) / real'(a) / 16.0;
    return 1;
  endfunction

  // ---------------- stimulus helpers ----------------
  task automatic run_sample(tmat_t m, bbox_t b, int exp_n, int exp_nr, int exp_nb, int exp_cull);
    int c0, k;
    @(negedge clk);
    load = 1; load_mat = m; load_box = b;
    @(negedge clk);
    load = 0;
    for (int y = b.y0; y < b.y1; y++)
      for (int x = b.x0; x < b.x1; x++) begin
        dpx_valid = 1; dpx_x = xy_t'(x); dpx_y = xy_t'(y); dpx_depth = depth_t'(obs[x][y]);
        @(negedge clk);
      end
    // a pixel outside the box must be ignored
    dpx_valid = 1; dpx_x = b.x1; dpx_y = b.y0; dpx_depth = 16'd1234;
    @(negedge clk);
    dpx_valid = 0;
    c0 = culled_cnt;
    k = 0;
    while (k < ntri) begin
      tri_valid = 1; tri_in = tris[k]; tri_last = (k == ntri - 1);
      @(posedge clk);
      if (tri_ready) k++;
      @(negedge clk);
    end
    tri_valid = 0; tri_last = 0;
    while (!score_valid) @(negedge clk);
    checks += 4;
    if (score.n != cnt_t'(exp_n))   begin failures++; $display("N   %0d exp %0d", score.n, exp_n); end
    if (score.nr != cnt_t'(exp_nr)) begin failures++; $display("Nr  %0d exp %0d", score.nr, exp_nr); end
    if (score.nb != cnt_t'(exp_nb)) begin failures++; $display("Nb  %0d exp %0d", score.nb, exp_nb); end
    if (culled_cnt - c0 != exp_cull) begin failures++; $display("culled %0d exp %0d", culled_cnt - c0, exp_cull); end
    $display("sample: N=%0d Nr=%0d Nb=%0d culled=%0d", score.n, score.nr, score.nb, culled_cnt - c0);
  endtask

  function automatic vec3_t mkv(int x, int y, int z);   // mm -> 1/16 mm
    vec3_t v;
    v.x = coord_t'(x * 16); v.y = coord_t'(y * 16); v.z = coord_t'(z * 16);
    return v;
  endfunction

  function automatic tmat_t mkmat(int rot90, int tz);
    tmat_t m;
    m = '0;
    if (rot90 != 0) begin
      m.r[0][1] = -16'sd16384; m.r[1][0] = 16'sd16384; m.r[2][2] = 16'sd16384;
    end else begin
      m.r[0][0] = 16'sd16384; m.r[1][1] = 16'sd16384; m.r[2][2] = 16'sd16384;
    end
    m.t.z = coord_t'(tz * 16);
    return m;
  endfunction

  // expected counts: obs[][] filled by the caller
  task automatic expect_counts(tmat_t m, bbox_t b, output int en, output int enr,
                               output int enb, output int ecull);
    real z;
    en = 0; enr = 0; enb = 0; ecull = 0;
    for (int y = b.y0; y < b.y1; y++)
      for (int x = b.x0; x < b.x1; x++) if (obs[x][y] != 0) enb++;
    for (int k = 0; k < ntri; k++) begin
      if (!ref_setup(m, tris[k])) begin ecull++; continue; end
      for (int y = b.y0; y < b.y1; y++)
        for (int x = b.x0; x < b.x1; x++)
          if (ref_pix(x, y, z)) begin
            enr++;
            if (obs[x][y] != 0 && ((z - obs[x][y]) < 10.0) && ((obs[x][y] - z) < 10.0)) en++;
          end
    end
  endtask

  initial begin
    tmat_t m;
    bbox_t b;
    int en, enr, enb, ecull;
    real z;
    load = 0; dpx_valid = 0; tri_valid = 0; tri_last = 0; tri_in = '0;
    load_mat = '0; load_box = '0; dpx_x = 0; dpx_y = 0; dpx_depth = 0;
    cam.fx = 16'd8000; cam.fy = 16'd8000; cam.cx = 16'sd5120; cam.cy = 16'sd3840;
    eps = 16'd10;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- scene 1: facing square + reversed copy ----
    b = '{x0: 10'd290, y0: 10'd210, x1: 10'd350, y1: 10'd270, conf: 16'h8000};
    m = mkmat(0, 1000);
    tris[0] = '{v0: mkv(-30,-30,0), v1: mkv(30,30,0), v2: mkv(30,-30,0)};
    tris[1] = '{v0: mkv(-30,-30,0), v1: mkv(-30,30,0), v2: mkv(30,30,0)};
    tris[2] = '{v0: mkv(-30,-30,0), v1: mkv(30,-30,0), v2: mkv(30,30,0)};
    ntri = 3;
    for (int y = 0; y < 480; y++)
      for (int x = 0; x < 640; x++)
        obs[x][y] = (y == 215) ? 0 : (x < 320) ? 1000 : 1040;
    expect_counts(m, b, en, enr, enb, ecull);
    $display("scene1 expected N=%0d Nr=%0d Nb=%0d culled=%0d", en, enr, enb, ecull);
    run_sample(m, b, en, enr, enb, ecull);

    // ---- scene 2: tilted triangle, checkerboard observation ----
    b = '{x0: 10'd280, y0: 10'd200, x1: 10'd370, y1: 10'd290, conf: 16'h8000};
    tris[0] = '{v0: mkv(-40,-40,-50), v1: mkv(0,40,0), v2: mkv(40,-40,50)};
    ntri = 1;
    for (int rot = 0; rot < 2; rot++) begin
      m = mkmat(rot, 1000);
      void'(ref_setup(m, tris[0]));
      for (int y = 0; y < 480; y++)
        for (int x = 0; x < 640; x++) begin
          if (ref_pix(x, y, z)) obs[x][y] = int'(z) + (((x + y) % 2 == 0) ? 0 : 50);
          else obs[x][y] = 900;
        end
      expect_counts(m, b, en, enr, enb, ecull);
      $display("scene2/%0d expected N=%0d Nr=%0d Nb=%0d culled=%0d", rot, en, enr, enb, ecull);
      checks++;
      if (en == 0 || enr == 0) begin failures++; $display("degenerate scene"); end
      run_sample(m, b, en, enr, enb, ecull);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
