// tmat_distributor_tb: a modelled sample list with random poses and a
// detection table; checks for each of the active cores, in order, that
// exactly one load pulse arrives, that its matrix matches
// Rz(yaw) Ry(pitch) Rx(roll) computed with real sin/cos (within 12 LSB of
// Q2.14, CORDIC and rounding error), that t is the pose translation and
// that the box is the sample's detection clipped to 256 x 192.
module tmat_distributor_tb;
  import mc_pkg::*;
  localparam int NC = 5;
  localparam int N = 40;
  localparam int AW = $clog2(N);
  localparam int CW = $clog2(NC + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done;
  logic [AW-1:0] base, smp_addr;
  logic [CW-1:0] n_active;
  sample_t smp_data;
  logic [BOXID_W-1:0] box_id;
  bbox_t box_in, load_box;
  logic [NC-1:0] load_en;
  tmat_t load_mat;
  bbox_t [NC-1:0] core_box;

  tmat_distributor #(.N_CORES(NC), .N(N)) dut (.*);

  sample_t list [N];
  bbox_t   dets [4];
  always_ff @(posedge clk) smp_data <= list[smp_addr];
  assign box_in = dets[box_id[1:0]];

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam real PI = 3.14159265358979;

  task automatic check_load(int c, sample_t s);
    real r, p, y, sr, cr, sp, cp, sy, cy;
    real e [3][3];
    bbox_t b;
    int maxerr;
    r = s.pose.roll * 2.0 * PI / 65536.0;
    p = s.pose.pitch * 2.0 * PI / 65536.0;
    y = s.pose.yaw * 2.0 * PI / 65536.0;
    sr = $sin(r); cr = $cos(r); sp = $sin(p); cp = $cos(p); sy = $sin(y); cy = $cos(y);
    e[0][0] = cy*cp; e[0][1] = cy*sp*sr - sy*cr; e[0][2] = cy*sp*cr + sy*sr;
    e[1][0] = sy*cp; e[1][1] = sy*sp*sr + cy*cr; e[1][2] = sy*sp*cr - cy*sr;
    e[2][0] = -sp;   e[2][1] = cp*sr;            e[2][2] = cp*cr;
    maxerr = 0;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        int d;
        d = int'(load_mat.r[i][j]) - int'(e[i][j] * 16384.0);
        if (d < 0) d = -d;
        if (d > maxerr) maxerr = d;
      end
    b = dets[s.box[1:0]];
    if (int'(b.x1) > int'(b.x0) + 256) b.x1 = b.x0 + 10'd256;
    if (int'(b.y1) > int'(b.y0) + 192) b.y1 = b.y0 + 10'd192;
    checks += 4;
    if (maxerr > 12) begin failures++; $display("core %0d: matrix error %0d LSB", c, maxerr); end
    if (load_mat.t != '{x: s.pose.x, y: s.pose.y, z: s.pose.z}) begin failures++; $display("t wrong"); end
    if (load_box != b) begin failures++; $display("box wrong"); end
    if (core_box[c] != b) begin failures++; $display("core_box wrong"); end
  endtask

  initial begin
    int c, bs;
    start = 0; base = 0; n_active = 0;
    for (int i = 0; i < N; i++) begin
      list[i].box = BOXID_W'($urandom_range(0, 3));
      list[i].pose.x = coord_t'($urandom); list[i].pose.y = coord_t'($urandom);
      list[i].pose.z = coord_t'($urandom);
      list[i].pose.roll = angle_t'($urandom); list[i].pose.pitch = angle_t'($urandom);
      list[i].pose.yaw = angle_t'($urandom);
    end
    list[0].pose.roll = 16'd16384; list[0].pose.pitch = 16'd32768; list[0].pose.yaw = 16'd49152;
    dets[0] = '{x0: 10, y0: 20, x1: 100, y1: 90, conf: 1};
    dets[1] = '{x0: 0, y0: 0, x1: 639, y1: 479, conf: 2};
    dets[2] = '{x0: 300, y0: 200, x1: 310, y1: 400, conf: 3};
    dets[3] = '{x0: 5, y0: 5, x1: 6, y1: 6, conf: 4};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      bs = run * NC;
      @(negedge clk);
      base = AW'(bs); n_active = CW'(run == 2 ? 3 : NC); start = 1;
      @(negedge clk); start = 0;
      c = 0;
      while (!done) begin
        @(posedge clk); #1;
        if (load_en != 0) begin
          checks++;
          if (load_en != NC'(1) << c) begin failures++; $display("load_en %b at core %0d", load_en, c); end
          check_load(c, list[bs + c]);
          c++;
        end
        @(negedge clk);
      end
      checks++;
      if (c != int'(n_active)) begin failures++; $display("%0d loads", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
