// diffuser_tb: feeds (dst, src) pairs into the diffuser with a model of the
// sample list and checks: every dst slot is written exactly once, the
// detection id is copied from src, and the added noise over 3000 samples
// has near-zero mean and the requested standard deviation (within 5%) for
// translation and rotation, with no wrap in the noise itself. Also checks
// the 3-cycle-per-sample rate and that delta = 0 copies the pose exactly.
module diffuser_tb;
  import mc_pkg::*;
  localparam int N = 1000;
  localparam int AW = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic seed_load;
  logic [31:0] seed;
  logic [15:0] delta_t, delta_r;
  logic i_valid, i_ready;
  logic [AW-1:0] i_dst, i_src, rd_addr, wr_addr;
  sample_t rd_data, wr_data;
  logic wr_en;

  diffuser #(.N(N)) dut (.*);

  sample_t src_mem [N];
  sample_t dst_mem [N];
  int      wcount  [N];
  always_ff @(posedge clk) rd_data <= src_mem[rd_addr];
  always @(posedge clk) if (wr_en) begin dst_mem[wr_addr] <= wr_data; wcount[wr_addr]++; end

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pass(int dt, int dr, output real m [6], output real sd [6], output int cyc);
    real s1 [6], s2 [6];
    int  t0, nd;
    for (int d = 0; d < 6; d++) begin s1[d] = 0; s2[d] = 0; end
    for (int i = 0; i < N; i++) wcount[i] = 0;
    delta_t = 16'(dt); delta_r = 16'(dr);
    t0 = $time;
    for (int i = 0; i < N; i++) begin
      i_valid = 1; i_dst = AW'(i); i_src = AW'((i * 7) % N);
      @(posedge clk);
      while (!i_ready) @(posedge clk);
      @(negedge clk);
    end
    i_valid = 0;
    repeat (4) @(negedge clk);
    cyc = ($time - t0) / 10;
    for (int i = 0; i < N; i++) begin
      sample_t a, b;
      int v [6];
      a = src_mem[(i * 7) % N]; b = dst_mem[i];
      checks += 2;
      if (wcount[i] != 1) begin failures++; $display("slot %0d written %0d times", i, wcount[i]); end
      if (b.box != a.box) begin failures++; $display("box not copied at %0d", i); end
      v[0] = int'(coord_t'(b.pose.x - a.pose.x));
      v[1] = int'(coord_t'(b.pose.y - a.pose.y));
      v[2] = int'(coord_t'(b.pose.z - a.pose.z));
      v[3] = int'($signed(angle_t'(b.pose.roll - a.pose.roll)));
      v[4] = int'($signed(angle_t'(b.pose.pitch - a.pose.pitch)));
      v[5] = int'($signed(angle_t'(b.pose.yaw - a.pose.yaw)));
      for (int d = 0; d < 6; d++) begin s1[d] += v[d]; s2[d] += real'(v[d]) * v[d]; end
    end
    for (int d = 0; d < 6; d++) begin
      m[d]  = s1[d] / N;
      sd[d] = $sqrt(s2[d] / N - m[d] * m[d]);
    end
  endtask

  initial begin
    real m [6], sd [6];
    int cyc;
    seed_load = 0; seed = 0; delta_t = 0; delta_r = 0; i_valid = 0; i_dst = 0; i_src = 0;
    for (int i = 0; i < N; i++) begin
      src_mem[i].box = BOXID_W'(i);
      src_mem[i].pose.x = coord_t'($urandom_range(0, 20000)) - 20'sd10000;
      src_mem[i].pose.y = coord_t'($urandom_range(0, 20000)) - 20'sd10000;
      src_mem[i].pose.z = coord_t'($urandom_range(8000, 24000));
      src_mem[i].pose.roll  = angle_t'($urandom);
      src_mem[i].pose.pitch = angle_t'($urandom);
      src_mem[i].pose.yaw   = angle_t'($urandom);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); seed_load = 1; seed = 32'hC0FFEE; @(negedge clk); seed_load = 0;

    pass(160, 300, m, sd, cyc);    // 10 mm, ~1.6 degrees
    for (int d = 0; d < 6; d++) begin
      real want;
      want = (d < 3) ? 160.0 : 300.0;
      $display("dof %0d: mean %f sd %f (want 0, %f)", d, m[d], sd[d], want);
      checks += 2;
      if (sd[d] < 0.95 * want || sd[d] > 1.05 * want) begin failures++; $display("sd off"); end
      if (m[d] > 0.15 * want || m[d] < -0.15 * want) begin failures++; $display("mean off"); end
    end
    checks++;
    if (cyc > 3 * N + 10) begin failures++; $display("rate: %0d cycles for %0d samples", cyc, N); end
    pass(0, 0, m, sd, cyc);
    for (int d = 0; d < 6; d++) begin
      checks++;
      if (m[d] != 0.0 || sd[d] != 0.0) begin failures++; $display("delta 0 changed dof %0d", d); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
