// sample_initializer_tb: N = 30 samples from three detections. Checks that
// every address is written once, in order, that sample i uses detection
// i mod 3, that its position re-projects (u = fx*X/z + cx) to a pixel inside
// that detection box (one pixel of slack for the divider's truncation),
// that z lies within init_z +- z_spread and that `done` pulses once.
module sample_initializer_tb;
  import mc_pkg::*;
  localparam int N = 30;
  localparam int AW = $clog2(N);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done, wr_en;
  logic [31:0] seed;
  logic [BOXID_W:0] num_box;
  cam_t cam;
  coord_t init_z, z_spread;
  logic [BOXID_W-1:0] box_id;
  bbox_t box_in;
  logic [AW-1:0] wr_addr;
  sample_t wr_data;
  sample_initializer #(.N(N)) dut (.*);

  bbox_t dets [3];
  assign box_in = dets[box_id % 3];

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nwr = 0, ndone = 0;
  always @(posedge clk) if (rst_n) begin
    if (done) ndone++;
    if (wr_en) begin
      real u, v;
      bbox_t b;
      b = dets[nwr % 3];
      checks += 5;
      if (int'(wr_addr) != nwr) begin failures++; $display("addr %0d exp %0d", wr_addr, nwr); end
      if (int'(wr_data.box) != nwr % 3) begin failures++; $display("sample %0d box %0d", nwr, wr_data.box); end
      u = (real'(cam.fx) * real'(wr_data.pose.x) / real'(wr_data.pose.z) + real'(cam.cx)) / 16.0;
      v = (real'(cam.fy) * real'(wr_data.pose.y) / real'(wr_data.pose.z) + real'(cam.cy)) / 16.0;
      if (u < real'(b.x0) - 1.0 || u > real'(b.x1) + 1.0) begin failures++; $display("sample %0d u=%f", nwr, u); end
      if (v < real'(b.y0) - 1.0 || v > real'(b.y1) + 1.0) begin failures++; $display("sample %0d v=%f", nwr, v); end
      if (wr_data.pose.z < init_z - z_spread || wr_data.pose.z > init_z + z_spread) begin
        failures++; $display("sample %0d z=%0d", nwr, wr_data.pose.z);
      end
      nwr++;
    end
  end

  initial begin
    start = 0; seed = 32'h1234567; num_box = 3;
    cam.fx = 16'd9000; cam.fy = 16'd9000; cam.cx = 16'sd5120; cam.cy = 16'sd3840;
    init_z = coord_t'(800 * 16); z_spread = coord_t'(100 * 16);
    dets[0] = '{x0: 10, y0: 20, x1: 60, y1: 50, conf: 1};
    dets[1] = '{x0: 400, y0: 300, x1: 630, y1: 470, conf: 2};
    dets[2] = '{x0: 320, y0: 240, x1: 321, y1: 241, conf: 3};
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (ndone == 0) @(negedge clk);
    repeat (10) @(negedge clk);
    checks += 2;
    if (nwr != N) begin failures++; $display("%0d writes", nwr); end
    if (ndone != 1) begin failures++; $display("%0d done pulses", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
