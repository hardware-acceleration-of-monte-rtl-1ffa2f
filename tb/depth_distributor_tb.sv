// depth_distributor_tb: three overlapping boxes as in the paper's depth
// distribution figure, one empty box and one idle core, over a modelled
// depth memory with RD_LAT latency (depth = a function of x, y). Checks
// that each core receives exactly the pixels of its own box, each once,
// with the right depth; that the number of memory reads equals the area
// of the union of the boxes (every shared pixel read once); that shared
// pixels were broadcast to several cores at once; and the cycle count.
module depth_distributor_tb;
  import mc_pkg::*;
  localparam int NC = 5;
  localparam int LAT = 3;
  localparam int CW = $clog2(NC + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, rd_req, done;
  bbox_t [NC-1:0] core_box;
  logic [CW-1:0] n_active;
  logic [ADDR_IMG_W-1:0] rd_addr;
  depth_t rd_data, px_depth;
  logic [NC-1:0] px_mask;
  xy_t px_x, px_y;
  logic [31:0] n_reads;

  depth_distributor #(.N_CORES(NC), .RD_LAT(LAT)) dut (.*);

  function automatic depth_t dfun(int a);
    return depth_t'((a * 37 + 11) % 4001);
  endfunction

  // memory model: data LAT cycles after the request
  logic [ADDR_IMG_W-1:0] pipe [LAT];
  always_ff @(posedge clk) begin
    pipe[0] <= rd_addr;
    for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
  end
  assign rd_data = dfun(int'(pipe[LAT-1]));

  int checks = 0, failures = 0;
  int got [NC][640][480];
  int shared = 0, reads = 0, bad = 0;
  always @(posedge clk) if (rst_n) begin
    if (rd_req) reads++;
    if ($countones(px_mask) > 1) shared++;
    for (int c = 0; c < NC; c++)
      if (px_mask[c]) begin
        got[c][px_x][px_y]++;
        if (px_depth != dfun(int'(px_y) * 640 + int'(px_x))) begin bad++; $display("bad depth at %0d,%0d core %0d t=%0t", px_x, px_y, c, $time); end
      end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit inb(bbox_t b, int x, int y);
    return x >= b.x0 && x < b.x1 && y >= b.y0 && y < b.y1;
  endfunction

  initial begin
    int uni, t0, cyc, wrong;
    start = 0; core_box = '0; n_active = 0;
    core_box[0] = '{x0: 100, y0: 50,  x1: 200, y1: 150, conf: 0};   // BBOX 1
    core_box[1] = '{x0: 150, y0: 70,  x1: 250, y1: 170, conf: 0};   // BBOX 2
    core_box[2] = '{x0: 60,  y0: 130, x1: 180, y1: 190, conf: 0};   // BBOX 3
    core_box[3] = '{x0: 300, y0: 300, x1: 300, y1: 320, conf: 0};   // empty
    core_box[4] = '{x0: 0,   y0: 0,   x1: 640, y1: 480, conf: 0};   // not active
    n_active = CW'(4);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; t0 = $time; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cyc = ($time - t0) / 10;
    uni = 0; wrong = 0;
    for (int y = 0; y < 480; y++)
      for (int x = 0; x < 640; x++) begin
        bit any;
        any = 0;
        for (int c = 0; c < NC; c++) begin
          int e;
          e = (c < 4 && inb(core_box[c], x, y)) ? 1 : 0;
          if (e == 1) any = 1;
          if (got[c][x][y] != e) wrong++;
        end
        if (any) uni++;
      end
    checks += 5;
    if (wrong != 0) begin failures++; $display("%0d pixel deliveries wrong", wrong); end
    if (bad != 0) begin failures++; $display("%0d depth values wrong", bad); end
    if (reads != uni || int'(n_reads) != uni) begin failures++; $display("reads %0d/%0d, union %0d", reads, n_reads, uni); end
    if (shared == 0) begin failures++; $display("no shared broadcast"); end
    // one cycle per read plus at most a few per row
    if (cyc > uni + 3 * 140 + 20) begin failures++; $display("slow: %0d cycles", cyc); end
    $display("union %0d px, %0d reads, %0d shared broadcasts, %0d cycles (serial: %0d)",
             uni, n_reads, shared, cyc, 100*100 + 100*100 + 120*60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
