// depth_distributor: reads the observation depth once per pixel and hands
// it to every raster core whose sample box covers that pixel.
//
// The boxes of the active cores split the image into sub-regions, each
// owned by a set of cores (the paper's Fig. 9). The scan visits the
// rows from the topmost box edge to the bottommost one; within a row it
// starts at the leftmost box that spans the row, reads pixels one per
// cycle while at least one box covers the current x, and otherwise jumps
// in one cycle to the next box left edge on that row. Each read is tagged
// with the set of covering cores (core mask); when the depth returns
// RD_LAT cycles later it is broadcast with that mask, so a pixel shared by
// k boxes costs one memory read instead of k. The more the boxes overlap,
// the fewer reads (n_reads) and cycles an iteration takes.
// Memory interface: one request per cycle (rd_req, rd_addr = y*640 + x),
// data back exactly RD_LAT cycles later (own choice: fixed-latency
// on-board memory port). `done` pulses when the last pixel is out.
// px_depth is the memory's read data wired straight through; the mask and
// coordinates are delayed by RD_LAT cycles to line up with it.
module depth_distributor
  import mc_pkg::*;
#(
  parameter int N_CORES = 20,
  parameter int RD_LAT  = 2,
  parameter int CW      = $clog2(N_CORES + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  bbox_t [N_CORES-1:0] core_box,
  input  logic [CW-1:0]       n_active,
  // depth image memory
  output logic                rd_req,
  output logic [ADDR_IMG_W-1:0] rd_addr,
  input  depth_t              rd_data,
  // broadcast to the raster cores
  output logic [N_CORES-1:0]  px_mask,
  output xy_t                 px_x,
  output xy_t                 px_y,
  output depth_t              px_depth,
  output logic                done,
  output logic [31:0]         n_reads      // reads of the last run
);
  typedef enum logic [1:0] {D_IDLE, D_ROW, D_SCAN, D_DRAIN} dstate_e;
  dstate_e st;

  logic [N_CORES-1:0] act;
  xy_t  x, y, ymax;
  logic [N_CORES-1:0] row_act, cov;
  logic               any_cov, has_next, row_any;
  xy_t                next_x, row_x;

  // rows and columns covered by the active boxes at (x, y)
  always_comb begin
    row_any  = 1'b0;
    has_next = 1'b0;
    next_x   = '1;
    row_x    = '1;
    for (int c = 0; c < N_CORES; c++) begin
      row_act[c] = act[c] && (y >= core_box[c].y0) && (y < core_box[c].y1) &&
                   (core_box[c].x0 < core_box[c].x1);
      cov[c]     = row_act[c] && (x >= core_box[c].x0) && (x < core_box[c].x1);
      if (row_act[c]) begin
        row_any = 1'b1;
        if (core_box[c].x0 < row_x) row_x = core_box[c].x0;
        if (core_box[c].x0 > x && core_box[c].x0 < next_x) begin
          next_x   = core_box[c].x0;
          has_next = 1'b1;
        end
      end
    end
    any_cov = |cov;
  end

  // tag pipeline matching the memory latency
  logic [N_CORES-1:0] tag_mask [RD_LAT];
  xy_t                tag_x    [RD_LAT];
  xy_t                tag_y    [RD_LAT];
  logic               issue;
  assign issue   = (st == D_SCAN) && any_cov;
  assign rd_req  = issue;
  assign rd_addr = ADDR_IMG_W'(32'(y) * IMG_W + 32'(x));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < RD_LAT; i++) begin
        tag_mask[i] <= '0; tag_x[i] <= '0; tag_y[i] <= '0;
      end
    end else begin
      tag_mask[0] <= issue ? cov : '0;
      tag_x[0]    <= x;
      tag_y[0]    <= y;
      for (int i = 1; i < RD_LAT; i++) begin
        tag_mask[i] <= tag_mask[i-1];
        tag_x[i]    <= tag_x[i-1];
        tag_y[i]    <= tag_y[i-1];
      end
    end
  end

  assign px_mask  = tag_mask[RD_LAT-1];
  assign px_x     = tag_x[RD_LAT-1];
  assign px_y     = tag_y[RD_LAT-1];
  assign px_depth = rd_data;

  logic [$clog2(RD_LAT+2)-1:0] drain;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= D_IDLE;
      act     <= '0;
      x       <= '0;
      y       <= '0;
      ymax    <= '0;
      done    <= 1'b0;
      drain   <= '0;
      n_reads <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        D_IDLE: if (start) begin
          logic [N_CORES-1:0] a;
          xy_t ymin_v, ymax_v;
          ymin_v = '1;
          ymax_v = '0;
          for (int c = 0; c < N_CORES; c++) begin
            a[c] = (c < int'(n_active)) && (core_box[c].x0 < core_box[c].x1) &&
                   (core_box[c].y0 < core_box[c].y1);
            if (a[c] && core_box[c].y0 < ymin_v) ymin_v = core_box[c].y0;
            if (a[c] && core_box[c].y1 > ymax_v) ymax_v = core_box[c].y1;
          end
          act     <= a;
          y       <= ymin_v;
          ymax    <= ymax_v;
          n_reads <= '0;
          st      <= (a == '0) ? D_DRAIN : D_ROW;
          drain   <= '0;
        end
        D_ROW: begin
          if (y >= ymax) begin
            st    <= D_DRAIN;
            drain <= '0;
          end else if (!row_any) begin
            y <= y + 1'b1;
          end else begin
            x  <= row_x;
            st <= D_SCAN;
          end
        end
        D_SCAN: begin
          if (any_cov) begin
            n_reads <= n_reads + 1;
            x <= x + 1'b1;
          end else if (has_next) begin
            x <= next_x;
          end else begin
            y  <= y + 1'b1;
            st <= D_ROW;
          end
        end
        D_DRAIN: begin
          if (32'(drain) == RD_LAT) begin
            done <= 1'b1;
            st   <= D_IDLE;
          end
          drain <= drain + 1'b1;
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
