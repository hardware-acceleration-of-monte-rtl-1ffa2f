// raster_core: scores one Monte-Carlo sample against the depth observation.
//
// A sample is started with `load` (transform matrix and sample box). While
// the depth distributor streams pixels in (dpx_*), the core stores those
// inside its box in a private region memory (MAX_BW x MAX_BH depths, row
// stride MAX_BW) and counts the non-zero ones as Nb. Model triangles then
// arrive one per raster iteration on tri_valid/tri_ready; each passes the
// two-stage pipeline rc_geometry (transform, backface cull, project, set up)
// -> rc_pixel (scan, depth compare, inlier accumulate), the two stages
// working on consecutive triangles at the same time. When the triangle
// flagged `tri_last` has been scanned, `score_valid` rises and holds
// {N, Nr, Nb} until the next `load`.
// The partial-rasterization idea of the paper is that only pixels inside the
// sample box are scanned; the box is clipped here to the region memory size
// (own choice: 256 x 192 depths, 21 BRAM36 per core, within the 24 per core
// that the paper's 480 BRAM36 for 20 cores allow).
module raster_core
  import mc_pkg::*;
#(
  parameter int MAX_BW = 256,
  parameter int MAX_BH = 192
) (
  input  logic   clk,
  input  logic   rst_n,
  input  cam_t   cam,
  input  depth_t eps,
  // sample load
  input  logic   load,
  input  tmat_t  load_mat,
  input  bbox_t  load_box,
  // depth pixels from the depth distributor
  input  logic   dpx_valid,
  input  xy_t    dpx_x,
  input  xy_t    dpx_y,
  input  depth_t dpx_depth,
  // triangles from the object vertex distributor
  input  logic   tri_valid,
  output logic   tri_ready,
  input  tri_t   tri_in,
  input  logic   tri_last,
  // result
  output logic   score_valid,
  output score_t score,
  output logic   culled
);
  localparam int AW = $clog2(MAX_BW * MAX_BH);

  tmat_t  mat;
  bbox_t  box;
  cnt_t   nb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mat <= '0;
      box <= '0;
    end else if (load) begin
      mat <= load_mat;
      box <= load_box;
    end
  end

  // ---- region memory (observation depth of the sample box) ----
  depth_t region [MAX_BW * MAX_BH];
  logic          wr_in;
  logic [AW-1:0] wr_addr;
  always_comb begin
    wr_in = dpx_valid &&
            (dpx_x >= box.x0) && (dpx_x < box.x1) && (32'(dpx_x) < 32'(box.x0) + MAX_BW) &&
            (dpx_y >= box.y0) && (dpx_y < box.y1) && (32'(dpx_y) < 32'(box.y0) + MAX_BH);
    wr_addr = AW'((32'(dpx_y) - 32'(box.y0)) * MAX_BW + (32'(dpx_x) - 32'(box.x0)));
  end
  always_ff @(posedge clk) begin
    if (wr_in) region[wr_addr] <= dpx_depth;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        nb <= '0;
    else if (load)                     nb <= '0;
    else if (wr_in && dpx_depth != 0)  nb <= nb + 1'b1;
  end

  logic          rd_en;
  logic [AW-1:0] rd_addr;
  depth_t        rd_data;
  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= region[rd_addr];
  end

  // ---- pipeline ----
  logic       s_valid, s_ready;
  tri_setup_t s_data;
  logic       last_done, pix_busy;
  cnt_t       n_inl, n_ren;

  rc_geometry #(.MAX_BW(MAX_BW), .MAX_BH(MAX_BH)) u_geom (
    .clk, .rst_n, .mat, .box, .cam,
    .tri_valid, .tri_ready, .tri_in, .tri_last,
    .out_valid(s_valid), .out_ready(s_ready), .out(s_data), .culled);

  rc_pixel #(.MAX_BW(MAX_BW), .MAX_BH(MAX_BH)) u_pix (
    .clk, .rst_n, .clear(load), .box, .eps,
    .in_valid(s_valid), .in_ready(s_ready), .in(s_data),
    .rd_en, .rd_addr, .rd_data,
    .n_inlier(n_inl), .n_render(n_ren), .last_done, .busy(pix_busy));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         score_valid <= 1'b0;
    else if (load)      score_valid <= 1'b0;
    else if (last_done) score_valid <= 1'b1;
  end

  assign score = '{n: n_inl, nr: n_ren, nb: nb};
endmodule
