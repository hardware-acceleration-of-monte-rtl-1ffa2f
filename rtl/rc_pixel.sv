// rc_pixel: back half of the raster core pipeline (scan conversion and
// pixel-wise depth comparison with the inlier accumulator).
//
// Takes one set-up triangle (tri_setup_t) at a time and walks its pixel
// rectangle row by row, one pixel per cycle. For each pixel centre it
// evaluates the three edge functions (covered when all have the sign of the
// triangle's area, edges included) and the interpolated depth
// z = z0 + dzdx*(px-u0) + dzdy*(py-v0). The observed depth of the pixel is
// read from the core's region memory (address issued this cycle, data one
// cycle later) and compared in the next stage: a covered pixel counts as
// rendered (Nr) and, when the observation is non-zero and
// |z_rendered - z_observed| < eps, as an inlier (N). This is the paper's
// 1D depth form of the inlier test; the rendered image itself is never
// stored, only the counts.
// `clear` zeroes the counts at the start of a sample; `last_done` pulses
// once the triangle flagged `last` has left the compare stage.
module rc_pixel
  import mc_pkg::*;
#(
  parameter int MAX_BW = 256,
  parameter int MAX_BH = 192,
  parameter int AW     = $clog2(MAX_BW * MAX_BH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  bbox_t       box,          // sample box (region origin)
  input  depth_t      eps,          // inlier threshold, mm
  input  logic        in_valid,
  output logic        in_ready,
  input  tri_setup_t  in,
  // region memory read port (1-cycle latency)
  output logic        rd_en,
  output logic [AW-1:0] rd_addr,
  input  depth_t      rd_data,
  // accumulated results
  output cnt_t        n_inlier,
  output cnt_t        n_render,
  output logic        last_done,
  output logic        busy
);
  tri_setup_t t;
  logic       active;
  xy_t        px, py;

  // ---- per-pixel evaluation (combinational) ----
  logic signed [16:0] pu, pv;
  logic signed [35:0] e0, e1, e2;
  logic               covered;
  logic signed [79:0] zacc;
  logic signed [31:0] zr;
  always_comb begin
    pu = $signed({3'b0, px, 4'b1000});
    pv = $signed({3'b0, py, 4'b1000});
    e0 = 36'(($signed(17'(t.u[2])) - t.u[1]) * (pv - t.v[1])) - 36'(($signed(17'(t.v[2])) - t.v[1]) * (pu - t.u[1]));
    e1 = 36'(($signed(17'(t.u[0])) - t.u[2]) * (pv - t.v[2])) - 36'(($signed(17'(t.v[0])) - t.v[2]) * (pu - t.u[2]));
    e2 = 36'(($signed(17'(t.u[1])) - t.u[0]) * (pv - t.v[0])) - 36'(($signed(17'(t.v[1])) - t.v[0]) * (pu - t.u[0]));
    if (t.a_neg) covered = (e0 <= 0) && (e1 <= 0) && (e2 <= 0);
    else         covered = (e0 >= 0) && (e1 >= 0) && (e2 >= 0);
    zacc = 80'(t.dzdx) * 80'(pu - t.u[0]) + 80'(t.dzdy) * 80'(pv - t.v[0]);
    zr   = 32'(t.z0) + 32'(zacc >>> GRAD_FRAC);
  end

  logic last_px;
  assign last_px  = (px == t.xmax) && (py == t.ymax);
  assign in_ready = !active;
  assign busy     = active;

  assign rd_en   = active && !t.skip;
  assign rd_addr = AW'((32'(py) - 32'(box.y0)) * MAX_BW + (32'(px) - 32'(box.x0)));

  // ---- compare stage registers ----
  logic               c_valid, c_inside, c_last;
  logic signed [31:0] c_z;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t        <= '0;
      active   <= 1'b0;
      px       <= '0;
      py       <= '0;
      c_valid  <= 1'b0;
      c_inside <= 1'b0;
      c_last   <= 1'b0;
      c_z      <= '0;
    end else begin
      c_valid  <= 1'b0;
      c_last   <= 1'b0;
      if (!active) begin
        if (in_valid) begin
          t      <= in;
          active <= 1'b1;
          px     <= in.xmin;
          py     <= in.ymin;
        end
      end else if (t.skip) begin
        active <= 1'b0;
        c_last <= t.last;
      end else begin
        c_valid  <= 1'b1;
        c_inside <= covered;
        c_z      <= zr;
        if (last_px) begin
          active <= 1'b0;
          c_last <= t.last;
        end else if (px == t.xmax) begin
          px <= t.xmin;
          py <= py + 1'b1;
        end else begin
          px <= px + 1'b1;
        end
      end
    end
  end

  // ---- compare and accumulate ----
  logic signed [31:0] dz;
  logic               is_inlier;
  always_comb begin
    dz        = c_z - $signed({12'b0, rd_data, 4'b0});
    is_inlier = (rd_data != 0) && ((dz < 0 ? -dz : dz) < $signed({12'b0, eps, 4'b0}));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_inlier  <= '0;
      n_render  <= '0;
      last_done <= 1'b0;
    end else begin
      last_done <= c_last;
      if (clear) begin
        n_inlier <= '0;
        n_render <= '0;
      end else if (c_valid && c_inside) begin
        n_render <= n_render + 1'b1;
        if (is_inlier) n_inlier <= n_inlier + 1'b1;
      end
    end
  end
endmodule
