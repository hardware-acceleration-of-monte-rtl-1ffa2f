// rc_geometry: front half of the raster core pipeline (transformation,
// backface culling, projection and triangle setup).
//
// One model triangle is accepted on tri_valid/tri_ready. It is moved into
// the camera frame with the sample's transform (p' = R p + t), culled when
// the dot product of its normal with the viewing ray to vertex 0 is not
// negative (the paper's normal-versus-view-direction test), projected with
// the pinhole model u = fx*X/Z + cx (six dividers in parallel) and set up
// for scan conversion: screen-space z gradients (two more dividers) and the
// pixel rectangle where the triangle's bounding box meets the sample box.
// The result leaves on out_valid/out_ready as a tri_setup_t, so the next
// triangle is set up while the pixel stage scans the current one.
// Latency: about 1 + (40+1) + (56+1) + 2 cycles per triangle.
// Own choices: counter-clockwise-seen-from-outside winding, a 1 mm near
// plane and a +-1024 pixel screen range (triangles outside are dropped),
// and linear (not perspective-correct) depth interpolation across a
// triangle, which is exact enough for the small triangles of object models.
module rc_geometry
  import mc_pkg::*;
#(
  parameter int MAX_BW = 256,
  parameter int MAX_BH = 192
) (
  input  logic       clk,
  input  logic       rst_n,
  // per-sample setup, stable while triangles flow
  input  tmat_t      mat,
  input  bbox_t      box,
  input  cam_t       cam,
  // triangles
  input  logic       tri_valid,
  output logic       tri_ready,
  input  tri_t       tri_in,
  input  logic       tri_last,
  // set-up triangles to the pixel stage
  output logic       out_valid,
  input  logic       out_ready,
  output tri_setup_t out,
  output logic       culled      // pulse: a triangle was backface-culled
);
  localparam int ZNEAR = 16;            // 1 mm
  localparam int SCR   = 1 << 14;       // +-1024 px in 1/16 px
  localparam int PNW   = 40;            // projection numerator width
  localparam int GNW   = GRAD_W;

  typedef enum logic [2:0] {G_IDLE, G_XFORM, G_PROJ, G_SETUP, G_GRAD, G_OUT} gstate_e;
  gstate_e st;

  tri_t   tri_q;
  logic   last_q;
  vec3_t  [2:0] p;           // camera-frame vertices

  // ---------------- transformation (combinational from tri_q) -------------
  function automatic coord_t xf_row(input rot_t [2:0] r, input vec3_t v, input coord_t t);
    logic signed [39:0] acc;
    acc = $signed(r[0]) * $signed(v.x) + $signed(r[1]) * $signed(v.y) + $signed(r[2]) * $signed(v.z);
    return coord_t'((acc >>> ROT_FRAC) + 40'(t));
  endfunction

  vec3_t [2:0] pv;
  always_comb begin
    for (int i = 0; i < 3; i++) begin
      vec3_t vin;
      vin = (i == 0) ? tri_q.v0 : (i == 1) ? tri_q.v1 : tri_q.v2;
      pv[i].x = xf_row(mat.r[0], vin, mat.t.x);
      pv[i].y = xf_row(mat.r[1], vin, mat.t.y);
      pv[i].z = xf_row(mat.r[2], vin, mat.t.z);
    end
  end

  // ---------------- backface test on registered camera-frame vertices -----
  logic signed [COORD_W:0]   e1x, e1y, e1z, e2x, e2y, e2z;
  logic signed [2*COORD_W+2:0] nx, ny, nz;
  logic signed [71:0]        ndot;
  logic                      back, near_clip;
  always_comb begin
    e1x = p[1].x - p[0].x;  e1y = p[1].y - p[0].y;  e1z = p[1].z - p[0].z;
    e2x = p[2].x - p[0].x;  e2y = p[2].y - p[0].y;  e2z = p[2].z - p[0].z;
    nx  = e1y * e2z - e1z * e2y;
    ny  = e1z * e2x - e1x * e2z;
    nz  = e1x * e2y - e1y * e2x;
    ndot = 72'(nx) * 72'(p[0].x) + 72'(ny) * 72'(p[0].y) + 72'(nz) * 72'(p[0].z);
    back = (ndot >= 0);
    near_clip = (p[0].z < COORD_W'(ZNEAR)) || (p[1].z < COORD_W'(ZNEAR)) || (p[2].z < COORD_W'(ZNEAR));
  end

  // ---------------- projection dividers ----------------------------------
  logic              div_start;
  logic [5:0]        pdone;
  logic signed [PNW-1:0] pq [6];
  logic [5:0]        pdone_seen;
  for (genvar i = 0; i < 6; i++) begin : g_pdiv
    logic signed [PNW-1:0] num;
    logic                  busy_unused;
    always_comb begin
      if (i < 3) num = PNW'($signed({1'b0, cam.fx}) * p[i % 3].x);
      else       num = PNW'($signed({1'b0, cam.fy}) * p[i % 3].y);
    end
    sdiv_seq #(.NW(PNW), .DW(COORD_W)) u_div (
      .clk, .rst_n, .start(div_start), .num, .den(p[i % 3].z),
      .busy(busy_unused), .done(pdone[i]), .quo(pq[i]));
  end

  // projected coordinates (valid once all six are done)
  logic signed [PNW:0] uf [3];
  logic signed [PNW:0] vf [3];
  logic                off_screen;
  always_comb begin
    off_screen = 1'b0;
    for (int i = 0; i < 3; i++) begin
      uf[i] = (PNW+1)'(pq[i])   + (PNW+1)'(cam.cx);
      vf[i] = (PNW+1)'(pq[i+3]) + (PNW+1)'(cam.cy);
      if (uf[i] < -(PNW+1)'(SCR) || uf[i] >= (PNW+1)'(SCR) || vf[i] < -(PNW+1)'(SCR) || vf[i] >= (PNW+1)'(SCR)) off_screen = 1'b1;
    end
  end

  // ---------------- triangle setup ----------------------------------------
  pix_t  [2:0] su, sv;
  coord_t [2:0] sz;
  logic signed [36:0] area;
  logic signed [GNW-1:0] gnum_x, gnum_y;
  always_comb begin
    logic signed [16:0] du1, du2, dv1, dv2;
    logic signed [COORD_W:0] dz1, dz2;
    du1 = su[1] - su[0];  du2 = su[2] - su[0];
    dv1 = sv[1] - sv[0];  dv2 = sv[2] - sv[0];
    dz1 = sz[1] - sz[0];  dz2 = sz[2] - sz[0];
    area   = 37'(du1 * dv2) - 37'(du2 * dv1);
    gnum_x = (GNW'(dz1 * dv2) - GNW'(dz2 * dv1)) <<< GRAD_FRAC;
    gnum_y = (GNW'(du1 * dz2) - GNW'(du2 * dz1)) <<< GRAD_FRAC;
  end

  logic             gstart;
  logic [1:0]       gdone;
  grad_t            gq [2];
  logic [1:0]       gdone_seen;
  logic [1:0]       gbusy_unused;
  sdiv_seq #(.NW(GNW), .DW(37)) u_gx (.clk, .rst_n, .start(gstart), .num(gnum_x), .den(area),
    .busy(gbusy_unused[0]), .done(gdone[0]), .quo(gq[0]));
  sdiv_seq #(.NW(GNW), .DW(37)) u_gy (.clk, .rst_n, .start(gstart), .num(gnum_y), .den(area),
    .busy(gbusy_unused[1]), .done(gdone[1]), .quo(gq[1]));

  // pixel rectangle: triangle bounding box clipped to the sample box
  function automatic logic signed [12:0] pmin3(input pix_t a, input pix_t b, input pix_t c);
    pix_t m;
    m = (a < b) ? a : b;
    m = (c < m) ? c : m;
    return 13'(m >>> 4);
  endfunction
  function automatic logic signed [12:0] pmax3(input pix_t a, input pix_t b, input pix_t c);
    pix_t m;
    m = (a > b) ? a : b;
    m = (c > m) ? c : m;
    return 13'(m >>> 4);
  endfunction

  logic signed [12:0] rx0, rx1, ry0, ry1;
  logic               rect_empty;
  always_comb begin
    logic signed [12:0] bx0, bx1, by0, by1;
    bx0 = $signed({3'b0, box.x0});
    by0 = $signed({3'b0, box.y0});
    bx1 = $signed({3'b0, box.x1}) - 13'sd1;
    by1 = $signed({3'b0, box.y1}) - 13'sd1;
    if (bx1 > bx0 + 13'(MAX_BW - 1)) bx1 = bx0 + 13'(MAX_BW - 1);
    if (by1 > by0 + 13'(MAX_BH - 1)) by1 = by0 + 13'(MAX_BH - 1);
    rx0 = pmin3(su[0], su[1], su[2]);
    rx1 = pmax3(su[0], su[1], su[2]);
    ry0 = pmin3(sv[0], sv[1], sv[2]);
    ry1 = pmax3(sv[0], sv[1], sv[2]);
    if (rx0 < bx0) rx0 = bx0;
    if (ry0 < by0) ry0 = by0;
    if (rx1 > bx1) rx1 = bx1;
    if (ry1 > by1) ry1 = by1;
    rect_empty = (rx0 > rx1) || (ry0 > ry1);
  end

  // ---------------- control ------------------------------------------------
  assign tri_ready = (st == G_IDLE);
  assign out_valid = (st == G_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= G_IDLE;
      tri_q      <= '0;
      last_q     <= 1'b0;
      p          <= '0;
      su         <= '0;
      sv         <= '0;
      sz         <= '0;
      out        <= '0;
      div_start  <= 1'b0;
      gstart     <= 1'b0;
      pdone_seen <= '0;
      gdone_seen <= '0;
      culled     <= 1'b0;
    end else begin
      div_start <= 1'b0;
      gstart    <= 1'b0;
      culled    <= 1'b0;
      case (st)
        G_IDLE: if (tri_valid) begin
          tri_q  <= tri_in;
          last_q <= tri_last;
          st     <= G_XFORM;
        end
        G_XFORM: begin
          p  <= pv;
          st <= G_PROJ;
          div_start  <= 1'b1;
          pdone_seen <= '0;
        end
        G_PROJ: begin
          // culling decided on the registered vertices while dividing
          if (back || near_clip) begin
            if (back && !near_clip) culled <= 1'b1;
            out      <= '0;
            out.skip <= 1'b1;
            out.last <= last_q;
            st       <= G_OUT;
          end else if ((pdone_seen | pdone) == 6'h3f) begin
            for (int i = 0; i < 3; i++) begin
              su[i] <= pix_t'(uf[i]);
              sv[i] <= pix_t'(vf[i]);
              sz[i] <= p[i].z;
            end
            if (off_screen) begin
              out      <= '0;
              out.skip <= 1'b1;
              out.last <= last_q;
              st       <= G_OUT;
            end else begin
              st <= G_SETUP;
            end
          end else begin
            pdone_seen <= pdone_seen | pdone;
          end
        end
        G_SETUP: begin
          if (area == 0 || rect_empty) begin
            out      <= '0;
            out.skip <= 1'b1;
            out.last <= last_q;
            st       <= G_OUT;
          end else begin
            gstart     <= 1'b1;
            gdone_seen <= '0;
            st         <= G_GRAD;
          end
        end
        G_GRAD: begin
          if ((gdone_seen | gdone) == 2'b11) begin
            out.skip  <= 1'b0;
            out.last  <= last_q;
            out.u     <= su;
            out.v     <= sv;
            out.z0    <= sz[0];
            out.dzdx  <= gq[0];
            out.dzdy  <= gq[1];
            out.a_neg <= area[36];
            out.xmin  <= xy_t'(rx0);
            out.xmax  <= xy_t'(rx1);
            out.ymin  <= xy_t'(ry0);
            out.ymax  <= xy_t'(ry1);
            st        <= G_OUT;
          end else begin
            gdone_seen <= gdone_seen | gdone;
          end
        end
        G_OUT: if (out_ready) st <= G_IDLE;
        default: st <= G_IDLE;
      endcase
    end
  end
endmodule
