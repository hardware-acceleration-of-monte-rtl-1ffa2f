// mc_pkg: number formats and record types shared by the Monte-Carlo pose
// estimation accelerator.
//
// Fixed-point conventions (all of them this design's own choice; the
// hardware is described as fixed-point but no formats are given):
//   coord_t  signed, 1/16 mm per LSB (COORD_FRAC = 4), used for model
//            vertices, camera-frame points and pose translations.
//   angle_t  unsigned binary angle, 2^16 LSB = one full turn, so angles wrap
//            for free on overflow.
//   rot_t    signed Q2.14 rotation-matrix entry.
//   pix_t    signed sub-pixel image coordinate, 1/16 pixel per LSB.
//   depth_t  unsigned observed depth in mm, 0 meaning "no measurement".
//   wgt_t    unsigned Q0.16 weight / confidence / coefficient.
// Image size (640 x 480) and the sizes in mc_top follow the paper.
package mc_pkg;

  localparam int COORD_W    = 20;
  localparam int COORD_FRAC = 4;
  localparam int ANGLE_W    = 16;
  localparam int ROT_W      = 16;
  localparam int ROT_FRAC   = 14;
  localparam int PIX_W      = 16;
  localparam int DEPTH_W    = 16;
  localparam int WGT_W      = 16;
  localparam int IMG_W      = 640;
  localparam int IMG_H      = 480;
  localparam int XY_W       = 10;   // integer pixel coordinate width
  localparam int ADDR_IMG_W = 19;   // 640*480 < 2^19
  localparam int BOXID_W    = 6;    // up to 64 detections
  localparam int CNT_W      = 18;   // inlier / pixel counters (>= 256*192)

  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic        [ANGLE_W-1:0] angle_t;
  typedef logic signed [ROT_W-1:0]   rot_t;
  typedef logic signed [PIX_W-1:0]   pix_t;
  typedef logic        [DEPTH_W-1:0] depth_t;
  typedef logic        [WGT_W-1:0]   wgt_t;
  typedef logic        [XY_W-1:0]    xy_t;
  typedef logic        [CNT_W-1:0]   cnt_t;

  typedef struct packed {
    coord_t x;
    coord_t y;
    coord_t z;
  } vec3_t;

  typedef struct packed {
    vec3_t v0;
    vec3_t v1;
    vec3_t v2;
  } tri_t;

  // 6DoF pose: translation of the model origin in the camera frame and
  // roll/pitch/yaw (rotations about x, y, z; R = Rz(yaw) Ry(pitch) Rx(roll)).
  typedef struct packed {
    coord_t x;
    coord_t y;
    coord_t z;
    angle_t roll;
    angle_t pitch;
    angle_t yaw;
  } pose_t;

  typedef struct packed {
    pose_t                    pose;
    logic [BOXID_W-1:0]       box;   // detection this sample belongs to
  } sample_t;

  // Detection box, half open: x0 <= x < x1, y0 <= y < y1, plus confidence c.
  typedef struct packed {
    xy_t  x0;
    xy_t  y0;
    xy_t  x1;
    xy_t  y1;
    wgt_t conf;
  } bbox_t;

  // Rigid transform p' = R p + t.
  typedef struct packed {
    rot_t [2:0][2:0] r;   // r[row][col]
    vec3_t           t;
  } tmat_t;

  // Camera intrinsics: focal lengths and centre in 1/16 pixel.
  typedef struct packed {
    logic [15:0] fx;
    logic [15:0] fy;
    pix_t        cx;
    pix_t        cy;
  } cam_t;

  // Per-core result of one sample: inliers N, rendered pixels Nr,
  // observed (non-zero) pixels in the box Nb.
  typedef struct packed {
    cnt_t n;
    cnt_t nr;
    cnt_t nb;
  } score_t;

  // Triangle set up for scan conversion (raster core, geometry -> pixel).
  localparam int GRAD_FRAC = 16;          // fraction bits of the z gradients
  localparam int GRAD_W    = 56;
  typedef logic signed [GRAD_W-1:0] grad_t;

  typedef struct packed {
    logic        skip;    // culled or degenerate: no pixels
    logic        last;    // last triangle of the model
    pix_t  [2:0] u;       // screen x of the three vertices, 1/16 px
    pix_t  [2:0] v;       // screen y
    coord_t      z0;      // camera depth of vertex 0
    grad_t       dzdx;    // dz per 1/16 px step in x, GRAD_FRAC fraction bits
    grad_t       dzdy;
    logic        a_neg;   // signed area negative (front face)
    xy_t         xmin;    // pixel rectangle to scan (inclusive)
    xy_t         xmax;
    xy_t         ymin;
    xy_t         ymax;
  } tri_setup_t;

endpackage
