// sample_initializer: creates the first sample list from the detections.
//
// Sample i is assigned detection (i mod num_box), so every detection gets
// an equal share of the N samples. Its position is a random pixel (u, v)
// inside that box, back-projected through the pinhole model at depth
// z = init_z + U(-1,1)*z_spread: X = (u - cx)*z/fx, Y = (v - cy)*z/fy (two
// dividers in parallel, ~42 cycles per sample). Roll, pitch and yaw are
// uniform random binary angles. Samples are written into the current bank
// of the sample list; `done` pulses after the last one.
// The paper says only that this block generates the N samples from the
// CNN output; the placement rule above is this design's simplest choice.
// Random numbers: xorshift32.
module sample_initializer
  import mc_pkg::*;
#(
  parameter int N  = 620,
  parameter int AW = $clog2(N)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [31:0]        seed,
  input  logic [BOXID_W:0]   num_box,
  input  cam_t               cam,
  input  coord_t             init_z,
  input  coord_t             z_spread,
  // detection table lookup (combinational)
  output logic [BOXID_W-1:0] box_id,
  input  bbox_t              box_in,
  // sample list write (current bank)
  output logic               wr_en,
  output logic [AW-1:0]      wr_addr,
  output sample_t            wr_data,
  output logic               done
);
  localparam int NW = 40;

  typedef enum logic [2:0] {I_IDLE, I_RND, I_POS, I_DIV, I_WAIT, I_WR} istate_e;
  istate_e st;

  logic [AW-1:0]      i;
  logic [BOXID_W-1:0] b;
  logic [31:0]        rng;
  logic [31:0]        r1, r2;
  coord_t             z;
  logic signed [NW-1:0] num_x, num_y, qx, qy;
  logic               dstart;
  logic [1:0]         ddone, dseen;
  logic [1:0]         dbusy_unused;

  function automatic logic [31:0] xs32(input logic [31:0] v);
    logic [31:0] t;
    t = v ^ (v << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  assign box_id = b;

  // random pixel of the box, in 1/16 px at the pixel centre
  logic signed [16:0] pu, pv;
  always_comb begin
    logic [XY_W-1:0] w, h;
    logic [25:0]     ou, ov;
    w  = box_in.x1 - box_in.x0;
    h  = box_in.y1 - box_in.y0;
    ou = 26'(r1[15:0]) * 26'(w);
    ov = 26'(r1[31:16]) * 26'(h);
    pu = $signed({3'b0, box_in.x0 + ou[25:16], 4'b1000});
    pv = $signed({3'b0, box_in.y0 + ov[25:16], 4'b1000});
  end

  sdiv_seq #(.NW(NW), .DW(17)) u_dx (.clk, .rst_n, .start(dstart), .num(num_x),
    .den($signed({1'b0, cam.fx})), .busy(dbusy_unused[0]), .done(ddone[0]), .quo(qx));
  sdiv_seq #(.NW(NW), .DW(17)) u_dy (.clk, .rst_n, .start(dstart), .num(num_y),
    .den($signed({1'b0, cam.fy})), .busy(dbusy_unused[1]), .done(ddone[1]), .quo(qy));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= I_IDLE;
      i       <= '0;
      b       <= '0;
      rng     <= 32'h1;
      r1      <= '0;
      r2      <= '0;
      z       <= '0;
      num_x   <= '0;
      num_y   <= '0;
      dstart  <= 1'b0;
      dseen   <= '0;
      wr_en   <= 1'b0;
      wr_addr <= '0;
      wr_data <= '0;
      done    <= 1'b0;
    end else begin
      dstart <= 1'b0;
      wr_en  <= 1'b0;
      done   <= 1'b0;
      case (st)
        I_IDLE: if (start) begin
          i   <= '0;
          b   <= '0;
          rng <= (seed == 0) ? 32'h6A09E667 : seed;
          st  <= I_RND;
        end
        I_RND: begin
          r1  <= xs32(rng);
          r2  <= xs32(xs32(rng));
          rng <= xs32(xs32(xs32(rng)));
          st  <= I_POS;
        end
        I_POS: begin
          logic signed [36:0] dzs;
          dzs   = $signed({{21{r2[31]}}, r2[31:16]}) * z_spread;
          z     <= init_z + coord_t'(dzs >>> 15);
          st    <= I_DIV;
        end
        I_DIV: begin
          num_x  <= NW'((pu - cam.cx) * z);
          num_y  <= NW'((pv - cam.cy) * z);
          dstart <= 1'b1;
          dseen  <= '0;
          st     <= I_WAIT;
        end
        I_WAIT: begin
          if ((dseen | ddone) == 2'b11) st <= I_WR;
          else dseen <= dseen | ddone;
        end
        I_WR: begin
          wr_en              <= 1'b1;
          wr_addr            <= i;
          wr_data.box        <= b;
          wr_data.pose.x     <= coord_t'(qx);
          wr_data.pose.y     <= coord_t'(qy);
          wr_data.pose.z     <= z;
          wr_data.pose.roll  <= r2[15:0];
          wr_data.pose.pitch <= rng[15:0];
          wr_data.pose.yaw   <= rng[31:16];
          b <= (32'(b) + 1 >= 32'(num_box)) ? '0 : b + 1'b1;
          if (32'(i) == N - 1) begin
            done <= 1'b1;
            st   <= I_IDLE;
          end else begin
            i  <= i + 1'b1;
            st <= I_RND;
          end
        end
        default: st <= I_IDLE;
      endcase
    end
  end
endmodule
