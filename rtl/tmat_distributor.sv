// tmat_distributor: transformation matrix distributor.
//
// For one sample iteration it walks the active raster cores c = 0..n-1,
// reads sample (base + c) from the sample list, turns its roll, pitch and
// yaw into sine/cosine pairs (three CORDIC units in parallel), builds
// R = Rz(yaw) * Ry(pitch) * Rx(roll) in Q2.14 with t = (x, y, z), looks up
// the sample's detection box and loads matrix and box into core c with a
// one-cycle `load_en[c]` pulse. The box is clipped to the core's region
// memory (MAX_BW x MAX_BH) here, so the depth distributor and the core see
// the same box. The per-core boxes and confidences stay visible on
// core_box / core_conf for the depth distributor and the weight merger.
// About 21 cycles per core; `done` pulses after the last one.
// The paper names the block and its job; the rotation order and the
// CORDIC are this design's choice.
module tmat_distributor
  import mc_pkg::*;
#(
  parameter int N_CORES = 20,
  parameter int N       = 620,
  parameter int MAX_BW  = 256,
  parameter int MAX_BH  = 192,
  parameter int AW      = $clog2(N),
  parameter int CW      = $clog2(N_CORES + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [AW-1:0]       base,       // first sample of this iteration
  input  logic [CW-1:0]       n_active,   // cores used (1..N_CORES)
  // sample list read port
  output logic [AW-1:0]       smp_addr,
  input  sample_t             smp_data,
  // detection table lookup (combinational)
  output logic [BOXID_W-1:0]  box_id,
  input  bbox_t               box_in,
  // to the raster cores
  output logic [N_CORES-1:0]  load_en,
  output tmat_t               load_mat,
  output bbox_t               load_box,
  output bbox_t [N_CORES-1:0] core_box,
  output logic                done
);
  typedef enum logic [2:0] {T_IDLE, T_READ, T_WAIT, T_TRIG, T_CORDIC, T_LOAD} tstate_e;
  tstate_e st;

  logic [CW-1:0] c;
  sample_t       smp;
  logic          cs_start;
  logic [2:0]    cs_done, cs_seen;
  rot_t          s [3];
  rot_t          k [3];   // cos

  for (genvar g = 0; g < 3; g++) begin : g_cordic
    angle_t a;
    assign a = (g == 0) ? smp.pose.roll : (g == 1) ? smp.pose.pitch : smp.pose.yaw;
    cordic_sincos u_cs (.clk, .rst_n, .start(cs_start), .angle(a),
                        .done(cs_done[g]), .sin_o(s[g]), .cos_o(k[g]));
  end

  function automatic rot_t qm(input rot_t a, input rot_t b);
    logic signed [31:0] p;
    p = a * b;
    return rot_t'(p >>> ROT_FRAC);
  endfunction

  // R = Rz(yaw) Ry(pitch) Rx(roll); s/k[0]=roll, [1]=pitch, [2]=yaw
  tmat_t m;
  always_comb begin
    rot_t sr, cr, sp, cp, sy, cy, cysp, sysp;
    sr = s[0]; cr = k[0]; sp = s[1]; cp = k[1]; sy = s[2]; cy = k[2];
    cysp = qm(cy, sp);
    sysp = qm(sy, sp);
    m.r[0][0] = qm(cy, cp);
    m.r[0][1] = qm(cysp, sr) - qm(sy, cr);
    m.r[0][2] = qm(cysp, cr) + qm(sy, sr);
    m.r[1][0] = qm(sy, cp);
    m.r[1][1] = qm(sysp, sr) + qm(cy, cr);
    m.r[1][2] = qm(sysp, cr) - qm(cy, sr);
    m.r[2][0] = -sp;
    m.r[2][1] = qm(cp, sr);
    m.r[2][2] = qm(cp, cr);
    m.t.x = smp.pose.x;
    m.t.y = smp.pose.y;
    m.t.z = smp.pose.z;
  end

  bbox_t clipped;
  always_comb begin
    clipped = box_in;
    if (32'(box_in.x1) > 32'(box_in.x0) + MAX_BW) clipped.x1 = xy_t'(32'(box_in.x0) + MAX_BW);
    if (32'(box_in.y1) > 32'(box_in.y0) + MAX_BH) clipped.y1 = xy_t'(32'(box_in.y0) + MAX_BH);
  end

  assign smp_addr = AW'(32'(base) + 32'(c));
  assign box_id   = smp.box;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= T_IDLE;
      c        <= '0;
      smp      <= '0;
      cs_start <= 1'b0;
      cs_seen  <= '0;
      load_en  <= '0;
      load_mat <= '0;
      load_box <= '0;
      core_box <= '0;
      done     <= 1'b0;
    end else begin
      cs_start <= 1'b0;
      load_en  <= '0;
      done     <= 1'b0;
      case (st)
        T_IDLE: if (start) begin
          c  <= '0;
          st <= T_READ;
        end
        T_READ:   st <= T_WAIT;                 // address out, data next cycle
        T_WAIT: begin
          smp <= smp_data;
          st  <= T_TRIG;
        end
        T_TRIG: begin
          cs_start <= 1'b1;
          cs_seen  <= '0;
          st       <= T_CORDIC;
        end
        T_CORDIC: begin
          if ((cs_seen | cs_done) == 3'b111) st <= T_LOAD;
          else cs_seen <= cs_seen | cs_done;
        end
        T_LOAD: begin
          load_en     <= N_CORES'(1) << c;
          load_mat    <= m;
          load_box    <= clipped;
          core_box[c] <= clipped;
          if (c == n_active - 1'b1) begin
            done <= 1'b1;
            st   <= T_IDLE;
          end else begin
            c  <= c + 1'b1;
            st <= T_READ;
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end
endmodule
