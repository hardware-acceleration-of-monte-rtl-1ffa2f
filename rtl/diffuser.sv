// diffuser: copies each resampled sample into the other ping-pong bank with
// Gaussian noise added to its 6DoF pose, q' = q + N(0, delta).
//
// For every (dst, src) pair from the resampler it reads sample src of the
// current bank, adds an independent noise value to each of x, y, z, roll,
// pitch and yaw and writes the result to slot dst of the other bank (the
// detection id is carried over). Three cycles per sample.
// Noise: each pose component has its own xorshift64 generator; the sum of
// four 16-bit uniforms, centred, approximates a normal variable
// (Irwin-Hall, the simplest generator) and is scaled by sqrt(3) and the
// standard deviation: delta_t (1/16 mm) for the translation, delta_r
// (binary angle) for the rotation. Angles wrap; translations wrap on
// overflow, which a 32 m range makes harmless. Generator and widths are
// own choices; the paper gives only the Gaussian diffusion.
module diffuser
  import mc_pkg::*;
#(
  parameter int N  = 620,
  parameter int AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          seed_load,
  input  logic [31:0]   seed,
  input  logic [15:0]   delta_t,
  input  logic [15:0]   delta_r,
  // from the resampler
  input  logic          i_valid,
  output logic          i_ready,
  input  logic [AW-1:0] i_dst,
  input  logic [AW-1:0] i_src,
  // sample list: read current bank, write the other one
  output logic [AW-1:0] rd_addr,
  input  sample_t       rd_data,
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  output sample_t       wr_data
);
  localparam logic [16:0] SQRT3_Q16 = 17'd113512;

  typedef enum logic [1:0] {F_IDLE, F_READ, F_WRITE} fstate_e;
  fstate_e st;

  logic [AW-1:0] dst, src;
  logic [63:0]   rs [6];
  logic signed [31:0] nz [6];

  function automatic logic [63:0] xs64(input logic [63:0] v);
    logic [63:0] t;
    t = v ^ (v << 13);
    t = t ^ (t >> 7);
    t = t ^ (t << 17);
    return t;
  endfunction

  always_comb begin
    for (int d = 0; d < 6; d++) begin
      logic signed [18:0] g;
      logic signed [63:0] p;
      g = $signed({3'b0, rs[d][15:0]}) + $signed({3'b0, rs[d][31:16]}) +
          $signed({3'b0, rs[d][47:32]}) + $signed({3'b0, rs[d][63:48]}) - 19'sd131072;
      p = 64'(g) * $signed({1'b0, (d < 3) ? delta_t : delta_r}) * $signed({1'b0, SQRT3_Q16});
      nz[d] = 32'(p >>> 32);
    end
  end

  assign i_ready = (st == F_IDLE);
  assign rd_addr = src;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= F_IDLE;
      dst     <= '0;
      src     <= '0;
      wr_en   <= 1'b0;
      wr_addr <= '0;
      wr_data <= '0;
      for (int d = 0; d < 6; d++) rs[d] <= 64'h9E3779B97F4A7C15 ^ 64'(d + 1);
    end else begin
      wr_en <= 1'b0;
      if (seed_load) begin
        for (int d = 0; d < 6; d++)
          rs[d] <= {seed, 32'(d + 1)} ^ 64'h9E3779B97F4A7C15;
      end
      case (st)
        F_IDLE: if (i_valid) begin
          dst <= i_dst;
          src <= i_src;
          st  <= F_READ;
        end
        F_READ: st <= F_WRITE;            // sample read in flight
        F_WRITE: begin
          wr_en   <= 1'b1;
          wr_addr <= dst;
          wr_data.box        <= rd_data.box;
          wr_data.pose.x     <= rd_data.pose.x + coord_t'(nz[0]);
          wr_data.pose.y     <= rd_data.pose.y + coord_t'(nz[1]);
          wr_data.pose.z     <= rd_data.pose.z + coord_t'(nz[2]);
          wr_data.pose.roll  <= rd_data.pose.roll  + angle_t'(nz[3]);
          wr_data.pose.pitch <= rd_data.pose.pitch + angle_t'(nz[4]);
          wr_data.pose.yaw   <= rd_data.pose.yaw   + angle_t'(nz[5]);
          if (!seed_load)
            for (int d = 0; d < 6; d++) rs[d] <= xs64(rs[d]);
          st <= F_IDLE;
        end
        default: st <= F_IDLE;
      endcase
    end
  end
endmodule
