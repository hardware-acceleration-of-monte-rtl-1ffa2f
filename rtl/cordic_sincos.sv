// cordic_sincos: sine and cosine of a binary angle by CORDIC rotation.
//
// `start` latches a 16-bit binary angle (2^16 = one turn); `done` pulses
// 17 cycles later with sin and cos in Q2.14. Angles in the left half plane
// are first turned by half a turn and the results negated, so the 16
// micro-rotations only cover -90..+90 degrees. The start vector is
// pre-scaled by 1/K (K = CORDIC gain) so no final multiply is needed.
// Error is a few LSB. Helper of the transformation matrix distributor; the
// paper does not say how sine and cosine are obtained.
module cordic_sincos
  import mc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  angle_t angle,
  output logic   done,
  output rot_t   sin_o,
  output rot_t   cos_o
);
  localparam int ITER = 16;
  // atan(2^-i) in binary-angle units
  localparam logic [15:0] ATAN [ITER] = '{16'd8192, 16'd4836, 16'd2555, 16'd1297,
                                          16'd651, 16'd326, 16'd163, 16'd81,
                                          16'd41, 16'd20, 16'd10, 16'd5,
                                          16'd3, 16'd1, 16'd1, 16'd0};
  localparam logic signed [17:0] INV_K = 18'sd9949;   // 2^14 / 1.6468

  logic signed [17:0] x, y, z;
  logic [4:0]         i;
  logic               busy, flip;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0; z <= '0; i <= '0;
      busy <= 1'b0; flip <= 1'b0; done <= 1'b0;
      sin_o <= '0; cos_o <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        // quadrants 1 and 2 (90..270 deg) are turned by 180 degrees
        flip <= angle[15] ^ angle[14];
        z    <= (angle[15] ^ angle[14]) ? $signed({{2{~angle[15]}}, ~angle[15], angle[14:0]})
                                        : $signed({{2{angle[15]}}, angle});
        x    <= INV_K;
        y    <= '0;
        i    <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        if (i == 5'(ITER)) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          sin_o <= flip ? rot_t'(-y) : rot_t'(y);
          cos_o <= flip ? rot_t'(-x) : rot_t'(x);
        end else begin
          if (!z[17]) begin
            x <= x - (y >>> i);
            y <= y + (x >>> i);
            z <= z - $signed({2'b0, ATAN[i[3:0]]});
          end else begin
            x <= x + (y >>> i);
            y <= y - (x >>> i);
            z <= z + $signed({2'b0, ATAN[i[3:0]]});
          end
          i <= i + 1'b1;
        end
      end
    end
  end
endmodule
