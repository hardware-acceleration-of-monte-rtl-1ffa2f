// sdiv_seq: sequential signed integer divider, one quotient bit per cycle.
//
// Restoring division on magnitudes; the quotient is truncated toward zero
// and its sign fixed afterwards. A pulse on `start` latches num/den; `done`
// pulses NW+1 cycles later with `quo` valid (held until the next start).
// Division by zero returns the largest magnitude with the numerator's sign.
// Helper of the raster core, the sample initializer and the weight merger;
// the paper names no divider, this is the simplest one.
module sdiv_seq #(
  parameter int NW = 32,   // numerator / quotient width
  parameter int DW = 32    // denominator width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [NW-1:0] num,
  input  logic signed [DW-1:0] den,
  output logic                 busy,
  output logic                 done,
  output logic signed [NW-1:0] quo
);
  localparam int CW = $clog2(NW + 1);

  logic [NW-1:0] q_mag;     // numerator bits shifting out, quotient in
  logic [DW:0]   rem;
  logic [DW-1:0] d_mag;
  logic          neg;
  logic [CW-1:0] cnt;

  logic [DW:0]   rem_sh;
  logic [DW:0]   rem_sub;
  always_comb begin
    rem_sh  = {rem[DW-1:0], q_mag[NW-1]};
    rem_sub = rem_sh - {1'b0, d_mag};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      quo   <= '0;
      q_mag <= '0;
      rem   <= '0;
      d_mag <= '0;
      neg   <= 1'b0;
      cnt   <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        q_mag <= num[NW-1] ? NW'(-num) : NW'(num);
        d_mag <= den[DW-1] ? DW'(-den) : DW'(den);
        neg   <= num[NW-1] ^ den[DW-1];
        rem   <= '0;
        cnt   <= CW'(NW);
      end else if (busy) begin
        if (cnt == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
          quo  <= neg ? -$signed(q_mag) : $signed(q_mag);
        end else begin
          cnt <= cnt - 1'b1;
          if (!rem_sub[DW]) begin
            rem   <= rem_sub;
            q_mag <= {q_mag[NW-2:0], 1'b1};
          end else begin
            rem   <= rem_sh;
            q_mag <= {q_mag[NW-2:0], 1'b0};
          end
        end
      end
    end
  end
endmodule
