// vertex_distributor: object vertex distributor with the model memory.
//
// Holds the object's geometric model as a list of triangles (three
// vertices each, object frame, 1/16 mm), loaded through the write port.
// On `start` it broadcasts triangle 0, 1, ... num_tri-1 to all active
// raster cores; each triangle is one raster iteration. A triangle stays
// offered (tri_valid[c]) to each core until that core has taken it
// (valid & ready), and the next one is fetched when every active core
// has, so cores of different speed stay in step at triangle granularity.
// tri_last marks the final triangle. `done` pulses when it was taken by
// all. Memory read latency is one cycle, giving one idle cycle between
// triangles. Storing plain triangles instead of an indexed vertex list is
// this design's own choice.
module vertex_distributor
  import mc_pkg::*;
#(
  parameter int N_CORES = 20,
  parameter int MAX_TRI = 4096,
  parameter int TW      = $clog2(MAX_TRI),
  parameter int CW      = $clog2(N_CORES + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // model load
  input  logic               mdl_we,
  input  logic [TW-1:0]      mdl_addr,
  input  tri_t               mdl_data,
  input  logic [TW:0]        num_tri,
  // control
  input  logic               start,
  input  logic [CW-1:0]      n_active,
  output logic               done,
  // to the raster cores
  output logic [N_CORES-1:0] tri_valid,
  input  logic [N_CORES-1:0] tri_ready,
  output tri_t               tri_data,
  output logic               tri_last
);
  tri_t model [MAX_TRI];

  always_ff @(posedge clk) begin
    if (mdl_we) model[mdl_addr] <= mdl_data;
  end

  typedef enum logic [1:0] {V_IDLE, V_FETCH, V_OFFER} vstate_e;
  vstate_e st;

  logic [TW:0]        idx;
  logic [N_CORES-1:0] act, taken, taken_nx;

  always_ff @(posedge clk) begin
    tri_data <= model[idx[TW-1:0]];
  end

  assign tri_last  = (idx == num_tri - 1'b1);
  assign tri_valid = (st == V_OFFER) ? (act & ~taken) : '0;
  assign taken_nx  = taken | (tri_valid & tri_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= V_IDLE;
      idx   <= '0;
      act   <= '0;
      taken <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        V_IDLE: if (start) begin
          for (int c = 0; c < N_CORES; c++) act[c] <= (c < int'(n_active));
          idx   <= '0;
          taken <= '0;
          st    <= (num_tri == 0) ? V_IDLE : V_FETCH;
          if (num_tri == 0) done <= 1'b1;
        end
        V_FETCH: st <= V_OFFER;          // model read in flight
        V_OFFER: begin
          if ((taken_nx & act) == act) begin
            taken <= '0;
            if (tri_last) begin
              done <= 1'b1;
              st   <= V_IDLE;
            end else begin
              idx <= idx + 1'b1;
              st  <= V_FETCH;
            end
          end else begin
            taken <= taken_nx;
          end
        end
        default: st <= V_IDLE;
      endcase
    end
  end
endmodule
