// sample_list_mem: the sample list, kept as a ping-pong pair of memories
// (Memory_0 and Memory_1 of the paper's resampling figure).
//
// Each bank holds N samples (6DoF pose and detection id). `bank` names the
// bank that holds the current Monte-Carlo iteration's samples: reads
// (rd_addr -> rd_data, one cycle latency) come from it, and the diffuser's
// writes go to the other bank, so the next iteration's list is built while
// the current one is still read. At the end of an iteration the controller
// flips `bank`. The sample initializer writes with `wr_cur` set, straight
// into the current bank. A second read port (rd2) serves the controller,
// e.g. to fetch the final best pose. Contents are not reset.
module sample_list_mem
  import mc_pkg::*;
#(
  parameter int N  = 620,
  parameter int AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          bank,
  input  logic [AW-1:0] rd_addr,
  output sample_t       rd_data,
  input  logic [AW-1:0] rd2_addr,
  output sample_t       rd2_data,
  input  logic          wr_en,
  input  logic          wr_cur,
  input  logic [AW-1:0] wr_addr,
  input  sample_t       wr_data
);
  sample_t mem0 [N];
  sample_t mem1 [N];

  logic wr_bank;
  assign wr_bank = wr_cur ? bank : ~bank;

  always_ff @(posedge clk) begin
    if (wr_en && !wr_bank) mem0[wr_addr] <= wr_data;
    if (wr_en &&  wr_bank) mem1[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    rd_data  <= bank ? mem1[rd_addr]  : mem0[rd_addr];
    rd2_data <= bank ? mem1[rd2_addr] : mem0[rd2_addr];
  end
endmodule
