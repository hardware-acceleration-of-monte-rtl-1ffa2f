// index_sorter: keeps the sample indices ordered by weight as weights arrive.
//
// Only the index and the weight move, never the pose, as in the paper's
// sorting step. The sorter is a register array in descending weight order
// (the order of the paper's worked example: W65 > W24 > W76 ...). Each
// ins_valid cycle inserts one (index, weight) pair: every slot compares its
// weight with the new one in parallel, the slots below the insertion point
// shift down by one and the new pair drops in, so a list of n samples is
// sorted in n cycles, overlapped with the weight merger. Equal weights
// keep arrival order. `clear` empties it; rd_pos reads slot rd_pos
// combinationally (slot 0 is the heaviest sample).
module index_sorter
  import mc_pkg::*;
#(
  parameter int N  = 620,
  parameter int AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          ins_valid,
  input  logic [AW-1:0] ins_idx,
  input  wgt_t          ins_w,
  input  logic [AW-1:0] rd_pos,
  output logic [AW-1:0] rd_idx,
  output wgt_t          rd_w,
  output logic [AW:0]   count
);
  logic [AW-1:0] idx_a [N];
  wgt_t          w_a   [N];
  logic [N-1:0]  used;
  logic [N-1:0]  ge;

  always_comb begin
    for (int i = 0; i < N; i++) ge[i] = used[i] && (w_a[i] >= ins_w);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used <= '0;
      for (int i = 0; i < N; i++) begin
        idx_a[i] <= '0;
        w_a[i]   <= '0;
      end
    end else if (clear) begin
      used <= '0;
    end else if (ins_valid) begin
      for (int i = 0; i < N; i++) begin
        if (!ge[i]) begin
          if (i == 0 || ge[i-1]) begin
            idx_a[i] <= ins_idx;
            w_a[i]   <= ins_w;
            used[i]  <= 1'b1;
          end else begin
            idx_a[i] <= idx_a[i-1];
            w_a[i]   <= w_a[i-1];
            used[i]  <= used[i-1];
          end
        end
      end
    end
  end

  assign rd_idx = idx_a[rd_pos];
  assign rd_w   = w_a[rd_pos];

  always_comb begin
    count = '0;
    for (int i = 0; i < N; i++) count = count + (AW+1)'(used[i]);
  end
endmodule
