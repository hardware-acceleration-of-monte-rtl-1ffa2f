// index_sorter_tb: inserts random (index, weight) pairs, many of them with
// equal weights, into an index_sorter and checks after every insertion
// that slot k holds the k-th pair of a reference list sorted by descending
// weight with ties in arrival order; checks count, clear, and the one
// insertion per cycle rate.
module index_sorter_tb;
  import mc_pkg::*;
  localparam int N = 40;
  localparam int AW = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, ins_valid;
  logic [AW-1:0] ins_idx, rd_pos, rd_idx;
  wgt_t ins_w, rd_w;
  logic [AW:0] count;

  index_sorter #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_idx [$];
  int ref_w   [$];

  task automatic ref_insert(int idx, int w);
    int p;
    p = 0;
    while (p < ref_w.size() && ref_w[p] >= w) p++;
    ref_idx.insert(p, idx);
    ref_w.insert(p, w);
  endtask

  task automatic compare_all();
    for (int k = 0; k < ref_w.size(); k++) begin
      rd_pos = AW'(k);
      #1;
      checks++;
      if (int'(rd_idx) != ref_idx[k] || int'(rd_w) != ref_w[k]) begin
        failures++;
        $display("slot %0d: idx %0d w %0d, expected idx %0d w %0d", k, rd_idx, rd_w, ref_idx[k], ref_w[k]);
      end
    end
    checks++;
    if (int'(count) != ref_w.size()) begin failures++; $display("count %0d exp %0d", count, ref_w.size()); end
    @(negedge clk);
  endtask

  initial begin
    clear = 0; ins_valid = 0; ins_idx = 0; ins_w = 0; rd_pos = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      ref_idx.delete(); ref_w.delete();
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      // back-to-back insertions: one per cycle
      for (int i = 0; i < N; i++) begin
        int w;
        w = (round == 0) ? int'($urandom_range(0, 65535)) : int'($urandom_range(0, 7)) * 1000;
        ins_valid = 1; ins_idx = AW'(i); ins_w = wgt_t'(w);
        ref_insert(i, w);
        @(negedge clk);
        if (i % 7 == 6) begin ins_valid = 0; compare_all(); end
      end
      ins_valid = 0;
      @(negedge clk);
      compare_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
