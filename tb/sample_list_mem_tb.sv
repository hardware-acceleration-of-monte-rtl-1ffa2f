// sample_list_mem_tb: ping-pong sample list. Writes with wr_cur = 0 must
// land in the bank not being read (reads keep returning the old contents),
// become visible after `bank` flips, and writes with wr_cur = 1 must land in
// the bank being read. Both read ports are checked against a model of the
// two banks, with random traffic over several flips.
module sample_list_mem_tb;
  import mc_pkg::*;
  localparam int N = 24;
  localparam int AW = $clog2(N);
  logic clk = 0;
  always #5 clk = ~clk;
  logic bank, wr_en, wr_cur;
  logic [AW-1:0] rd_addr, rd2_addr, wr_addr;
  sample_t rd_data, rd2_data, wr_data;
  sample_list_mem #(.N(N)) dut (.*);

  sample_t model [2][N];
  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sample_t rnd_sample();
    sample_t s;
    s.box = BOXID_W'($urandom);
    s.pose = '{x: coord_t'($urandom), y: coord_t'($urandom), z: coord_t'($urandom),
               roll: angle_t'($urandom), pitch: angle_t'($urandom), yaw: angle_t'($urandom)};
    return s;
  endfunction

  initial begin
    sample_t e1, e2;
    bank = 0; wr_en = 0; wr_cur = 0; rd_addr = 0; rd2_addr = 0; wr_addr = 0; wr_data = '0;
    // fill both banks: current bank via wr_cur, the other via the normal path
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        wr_en = 1; wr_cur = (b == 0); wr_addr = AW'(i); wr_data = rnd_sample();
        model[b == 0 ? 0 : 1][i] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int step = 0; step < 2000; step++) begin
      if (step % 200 == 199) bank = ~bank;
      wr_en = ($urandom_range(0, 1) == 1);
      wr_cur = ($urandom_range(0, 3) == 0);
      wr_addr = AW'($urandom_range(0, N - 1));
      wr_data = rnd_sample();
      rd_addr = AW'($urandom_range(0, N - 1));
      rd2_addr = AW'($urandom_range(0, N - 1));
      // read data appears after this edge and reflects memory before the write
      e1 = model[bank][rd_addr];
      e2 = model[bank][rd2_addr];
      @(posedge clk);
      if (wr_en) model[wr_cur ? bank : !bank][wr_addr] = wr_data;
      #1;
      checks += 2;
      if (rd_data != e1) begin failures++; if (failures < 5) $display("step %0d rd mismatch", step); end
      if (rd2_data != e2) begin failures++; if (failures < 5) $display("step %0d rd2 mismatch", step); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
