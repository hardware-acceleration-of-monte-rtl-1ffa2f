// vertex_distributor_tb: loads a model of random triangles and runs it to
// three active cores (of four) whose ready signals stall at random. Each
// core's received sequence must be the whole model, in order, each
// triangle once, with tri_last only on the final one; the idle core must
// get nothing; `done` must follow the last hand-over. Run twice, the
// second time with a shorter model.
module vertex_distributor_tb;
  import mc_pkg::*;
  localparam int NC = 4;
  localparam int MT = 64;
  localparam int TW = $clog2(MT);
  localparam int CW = $clog2(NC + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic mdl_we, start, done, tri_last;
  logic [TW-1:0] mdl_addr;
  tri_t mdl_data, tri_data;
  logic [TW:0] num_tri;
  logic [CW-1:0] n_active;
  logic [NC-1:0] tri_valid, tri_ready;

  vertex_distributor #(.N_CORES(NC), .MAX_TRI(MT)) dut (.*);

  tri_t model [MT];
  int   cnt [NC];
  int   checks = 0, failures = 0;

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++)
      if (tri_valid[c] && tri_ready[c]) begin
        checks += 2;
        if (cnt[c] >= int'(num_tri) || tri_data != model[cnt[c]]) begin
          failures++; $display("core %0d triangle %0d wrong", c, cnt[c]);
        end
        if (tri_last != (cnt[c] == int'(num_tri) - 1)) begin failures++; $display("last flag wrong"); end
        cnt[c]++;
      end
    tri_ready <= NC'($urandom);
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mdl_we = 0; mdl_addr = 0; mdl_data = '0; start = 0; num_tri = 0; n_active = 0;
    tri_ready = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < MT; i++) begin
      model[i] = tri_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      mdl_we = 1; mdl_addr = TW'(i); mdl_data = model[i];
      @(negedge clk);
    end
    mdl_we = 0;
    for (int run = 0; run < 2; run++) begin
      for (int c = 0; c < NC; c++) cnt[c] = 0;
      num_tri = (run == 0) ? (TW+1)'(MT) : (TW+1)'(9);
      n_active = CW'(3);
      start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      repeat (3) @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (cnt[c] != ((c < 3) ? int'(num_tri) : 0)) begin
          failures++; $display("core %0d got %0d triangles", c, cnt[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
