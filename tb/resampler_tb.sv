// resampler_tb: drives a resampler from a model of the sorted list
// (descending random weights, shuffled original indices) and checks every
// draw against a reference: the same xorshift32 sequence gives
// r = u*S/2^32 and the expected sample is the first sorted slot k (among
// the top K) with r < Phi(k). Also checks the draw count, the memory-read
// count of the coarse+fine search (1 threshold read plus the CDF reads
// from the region start) and that it is well below a plain linear search.
// Runs with K = N and with a top-K cut, plus a random stall on o_ready.
module resampler_tb;
  import mc_pkg::*;
  localparam int N = 64;
  localparam int LOG_NT = 3;
  localparam int NT = 1 << LOG_NT;
  localparam int AW = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start;
  logic [AW:0] k_top;
  logic [31:0] seed;
  logic [AW-1:0] srt_pos, srt_idx, o_dst, o_src;
  wgt_t srt_w;
  logic o_valid, o_ready, done;
  logic [31:0] n_reads;

  resampler #(.N(N), .LOG_NT(LOG_NT)) dut (.*);

  int sw [N];
  int si [N];
  assign srt_w   = wgt_t'(sw[srt_pos]);
  assign srt_idx = AW'(si[srt_pos]);

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] xs32(input logic [31:0] v);
    logic [31:0] t;
    t = v ^ (v << 13); t = t ^ (t >> 17); t = t ^ (t << 5);
    return t;
  endfunction

  task automatic run(int kk, logic [31:0] sd);
    longint phi [N];
    longint s, r, tj;
    int st [NT];
    int exp_k, exp_reads, ndraw, lin_reads;
    logic [31:0] u;
    s = 0;
    for (int k = 0; k < kk; k++) begin s += sw[k]; phi[k] = s; end
    for (int j = 0; j < NT; j++) begin
      tj = (j * s) >> LOG_NT;
      st[j] = kk - 1;
      for (int k = kk - 1; k >= 0; k--) if (phi[k] > tj) st[j] = k;
    end
    @(negedge clk);
    start = 1; k_top = (AW+1)'(kk); seed = sd;
    @(negedge clk);
    start = 0;
    u = sd; ndraw = 0; exp_reads = 0; lin_reads = 0;
    while (ndraw < N) begin
      o_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (o_valid && o_ready) begin
        u = xs32(u);
        r = (longint'(u) * s) >>> 32;
        exp_k = kk - 1;
        for (int k = kk - 1; k >= 0; k--) if (r < phi[k]) exp_k = k;
        exp_reads += 1 + (exp_k - st[u[31 -: LOG_NT]] + 1);
        lin_reads += exp_k + 1;
        checks += 2;
        if (int'(o_src) != si[exp_k]) begin
          failures++; $display("draw %0d: src %0d expected %0d (k=%0d)", ndraw, o_src, si[exp_k], exp_k);
        end
        if (int'(o_dst) != ndraw) begin failures++; $display("dst %0d exp %0d", o_dst, ndraw); end
        ndraw++;
      end
      @(negedge clk);
    end
    o_ready = 1;
    repeat (3) @(negedge clk);
    checks += 2;
    if (int'(n_reads) != exp_reads) begin failures++; $display("reads %0d exp %0d", n_reads, exp_reads); end
    if (!(exp_reads * 2 < lin_reads)) begin failures++; $display("search not cheaper: %0d vs %0d", exp_reads, lin_reads); end
    $display("K=%0d: %0d memory reads for %0d draws (linear search: %0d)", kk, n_reads, N, lin_reads);
  endtask

  initial begin
    int w;
    start = 0; k_top = 0; seed = 0; o_ready = 1;
    // descending weights, shuffled indices
    w = 60000;
    for (int k = 0; k < N; k++) begin
      w = w - int'($urandom_range(0, 1800));
      if (w < 0) w = 0;
      sw[k] = w;
      si[k] = k;
    end
    for (int k = N - 1; k > 0; k--) begin
      int j, t;
      j = int'($urandom_range(0, k));
      t = si[k]; si[k] = si[j]; si[j] = t;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(N, 32'h1234_5678);
    run(16, 32'h0BAD_CAFE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
