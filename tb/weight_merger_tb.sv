// weight_merger_tb: gives the weight merger random inlier counts (with
// zero denominators and N > Nb cases) for a partly used set of cores and
// checks each weight against w = a*N/Nb + b*N/Nr + g*c computed in real
// arithmetic (ratios clipped to 1, zero denominators giving 0), within
// 3 LSB of Q0.16, plus the sample indices, the number of weights and a
// bound on the cycles per core.
module weight_merger_tb;
  import mc_pkg::*;
  localparam int NC = 6;
  localparam int N = 620;
  localparam int AW = $clog2(N);
  localparam int CW = $clog2(NC + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, w_valid, done;
  logic [AW-1:0] base, w_idx;
  logic [CW-1:0] n_active;
  score_t [NC-1:0] scores;
  bbox_t  [NC-1:0] core_box;
  wgt_t alpha, beta, gamma, w_value;

  weight_merger #(.N_CORES(NC), .N(N)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rat(int n, int d);
    real r;
    if (d == 0) return 0.0;
    r = real'(n) / d;
    return (r > 1.0) ? 1.0 : r;
  endfunction

  initial begin
    int got, t0;
    start = 0; base = 0; n_active = 0; scores = '0; core_box = '0;
    alpha = 16'd26214; beta = 16'd26214; gamma = 16'd13107;   // 0.4 0.4 0.2
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      int na;
      na = (round == 3) ? 4 : NC;
      for (int c = 0; c < NC; c++) begin
        int nb, nr, n;
        nb = int'($urandom_range(0, 5000));
        nr = int'($urandom_range(0, 3000));
        n  = int'($urandom_range(0, (nr < nb ? nr : nb)));
        if (c == 1) nb = 0;
        if (c == 2 && round == 1) begin nr = 0; n = 0; end
        if (c == 3) n = nb + 5;           // double-counted edges: clipped
        scores[c] = '{n: cnt_t'(n), nr: cnt_t'(nr), nb: cnt_t'(nb)};
        core_box[c].conf = wgt_t'($urandom);
      end
      @(negedge clk);
      base = AW'(round * NC); n_active = CW'(na); start = 1;
      t0 = $time;
      @(negedge clk);
      start = 0;
      got = 0;
      while (!done) begin
        @(posedge clk);
        #1;
        if (w_valid) begin
          int c;
          real ew, a, b, g;
          c = got;
          a = alpha / 65536.0; b = beta / 65536.0; g = gamma / 65536.0;
          ew = 65536.0 * (a * rat(scores[c].n, scores[c].nb) + b * rat(scores[c].n, scores[c].nr)
               + g * core_box[c].conf / 65536.0);
          if (ew > 65535.0) ew = 65535.0;
          checks += 2;
          if (int'(w_idx) != round * NC + c) begin failures++; $display("idx %0d", w_idx); end
          if (real'(w_value) > ew + 3.0 || real'(w_value) < ew - 3.0) begin
            failures++; $display("core %0d: w %0d expected %f", c, w_value, ew);
          end
          got++;
        end
        @(negedge clk);
      end
      checks += 2;
      if (got != na) begin failures++; $display("%0d weights, expected %0d", got, na); end
      if (($time - t0) / 10 > na * 45) begin failures++; $display("too slow: %0d cycles", ($time - t0) / 10); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
