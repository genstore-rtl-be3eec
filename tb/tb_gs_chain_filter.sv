// tb_gs_chain_filter: self-checking test of the chaining-based filter.
// Chains random seed sets (colinear runs that should pass, scattered seeds
// that should fail, mixtures, 1..63 seeds) read from a model location buffer,
// and checks the best score and pass flag against the software recurrence and
// the cycle count (start to done) against the sum over seeds of (2 + min(i, 50)).
module tb_gs_chain_filter;
  import gs_pkg::*;
  import tb_gs_pkg::*;
  localparam int NS = 64, H = 50, W = 9, TH = 40;
  logic clk = 0, rst_n = 0, start = 0;
  logic [6:0] n_seeds = '0;
  logic [5:0] loc_idx;
  seed_t loc_seed;
  logic busy, done, pass;
  score_t best;
  int checks = 0, failures = 0, passes = 0, fails = 0;
  seed_t arr [NS];

  gs_chain_filter #(.NSEED(NS), .H(H), .W(W), .TH(TH)) dut (.*);
  assign loc_seed = arr[loc_idx];
  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 300; r++) begin
      rseed_t s[$];
      int n, e, cyc, expc;
      n = (r < 5) ? r + 1 : int'($urandom_range(1, 63));
      if (r == 5) n = 63;
      s.delete();
      for (int i = 0; i < n; i++) begin
        rseed_t q;
        case (r % 3)
          0: begin q.x = 1000 + i * 7 + $urandom_range(0, 2); q.y = 10 + i * 7; end
          1: begin q.x = $urandom_range(0, 1000000); q.y = $urandom_range(0, 5000); end
          default: begin
            if ($urandom_range(1)) begin q.x = 5000 + i * 11; q.y = i * 10; end
            else begin q.x = $urandom_range(0, 100000); q.y = $urandom_range(0, 1000); end
          end
        endcase
        begin
          int p;
          p = s.size();
          while (p > 0 && s[p-1].x > q.x) p--;
          s.insert(p, q);
        end
      end
      for (int i = 0; i < n; i++) begin arr[i].x = 32'(s[i].x); arr[i].y = 32'(s[i].y); end
      e = chain_best(s, W, H);
      expc = 0;
      for (int i = 0; i < n; i++) expc += 2 + ((i < H) ? i : H);
      @(negedge clk);
      start = 1; n_seeds = 7'(n);
      @(posedge clk);
      cyc = 0;
      @(negedge clk);
      start = 0;
      while (!done) begin @(posedge clk); cyc++; #1; end
      checks++;
      if (int'(best) != e || pass != (e >= TH)) begin
        failures++; $display("FAIL: read %0d n %0d best %0d pass %0d, expected %0d", r, n, best, pass, e);
      end
      checks++;
      if (cyc != expc) begin failures++; $display("FAIL: read %0d took %0d cycles, expected %0d", r, cyc, expc); end
      if (pass) passes++; else fails++;
    end
    checks++;
    if (passes == 0 || fails == 0) begin failures++; $display("FAIL: pass %0d fail %0d", passes, fails); end
    $display("chains passed %0d, filtered %0d", passes, fails);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
