// tb_gs_em_filter: self-checking test of the GenStore-EM exact-match filter.
// Streams sorted random fingerprints (reads with repeats, k-mers with and
// without matches, k-mers larger than every read and vice versa) with random
// valid gaps and result backpressure, and compares each read's result with a
// software set-membership model. Checks one comparison per cycle with no
// gaps, and counts the three comparator outcomes.
module tb_gs_em_filter;
  import gs_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, enable = 0;
  logic rd_valid = 0, rd_ready, rd_last = 0;
  sr_entry_t rd_entry = '0;
  logic km_valid = 0, km_ready, km_last = 0;
  fp_t  km_fp = '0;
  logic res_valid, res_ready = 1, res_exact, done;
  read_id_t res_id;
  int checks = 0, failures = 0;
  int n_eq = 0, n_gt = 0, n_lt = 0;

  gs_em_filter dut (.*);
  always #5 clk = ~clk;

  fp_t reads[$], kmers[$];
  bit  expect_exact[$];
  int  got = 0;

  always @(posedge clk) if (rst_n) begin
    if (rd_valid && rd_ready) begin
      if (rd_entry.fp == km_fp && km_valid) n_eq++; else n_lt++;
    end
    if (km_valid && km_ready) n_gt++;
    if (res_valid && res_ready) begin
      checks++;
      if (int'(res_id) != got || res_exact != expect_exact[got]) begin
        failures++; $display("FAIL: result id %0d exact %0d, expected id %0d exact %0d",
                             res_id, res_exact, got, expect_exact[got]);
      end
      got++;
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int nr, input int nk, input int gap_pct, input int bp_pct,
                     input bit reads_high);
    fp_t set[$];
    int ri, ki, cyc;
    reads.delete(); kmers.delete(); expect_exact.delete(); got = 0;
    for (int i = 0; i < nk; i++) kmers.push_back({32'h0, $urandom_range(0, 4 * nk)});
    kmers.sort();
    // unique k-mer fingerprints
    set = kmers.unique();
    kmers = set;
    for (int i = 0; i < nr; i++) begin
      fp_t f;
      if ($urandom_range(99) < 60) f = kmers[$urandom_range(0, kmers.size() - 1)];
      else f = {32'h0, $urandom_range(0, 4 * nk)};
      if (reads_high) f = f + 64'd2000000;
      reads.push_back(f);
    end
    reads.sort();
    foreach (reads[i]) begin
      bit hit = 0;
      foreach (kmers[j]) if (kmers[j] == reads[i]) hit = 1;
      expect_exact.push_back(hit);
    end
    @(negedge clk);
    start = 1; enable = 1;
    @(negedge clk);
    start = 0;
    ri = 0; ki = 0; cyc = 0;
    fork
      begin
        while (ri < nr) begin
          rd_valid = ($urandom_range(99) >= gap_pct);
          rd_entry.fp = reads[ri]; rd_entry.id = ri; rd_last = (ri == nr - 1);
          @(posedge clk);
          if (rd_valid && rd_ready) ri++;
          @(negedge clk);
        end
        rd_valid = 0;
      end
      begin
        while (ki < kmers.size()) begin
          km_valid = ($urandom_range(99) >= gap_pct);
          km_fp = kmers[ki]; km_last = (ki == kmers.size() - 1);
          @(posedge clk);
          if (km_valid && km_ready) ki++;
          @(negedge clk);
        end
        km_valid = 0;
      end
      begin
        while (!done) begin
          res_ready = ($urandom_range(99) >= bp_pct);
          @(posedge clk); cyc++;
          @(negedge clk);
        end
        res_ready = 1;
      end
    join_any
    while (got < nr) @(posedge clk);
    wait (done);
    disable fork;
    rd_valid = 0; km_valid = 0;
    checks++;
    if (got != nr) begin failures++; $display("FAIL: %0d results for %0d reads", got, nr); end
    // with no gaps and no backpressure: one entry consumed per cycle
    if (gap_pct == 0 && bp_pct == 0) begin
      int consumed;
      consumed = n_eq + n_lt + n_gt;
      checks++;
      if (cyc > consumed + 3) begin
        failures++; $display("FAIL: %0d cycles for %0d comparisons", cyc, consumed);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    n_eq = 0; n_lt = 0; n_gt = 0;
    run(300, 200, 0, 0, 0);
    n_eq = 0; n_lt = 0; n_gt = 0;
    run(500, 400, 30, 30, 0);
    run(100, 50, 10, 10, 1);   // every read above every k-mer: k-mer stream runs out
    run(100, 300, 10, 10, 0);
    checks++;
    if (n_eq == 0 || n_lt == 0 || n_gt == 0) begin
      failures++; $display("FAIL: outcomes eq %0d lt %0d gt %0d", n_eq, n_lt, n_gt);
    end
    $display("compare outcomes: equal %0d, read<kmer %0d, read>kmer %0d", n_eq, n_lt, n_gt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
