// tb_gs_ch_acc: self-checking test of the channel-level GenStore-NM accelerator.
//
// Builds a KmerIndex over a random reference in the DRAM model and streams
// reads of four kinds through one channel: reads copied from the reference
// (chain passes), long reads (N or more seeds, sent to the host), random or
// short reads (fewer than M seeds, dropped) and random reads whose minimizer
// buckets are given scattered reference positions (chained, then dropped).
// Each verdict, seed count and chaining score is compared with the software
// model (find_seeds, then nm_expect). Reads are streamed back to back, so seed
// finding of one read overlaps chaining of the previous one (counted, and
// required to happen). The read stream pauses at random and the verdict
// consumer applies backpressure. The last read carries in_eos; done must stay
// low until that read's verdict is taken and then rise.
module tb_gs_ch_acc;
  import gs_pkg::*;
  import tb_gs_pkg::*;
  localparam int IB = 12, N = SEED_N, REFLEN = 4000;
  localparam addr_t L1 = 32'h0, L2 = 32'h0001_0000;

  logic clk = 0, rst_n = 0, start = 0, enable = 0;
  logic in_valid = 0, in_ready, in_first = 0, in_last = 0, in_eos = 0;
  base_t in_base = '0;
  read_id_t in_id = '0;
  logic [1:0] h_req_valid, h_req_ready, h_rsp_valid;
  logic [63:0] h_req_key [2];
  logic [63:0] h_rsp_hash;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  addr_t mem_req_addr;
  len_t mem_req_len;
  word_t mem_rsp_data;
  logic out_valid, out_ready = 0, done;
  read_id_t out_id;
  nm_verdict_e out_verdict;
  logic [$clog2(N+1)-1:0] out_nseeds;
  score_t out_score;
  logic ev_minimizer, ev_index_miss, ev_seed_cap;

  int checks = 0, failures = 0;
  int n_verdict [4];

  always #5 clk = ~clk;

  gs_ch_acc #(.IB(IB), .L1_BASE(L1)) dut (
    .clk, .rst_n, .start, .enable,
    .in_valid, .in_ready, .in_base, .in_first, .in_last, .in_eos, .in_id,
    .hash_req_valid (h_req_valid[0]), .hash_req_ready (h_req_ready[0]),
    .hash_req_key (h_req_key[0]), .hash_rsp_valid (h_rsp_valid[0]),
    .hash_rsp_hash (h_rsp_hash),
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_req_len,
    .mem_rsp_valid, .mem_rsp_data,
    .out_valid, .out_ready, .out_id, .out_verdict, .out_nseeds, .out_score, .done,
    .ev_minimizer, .ev_index_miss, .ev_seed_cap
  );

  assign h_req_valid[1] = 1'b0;
  assign h_req_key[1]   = '0;
  gs_hash_acc #(.PORTS(2)) u_hash (
    .clk, .rst_n,
    .req_valid (h_req_valid), .req_ready (h_req_ready), .req_key (h_req_key),
    .rsp_valid (h_rsp_valid), .rsp_hash (h_rsp_hash)
  );

  tb_kidx_dram #(.LAT(4), .STALL_PCT(20)) u_dram (
    .clk, .rst_n,
    .req_valid (mem_req_valid), .req_ready (mem_req_ready),
    .req_addr (mem_req_addr), .req_len (mem_req_len),
    .rsp_valid (mem_rsp_valid), .rsp_data (mem_rsp_data)
  );

  initial begin
    #80000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte unsigned refseq[];

  typedef byte unsigned bytes_t[];
  bytes_t      reads[$];
  nm_verdict_e exp_v[$];
  int          exp_n[$], exp_s[$];
  int          n_overlap = 0, taken = 0;

  always @(posedge clk)
    if (rst_n && dut.ch_busy && in_valid && in_ready) n_overlap++;

  task automatic feed();
    foreach (reads[r]) begin
      for (int i = 0; i < reads[r].size(); i++) begin
        @(negedge clk);
        while ($urandom_range(99) < 10) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1; in_base = base_t'(reads[r][i]); in_first = (i == 0);
        in_last = (i == reads[r].size() - 1);
        in_eos = in_last && (r == reads.size() - 1); in_id = read_id_t'(r);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0; in_eos = 0;
    end
  endtask

  task automatic drain();
    while (taken < reads.size()) begin
      @(negedge clk);
      out_ready = ($urandom_range(99) < 40);
      checks++;
      if (done) begin failures++; $display("FAIL: done before the last verdict"); end
      @(posedge clk);
      if (out_valid && out_ready) begin
        int r;
        r = taken;
        checks++;
        if (out_id != read_id_t'(r) || out_verdict != exp_v[r] || int'(out_nseeds) != exp_n[r] ||
            (exp_v[r] inside {NM_HOST_CHAIN, NM_DROP_CHAIN} && int'(out_score) != exp_s[r])) begin
          failures++;
          $display("FAIL: read %0d verdict %s seeds %0d score %0d, expected %s %0d %0d",
                   r, out_verdict.name(), out_nseeds, out_score, exp_v[r].name(), exp_n[r], exp_s[r]);
        end
        n_verdict[int'(out_verdict)]++;
        taken++;
      end
    end
    @(negedge clk);
    out_ready = 0;
  endtask

  // give each minimizer bucket of rd one or two scattered positions
  task automatic scatter(input byte unsigned rd[]);
    mz_t mz[$];
    minimizers(rd, KMER_K, WIN_W, mz);
    foreach (mz[i]) begin
      int pos[$];
      repeat ($urandom_range(1, 2)) pos.push_back($urandom_range(0, 1000000));
      add_bucket(mz[i].hash & ((64'd1 << IB) - 1), L1, pos);
    end
  endtask

  initial begin
    byte unsigned rd[];
    int nreads;
    refseq = new[REFLEN];
    foreach (refseq[i]) refseq[i] = 8'($urandom_range(3));
    build_index(refseq, KMER_K, WIN_W, IB, L1, L2);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1; enable = 1;
    @(negedge clk);
    start = 0;
    nreads = 48;
    for (int r = 0; r < nreads; r++) begin
      int kind, len, st;
      kind = r % 4;
      case (kind)
        0: begin
          len = 100 + $urandom_range(100);
          st = $urandom_range(REFLEN - len);
          rd = new[len];
          foreach (rd[i]) rd[i] = refseq[st + i];
          if (r % 8 == 4) repeat (4) rd[$urandom_range(len - 1)] = 8'($urandom_range(3));
        end
        1: begin
          len = 700;
          st = $urandom_range(REFLEN - len);
          rd = new[len];
          foreach (rd[i]) rd[i] = refseq[st + i];
        end
        2: begin
          len = (r % 8 == 2) ? 1 + $urandom_range(20) : 150;
          rd = new[len];
          foreach (rd[i]) rd[i] = 8'($urandom_range(3));
        end
        default: begin
          len = 150;
          rd = new[len];
          foreach (rd[i]) rd[i] = 8'($urandom_range(3));
          scatter(rd);
        end
      endcase
      reads.push_back(rd);
    end
    // expected verdicts from the final index contents
    foreach (reads[r]) begin
      rseed_t sd[$];
      nm_verdict_e v;
      int best;
      find_seeds(reads[r], KMER_K, WIN_W, N, IB, L1, sd);
      v = nm_expect(sd, SEED_M, SEED_N, KMER_K, CHAIN_H, CHAIN_TH, best);
      exp_v.push_back(v);
      exp_n.push_back(sd.size());
      exp_s.push_back(best);
    end
    fork
      feed();
      drain();
    join
    repeat (2) @(negedge clk);
    checks++;
    if (!done) begin failures++; $display("FAIL: done not set after the last verdict"); end
    checks++;
    if (n_overlap == 0) begin failures++; $display("FAIL: seed finding never overlapped chaining"); end
    $display("bases taken while chaining: %0d", n_overlap);
    foreach (n_verdict[v]) begin
      checks++;
      if (n_verdict[v] == 0) begin failures++; $display("FAIL: verdict %0d never produced", v); end
    end
    $display("verdicts: drop-few %0d, host-many %0d, host-chain %0d, drop-chain %0d",
             n_verdict[0], n_verdict[1], n_verdict[2], n_verdict[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
