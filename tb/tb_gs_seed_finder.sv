// tb_gs_seed_finder: self-checking test of the seed finder of one channel.
//
// Builds a KmerIndex (k = 9, w = 10, 2^12 buckets) over a random reference in
// the DRAM model, then feeds reads: substrings of the reference (many seeds),
// random reads (few or no seeds), long reads (capped at N seeds), reads
// shorter than k, and reads with a bucket given many positions. The seeds
// written to the location buffer and the per-read seed count are compared
// with the software model find_seeds. The hash accelerator is the real unit
// with a second port driven by random traffic to create contention. At the
// start of each read the location buffer is reported busy for a random time,
// as when the previous read is still being chained.
module tb_gs_seed_finder;
  import gs_pkg::*;
  import tb_gs_pkg::*;
  localparam int IB = 12, N = 64, REFLEN = 3000;
  localparam addr_t L1 = 32'h0, L2 = 32'h0001_0000;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_first = 0, in_last = 0;
  base_t in_base = '0;
  read_id_t in_id = '0;
  logic [1:0] h_req_valid, h_req_ready, h_rsp_valid;
  logic [63:0] h_req_key [2];
  logic [63:0] h_rsp_hash;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  addr_t mem_req_addr;
  len_t mem_req_len;
  word_t mem_rsp_data;
  logic loc_wr_valid;
  seed_t loc_wr_seed;
  logic done_valid, done_ready = 0;
  read_id_t done_id;
  logic [$clog2(N+1)-1:0] done_nseeds;
  logic ev_minimizer, ev_index_miss, ev_seed_cap;
  logic other_valid = 0;
  logic loc_free = 1;
  int   n_locwait = 0;

  int checks = 0, failures = 0;
  int n_min = 0, n_miss = 0, n_cap = 0, n_contend = 0;
  rseed_t got[$];

  always #5 clk = ~clk;

  gs_seed_finder #(.N(N), .IB(IB), .L1_BASE(L1)) dut (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_base, .in_first, .in_last, .in_id,
    .hash_req_valid (h_req_valid[0]),
    .hash_req_ready (h_req_ready[0]),
    .hash_req_key   (h_req_key[0]),
    .hash_rsp_valid (h_rsp_valid[0]),
    .hash_rsp_hash  (h_rsp_hash),
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_req_len,
    .mem_rsp_valid, .mem_rsp_data,
    .loc_free, .loc_wr_valid, .loc_wr_seed,
    .done_valid, .done_ready, .done_id, .done_nseeds,
    .ev_minimizer, .ev_index_miss, .ev_seed_cap
  );

  assign h_req_valid[1] = other_valid;
  assign h_req_key[1]   = 64'h1234;
  gs_hash_acc #(.PORTS(2)) u_hash (
    .clk, .rst_n,
    .req_valid (h_req_valid), .req_ready (h_req_ready), .req_key (h_req_key),
    .rsp_valid (h_rsp_valid), .rsp_hash (h_rsp_hash)
  );

  tb_kidx_dram #(.LAT(3), .STALL_PCT(25)) u_dram (
    .clk, .rst_n,
    .req_valid (mem_req_valid), .req_ready (mem_req_ready),
    .req_addr (mem_req_addr), .req_len (mem_req_len),
    .rsp_valid (mem_rsp_valid), .rsp_data (mem_rsp_data)
  );

  always @(posedge clk) begin
    other_valid <= ($urandom_range(99) < 30);
    if (rst_n) begin
      if (loc_wr_valid) begin
        rseed_t s;
        s.x = longint'(loc_wr_seed.x); s.y = longint'(loc_wr_seed.y);
        got.push_back(s);
      end
      if (ev_minimizer) n_min++;
      if (ev_index_miss) n_miss++;
      if (ev_seed_cap) n_cap++;
      if (h_req_valid == 2'b11) n_contend++;
      if (int'(dut.state) == 6 && !loc_free) n_locwait++;   // 6: level-2 request state
    end
  end

  initial begin
    #50000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte unsigned refseq[];

  task automatic run_read(input byte unsigned rd[], input read_id_t id);
    rseed_t exp[$];
    find_seeds(rd, KMER_K, WIN_W, N, IB, L1, exp);
    got.delete();
    // the previous read still occupies the location buffer for a while
    loc_free = 0;
    fork
      begin
        repeat ($urandom_range(0, 400)) @(negedge clk);
        loc_free = 1;
      end
    join_none
    for (int i = 0; i < rd.size(); i++) begin
      @(negedge clk);
      while ($urandom_range(99) < 10) begin
        in_valid = 0;
        @(negedge clk);
      end
      in_valid = 1; in_base = base_t'(rd[i]); in_first = (i == 0);
      in_last = (i == rd.size() - 1); in_id = id;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0;
    while (!done_valid) @(negedge clk);
    while (!loc_free) @(negedge clk);
    repeat ($urandom_range(3)) @(negedge clk);
    checks++;
    if (done_id != id || int'(done_nseeds) != exp.size()) begin
      failures++;
      $display("FAIL: read %0d done id %0d count %0d, expected %0d", id, done_id, done_nseeds, exp.size());
    end
    done_ready = 1;
    @(negedge clk);
    done_ready = 0;
    checks++;
    if (got.size() != exp.size()) begin
      failures++;
      $display("FAIL: read %0d wrote %0d seeds, expected %0d", id, got.size(), exp.size());
    end else begin
      foreach (exp[i]) begin
        checks++;
        if (got[i].x != exp[i].x || got[i].y != exp[i].y) begin
          failures++;
          $display("FAIL: read %0d seed %0d (%0d,%0d) expected (%0d,%0d)", id, i,
                   got[i].x, got[i].y, exp[i].x, exp[i].y);
        end
      end
    end
  endtask

  initial begin
    byte unsigned rd[];
    int total_exp = 0;
    refseq = new[REFLEN];
    foreach (refseq[i]) refseq[i] = 8'($urandom_range(3));
    build_index(refseq, KMER_K, WIN_W, IB, L1, L2);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 60; r++) begin
      int kind, len;
      kind = r % 5;
      case (kind)
        0, 1: begin            // from the reference, with a few substitutions
          int st;
          len = 150;
          st = $urandom_range(REFLEN - len);
          rd = new[len];
          foreach (rd[i]) rd[i] = refseq[st + i];
          if (kind == 1) repeat (3) rd[$urandom_range(len - 1)] = 8'($urandom_range(3));
        end
        2: begin               // random
          len = 100 + $urandom_range(100);
          rd = new[len];
          foreach (rd[i]) rd[i] = 8'($urandom_range(3));
        end
        3: begin               // long, reaches the seed cap
          int st;
          len = 800;
          st = $urandom_range(REFLEN - len);
          rd = new[len];
          foreach (rd[i]) rd[i] = refseq[st + i];
        end
        default: begin         // shorter than a full window or than k
          len = 1 + $urandom_range(15);
          rd = new[len];
          foreach (rd[i]) rd[i] = 8'($urandom_range(3));
        end
      endcase
      run_read(rd, read_id_t'(1000 + r));
    end
    checks++;
    if (n_min == 0 || n_miss == 0 || n_cap == 0 || n_contend == 0 || n_locwait == 0) begin
      failures++;
      $display("FAIL: mechanism not exercised min=%0d miss=%0d cap=%0d contend=%0d",
               n_min, n_miss, n_cap, n_contend);
    end
    $display("minimizers %0d, index misses %0d, seed caps %0d, hash contention cycles %0d, location buffer waits %0d",
             n_min, n_miss, n_cap, n_contend, n_locwait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
