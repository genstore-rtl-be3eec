// tb_genstore_workloads: the evaluated workload mixes, scaled down in size.
//
// Runs genstore_top at its default parameters through five jobs:
//  * GenStore-EM with 75%, 80% and 85% of the reads matching the reference
//    exactly (20,000 reads against 40,000 k-mer fingerprints each; the full
//    read sets of tens to hundreds of GB differ only in length, which the
//    streaming design does not limit);
//  * GenStore-NM with 24 long reads of 10,000 bases (3 per channel) against a
//    12,000-base reference, first with 1 read taken from the reference (a
//    sample with almost nothing to align), then with 9 (about 37%).
// The exact-match mixes and the long-read case follow the evaluated workloads;
// the sizes, the random reference and the per-job read split are own choices.
// Interface: none (top-level testbench); one tb_kidx_dram per channel serves
// the KmerIndex.
// Every result is compared with the software models, the read counters with
// the expected numbers, and the reads kept in the SSD are printed per job.
// With k = 9 a 10,000-base read, random or not, collects at least N = 64
// seeds, so every long read goes to the host: this k-mer length (an own choice,
// see gs_pkg) is too short to filter long reads, which the printed counts show.
// Timing: reads and entries are offered at random gaps; results are drained
// with random back-pressure on the NM outputs.
module tb_genstore_workloads;
  import gs_pkg::*;
  import tb_gs_pkg::*;
  localparam int CH = CHANNELS, N = SEED_N, NR = 20000, NK = 40000;
  localparam int REFLEN = 12000, READS_PER_CH = 3, LONG = 10000;
  localparam addr_t L1 = 32'h0, L2 = 32'h1000_0000;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, prep_done = 0, accel_mode, done;
  gs_mode_e cmd_mode = MODE_EM;
  gs_state_e state;
  logic [39:0] filtered_cnt, host_cnt;
  logic sr_wr_valid = 0, sr_wr_ready, sr_wr_last = 0;
  sr_entry_t sr_wr_entry = '0;
  logic sk_wr_valid = 0, sk_wr_ready, sk_wr_last = 0;
  fp_t sk_wr_fp = '0;
  logic em_res_valid, em_res_ready = 0, em_res_exact;
  read_id_t em_res_id;
  logic [1:0] sr_slot_full, sk_slot_full;
  logic [CH-1:0] nm_in_valid = '0, nm_in_ready, nm_in_first = '0, nm_in_last = '0, nm_in_eos = '0;
  base_t nm_in_base [CH];
  read_id_t nm_in_id [CH];
  logic [CH-1:0] mem_req_valid, mem_req_ready, mem_rsp_valid;
  addr_t mem_req_addr [CH];
  len_t mem_req_len [CH];
  word_t mem_rsp_data [CH];
  logic [CH-1:0] nm_out_valid, nm_out_ready = '0;
  read_id_t nm_out_id [CH];
  nm_verdict_e nm_out_verdict [CH];
  score_t nm_out_score [CH];
  logic [$clog2(N+1)-1:0] nm_out_nseeds [CH];
  logic [CH-1:0] ev_minimizer, ev_index_miss, ev_seed_cap;

  genstore_top dut (.*);

  for (genvar c = 0; c < CH; c++) begin : g_dram
    tb_kidx_dram #(.LAT(4 + c), .STALL_PCT(15)) u_dram (
      .clk, .rst_n,
      .req_valid (mem_req_valid[c]), .req_ready (mem_req_ready[c]),
      .req_addr (mem_req_addr[c]), .req_len (mem_req_len[c]),
      .rsp_valid (mem_rsp_valid[c]), .rsp_data (mem_rsp_data[c])
    );
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int m_exact = 0, m_nomatch = 0, m_km_adv = 0, m_swap = 0, m_stall = 0;
  int m_verdict [4];
  int m_miss = 0, m_cap = 0, m_contend = 0, m_switch = 0;
  logic [1:0] sr_full_q = '0, sk_full_q = '0;
  gs_state_e state_q = ST_IDLE;
  bit em_seen = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.sk_rd_valid && dut.sk_rd_ready) m_km_adv++;
    for (int s = 0; s < 2; s++) begin
      if (sr_slot_full[s] && !sr_full_q[s]) m_swap++;
      if (sk_slot_full[s] && !sk_full_q[s]) m_swap++;
    end
    sr_full_q <= sr_slot_full;
    sk_full_q <= sk_slot_full;
    if ((sr_wr_valid && !sr_wr_ready) || (sk_wr_valid && !sk_wr_ready)) m_stall++;
    m_miss += $countones(ev_index_miss);
    m_cap  += $countones(ev_seed_cap);
    if ($countones(dut.ch_hreq_valid[3:0]) > 1 || $countones(dut.ch_hreq_valid[7:4]) > 1) m_contend++;
    if (state == ST_EM) em_seen = 1;
    if (state == ST_NM && state_q != ST_NM && em_seen) m_switch++;
    state_q <= state;
  end

  initial begin
    #400000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic command(input gs_mode_e m);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_mode = m;
    @(negedge clk);
    cmd_valid = 0;
    chk(accel_mode && state == ST_PREP, "accelerator mode after command");
    repeat (20) @(negedge clk);
    prep_done = 1;
    @(negedge clk);
    prep_done = 0;
  endtask

  // ---------------- GenStore-EM job ----------------
  fp_t      sr_fp [NR];
  read_id_t sr_id [NR];
  fp_t      sk_fp [NK];
  bit       em_exp [NR];
  int       ri;
  int       ch_finished = 0;

  task automatic em_job(input int pct);
    longint unsigned f;
    int nexact, cyc;
    fp_t kset [fp_t];
    // SKIndex: sorted unique fingerprints
    f = 64'h10;
    for (int i = 0; i < NK; i++) begin
      f = f + 1 + $urandom_range(40);
      sk_fp[i] = f;
      kset[f] = 1;
    end
    // SRTable: pct% from the SKIndex, sorted; repeated fingerprints allowed
    begin
      fp_t tmp [$];
      for (int i = 0; i < NR; i++)
        if ($urandom_range(99) < pct) tmp.push_back(sk_fp[$urandom_range(NK - 1)]);
        else tmp.push_back({$urandom, $urandom});
      tmp.sort();
      nexact = 0;
      for (int i = 0; i < NR; i++) begin
        sr_fp[i] = tmp[i];
        sr_id[i] = read_id_t'($urandom);
        em_exp[i] = kset.exists(tmp[i]);
        if (em_exp[i]) nexact++;
      end
    end
    command(MODE_EM);
    cyc = 0;
    ri = 0;
    fork
      begin
        for (int i = 0; i < NR; i++) begin
          @(negedge clk);
          sr_wr_valid = 1; sr_wr_entry = '{fp: sr_fp[i], id: sr_id[i]}; sr_wr_last = (i == NR - 1);
          @(posedge clk);
          while (!sr_wr_ready) @(posedge clk);
        end
        @(negedge clk);
        sr_wr_valid = 0; sr_wr_last = 0;
      end
      begin
        for (int i = 0; i < NK; i++) begin
          @(negedge clk);
          sk_wr_valid = 1; sk_wr_fp = sk_fp[i]; sk_wr_last = (i == NK - 1);
          @(posedge clk);
          while (!sk_wr_ready) @(posedge clk);
        end
        @(negedge clk);
        sk_wr_valid = 0; sk_wr_last = 0;
      end
      begin
        em_res_ready = 1;
        while (ri < NR) begin
          @(posedge clk);
          cyc++;
          if (em_res_valid && em_res_ready) begin
            if (em_res_id != sr_id[ri] || em_res_exact != em_exp[ri]) begin
              if (failures < 10)
                $display("read %0d: id %h exact %0d, expected %h %0d", ri, em_res_id,
                         em_res_exact, sr_id[ri], em_exp[ri]);
              failures++;
            end
            checks++;
            if (em_res_exact) m_exact++; else m_nomatch++;
            ri++;
          end
        end
      end
    join_any
    // the two writers finish before the results; wait for the rest
    while (ri < NR) @(negedge clk);
    @(negedge clk);
    sr_wr_valid = 0; sk_wr_valid = 0; sr_wr_last = 0; sk_wr_last = 0;
    while (!done) @(negedge clk);
    chk(filtered_cnt == 40'(nexact) && host_cnt == 40'(NR - nexact), "EM read counters");
    // filtering starts when the first batch of each structure is complete, then
    // takes one read or k-mer per cycle
    chk(cyc <= SK_BATCH_ENTRIES + NR + NK + 200, $sformatf("EM took %0d cycles for %0d entries", cyc, NR + NK));
    $display("EM %0d%% mix: %0d reads, %0d exact, %0d sent to the host, %0d cycles", pct, NR, nexact,
             NR - nexact, cyc);
  endtask

  // ---------------- GenStore-NM job ----------------
  byte unsigned refseq[];
  typedef byte unsigned bytes_t[];
  bytes_t      nm_reads [CH][$];
  nm_verdict_e nm_exp_v [CH][$];
  int          nm_exp_n [CH][$];
  int          nm_exp_s [CH][$];
  int          nm_host_exp = 0, nm_filt_exp = 0;

  // a long read: LONG bases copied from the reference, or random bases
  function automatic bytes_t make_read(input bit from_ref);
    bytes_t rd;
    int st;
    rd = new[LONG];
    if (from_ref) begin
      st = $urandom_range(REFLEN - LONG);
      foreach (rd[i]) rd[i] = refseq[st + i];
    end else
      foreach (rd[i]) rd[i] = 8'($urandom_range(3));
    return rd;
  endfunction

  task automatic feed_channel(input int c);
    for (int r = 0; r < nm_reads[c].size(); r++) begin
      bytes_t rd;
      rd = nm_reads[c][r];
      for (int i = 0; i < rd.size(); i++) begin
        @(negedge clk);
        nm_in_valid[c] = ($urandom_range(99) >= 5);
        nm_in_base[c] = base_t'(rd[i]);
        nm_in_first[c] = (i == 0);
        nm_in_last[c] = (i == rd.size() - 1);
        nm_in_eos[c] = (i == rd.size() - 1) && (r == nm_reads[c].size() - 1);
        nm_in_id[c] = read_id_t'(c * 1000 + r);
        @(posedge clk);
        while (!(nm_in_valid[c] && nm_in_ready[c])) begin
          @(negedge clk);
          nm_in_valid[c] = 1;
          @(posedge clk);
        end
      end
      @(negedge clk);
      nm_in_valid[c] = 0;
    end
  endtask

  task automatic drain_channel(input int c);
    int r = 0;
    while (r < nm_reads[c].size()) begin
      @(negedge clk);
      nm_out_ready[c] = ($urandom_range(99) < 50);
      @(posedge clk);
      if (nm_out_valid[c] && nm_out_ready[c]) begin
        checks++;
        if (nm_out_id[c] != read_id_t'(c * 1000 + r) || nm_out_verdict[c] != nm_exp_v[c][r] ||
            int'(nm_out_nseeds[c]) != nm_exp_n[c][r] ||
            (nm_exp_v[c][r] inside {NM_HOST_CHAIN, NM_DROP_CHAIN} && int'(nm_out_score[c]) != nm_exp_s[c][r])) begin
          failures++;
          $display("FAIL: ch %0d read %0d: %s %0d %0d, expected %s %0d %0d", c, r,
                   nm_out_verdict[c].name(), nm_out_nseeds[c], nm_out_score[c],
                   nm_exp_v[c][r].name(), nm_exp_n[c][r], nm_exp_s[c][r]);
        end
        m_verdict[int'(nm_out_verdict[c])]++;
        r++;
      end
    end
    @(negedge clk);
    nm_out_ready[c] = 0;
  endtask

  // n_ref of the CH * READS_PER_CH reads come from the reference
  task automatic nm_job(input int n_ref);
    if (refseq.size() == 0) begin
      refseq = new[REFLEN];
      foreach (refseq[i]) refseq[i] = 8'($urandom_range(3));
      build_index(refseq, KMER_K, WIN_W, IDX_BITS, L1, L2);
    end
    nm_host_exp = 0;
    nm_filt_exp = 0;
    ch_finished = 0;
    for (int c = 0; c < CH; c++) begin
      nm_reads[c].delete();
      nm_exp_v[c].delete();
      nm_exp_n[c].delete();
      nm_exp_s[c].delete();
      for (int r = 0; r < READS_PER_CH; r++) nm_reads[c].push_back(make_read(c * READS_PER_CH + r < n_ref));
    end
    for (int c = 0; c < CH; c++)
      foreach (nm_reads[c][r]) begin
        rseed_t s[$];
        nm_verdict_e v;
        int best;
        find_seeds(nm_reads[c][r], KMER_K, WIN_W, N, IDX_BITS, L1, s);
        v = nm_expect(s, SEED_M, SEED_N, KMER_K, CHAIN_H, CHAIN_TH, best);
        nm_exp_v[c].push_back(v);
        nm_exp_n[c].push_back(s.size());
        nm_exp_s[c].push_back(best);
        if (v inside {NM_HOST_MANY, NM_HOST_CHAIN}) nm_host_exp++; else nm_filt_exp++;
      end
    command(MODE_NM);
    for (int c = 0; c < CH; c++) begin
      automatic int cc = c;
      fork
        feed_channel(cc);
        begin drain_channel(cc); ch_finished++; end
      join_none
    end
    while (ch_finished < CH) @(negedge clk);
    while (!done) @(negedge clk);
    chk(filtered_cnt == 40'(nm_filt_exp) && host_cnt == 40'(nm_host_exp), "NM read counters");
    $display("NM, %0d of %0d long reads from the reference: %0d kept in the SSD, %0d to the host",
             n_ref, CH * READS_PER_CH, nm_filt_exp, nm_host_exp);
  endtask

  initial begin
    for (int c = 0; c < CH; c++) begin nm_in_base[c] = '0; nm_in_id[c] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    em_job(75);
    em_job(80);
    em_job(85);
    nm_job(1);
    nm_job(9);
    repeat (5) @(negedge clk);
    chk(!accel_mode && state == ST_IDLE, "back in regular mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
