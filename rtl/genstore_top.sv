// genstore_top: GenStore in-storage read filter logic of one SSD.
//
// The SSD-level accelerator and CH channel-level accelerators of the paper's
// architecture, wired together:
//   - gs_control switches the SSD into accelerator mode on a host command,
//     waits for the firmware's preparation, runs GenStore-EM or GenStore-NM and
//     counts filtered and host-bound reads;
//   - GenStore-EM: two double-buffered batch buffers (SRTable, SKIndex) filled
//     by data fetching, drained by the exact-match comparator (gs_em_filter);
//     one comparator serves up to 12 channels, so one suffices for 8;
//   - GenStore-NM: one gs_ch_acc per channel, each fed by its channel's read
//     stream and given its own DRAM port to the KmerIndex; ceil(CH/4) shared
//     hash accelerators, channel c using port c mod 4 of unit c / 4.
// Flash controllers, the firmware (FTL), the DRAM and the host link are outside
// this module: their data paths are its ports. The batch buffers are flushed
// while the SSD is in regular mode; data fetching may fill them from PREP on.
//
// Ports: host command/status; EM batch write streams and EM per-read results;
// per channel NM base streams, KmerIndex DRAM request/response and verdicts.
// All ports are synchronous to clk; rst_n is an asynchronous active-low reset.
//
// From the paper: the units, their counts for an 8-channel SSD and what
// connects to what. Own choices: all handshakes and the split of the DRAM into
// one request port per channel.
module genstore_top
  import gs_pkg::*;
#(
  parameter int unsigned CH        = CHANNELS,
  parameter int unsigned SR_DEPTH  = SR_BATCH_ENTRIES,
  parameter int unsigned SK_DEPTH  = SK_BATCH_ENTRIES,
  parameter int unsigned K         = KMER_K,
  parameter int unsigned WIN       = WIN_W,
  parameter int unsigned M         = SEED_M,
  parameter int unsigned N         = SEED_N,
  parameter int unsigned H         = CHAIN_H,
  parameter int          TH        = CHAIN_TH,
  parameter int unsigned IB        = IDX_BITS,
  parameter addr_t       L1_BASE   = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  // host command and status
  input  logic              cmd_valid,
  input  gs_mode_e          cmd_mode,
  output logic              cmd_ready,
  input  logic              prep_done,
  output gs_state_e         state,
  output logic              accel_mode,
  output logic              done,
  output logic [39:0]       filtered_cnt,
  output logic [39:0]       host_cnt,
  // GenStore-EM: data fetching into the batch buffers
  input  logic              sr_wr_valid,
  output logic              sr_wr_ready,
  input  sr_entry_t         sr_wr_entry,
  input  logic              sr_wr_last,
  input  logic              sk_wr_valid,
  output logic              sk_wr_ready,
  input  fp_t               sk_wr_fp,
  input  logic              sk_wr_last,
  // GenStore-EM: per-read results
  output logic              em_res_valid,
  input  logic              em_res_ready,
  output read_id_t          em_res_id,
  output logic              em_res_exact,
  output logic [1:0]        sr_slot_full,
  output logic [1:0]        sk_slot_full,
  // GenStore-NM: per-channel read bases
  input  logic [CH-1:0]     nm_in_valid,
  output logic [CH-1:0]     nm_in_ready,
  input  base_t             nm_in_base  [CH],
  input  logic [CH-1:0]     nm_in_first,
  input  logic [CH-1:0]     nm_in_last,
  input  logic [CH-1:0]     nm_in_eos,
  input  read_id_t          nm_in_id    [CH],
  // GenStore-NM: per-channel KmerIndex DRAM port
  output logic [CH-1:0]     mem_req_valid,
  input  logic [CH-1:0]     mem_req_ready,
  output addr_t             mem_req_addr [CH],
  output len_t              mem_req_len  [CH],
  input  logic [CH-1:0]     mem_rsp_valid,
  input  word_t             mem_rsp_data [CH],
  // GenStore-NM: per-channel verdicts
  output logic [CH-1:0]     nm_out_valid,
  input  logic [CH-1:0]     nm_out_ready,
  output read_id_t          nm_out_id      [CH],
  output nm_verdict_e       nm_out_verdict [CH],
  output score_t            nm_out_score   [CH],
  output logic [$clog2(N+1)-1:0] nm_out_nseeds [CH],
  // activity, for monitoring
  output logic [CH-1:0]     ev_minimizer,
  output logic [CH-1:0]     ev_index_miss,
  output logic [CH-1:0]     ev_seed_cap
);

  localparam int unsigned NH = (CH + HASH_PORTS - 1) / HASH_PORTS;

  logic em_run, nm_run, start, em_done;
  logic [CH-1:0] nm_done, nm_host;

  always_comb
    for (int c = 0; c < int'(CH); c++)
      nm_host[c] = (nm_out_verdict[c] == NM_HOST_MANY) || (nm_out_verdict[c] == NM_HOST_CHAIN);

  gs_control #(.CH(CH), .CNT_W(40)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_mode, .cmd_ready, .prep_done,
    .em_done, .nm_done,
    .em_res       (em_res_valid && em_res_ready),
    .em_res_exact (em_res_exact),
    .nm_res       (nm_out_valid & nm_out_ready),
    .nm_res_host  (nm_host),
    .state, .accel_mode, .em_run, .nm_run, .start, .done,
    .filtered_cnt, .host_cnt
  );

  // ---------------- GenStore-EM ----------------
  logic      sr_rd_valid, sr_rd_ready, sr_rd_last;
  sr_entry_t sr_rd_entry;
  logic      sk_rd_valid, sk_rd_ready, sk_rd_last;
  fp_t       sk_rd_fp;

  gs_batch_buffer #(.W($bits(sr_entry_t)), .DEPTH(SR_DEPTH)) u_srbuf (
    .clk, .rst_n,
    .flush    (!accel_mode),
    .wr_valid (sr_wr_valid), .wr_ready (sr_wr_ready),
    .wr_data  (sr_wr_entry), .wr_last  (sr_wr_last),
    .rd_valid (sr_rd_valid), .rd_ready (sr_rd_ready),
    .rd_data  (sr_rd_entry), .rd_last  (sr_rd_last),
    .slot_full (sr_slot_full)
  );

  gs_batch_buffer #(.W(FP_W), .DEPTH(SK_DEPTH)) u_skbuf (
    .clk, .rst_n,
    .flush    (!accel_mode),
    .wr_valid (sk_wr_valid), .wr_ready (sk_wr_ready),
    .wr_data  (sk_wr_fp),    .wr_last  (sk_wr_last),
    .rd_valid (sk_rd_valid), .rd_ready (sk_rd_ready),
    .rd_data  (sk_rd_fp),    .rd_last  (sk_rd_last),
    .slot_full (sk_slot_full)
  );

  gs_em_filter u_em (
    .clk, .rst_n,
    .start    (start && em_run),
    .enable   (em_run),
    .rd_valid (sr_rd_valid), .rd_ready (sr_rd_ready),
    .rd_entry (sr_rd_entry), .rd_last  (sr_rd_last),
    .km_valid (sk_rd_valid), .km_ready (sk_rd_ready),
    .km_fp    (sk_rd_fp),    .km_last  (sk_rd_last),
    .res_valid (em_res_valid), .res_ready (em_res_ready),
    .res_id    (em_res_id),    .res_exact (em_res_exact),
    .done      (em_done)
  );

  // ---------------- GenStore-NM ----------------
  logic [HASH_PORTS-1:0] h_req_valid [NH];
  logic [HASH_PORTS-1:0] h_req_ready [NH];
  logic [63:0]           h_req_key   [NH][HASH_PORTS];
  logic [HASH_PORTS-1:0] h_rsp_valid [NH];
  logic [63:0]           h_rsp_hash  [NH];
  logic [CH-1:0]         ch_hreq_valid;
  logic [63:0]           ch_hreq_key [CH];

  for (genvar u = 0; u < int'(NH); u++) begin : g_hash
    for (genvar p = 0; p < int'(HASH_PORTS); p++) begin : g_port
      if (u * HASH_PORTS + p < CH) begin : g_used
        assign h_req_valid[u][p] = ch_hreq_valid[u*HASH_PORTS + p];
        assign h_req_key[u][p]   = ch_hreq_key[u*HASH_PORTS + p];
      end else begin : g_unused
        assign h_req_valid[u][p] = 1'b0;
        assign h_req_key[u][p]   = '0;
      end
    end
    gs_hash_acc #(.PORTS(HASH_PORTS)) u_hash (
      .clk, .rst_n,
      .req_valid (h_req_valid[u]),
      .req_ready (h_req_ready[u]),
      .req_key   (h_req_key[u]),
      .rsp_valid (h_rsp_valid[u]),
      .rsp_hash  (h_rsp_hash[u])
    );
  end

  for (genvar c = 0; c < int'(CH); c++) begin : g_ch
    localparam int unsigned U = c / HASH_PORTS;
    localparam int unsigned P = c % HASH_PORTS;
    gs_ch_acc #(.K(K), .WIN(WIN), .M(M), .N(N), .H(H), .TH(TH), .IB(IB), .L1_BASE(L1_BASE)) u_acc (
      .clk, .rst_n,
      .start  (start && nm_run),
      .enable (nm_run),
      .in_valid (nm_in_valid[c]), .in_ready (nm_in_ready[c]),
      .in_base  (nm_in_base[c]),  .in_first (nm_in_first[c]),
      .in_last  (nm_in_last[c]),  .in_eos   (nm_in_eos[c]),
      .in_id    (nm_in_id[c]),
      .hash_req_valid (ch_hreq_valid[c]),
      .hash_req_ready (h_req_ready[U][P]),
      .hash_req_key   (ch_hreq_key[c]),
      .hash_rsp_valid (h_rsp_valid[U][P]),
      .hash_rsp_hash  (h_rsp_hash[U]),
      .mem_req_valid (mem_req_valid[c]), .mem_req_ready (mem_req_ready[c]),
      .mem_req_addr  (mem_req_addr[c]),  .mem_req_len   (mem_req_len[c]),
      .mem_rsp_valid (mem_rsp_valid[c]), .mem_rsp_data  (mem_rsp_data[c]),
      .out_valid   (nm_out_valid[c]),   .out_ready (nm_out_ready[c]),
      .out_id      (nm_out_id[c]),      .out_verdict (nm_out_verdict[c]),
      .out_nseeds  (nm_out_nseeds[c]),
      .out_score   (nm_out_score[c]),
      .done        (nm_done[c]),
      .ev_minimizer  (ev_minimizer[c]),
      .ev_index_miss (ev_index_miss[c]),
      .ev_seed_cap   (ev_seed_cap[c])
    );
  end

endmodule
