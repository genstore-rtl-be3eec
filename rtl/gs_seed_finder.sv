// gs_seed_finder: Step 1 of GenStore-NM, seed finding for one channel.
//
// Takes the bases of one read at a time (2 bits each, in_first on the first
// base, in_last on the last) and finds its seeds:
//  1. It keeps the forward k-mer and its reverse complement; once K bases are
//     in, each new base gives a canonical k-mer (the smaller of the two) and a
//     strand bit, which go into the K-mer Window.
//  2. The k-mer is sent to the shared hash accelerator; the returned hash64 and
//     the k-mer's end position in the read enter a window of the last WIN hashes.
//  3. With WIN k-mers present, the k-mer with the smallest hash (the oldest on
//     ties) is the window's minimizer. A minimizer not seen in the previous
//     window is looked up in the two-level KmerIndex in DRAM: word
//     L1_BASE + (hash mod 2^IDX_BITS) is the bucket {count, offset}; if count is
//     not zero, a burst of count words from offset gives the reference end
//     positions. Each position x forms a seed (x, y) with y the minimizer's end
//     position in the read, written to the location buffer.
//  4. Lookups stop once N seeds are stored; the rest of the read is consumed.
//     After the last base, done_valid presents the read ID and seed count and is
//     held until done_ready, when the next read may start.
//  The location buffer may still hold the previous read's seeds while this
//  read's k-mers are hashed and looked up: a level-2 burst (the only step that
//  writes seeds) is requested only while loc_free is high.
//
// Timing: one base per cycle when no k-mer is complete; otherwise the finder
// waits for the hash (arbitration plus three cycles) and for any index lookup
// (one request per level, DRAM latency as the memory returns it). A burst is
// shortened so that no more than N seeds are fetched.
//
// From the paper: the K-mer Window, minimizers picked with hash64 over windows
// of w = 10 k-mers, hash unit at SSD level, the two-level index with at most two
// DRAM accesses per query, the stop at N seeds, one minimizer per bucket (no key
// check). Own choices: canonical k-mers with k = 9, index word formats, the
// DRAM request/burst handshake, and holding back seed writes (not the whole
// read) while the location buffer is still in use. The upper bits of the
// level-1 offset beyond the 32-bit word address are not used.
// Two outputs are plain by design: hash_req_key is zero above bit 2K-1 (the
// hash unit takes 64-bit keys), and the seed's reference position loc_wr_seed.x
// is the DRAM response word passed straight through.
module gs_seed_finder
  import gs_pkg::*;
#(
  parameter int unsigned K        = KMER_K,
  parameter int unsigned WIN      = WIN_W,
  parameter int unsigned KW       = KMER_W,
  parameter int unsigned N        = SEED_N,
  parameter int unsigned IB       = IDX_BITS,
  parameter addr_t       L1_BASE  = '0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // read bases
  input  logic                   in_valid,
  output logic                   in_ready,
  input  base_t                  in_base,
  input  logic                   in_first,
  input  logic                   in_last,
  input  read_id_t               in_id,
  // hash accelerator
  output logic                   hash_req_valid,
  input  logic                   hash_req_ready,
  output logic [63:0]            hash_req_key,
  input  logic                   hash_rsp_valid,
  input  logic [63:0]            hash_rsp_hash,
  // KmerIndex in DRAM
  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output addr_t                  mem_req_addr,
  output len_t                   mem_req_len,
  input  logic                   mem_rsp_valid,
  input  word_t                  mem_rsp_data,
  // location buffer
  input  logic                   loc_free,
  output logic                   loc_wr_valid,
  output seed_t                  loc_wr_seed,
  // read finished
  output logic                   done_valid,
  input  logic                   done_ready,
  output read_id_t               done_id,
  output logic [$clog2(N+1)-1:0] done_nseeds,
  // events
  output logic                   ev_minimizer,
  output logic                   ev_index_miss,
  output logic                   ev_seed_cap
);

  localparam int unsigned CW  = $clog2(N+1);
  localparam int unsigned HCW = $clog2(WIN+1);
  localparam logic [2*K-1:0] KMASK = '1;

  typedef enum logic [2:0] {
    S_IN, S_HREQ, S_HWAIT, S_MIN, S_L1REQ, S_L1WAIT, S_L2REQ, S_L2WAIT
  } sf_state_e;
  sf_state_e state;
  logic      sdone;   // read finished, waiting for done_ready

  logic [2*K-1:0]   fwd, rc, fwd_n, rc_n;
  logic [POS_W-1:0] nbases, nb_n;
  logic             last_seen;
  read_id_t         id;
  logic [CW-1:0]    nseeds;
  logic [63:0]      hwin [WIN];
  logic [POS_W-1:0] hpos [WIN];
  logic [HCW-1:0]   hcount;
  logic [POS_W-1:0] cur_pos, min_pos_r;
  logic             have_min;
  logic [IB-1:0]    min_hash_r;
  logic [47:0]      l2_addr;
  len_t             l2_len, remaining;

  // K-mer window
  logic            kw_clear, kw_push;
  logic [KW-1:0]   kw_in;
  logic [KW-1:0]   kw_win [WIN];
  logic [HCW-1:0]  kw_count;
  logic            kw_full;

  gs_kmer_window #(.WIN(WIN), .KW(KW)) u_kwin (
    .clk, .rst_n,
    .clear   (kw_clear),
    .push    (kw_push),
    .kmer_in (kw_in),
    .win     (kw_win),
    .count   (kw_count),
    .full    (kw_full)
  );

  // next k-mer from the accepted base
  logic accept;
  assign accept   = (state == S_IN) && !sdone && in_valid;
  assign in_ready = (state == S_IN) && !sdone;

  always_comb begin
    if (in_first) begin
      fwd_n = {{(2*K-2){1'b0}}, in_base};
      rc_n  = {~in_base, {(2*K-2){1'b0}}};
      nb_n  = POS_W'(1);
    end else begin
      fwd_n = ((fwd << 2) | {{(2*K-2){1'b0}}, in_base}) & KMASK;
      rc_n  = (rc >> 2) | {~in_base, {(2*K-2){1'b0}}};
      nb_n  = nbases + 1'b1;
    end
  end

  logic kmer_ok, canon_rc;
  logic [2*K-1:0] canon;
  always_comb begin
    kmer_ok  = (nb_n >= POS_W'(K)) && (nseeds < CW'(N)) && !(in_first && K > 1);
    canon_rc = rc_n < fwd_n;
    canon    = canon_rc ? rc_n : fwd_n;
  end

  assign kw_clear = accept && in_first;
  assign kw_push  = accept && kmer_ok;
  assign kw_in    = KW'({canon_rc, canon});

  // minimizer of the hash window: smallest hash, oldest on ties
  logic [63:0]      min_hash;
  logic [POS_W-1:0] min_pos;
  always_comb begin
    min_hash = hwin[WIN-1];
    min_pos  = hpos[WIN-1];
    for (int i = int'(WIN) - 2; i >= 0; i--) begin
      if (hwin[i] < min_hash) begin
        min_hash = hwin[i];
        min_pos  = hpos[i];
      end
    end
  end

  kidx_bucket_t bucket;
  assign bucket = kidx_bucket_t'(mem_rsp_data);

  // requests
  assign hash_req_valid = (state == S_HREQ);
  assign hash_req_key   = 64'(kw_win[0][2*K-1:0]);
  assign mem_req_valid  = (state == S_L1REQ) || ((state == S_L2REQ) && loc_free);
  assign mem_req_addr   = (state == S_L1REQ) ? L1_BASE + addr_t'(min_hash_r)
                                             : addr_t'(l2_addr);
  assign mem_req_len    = (state == S_L1REQ) ? len_t'(1) : l2_len;

  assign loc_wr_valid   = (state == S_L2WAIT) && mem_rsp_valid;
  assign loc_wr_seed    = '{x: mem_rsp_data[POS_W-1:0], y: min_pos_r};

  assign done_valid  = sdone;
  assign done_id     = id;
  assign done_nseeds = nseeds;

  logic [CW-1:0] room;
  assign room = CW'(N) - nseeds;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IN;
      sdone      <= 1'b0;
      fwd        <= '0;
      rc         <= '0;
      nbases     <= '0;
      last_seen  <= 1'b0;
      id         <= '0;
      nseeds     <= '0;
      hcount     <= '0;
      cur_pos    <= '0;
      min_pos_r  <= '0;
      min_hash_r <= '0;
      have_min   <= 1'b0;
      l2_addr    <= '0;
      l2_len     <= '0;
      remaining  <= '0;
      ev_minimizer  <= 1'b0;
      ev_index_miss <= 1'b0;
      ev_seed_cap   <= 1'b0;
      for (int i = 0; i < int'(WIN); i++) begin
        hwin[i] <= '0;
        hpos[i] <= '0;
      end
    end else begin
      ev_minimizer  <= 1'b0;
      ev_index_miss <= 1'b0;
      ev_seed_cap   <= 1'b0;
      if (sdone) begin
        if (done_ready) begin
          sdone  <= 1'b0;
          nseeds <= '0;
        end
      end else begin
        unique case (state)
          S_IN: if (in_valid) begin
            fwd       <= fwd_n;
            rc        <= rc_n;
            nbases    <= nb_n;
            last_seen <= in_last;
            cur_pos   <= nb_n - 1'b1;
            if (in_first) begin
              id       <= in_id;
              hcount   <= '0;
              have_min <= 1'b0;
              nseeds   <= '0;
            end
            if (kmer_ok)      state <= S_HREQ;
            else if (in_last) sdone <= 1'b1;
          end
          S_HREQ: if (hash_req_ready) state <= S_HWAIT;
          S_HWAIT: if (hash_rsp_valid) begin
            hwin[0] <= hash_rsp_hash;
            hpos[0] <= cur_pos;
            for (int i = 1; i < int'(WIN); i++) begin
              hwin[i] <= hwin[i-1];
              hpos[i] <= hpos[i-1];
            end
            if (hcount != HCW'(WIN)) hcount <= hcount + 1'b1;
            if (hcount + 1'b1 >= HCW'(WIN)) state <= S_MIN;
            else begin
              state <= S_IN;
              sdone <= last_seen;
            end
          end
          S_MIN: begin
            if (!have_min || min_pos != min_pos_r) begin
              have_min     <= 1'b1;
              min_pos_r    <= min_pos;
              min_hash_r   <= min_hash[IB-1:0];
              ev_minimizer <= 1'b1;
              state        <= S_L1REQ;
            end else begin
              state <= S_IN;
              sdone <= last_seen;
            end
          end
          S_L1REQ: if (mem_req_ready) state <= S_L1WAIT;
          S_L1WAIT: if (mem_rsp_valid) begin
            if (bucket.count == '0) begin
              ev_index_miss <= 1'b1;
              state <= S_IN;
              sdone <= last_seen;
            end else begin
              l2_addr <= bucket.offset;
              l2_len  <= (32'(bucket.count) > 32'(room)) ? len_t'(room) : len_t'(bucket.count);
              state   <= S_L2REQ;
            end
          end
          S_L2REQ: if (mem_req_ready && loc_free) begin
            remaining <= l2_len;
            state     <= S_L2WAIT;
          end
          S_L2WAIT: if (mem_rsp_valid) begin
            nseeds    <= nseeds + 1'b1;
            remaining <= remaining - 1'b1;
            if (remaining == len_t'(1)) begin
              if (nseeds + 1'b1 == CW'(N)) ev_seed_cap <= 1'b1;
              state <= S_IN;
              sdone <= last_seen;
            end
          end
          default: state <= S_IN;
        endcase
      end
    end
  end

  // The hash window only fills with the K-mer Window: a minimizer is picked
  // only when the K-mer Window holds WIN k-mers.
  a_window_full: assert property (@(posedge clk) disable iff (!rst_n)
                                  (state == S_MIN) |-> (kw_full && kw_count == HCW'(WIN)));

  // Seeds are written only while the location buffer is free for this read.
  a_loc_free: assert property (@(posedge clk) disable iff (!rst_n)
                               loc_wr_valid |-> loc_free);

endmodule
