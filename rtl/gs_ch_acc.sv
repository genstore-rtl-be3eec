// gs_ch_acc: channel-level GenStore-NM accelerator.
//
// One per flash channel. It filters the reads that the channel's flash
// controller streams in:
//   seed finder   -> finds the read's minimizer seeds (up to N) via the shared
//                    hash unit and the KmerIndex in DRAM, into the location buffer;
//   count filter  -> fewer than M seeds: drop; N or more: host; else chaining;
//   chain filter  -> chains the sorted seeds; best score >= TH: host, else drop.
// The steps overlap across reads: as soon as a read's seeds are complete and the
// output stage is idle, the read is taken for counting/chaining and the seed
// finder starts on the next read. The next read's seeds may only be written
// once the location buffer is free: immediately for reads decided by their
// seed count, after chaining for the others (the buffer is then cleared).
// The verdict of each read leaves on out_* (valid/ready) with the read ID, its
// seed count and (for chained reads) the best chaining score. A base flagged
// in_eos (last base of the channel's last read) makes done rise once that
// read's verdict has been taken; start (begin of a filtering run) clears done.
//
// Timing: a read decided by its count gives its verdict one cycle after its
// seeds are complete; a chained read after the chaining time of
// gs_chain_filter. Seed finding of the next read runs meanwhile.
//
// From the paper: the three steps, that they run pipelined, and the units per
// channel (K-mer window, location buffer, chaining buffer, chaining PE). Own
// choices: the overlap shown above (one read in seed finding, one in
// counting/chaining/output), the verdict stream and the done flag. The paper
// lists two K-mer Windows per channel without saying how the second is used;
// one is used here. verilator notes rst_n as used both asynchronously and
// synchronously: the synchronous use is the disable condition of the
// assertion below, not logic.
// hash_req_key is zero above bit 2K-1: the shared hash unit takes 64-bit keys.
module gs_ch_acc
  import gs_pkg::*;
#(
  parameter int unsigned K       = KMER_K,
  parameter int unsigned WIN     = WIN_W,
  parameter int unsigned M       = SEED_M,
  parameter int unsigned N       = SEED_N,
  parameter int unsigned H       = CHAIN_H,
  parameter int          TH      = CHAIN_TH,
  parameter int unsigned IB      = IDX_BITS,
  parameter addr_t       L1_BASE = '0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic                   enable,
  // read bases from the flash controller
  input  logic                   in_valid,
  output logic                   in_ready,
  input  base_t                  in_base,
  input  logic                   in_first,
  input  logic                   in_last,
  input  logic                   in_eos,
  input  read_id_t               in_id,
  // hash accelerator port
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
  // verdicts
  output logic                   out_valid,
  input  logic                   out_ready,
  output read_id_t               out_id,
  output nm_verdict_e            out_verdict,
  output logic [$clog2(N+1)-1:0] out_nseeds,
  output score_t                 out_score,
  output logic                   done,
  // events
  output logic                   ev_minimizer,
  output logic                   ev_index_miss,
  output logic                   ev_seed_cap
);

  localparam int unsigned CW = $clog2(N+1);

  typedef enum logic [1:0] { A_IDLE, A_CHAIN, A_OUT } acc_state_e;
  acc_state_e state;

  logic          sf_in_valid, sf_in_ready;
  logic          eos_pending, out_eos, loc_busy, accept;
  logic          sf_done_valid, sf_done_ready;
  read_id_t      sf_done_id;
  logic [CW-1:0] sf_done_nseeds;
  logic          loc_wr_valid, loc_clear, loc_full;
  seed_t         loc_wr_seed, loc_rd_seed;
  logic [$clog2(N)-1:0] loc_rd_idx;
  logic [CW-1:0] loc_count;
  logic          cf_drop, cf_host, cf_chain;
  logic          ch_start, ch_busy, ch_done, ch_pass;
  score_t        ch_best;

  assign sf_in_valid = in_valid && enable;
  assign in_ready    = sf_in_ready && enable;

  gs_seed_finder #(.K(K), .WIN(WIN), .N(N), .IB(IB), .L1_BASE(L1_BASE)) u_sf (
    .clk, .rst_n,
    .in_valid (sf_in_valid), .in_ready (sf_in_ready),
    .in_base, .in_first, .in_last, .in_id,
    .hash_req_valid, .hash_req_ready, .hash_req_key, .hash_rsp_valid, .hash_rsp_hash,
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_req_len, .mem_rsp_valid, .mem_rsp_data,
    .loc_free (!loc_busy), .loc_wr_valid, .loc_wr_seed,
    .done_valid (sf_done_valid), .done_ready (sf_done_ready),
    .done_id (sf_done_id), .done_nseeds (sf_done_nseeds),
    .ev_minimizer, .ev_index_miss, .ev_seed_cap
  );

  gs_location_buffer #(.DEPTH(N)) u_loc (
    .clk, .rst_n,
    .clear    (loc_clear),
    .wr_valid (loc_wr_valid),
    .wr_seed  (loc_wr_seed),
    .rd_idx   (loc_rd_idx),
    .rd_seed  (loc_rd_seed),
    .count    (loc_count),
    .full     (loc_full)
  );

  gs_seed_count_filter #(.M(M), .N(N), .CW(CW)) u_cnt (
    .in_valid   (sf_done_valid && state == A_IDLE),
    .seed_count (sf_done_nseeds),
    .drop_few   (cf_drop),
    .to_host    (cf_host),
    .to_chain   (cf_chain)
  );

  gs_chain_filter #(.NSEED(N), .H(H), .W(K), .TH(TH)) u_chain (
    .clk, .rst_n,
    .start    (ch_start),
    .n_seeds  (loc_count),
    .loc_idx  (loc_rd_idx),
    .loc_seed (loc_rd_seed),
    .busy     (ch_busy),
    .done     (ch_done),
    .pass     (ch_pass),
    .best     (ch_best)
  );

  // A read is taken from the seed finder as soon as the output stage is idle;
  // the finder then starts on the next read. A read to be chained keeps the
  // location buffer busy until chaining ends; other reads free it at once.
  assign sf_done_ready = (state == A_IDLE);
  assign accept        = sf_done_valid && sf_done_ready;
  assign ch_start      = cf_chain && !ch_busy;
  assign out_valid     = (state == A_OUT);
  assign loc_clear     = (accept && !cf_chain) || (state == A_CHAIN && ch_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= A_IDLE;
      out_id      <= '0;
      out_verdict <= NM_DROP_FEW;
      out_nseeds  <= '0;
      out_score   <= '0;
      eos_pending <= 1'b0;
      out_eos     <= 1'b0;
      loc_busy    <= 1'b0;
      done        <= 1'b0;
    end else begin
      if (start) begin
        done        <= 1'b0;
        eos_pending <= 1'b0;
        out_eos     <= 1'b0;
      end
      if (sf_in_valid && sf_in_ready && in_eos) eos_pending <= 1'b1;
      unique case (state)
        A_IDLE: if (sf_done_valid) begin
          // the finder cannot start the next read before this one is taken,
          // so an end-of-stream flag seen so far belongs to this read
          out_eos     <= eos_pending;
          eos_pending <= 1'b0;
          out_id     <= sf_done_id;
          out_nseeds <= sf_done_nseeds;
          out_score  <= '0;
          if (cf_drop) begin
            out_verdict <= NM_DROP_FEW;
            state       <= A_OUT;
          end else if (cf_host) begin
            out_verdict <= NM_HOST_MANY;
            state       <= A_OUT;
          end else begin
            loc_busy <= 1'b1;
            state    <= A_CHAIN;
          end
        end
        A_CHAIN: if (ch_done) begin
          loc_busy    <= 1'b0;
          out_score   <= ch_best;
          out_verdict <= ch_pass ? NM_HOST_CHAIN : NM_DROP_CHAIN;
          state       <= A_OUT;
        end
        A_OUT: if (out_ready) begin
          state <= A_IDLE;
          if (out_eos) begin
            done    <= 1'b1;
            out_eos <= 1'b0;
          end
        end
        default: state <= A_IDLE;
      endcase
    end
  end


  // The location buffer never overflows: the seed finder caps bursts at N seeds.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(loc_wr_valid && loc_full));

endmodule
