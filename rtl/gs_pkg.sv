// gs_pkg: types and constants shared by the GenStore in-storage read filter.
//
// GenStore places two read filters inside an SSD. GenStore-EM streams a sorted
// table of read fingerprints (SRTable) against a sorted table of reference k-mer
// fingerprints (SKIndex) and drops reads that match exactly. GenStore-NM finds
// minimizer seeds of long reads in a k-mer index held in the SSD's DRAM, drops
// reads with too few seeds and chains the rest, dropping reads whose best chain
// scores low. Everything else goes to the host for full read mapping.
//
// Numbers taken from the paper: 8 channels, 4 dies per channel, 2 planes, 16 KiB
// pages (its example SSD), 64-bit comparator and hash, K-mer window of 10 x 19-bit,
// location buffer of 64 x 64-bit, chaining buffer of 50 x (16-bit + 64-bit),
// seed bounds M = 3 and N = 64, one hash unit per 4 channels, one comparator per
// 12 channels. Choices of this design: entry formats, k = 9 bases (the largest
// canonical k-mer plus strand bit that fits the 19-bit window entry), the chain
// score threshold (40, as in minimap2), bucket count and word formats of the
// k-mer index.
package gs_pkg;

  // ---------------- SSD organisation ----------------
  localparam int unsigned CHANNELS    = 8;
  localparam int unsigned DIES_PER_CH = 4;
  localparam int unsigned PLANES      = 2;
  localparam int unsigned PAGE_BYTES  = 16384;
  // One batch = what one multi-plane read of every die returns.
  localparam int unsigned BATCH_BYTES = CHANNELS * DIES_PER_CH * PLANES * PAGE_BYTES;

  // ---------------- GenStore-EM ----------------
  localparam int unsigned FP_W           = 64;   // fingerprint compared by the 64-bit comparator
  localparam int unsigned ID_W           = 32;   // read ID
  localparam int unsigned SR_ENTRY_BYTES = 16;   // fingerprint + ID, padded
  localparam int unsigned SK_ENTRY_BYTES = 8;    // fingerprint
  localparam int unsigned SR_BATCH_ENTRIES = BATCH_BYTES / SR_ENTRY_BYTES;
  localparam int unsigned SK_BATCH_ENTRIES = BATCH_BYTES / SK_ENTRY_BYTES;
  localparam int unsigned CMP_MAX_CHANNELS = 12;

  // ---------------- GenStore-NM ----------------
  localparam int unsigned WIN_W        = 10;   // w: k-mers per minimizer window
  localparam int unsigned KMER_W       = 19;   // K-mer window entry width
  localparam int unsigned KMER_K       = 9;    // bases per k-mer: 2*9 bits + strand bit = 19
  localparam int unsigned SEED_N       = 64;   // upper seed bound = location buffer depth
  localparam int unsigned SEED_M       = 3;    // lower seed bound
  localparam int unsigned CHAIN_H      = 50;   // predecessors considered per seed
  localparam int unsigned SCORE_W      = 16;   // chaining score width
  localparam int unsigned POS_W        = 32;   // seed positions
  localparam int          CHAIN_TH     = 40;   // minimum chaining score of a passing read
  localparam int unsigned HASH_PORTS   = 4;    // channels served by one hash unit
  localparam int unsigned ADDR_W       = 32;   // DRAM word address (64-bit words)
  localparam int unsigned LEN_W        = 16;   // DRAM burst length in words
  localparam int unsigned IDX_BITS     = 27;   // KmerIndex level-1 buckets = 2^IDX_BITS

  typedef logic [FP_W-1:0]   fp_t;
  typedef logic [ID_W-1:0]   read_id_t;
  typedef logic [1:0]        base_t;      // A=0, C=1, G=2, T=3
  typedef logic [63:0]       word_t;      // DRAM word
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [LEN_W-1:0]  len_t;
  typedef logic signed [SCORE_W-1:0] score_t;

  // SRTable entry: fingerprint (sort key) and read ID.
  typedef struct packed {
    fp_t      fp;
    read_id_t id;
  } sr_entry_t;

  // Seed: end position in the reference (x) and in the read (y).
  typedef struct packed {
    logic [POS_W-1:0] x;
    logic [POS_W-1:0] y;
  } seed_t;

  // Level-1 KmerIndex word: number of locations and word address of the first one.
  typedef struct packed {
    logic [15:0] count;
    logic [47:0] offset;
  } kidx_bucket_t;

  // What happened to a read in GenStore-NM.
  typedef enum logic [1:0] {
    NM_DROP_FEW   = 2'd0,   // fewer than M seeds: filtered
    NM_HOST_MANY  = 2'd1,   // at least N seeds: sent to host without chaining
    NM_HOST_CHAIN = 2'd2,   // chaining score reached the threshold: sent to host
    NM_DROP_CHAIN = 2'd3    // chaining score too low: filtered
  } nm_verdict_e;

  typedef enum logic {
    MODE_EM = 1'b0,
    MODE_NM = 1'b1
  } gs_mode_e;

  typedef enum logic [2:0] {
    ST_IDLE = 3'd0,   // regular SSD
    ST_PREP = 3'd1,   // FTL flushes L2P and loads GenStore metadata
    ST_EM   = 3'd2,   // exact-match filtering
    ST_NM   = 3'd3,   // non-matching read filtering
    ST_DONE = 3'd4    // report completion, return to regular SSD
  } gs_state_e;

  // 64-bit integer mix hash (Thomas Wang), as minimap2's hash64 with a full mask.
  function automatic logic [63:0] hash64(input logic [63:0] key);
    logic [63:0] k;
    k = ~key + (key << 21);
    k = k ^ (k >> 24);
    k = (k + (k << 3)) + (k << 8);
    k = k ^ (k >> 14);
    k = (k + (k << 2)) + (k << 4);
    k = k ^ (k >> 28);
    k = k + (k << 31);
    return k;
  endfunction

endpackage
