// gs_em_filter: GenStore-EM exact-match filter (the SSD-level 64-bit comparator).
//
// Both inputs are sorted ascending by fingerprint: the read stream carries the
// SRTable entries (fingerprint and read ID), the k-mer stream the SKIndex
// fingerprints of all read-sized reference k-mers. One 64-bit three-way compare
// per cycle decides which pointer moves, as in a merge:
//   FP(read) == FP(kmer): the read matches exactly; it is reported with
//                          exact = 1 and the read pointer advances,
//   FP(read) >  FP(kmer): the k-mer matches no remaining read; the k-mer pointer
//                          advances,
//   FP(read) <  FP(kmer): no k-mer can match the read; it is reported with
//                          exact = 0 (to be sent to the host) and the read
//                          pointer advances.
// After the last k-mer has been passed over, every remaining read is reported
// with exact = 0. After the result for the read flagged rd_last, done stays set
// until the next start. start clears the state of a previous run.
//
// Interface: valid/ready streams; results are registered (one cycle after the
// compare) and held until res_ready. Throughput: one read or one k-mer consumed
// per cycle.
//
// From the paper: the sorted fingerprint streams and the three pointer moves.
// The paper's figure advances both pointers on a match while its text advances
// the k-mer pointer only while FP(read) > FP(kmer); the text is followed, so
// repeated reads with the same fingerprint all match. Own choices: the
// handshakes, the done flag and the end-of-stream flags.
module gs_em_filter
  import gs_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  logic      enable,
  // SRTable stream
  input  logic      rd_valid,
  output logic      rd_ready,
  input  sr_entry_t rd_entry,
  input  logic      rd_last,
  // SKIndex stream
  input  logic      km_valid,
  output logic      km_ready,
  input  fp_t       km_fp,
  input  logic      km_last,
  // per-read result
  output logic      res_valid,
  input  logic      res_ready,
  output read_id_t  res_id,
  output logic      res_exact,
  output logic      done
);

  logic km_exhausted;
  logic out_free;
  logic eq, gt;

  assign out_free = !res_valid || res_ready;
  assign eq = (rd_entry.fp == km_fp);
  assign gt = (rd_entry.fp >  km_fp);

  always_comb begin
    rd_ready = 1'b0;
    km_ready = 1'b0;
    if (enable && !done && rd_valid && out_free) begin
      if (km_exhausted)  rd_ready = 1'b1;
      else if (km_valid) begin
        if (gt) km_ready = 1'b1;
        else    rd_ready = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      km_exhausted <= 1'b0;
      res_valid    <= 1'b0;
      res_id       <= '0;
      res_exact    <= 1'b0;
      done         <= 1'b0;
    end else if (start) begin
      km_exhausted <= 1'b0;
      res_valid    <= 1'b0;
      done         <= 1'b0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (km_ready && km_last) km_exhausted <= 1'b1;
      if (rd_ready) begin
        res_valid <= 1'b1;
        res_id    <= rd_entry.id;
        res_exact <= !km_exhausted && eq;
        if (rd_last) done <= 1'b1;
      end
    end
  end

endmodule
