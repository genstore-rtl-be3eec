// gs_batch_buffer: double-buffered batch buffer of GenStore-EM.
//
// Data fetching writes a data structure (SRTable or SKIndex) batch by batch
// while exact-match filtering reads the previous batch: the buffer holds two
// batch slots of DEPTH entries. The writer fills its slot in order; the slot is
// handed to the reader when DEPTH entries have been written or an entry flagged
// wr_last (end of the data structure) arrives, and the writer moves to the other
// slot. While both slots are full, wr_ready is low and data fetching stalls. The
// reader drains a slot in order and then frees it for the writer.
//
// Interface: valid/ready streams in and out. The memory is read synchronously;
// the output register holds an entry until rd_ready. When the reader is idle,
// the first entry of a batch is presented on rd_* one clock edge after the edge
// that wrote the batch's last entry.
// slot_full shows which slots hold a complete batch.
//
// From the paper: two batches per data structure, and a batch being what one
// multi-plane read of every die returns (8 channels x 4 dies x 2 planes x 16 KiB
// = 1 MiB). The paper keeps these buffers in the SSD's DRAM; here each is a
// memory array. Own choices: entry formats (16 bytes per SRTable entry, 8 bytes
// per SKIndex entry, giving DEPTH) and the handshakes.
module gs_batch_buffer
  import gs_pkg::*;
#(
  parameter int unsigned W     = FP_W,
  parameter int unsigned DEPTH = SK_BATCH_ENTRIES
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  input  logic         wr_valid,
  output logic         wr_ready,
  input  logic [W-1:0] wr_data,
  input  logic         wr_last,
  output logic         rd_valid,
  input  logic         rd_ready,
  output logic [W-1:0] rd_data,
  output logic         rd_last,
  output logic [1:0]   slot_full
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [W:0]    mem [2 << AW];
  logic          wr_slot, rd_slot;
  logic [AW-1:0] wr_idx, rd_idx;
  logic [AW:0]   slot_cnt [2];
  logic          do_wr, do_rd, wr_close, rd_close;

  assign wr_ready = !slot_full[wr_slot];
  assign do_wr    = wr_valid && wr_ready;
  assign wr_close = do_wr && (wr_last || wr_idx == AW'(DEPTH - 1));
  assign do_rd    = slot_full[rd_slot] && (!rd_valid || rd_ready);
  assign rd_close = do_rd && ((AW+1)'(rd_idx) + 1'b1 == slot_cnt[rd_slot]);

  // Storage, no reset.
  always_ff @(posedge clk) begin
    if (do_wr) mem[{wr_slot, wr_idx}] <= {wr_last, wr_data};
    if (do_rd) {rd_last, rd_data} <= mem[{rd_slot, rd_idx}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_slot     <= 1'b0;
      rd_slot     <= 1'b0;
      wr_idx      <= '0;
      rd_idx      <= '0;
      slot_full   <= '0;
      slot_cnt[0] <= '0;
      slot_cnt[1] <= '0;
      rd_valid    <= 1'b0;
    end else if (flush) begin
      wr_slot   <= 1'b0;
      rd_slot   <= 1'b0;
      wr_idx    <= '0;
      rd_idx    <= '0;
      slot_full <= '0;
      rd_valid  <= 1'b0;
    end else begin
      if (do_wr) begin
        if (wr_close) begin
          slot_full[wr_slot] <= 1'b1;
          slot_cnt[wr_slot]  <= (AW+1)'(wr_idx) + 1'b1;
          wr_slot <= !wr_slot;
          wr_idx  <= '0;
        end else begin
          wr_idx <= wr_idx + 1'b1;
        end
      end
      if (do_rd) begin
        rd_valid <= 1'b1;
        if (rd_close) begin
          slot_full[rd_slot] <= 1'b0;
          rd_slot <= !rd_slot;
          rd_idx  <= '0;
        end else begin
          rd_idx <= rd_idx + 1'b1;
        end
      end else if (rd_ready) begin
        rd_valid <= 1'b0;
      end
    end
  end

endmodule
