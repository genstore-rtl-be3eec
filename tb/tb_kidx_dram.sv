// tb_kidx_dram: behavioural model of the SSD DRAM port that holds the KmerIndex.
//
// Accepts one burst request at a time (req_ready low while busy or, at random,
// with probability STALL_PCT percent), waits LAT cycles and returns req_len
// words from tb_gs_pkg::dram, one per cycle, in address order. Words never
// written read as zero. Not synthesizable: a test model only.
module tb_kidx_dram
  import gs_pkg::*;
#(
  parameter int LAT       = 4,
  parameter int STALL_PCT = 20
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req_valid,
  output logic  req_ready,
  input  addr_t req_addr,
  input  len_t  req_len,
  output logic  rsp_valid,
  output word_t rsp_data
);
  logic  busy;
  addr_t a;
  int    left, wait_c;
  logic  stall;

  always_ff @(posedge clk) stall <= ($urandom_range(99) < STALL_PCT);
  assign req_ready = !busy && !stall && rst_n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; rsp_valid <= 1'b0; rsp_data <= '0; left <= 0; wait_c <= 0; a <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (!busy) begin
        if (req_valid && req_ready) begin
          busy <= 1'b1; a <= req_addr; left <= int'(req_len); wait_c <= LAT;
        end
      end else if (wait_c > 0) begin
        wait_c <= wait_c - 1;
      end else begin
        rsp_valid <= 1'b1;
        rsp_data  <= tb_gs_pkg::dram.exists(a) ? tb_gs_pkg::dram[a] : '0;
        a    <= a + 1'b1;
        left <= left - 1;
        if (left == 1) busy <= 1'b0;
      end
    end
  end
endmodule
