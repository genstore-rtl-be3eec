// gs_chain_buffer: the Chaining Buffer of GenStore-NM.
//
// A circular buffer with the DEPTH most recently chained seeds of a read: their
// positions (x_i, y_i) and best score f(i). Writes append at the head (visible
// the next cycle); a full buffer overwrites its oldest entry, which is exactly
// the window of DEPTH predecessors the chaining recurrence looks back over. A
// read is combinational and addressed by age: rd_back = 1 is the newest entry,
// rd_back = count the oldest. clear empties it. The seed length w_i is not
// stored: every seed is one k-mer long, so w_i is a constant of the filter.
//
// From the paper: 50 entries of a 64-bit seed and a 16-bit score. Own choice:
// the circular organisation.
module gs_chain_buffer
  import gs_pkg::*;
#(
  parameter int unsigned DEPTH = CHAIN_H
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       wr_en,
  input  seed_t                      wr_seed,
  input  score_t                     wr_f,
  input  logic [$clog2(DEPTH+1)-1:0] rd_back,
  output seed_t                      rd_seed,
  output score_t                     rd_f,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH+1);

  seed_t   seeds  [DEPTH];
  score_t  scores [DEPTH];
  logic [AW-1:0] head;     // next slot to write
  logic [AW-1:0] rd_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head  <= '0;
      count <= '0;
      for (int i = 0; i < int'(DEPTH); i++) begin
        seeds[i]  <= '0;
        scores[i] <= '0;
      end
    end else if (clear) begin
      head  <= '0;
      count <= '0;
    end else if (wr_en) begin
      seeds[head]  <= wr_seed;
      scores[head] <= wr_f;
      head <= (head == AW'(DEPTH - 1)) ? '0 : head + 1'b1;
      if (count != CW'(DEPTH)) count <= count + 1'b1;
    end
  end

  // Age rd_back maps to slot head - rd_back, modulo DEPTH.
  always_comb begin
    if ({1'b0, head} >= (AW+1)'(rd_back))
      rd_addr = AW'({1'b0, head} - (AW+1)'(rd_back));
    else
      rd_addr = AW'({1'b0, head} + (AW+1)'(DEPTH) - (AW+1)'(rd_back));
  end

  assign rd_seed = seeds[rd_addr];
  assign rd_f    = scores[rd_addr];

endmodule
