// gs_location_buffer: the Location Buffer of a GenStore-NM channel accelerator.
//
// Holds up to DEPTH seeds of the read being filtered. Seeds arrive in read order
// from the seed finder; the chaining step needs them ordered by reference
// position, so the buffer keeps its contents sorted: a write compares the new
// seed with every stored one in parallel, shifts the entries with a larger
// reference position up by one place and puts the new seed in the gap (equal
// positions keep arrival order). A write to a full buffer is dropped. Reads are
// combinational by index. clear empties the buffer. A write is visible the
// cycle after wr_valid.
//
// From the paper: 64 entries of 64 bits and the seeds being sorted by reference
// position before chaining. Own choice: sorting on insertion.
module gs_location_buffer
  import gs_pkg::*;
#(
  parameter int unsigned DEPTH = SEED_N
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       wr_valid,
  input  seed_t                      wr_seed,
  input  logic [$clog2(DEPTH)-1:0]   rd_idx,
  output seed_t                      rd_seed,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                       full
);

  localparam int unsigned CW = $clog2(DEPTH+1);

  seed_t           mem [DEPTH];
  logic [DEPTH-1:0] greater;

  always_comb begin
    for (int i = 0; i < int'(DEPTH); i++)
      greater[i] = (CW'(i) < count) && (mem[i].x > wr_seed.x);
  end

  assign full = (count == CW'(DEPTH));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int i = 0; i < int'(DEPTH); i++) mem[i] <= '0;
    end else if (clear) begin
      count <= '0;
    end else if (wr_valid && !full) begin
      for (int i = 0; i < int'(DEPTH); i++) begin
        if (greater[i]) begin
          if (i + 1 < int'(DEPTH)) mem[i+1] <= mem[i];
        end
        // The new seed goes to the first slot that is free or holds a larger seed.
        if ((CW'(i) == count || greater[i]) && (i == 0 || !greater[i-1]))
          mem[i] <= wr_seed;
      end
      count <= count + 1'b1;
    end
  end

  assign rd_seed = mem[rd_idx];

endmodule
