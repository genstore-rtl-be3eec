// gs_kmer_window: the K-mer Window of a GenStore-NM seed finder.
//
// A shift buffer that keeps the WIN most recently produced k-mers of the read
// being processed. push shifts a new entry in at position 0 (newest) and moves
// every entry one place toward position WIN-1 (oldest); clear empties it at the
// start of a read. count tells how many entries hold k-mers of the current read
// (saturating at WIN) and full is set once a whole minimizer window is present.
// Entries update one cycle after push.
//
// From the paper: the window size w = 10 and the 19-bit entry width. Own choice:
// an entry holds a canonical 9-base k-mer (18 bits) and its strand bit.
module gs_kmer_window
  import gs_pkg::*;
#(
  parameter int unsigned WIN = WIN_W,
  parameter int unsigned KW  = KMER_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     push,
  input  logic [KW-1:0]            kmer_in,
  output logic [KW-1:0]            win [WIN],
  output logic [$clog2(WIN+1)-1:0] count,
  output logic                     full
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(WIN); i++) win[i] <= '0;
      count <= '0;
    end else if (clear) begin
      count <= '0;
    end else if (push) begin
      win[0] <= kmer_in;
      for (int i = 1; i < int'(WIN); i++) win[i] <= win[i-1];
      if (count != ($clog2(WIN+1))'(WIN)) count <= count + 1'b1;
    end
  end

  assign full = (count == ($clog2(WIN+1))'(WIN));

endmodule
