// gs_seed_count_filter: Step 2 of GenStore-NM, seed count-based filtering.
//
// Looks at the number of seeds found for a read and picks its path:
//   count <  M       -> drop (the read cannot reach the minimum chain score),
//   count >= N       -> send to host (reads with many seeds very likely align),
//   M <= count < N   -> chaining-based filter.
// Purely combinational; exactly one of the three outputs is set while in_valid.
//
// From the paper: the rule, M = 3 and N = 64. The paper's text says both "more
// than N" and "at least N" seeds go to the host; its figure prints "# of Seeds
// >= N", which is followed here (a read stops collecting seeds at N).
module gs_seed_count_filter
  import gs_pkg::*;
#(
  parameter int unsigned M  = SEED_M,
  parameter int unsigned N  = SEED_N,
  parameter int unsigned CW = $clog2(SEED_N + 1)
) (
  input  logic          in_valid,
  input  logic [CW-1:0] seed_count,
  output logic          drop_few,
  output logic          to_host,
  output logic          to_chain
);

  always_comb begin
    drop_few = in_valid && (seed_count < CW'(M));
    to_host  = in_valid && (seed_count >= CW'(N));
    to_chain = in_valid && !drop_few && !to_host;
  end

endmodule
