// gs_hash_acc: shared 64-bit hash accelerator of GenStore-NM.
//
// Computes the 64-bit integer mix hash (hash64) of the k-mers produced by the
// seed finders of up to PORTS channels. A round-robin arbiter grants one
// requesting port per cycle; the hash runs in a three-stage pipeline, so the
// result for a request accepted in cycle t appears with rsp_valid[port] in cycle
// t+3 (one register after the arbiter, then two more stages). Throughput is one
// hash per cycle shared by all ports.
//
// From the paper: the hash function (64-bit integer mix), the unit sitting at SSD
// level, and one unit serving up to four channels. Own choices: the round-robin
// arbiter, the req/ready handshake, the split of the hash into three stages, and
// hashing the full 64-bit key (minimap2 masks the key to 2k bits).
module gs_hash_acc
  import gs_pkg::*;
#(
  parameter int unsigned PORTS = HASH_PORTS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PORTS-1:0]  req_valid,
  output logic [PORTS-1:0]  req_ready,
  input  logic [63:0]       req_key [PORTS],
  output logic [PORTS-1:0]  rsp_valid,
  output logic [63:0]       rsp_hash
);

  localparam int unsigned PW = (PORTS > 1) ? $clog2(PORTS) : 1;

  logic [PW-1:0] last_grant;
  logic [PW-1:0] grant_idx;
  logic          grant_any;

  // Round robin: first requesting port after the last granted one.
  always_comb begin
    grant_any = 1'b0;
    grant_idx = '0;
    for (int unsigned k = 1; k <= PORTS; k++) begin
      int unsigned p;
      p = (int'(last_grant) + k) % PORTS;
      if (!grant_any && req_valid[p]) begin
        grant_any = 1'b1;
        grant_idx = PW'(p);
      end
    end
  end

  always_comb begin
    req_ready = '0;
    if (grant_any) req_ready[grant_idx] = 1'b1;
  end

  // Pipeline: s1 = steps 1-2, s2 = steps 3-4, s3 = steps 5-7 of hash64.
  logic          v1, v2, v3;
  logic [PW-1:0] p1, p2, p3;
  logic [63:0]   h1, h2, h3;
  logic [63:0]   a, b, c;

  always_comb begin
    a = ~req_key[grant_idx] + (req_key[grant_idx] << 21);
    a = a ^ (a >> 24);
    b = (h1 + (h1 << 3)) + (h1 << 8);
    b = b ^ (b >> 14);
    c = (h2 + (h2 << 2)) + (h2 << 4);
    c = c ^ (c >> 28);
    c = c + (c << 31);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_grant <= PW'(PORTS - 1);
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
      p1 <= '0;   p2 <= '0;   p3 <= '0;
      h1 <= '0;   h2 <= '0;   h3 <= '0;
    end else begin
      if (grant_any) last_grant <= grant_idx;
      v1 <= grant_any; p1 <= grant_idx; h1 <= a;
      v2 <= v1;        p2 <= p1;        h2 <= b;
      v3 <= v2;        p3 <= p2;        h3 <= c;
    end
  end

  always_comb begin
    rsp_valid = '0;
    if (v3) rsp_valid[p3] = 1'b1;
  end
  assign rsp_hash = h3;

endmodule
