// tb_gs_hash_acc: self-checking test of the shared hash accelerator.
// Checks hash64 values against an independent model, routing of results to
// the requesting port, the 3-cycle latency, round-robin fairness under full
// contention, and random traffic from four ports.
module tb_gs_hash_acc;
  import gs_pkg::*;
  import tb_gs_pkg::*;

  localparam int P = 4;
  logic clk = 0, rst_n = 0;
  logic [P-1:0] req_valid, req_ready, rsp_valid;
  logic [63:0]  req_key [P];
  logic [63:0]  rsp_hash;
  int checks = 0, failures = 0;
  longint unsigned expq [P][$];
  int  cyc = 0;

  gs_hash_acc #(.PORTS(P)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // scoreboard
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < P; p++) begin
      if (req_valid[p] && req_ready[p]) expq[p].push_back(ref_hash64(req_key[p]));
      if (rsp_valid[p]) begin
        checks++;
        if (expq[p].size() == 0) begin
          failures++; $display("FAIL: unexpected response on port %0d", p);
        end else begin
          longint unsigned e;
          e = expq[p].pop_front();
          if (rsp_hash != e) begin
            failures++; $display("FAIL: port %0d hash %h expected %h", p, rsp_hash, e);
          end
        end
      end
    end
    if ($countones(rsp_valid) > 1) begin failures++; $display("FAIL: two responses at once"); end
    if ($countones(req_ready) > 1) begin failures++; $display("FAIL: two grants at once"); end
  end

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, seen;
    logic [P-1:0] granted;
    req_valid = '0;
    for (int p = 0; p < P; p++) req_key[p] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // latency: one request on port 2
    req_valid[2] = 1; req_key[2] = 64'h0123_4567_89ab_cdef;
    @(posedge clk); t0 = cyc;
    @(negedge clk); req_valid[2] = 0;
    while (!rsp_valid[2]) @(posedge clk);
    checks++;
    if (cyc - t0 != 3) begin failures++; $display("FAIL: latency %0d, expected 3", cyc - t0); end
    // a known value of the hash (key 0)
    @(negedge clk); req_valid[0] = 1; req_key[0] = 64'd0;
    @(negedge clk); req_valid[0] = 0;
    repeat (5) @(posedge clk);
    // full contention: every port gets one grant in any 4 consecutive cycles
    @(negedge clk);
    req_valid = '1;
    for (int p = 0; p < P; p++) req_key[p] = {$urandom, $urandom};
    granted = '0; seen = 0;
    repeat (8) begin
      @(posedge clk);
      granted |= req_ready;
      seen++;
      if (seen == 4) begin
        checks++;
        if (granted != '1) begin failures++; $display("FAIL: round robin %b", granted); end
        granted = '0; seen = 0;
      end
      @(negedge clk);
      for (int p = 0; p < P; p++) if (req_ready[p]) req_key[p] = {$urandom, $urandom};
    end
    // random traffic
    repeat (2000) begin
      for (int p = 0; p < P; p++) begin
        if (!req_valid[p] || req_ready[p]) begin
          req_valid[p] = ($urandom_range(99) < 40);
          req_key[p] = {$urandom, $urandom};
        end
      end
      @(negedge clk);
    end
    req_valid = '0;
    repeat (10) @(posedge clk);
    for (int p = 0; p < P; p++) begin
      checks++;
      if (expq[p].size() != 0) begin failures++; $display("FAIL: port %0d lost responses", p); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
