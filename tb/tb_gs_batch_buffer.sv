// tb_gs_batch_buffer: self-checking test of the double-buffered batch buffer.
// Writes data structures of various lengths (shorter than, equal to and
// several times a batch) with random writer gaps and reader backpressure, and
// checks that every entry and end flag leaves in order. Checks the hand-over
// latency, that the writer stalls while both slots are full, and that the
// flush empties the buffer.
module tb_gs_batch_buffer;
  import gs_pkg::*;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0, flush = 0;
  logic wr_valid = 0, wr_ready, wr_last = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic rd_valid, rd_ready = 0, rd_last;
  logic [1:0] slot_full;
  int checks = 0, failures = 0, stalls = 0, both_full = 0, swaps = 0;
  logic [W:0] q [$];

  gs_batch_buffer #(.W(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && !flush) begin
    if (wr_valid && !wr_ready) stalls++;
    if (slot_full == 2'b11) both_full++;
    if (wr_valid && wr_ready) q.push_back({wr_last, wr_data});
    if (rd_valid && rd_ready) begin
      logic [W:0] e;
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL: output with nothing written"); end
      else begin
        e = q.pop_front();
        if ({rd_last, rd_data} != e) begin
          failures++; $display("FAIL: got %h/%0d expected %h/%0d", rd_data, rd_last, e[W-1:0], e[W]);
        end
      end
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_struct(input int n, input int gap_pct);
    int i = 0;
    while (i < n) begin
      @(negedge clk);
      wr_valid = ($urandom_range(99) >= gap_pct);
      wr_data = W'($urandom);
      wr_last = (i == n - 1);
      @(posedge clk);
      if (wr_valid && wr_ready) i++;
    end
    @(negedge clk);
    wr_valid = 0; wr_last = 0;
  endtask

  initial begin
    int lens[6] = '{1, 8, 5, 24, 37, 3};
    repeat (2) @(posedge clk);
    rst_n = 1;
    // latency: one-entry structure, idle reader
    @(negedge clk);
    rd_ready = 1;
    wr_valid = 1; wr_data = 16'hbeef; wr_last = 1;
    @(posedge clk);
    @(negedge clk);
    wr_valid = 0; wr_last = 0;
    checks++;
    if (rd_valid) begin failures++; $display("FAIL: output before hand-over"); end
    @(negedge clk);
    checks++;
    if (!rd_valid || rd_data != 16'hbeef) begin failures++; $display("FAIL: hand-over latency"); end
    @(negedge clk);
    rd_ready = 0;
    // reader stopped: writer must stall after two batches
    fork
      write_struct(3 * D, 0);
      begin
        repeat (4 * D) @(posedge clk);
        checks++;
        if (slot_full != 2'b11 || wr_ready) begin failures++; $display("FAIL: no stall with both slots full"); end
        @(negedge clk);
        rd_ready = 1;
      end
    join
    repeat (3 * D) @(posedge clk);
    // random traffic
    fork
      foreach (lens[i]) write_struct(lens[i], 30);
      begin
        repeat (600) begin
          @(negedge clk);
          rd_ready = ($urandom_range(99) < 60);
        end
        rd_ready = 1;
      end
    join
    repeat (4 * D) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: %0d entries never left", q.size()); end
    // flush
    write_struct(5, 0);
    @(negedge clk);
    rd_ready = 0;
    write_struct(8, 0);
    @(negedge clk);
    flush = 1;
    @(negedge clk);
    flush = 0;
    q.delete();
    @(posedge clk); #1;
    checks++;
    if (slot_full != 0 || rd_valid || !wr_ready) begin failures++; $display("FAIL: flush"); end
    checks++;
    if (stalls == 0 || both_full == 0) begin failures++; $display("FAIL: stall never seen"); end
    $display("writer stall cycles %0d, both-full cycles %0d", stalls, both_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
