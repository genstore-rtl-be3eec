// tb_gs_chain_buffer: self-checking test of the 50-entry circular chaining
// buffer. Writes random seeds and scores (wrapping several times), and reads
// every age 1..count against a queue model; checks clear.
module tb_gs_chain_buffer;
  import gs_pkg::*;
  localparam int D = 50;
  logic clk = 0, rst_n = 0, clear = 0, wr_en = 0;
  seed_t  wr_seed = '0, rd_seed;
  score_t wr_f = '0, rd_f;
  logic [$clog2(D+1)-1:0] rd_back = '0, count;
  int checks = 0, failures = 0;
  seed_t  ms [$];
  score_t mf [$];

  gs_chain_buffer #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      clear = (t == 200);
      wr_en = ($urandom_range(99) < 85);
      wr_seed = {$urandom, $urandom};
      wr_f = 16'($urandom);
      @(posedge clk);
      if (clear) begin ms.delete(); mf.delete(); end
      else if (wr_en) begin
        ms.push_front(wr_seed); mf.push_front(wr_f);
        if (ms.size() > D) begin void'(ms.pop_back()); void'(mf.pop_back()); end
      end
      @(negedge clk);
      wr_en = 0; clear = 0;
      checks++;
      if (int'(count) != ms.size()) begin failures++; $display("FAIL: count %0d vs %0d", count, ms.size()); end
      for (int a = 1; a <= ms.size(); a++) begin
        rd_back = 6'(a);
        #1;
        checks++;
        if (rd_seed != ms[a-1] || rd_f != mf[a-1]) begin
          failures++; $display("FAIL: age %0d", a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
