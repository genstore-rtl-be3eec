// tb_gs_location_buffer: self-checking test of the sorted Location Buffer.
// Fills it with random seeds (many equal reference positions), including writes
// past the 64-entry capacity, and compares every entry with a stable sorted
// model; checks clear and the full flag.
module tb_gs_location_buffer;
  import gs_pkg::*;
  localparam int D = 64;
  logic clk = 0, rst_n = 0, clear = 0, wr_valid = 0;
  seed_t wr_seed = '0, rd_seed;
  logic [$clog2(D)-1:0] rd_idx = '0;
  logic [$clog2(D+1)-1:0] count;
  logic full;
  int checks = 0, failures = 0;
  seed_t model [$];

  gs_location_buffer #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    checks++;
    if (int'(count) != model.size() || full != (model.size() == D)) begin
      failures++; $display("FAIL: count %0d model %0d", count, model.size());
    end
    for (int i = 0; i < model.size(); i++) begin
      rd_idx = 6'(i);
      #1;
      checks++;
      if (rd_seed != model[i]) begin
        failures++; $display("FAIL: entry %0d = %h, expected %h", i, rd_seed, model[i]);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      int n;
      n = (round % 4 == 3) ? 80 : int'($urandom_range(1, 63));
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        wr_valid = ($urandom_range(99) < 80);
        wr_seed.x = (round % 2) ? 32'($urandom_range(0, 20)) : $urandom;
        wr_seed.y = $urandom;
        @(posedge clk);
        if (wr_valid && model.size() < D) begin
          int p;
          p = model.size();
          while (p > 0 && model[p-1].x > wr_seed.x) p--;
          model.insert(p, wr_seed);
        end
      end
      @(negedge clk);
      wr_valid = 0;
      compare();
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      model.delete();
      checks++;
      if (count != 0) begin failures++; $display("FAIL: clear"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
