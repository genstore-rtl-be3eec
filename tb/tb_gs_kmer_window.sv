// tb_gs_kmer_window: self-checking test of the K-mer Window shift buffer.
// Pushes random k-mers with random gaps and clears, and compares all entries,
// the fill count and the full flag with a queue model after every cycle.
module tb_gs_kmer_window;
  import gs_pkg::*;
  localparam int WIN = 10, KW = 19;
  logic clk = 0, rst_n = 0, clear = 0, push = 0;
  logic [KW-1:0] kmer_in = '0;
  logic [KW-1:0] win [WIN];
  logic [$clog2(WIN+1)-1:0] count;
  logic full;
  int checks = 0, failures = 0, fulls = 0;
  logic [KW-1:0] model [$];

  gs_kmer_window #(.WIN(WIN), .KW(KW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      clear   = ($urandom_range(99) < 3);
      push    = ($urandom_range(99) < 70);
      kmer_in = KW'($urandom);
      @(posedge clk);
      if (clear) model.delete();
      else if (push) begin
        model.push_front(kmer_in);
        if (model.size() > WIN) void'(model.pop_back());
      end
      #1;
      checks++;
      if (int'(count) != model.size() || full != (model.size() == WIN)) begin
        failures++; $display("FAIL: count %0d full %0d, model %0d", count, full, model.size());
      end
      if (full) fulls++;
      for (int i = 0; i < model.size(); i++) begin
        checks++;
        if (win[i] != model[i]) begin failures++; $display("FAIL: entry %0d", i); end
      end
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL: window never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
