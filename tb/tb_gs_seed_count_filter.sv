// tb_gs_seed_count_filter: exhaustive test of the seed count-based filter for
// every seed count 0..64 with M = 3 and N = 64, and with in_valid low.
module tb_gs_seed_count_filter;
  import gs_pkg::*;
  logic       in_valid;
  logic [6:0] seed_count;
  logic       drop_few, to_host, to_chain;
  int checks = 0, failures = 0;

  gs_seed_count_filter #(.M(3), .N(64), .CW(7)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 2; v++) begin
      for (int c = 0; c <= 64; c++) begin
        logic ed, eh, ec;
        in_valid = v[0];
        seed_count = 7'(c);
        #1;
        ed = v[0] && (c < 3);
        eh = v[0] && (c >= 64);
        ec = v[0] && (c >= 3) && (c < 64);
        checks++;
        if ({drop_few, to_host, to_chain} != {ed, eh, ec}) begin
          failures++;
          $display("FAIL: count %0d valid %0d -> %b%b%b", c, v, drop_few, to_host, to_chain);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
