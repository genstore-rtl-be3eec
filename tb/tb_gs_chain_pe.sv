// tb_gs_chain_pe: self-checking test of the chaining PE against the software
// recurrence term f(j) + min(min(dx,dy), w) - (|dx-dy|>>3) - (log2|dx-dy|>>1),
// with directed cases (zero gap, large gaps, saturation, non-colinear seeds)
// and random operands.
module tb_gs_chain_pe;
  import gs_pkg::*;
  import tb_gs_pkg::*;
  logic [31:0] x_i, y_i, x_j, y_j;
  logic [7:0]  w_i;
  logic signed [15:0] f_j, score;
  logic colinear;
  int checks = 0, failures = 0;

  gs_chain_pe dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input longint xi, yi, xj, yj, input int w, f);
    bit ok; int e;
    x_i = 32'(xi); y_i = 32'(yi); x_j = 32'(xj); y_j = 32'(yj); w_i = 8'(w); f_j = 16'(f);
    #1;
    e = pe_score(xi, yi, xj, yj, w, f, ok);
    checks++;
    if (colinear != ok || (ok && int'(score) != e)) begin
      failures++;
      $display("FAIL: x %0d/%0d y %0d/%0d w %0d f %0d -> %0d (%0d), expected %0d (%0d)",
               xi, xj, yi, yj, w, f, score, colinear, e, ok);
    end
  endtask

  initial begin
    one(100, 50, 90, 40, 9, 20);         // dx = dy = 10: alpha 9, beta 0 -> 29
    one(100, 50, 97, 47, 9, 20);         // alpha 3
    one(1000, 50, 100, 40, 9, 20);       // large gap
    one(200, 60, 100, 50, 15, 30);       // gap 90: 11 + 3
    one(100, 50, 100, 40, 9, 20);        // dx = 0: not colinear
    one(100, 40, 90, 50, 9, 20);         // dy < 0
    one(32'hFFFF_FFF0, 5, 0, 1, 9, 0);   // huge gap: saturates low
    one(20, 20, 10, 10, 9, 32760);       // saturates high
    for (int i = 0; i < 5000; i++) begin
      longint xj, yj;
      xj = $urandom_range(0, 100000);
      yj = $urandom_range(0, 10000);
      if (i % 3 == 0)
        one(xj + $urandom_range(0, 40), yj + $urandom_range(0, 40), xj, yj, 9, $urandom_range(0, 500));
      else
        one(xj + $urandom_range(0, 5000), yj + $urandom_range(0, 500), xj, yj,
            $urandom_range(1, 31), int'($urandom_range(0, 65535)) - 32768);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
