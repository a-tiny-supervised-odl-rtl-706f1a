// tb_sigmoid_plan: checks G1 at the segment boundaries (hand values: 0.5 at
// 0, 0.75 at 1, 0.91796875 at 2.375, 1 at 5) and against the reference for
// random inputs, plus symmetry y(-x) = 1 - y(x) and monotonicity except for
// the step of 1/256 that the approximation has at |x| = 2.375.
module tb_sigmoid_plan;
  import odl_pkg::*;
  import odl_ref_pkg::*;

  fxp_t x, y;
  int checks = 0, failures = 0;

  sigmoid_plan dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fxp_t prev, yp;
    x = 0;            #1 check(y == 32768, "y(0) = 0.5");
    x = 65536;        #1 check(y == 49152, "y(1) = 0.75");
    x = 155648;       #1 check(y == 60160, "y(2.375) = 0.91796875");
    x = 155647;       #1 check(y == 60415, "just below 2.375: inner segment");
    x = 5 * 65536;    #1 check(y == 65536, "y(5) = 1");
    x = -65536;       #1 check(y == 16384, "y(-1) = 0.25");
    x = FXP_MIN;      #1 check(y == 0, "y(min) = 0");
    for (int t = 0; t < 2000; t++) begin
      x = int'($urandom_range(0, 16 * 65536)) - 8 * 65536;
      #1 check(y == rsig(x), $sformatf("y(%0d) dut=%0d ref=%0d", x, y, rsig(x)));
      yp = y;
      x = -x;
      #1 check(y == 65536 - yp, "symmetry");
    end
    prev = 0;
    for (int v = -7 * 65536; v <= 7 * 65536; v += 997) begin
      x = v;
      #1 check(y >= prev - 256, "monotonic up to the 1/256 step at 2.375");
      prev = y;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
