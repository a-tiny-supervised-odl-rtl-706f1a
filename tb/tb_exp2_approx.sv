// tb_exp2_approx: checks the softmax exponential: exact at 0, close to e^z
// (within 6.5 percent relative plus 2 LSB, the error bound of 2^f ~ 1+f)
// for z in [-10, 0], equal to the reference for random inputs, zero for
// very negative inputs and 1 for positive inputs.
module tb_exp2_approx;
  import odl_pkg::*;
  import odl_ref_pkg::*;

  fxp_t z, e;
  int checks = 0, failures = 0;

  exp2_approx dut (.*);

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
    real ex, got;
    z = 0;            #1 check(e == 65536, "e^0 = 1");
    z = 65536;        #1 check(e == 65536, "positive input gives 1");
    z = -100 * 65536; #1 check(e == 0, "underflow to 0");
    for (int v = -10 * 65536; v <= 0; v += 1311) begin
      z = v;
      #1;
      ex  = $exp(real'(v) / 65536.0) * 65536.0;
      got = real'(e);
      check((got - ex) <= 0.065 * ex + 2.0 && (ex - got) <= 0.065 * ex + 2.0,
            $sformatf("e^%f dut=%0d exact=%f", real'(v) / 65536.0, e, ex));
    end
    for (int t = 0; t < 1000; t++) begin
      z = -int'($urandom_range(0, 30 * 65536));
      #1 check(e == rexp(z), "reference");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
