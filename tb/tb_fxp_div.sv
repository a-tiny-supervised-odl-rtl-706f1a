// tb_fxp_div: checks the division unit against a 64-bit reference quotient
// for random operands of both signs, reciprocal-style operands, divide by
// zero and overflow. Also checks the handshake: done pulses exactly
// W+FRAC = 48 cycles after start and busy is high in between.
module tb_fxp_div;
  import odl_pkg::*;
  import odl_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  fxp_t a = '0, b = '0, q;
  logic busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fxp_div dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic divide(input int na, input int nb);
    int cyc;
    @(negedge clk);
    a = na; b = nb; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      check(busy, "busy while dividing");
      @(negedge clk);
      cyc++;
    end
    check(cyc == 49, $sformatf("latency %0d", cyc));
    check(q == rdiv(na, nb), $sformatf("%0d / %0d: dut=%0d ref=%0d", na, nb, q, rdiv(na, nb)));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    divide(65536, 3 * 65536);
    divide(65536, 65536);
    divide(-5 * 65536, 2 * 65536);
    divide(65536, 0);
    divide(-65536, 0);
    divide(32'sh7000_0000, 1);
    for (int t = 0; t < 200; t++)
      divide(int'($urandom_range(0, 1 << 22)) - (1 << 21), int'($urandom_range(1, 1 << 22)) - (1 << 21));
    for (int t = 0; t < 100; t++)
      divide(65536, int'($urandom_range(65536, 1 << 24)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
