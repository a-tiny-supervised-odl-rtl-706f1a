// tb_xorshift16: checks the weight generator: a known sequence from seed 1
// (1, 0x8181, ... computed by hand for the first steps), agreement with the
// reference recurrence over 5000 steps, reload of the seed, the zero-seed
// substitute, hold while step is low, the weight mapping, and that the
// sequence does not repeat within 65535 steps (full period).
module tb_xorshift16;
  import odl_pkg::*;
  import odl_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, step = 1'b0;
  logic [15:0] seed = '0, state;
  fxp_t weight;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  xorshift16 dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    shortint unsigned s;
    int period;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(state == 16'hACE1, "reset state");
    seed = 16'h0001; load = 1'b1;
    @(negedge clk);
    load = 1'b0;
    check(state == 16'h0001, "seed loaded");
    check(weight == 32'sd2, "weight of state 1");
    step = 1'b1;
    @(negedge clk);
    // 1 ^ 1<<7 = 0x0081; ^ >>9 = 0x0081; ^ <<8 = 0x8181
    check(state == 16'h8181, $sformatf("first step %h", state));
    check(weight == -32'sd32383 * 2, "negative weight");
    s = 16'h8181;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      s = rxs(s);
      check(state == s, "sequence");
    end
    step = 1'b0;
    @(negedge clk);
    @(negedge clk);
    check(state == s, "holds without step");
    seed = 16'h0000; load = 1'b1;
    @(negedge clk);
    load = 1'b0;
    check(state == 16'hACE1, "zero seed replaced");
    step = 1'b1;
    period = 0;
    do begin
      @(negedge clk);
      period++;
    end while (state != 16'hACE1 && period < 70000);
    step = 1'b0;
    check(period == 65535, $sformatf("period %0d", period));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
