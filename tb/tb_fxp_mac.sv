// tb_fxp_mac: checks the multiply-add unit against 64-bit reference
// arithmetic: random dot products accumulated over several cycles, the
// combinational base-plus-product path with an external base, saturation
// at both ends of the range and accumulator hold when en is low.
module tb_fxp_mac;
  import odl_pkg::*;
  import odl_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic use_acc = 1'b0, en = 1'b0;
  fxp_t a = '0, b = '0, c = '0, y, acc;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fxp_mac dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ref_acc, ra, rb, rc;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(acc == 0, "reset value");
    // random dot products
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      use_acc = 1'b0; en = 1'b1; a = '0; b = '0; c = '0;
      ref_acc = 0;
      for (int i = 0; i < 30; i++) begin
        @(negedge clk);
        ra = int'($urandom_range(0, 1 << 20)) - (1 << 19);
        rb = int'($urandom_range(0, 1 << 20)) - (1 << 19);
        use_acc = 1'b1; en = 1'b1; a = ra; b = rb;
        #1 check(y == radd(ref_acc, rmul(ra, rb)), "combinational sum");
        ref_acc = radd(ref_acc, rmul(ra, rb));
      end
      @(negedge clk);
      en = 1'b0;
      check(acc == ref_acc, $sformatf("dot product dut=%0d ref=%0d", acc, ref_acc));
    end
    // external base
    for (int t = 0; t < 100; t++) begin
      ra = int'($urandom); rb = int'($urandom_range(0, 1 << 18)); rc = int'($urandom);
      use_acc = 1'b0; en = 1'b0; a = ra; b = rb; c = rc;
      #1 check(y == radd(rc, rmul(ra, rb)), "external base");
    end
    // saturation
    use_acc = 1'b0; a = 32'sh4000_0000; b = 32'sh4000_0000; c = '0;
    #1 check(y == FXP_MAX, "positive product saturates");
    a = 32'sh4000_0000; b = -32'sh4000_0000;
    #1 check(y == FXP_MIN, "negative product saturates");
    a = FXP_ONE; b = FXP_ONE; c = FXP_MAX;
    #1 check(y == FXP_MAX, "sum saturates");
    // hold
    @(negedge clk);
    en = 1'b1; c = 32'sd12345; a = '0;
    @(negedge clk);
    en = 1'b0; c = 32'sd999;
    @(negedge clk);
    check(acc == 32'sd12345, "accumulator holds");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
