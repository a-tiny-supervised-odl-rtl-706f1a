// tb_sram_bank: checks a memory of 3 macros (DEPTH 5000): random writes,
// one-cycle reads through the macro select, read data held during writes,
// and all words independent across macro boundaries.
module tb_sram_bank;
  import odl_pkg::*;

  logic clk = 1'b0;
  mem_req_t req = '0;
  logic [W-1:0] rdata;
  logic [W-1:0] shadow [5000];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sram_bank #(.DEPTH(5000)) dut (.*);

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

  task automatic wr(input int a, input logic [W-1:0] d);
    @(negedge clk);
    req = '{en: 1'b1, we: 1'b1, addr: AW'(a), wdata: d};
    shadow[a] = d;
    @(negedge clk);
    req = '0;
  endtask

  task automatic rd_check(input int a);
    @(negedge clk);
    req = '{en: 1'b1, we: 1'b0, addr: AW'(a), wdata: '0};
    @(negedge clk);
    req = '0;
    #1 check(rdata == shadow[a], $sformatf("read %0d", a));
  endtask

  initial begin
    for (int a = 0; a < 5000; a++) wr(a, $urandom);
    for (int t = 0; t < 500; t++) wr($urandom_range(0, 4999), $urandom);
    for (int a = 0; a < 5000; a++) rd_check(a);
    // hold: idle cycles and a write leave rdata unchanged
    rd_check(4097);
    wr(9, 32'hDEAD_BEEF);
    check(rdata == shadow[4097], "rdata held across a write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
