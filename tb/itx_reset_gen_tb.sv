// itx_reset_gen_tb: the device reset follows the chip reset (released two cycles after it),
// is asserted in the cycle of a Newmanry request and is held for 8 + 2 cycles after it.
module itx_reset_gen_tb;
  logic clk = 0, chip_rst_n = 0, nm_req = 0, dev_rst_n;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, low = 0;
  itx_reset_gen dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    check(!dev_rst_n, "held in chip reset");
    chip_rst_n = 1;
    @(negedge clk); check(!dev_rst_n, "release after 2 cycles (1)");
    @(negedge clk); check(dev_rst_n, "released");
    repeat (3) @(negedge clk);
    nm_req = 1; @(negedge clk); nm_req = 0;
    check(!dev_rst_n, "Newmanry asserts reset");
    while (!dev_rst_n && low < 50) begin low++; @(negedge clk); end
    check(low == 10, $sformatf("held %0d cycles", low + 0));
    chip_rst_n = 0; #1;
    check(!dev_rst_n, "chip reset asserts immediately");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
