// sxp_regs_tb: writes every table entry over the control bus and reads it back, loads keys
// word by word and checks the committed key and its context, checks that keys read as 0,
// that the key-valid mask reads back, that a disable write pulses key_clear and that reset
// clears the tables.
module sxp_regs_tb;
  import itx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid = 0, req_we = 0;
  logic [11:0] req_addr = 0;
  logic [31:0] req_wdata = 0, rdata;
  logic [KCTX_W-1:0]   kxbctxmap [NUM_XBCTX];
  logic [REGION_W-1:0] kphysmap  [NUM_KCTX];
  logic [ADDR_W-1:0]   ksellimit [NUM_REGIONS];
  logic kw_valid, key_clear;
  logic [KCTX_W-1:0] kw_ctx;
  logic [255:0] kw_key;
  logic [NUM_KCTX-1:0] key_valid = 16'hA5C3;
  int checks = 0, failures = 0;
  int n_kw = 0, n_clear = 0;
  logic [255:0] last_key; logic [3:0] last_ctx;

  sxp_regs dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (kw_valid) begin n_kw++; last_key = kw_key; last_ctx = kw_ctx; end
    if (key_clear) n_clear++;
  end

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); req_valid = 1; req_we = 1; req_addr = a; req_wdata = d;
    @(negedge clk); req_valid = 0; req_we = 0;
  endtask
  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk); req_valid = 1; req_we = 0; req_addr = a;
    @(negedge clk); req_valid = 0; d = rdata;
  endtask

  initial begin
    logic [31:0] d;
    logic [255:0] k;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) wr({4'h1, 8'(i)}, 32'(i ^ 5));
    for (int i = 0; i < 16; i++) wr({4'h2, 8'(i)}, 32'(16 - i));
    for (int i = 0; i < 17; i++) wr({4'h3, 8'(i)}, 32'h1000_0000 + 32'(i) * 32'h111);
    for (int i = 0; i < 16; i++) begin
      check(kxbctxmap[i] == 4'(i ^ 5), "kxbctxmap");
      check(kphysmap[i] == 5'(16 - i), "kphysmap");
    end
    for (int i = 0; i < 17; i++) check(ksellimit[i] == 32'h1000_0000 + 32'(i) * 32'h111, "ksellimit");
    rd({4'h1, 8'd3}, d);  check(d == 32'(3 ^ 5), "read kxbctxmap");
    rd({4'h2, 8'd9}, d);  check(d == 32'(16 - 9), "read kphysmap");
    rd({4'h3, 8'd16}, d); check(d == 32'h1000_0000 + 16 * 32'h111, "read ksellimit");
    rd({4'h4, 8'd1}, d);  check(d == 32'hA5C3, "read key valid");
    // key load: eight words, most significant first, into context 11
    k = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    for (int w = 0; w < 8; w++) begin
      check(n_kw == 0, "no commit before word 7");
      wr({4'h0, 1'b0, 4'd11, 3'(w)}, k[255 - 32*w -: 32]);
    end
    @(negedge clk);
    check(n_kw == 1, "one key commit");
    check(last_key == k, $sformatf("key %h", last_key));
    check(last_ctx == 4'd11, "key context");
    rd({4'h0, 1'b0, 4'd11, 3'd2}, d); check(d == 0, "keys are write-only");
    wr({4'h4, 8'd0}, 32'h1);
    @(negedge clk);
    check(n_clear == 1, "key clear pulse");
    rst_n = 0; @(negedge clk); rst_n = 1;
    check(kxbctxmap[3] == 0 && kphysmap[4] == 0 && ksellimit[7] == 0, "reset clears tables");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
