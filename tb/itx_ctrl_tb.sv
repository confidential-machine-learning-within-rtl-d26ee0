// itx_ctrl_tb: checks who may reach which registers before and after entering trusted mode,
// that trusted mode cannot be left by a write, the CCU-first arbitration, the exception
// routing (ICU pin in normal mode, CCU pin with sticky causes in trusted mode, write-1 to
// clear), the Newmanry request rules and the quiesce status bit.
module itx_ctrl_tb;
  import itx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cbus_req_t req [3];
  logic [2:0] gnt, rsp_valid;
  logic [31:0] rsp_rdata, ext_rdata = 32'hE0E0_0001;
  logic rsp_err;
  logic [3:0] sxp_req_valid;
  logic sxp_req_we;
  logic [11:0] sxp_req_addr;
  logic [31:0] sxp_req_wdata, sxp_rdata [4];
  cbus_req_t ext_req;
  logic [2:0] sxp_exc_cause [4];
  logic bad_cpl = 0, ipu_exc = 0, quiescent = 1, trusted, sec_exception, exception, nm_req;
  int checks = 0, failures = 0, n_nm = 0;

  itx_ctrl dut (.*);

  always @(posedge clk) if (rst_n && nm_req) n_nm++;

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  // one access; returns err and rdata; records what was forwarded in the grant cycle
  logic [3:0] fwd_sxp; logic fwd_ext;
  task automatic acc(input int src, input bit we, input logic [15:0] a, input logic [31:0] d,
                     output bit err, output logic [31:0] rd);
    @(negedge clk);
    req[src] = '{valid: 1'b1, we: we, addr: a, wdata: d};
    #1;
    while (!gnt[src]) begin @(negedge clk); #1; end
    fwd_sxp = sxp_req_valid; fwd_ext = ext_req.valid;
    @(negedge clk);
    req[src] = '0;
    check(rsp_valid == 3'(1 << src), "response to the requester");
    err = rsp_err; rd = rsp_rdata;
  endtask

  initial begin
    bit e; logic [31:0] d;
    for (int i = 0; i < 3; i++) req[i] = '0;
    for (int i = 0; i < 4; i++) begin sxp_rdata[i] = 32'h5000 + 32'(i); sxp_exc_cause[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // normal mode: host reaches the control port, not the SXPs, cannot enter trusted mode
    acc(SRC_HOST, 0, 16'h8123, 0, e, d);
    check(!e && fwd_ext && d == 32'hE0E0_0001, "host reads config in normal mode");
    acc(SRC_HOST, 1, 16'h1004, 1, e, d);
    check(e && fwd_sxp == 0, "host cannot write SXP registers");
    acc(SRC_HOST, 1, 16'h0000, 1, e, d);
    check(e && !trusted, "host cannot enter trusted mode");
    ipu_exc = 1; @(negedge clk); ipu_exc = 0;
    check(exception && !sec_exception, "normal-mode exception goes to the ICU");
    @(negedge clk);
    // CCU programs SXP 2 and reads it back; ICU may not
    acc(SRC_CCU, 1, 16'h3105, 32'h7, e, d);
    check(!e && fwd_sxp == 4'b0100, "CCU write reaches SXP 2");
    acc(SRC_CCU, 0, 16'h4201, 0, e, d);
    check(!e && d == 32'h5003, "CCU reads SXP 3");
    acc(SRC_ICU, 1, 16'h1000, 1, e, d);
    check(e && fwd_sxp == 0, "ICU cannot write SXP registers");
    // CCU enters trusted mode
    acc(SRC_CCU, 1, 16'h0000, 1, e, d);
    check(!e && trusted, "CCU enters trusted mode");
    acc(SRC_ICU, 1, 16'h0000, 0, e, d);
    check(trusted, "writing 0 does not leave trusted mode");
    acc(SRC_HOST, 0, 16'h8123, 0, e, d);
    check(e && !fwd_ext && d == 0, "host shut out of config/tile memory in trusted mode");
    acc(SRC_ICU, 1, 16'h8123, 5, e, d);
    check(!e && fwd_ext, "ICU still reaches config in trusted mode");
    acc(SRC_HOST, 0, 16'h0000, 0, e, d);
    check(!e && d == 1, "host may read the mode");
    acc(SRC_HOST, 1, 16'h0002, 1, e, d);
    check(e && n_nm == 0, "host cannot reset in trusted mode");
    // arbitration: host and CCU together, CCU first
    @(negedge clk);
    req[SRC_HOST] = '{valid: 1'b1, we: 1'b0, addr: 16'h0003, wdata: 0};
    req[SRC_CCU]  = '{valid: 1'b1, we: 1'b0, addr: 16'h0003, wdata: 0};
    #1 check(gnt == 3'b100, "CCU wins arbitration");
    @(negedge clk); req[SRC_CCU] = '0;
    #1 check(gnt == 3'b001, "host served next");
    @(negedge clk); req[SRC_HOST] = '0;
    // exceptions in trusted mode
    sxp_exc_cause[3] = 3'b010; @(negedge clk); sxp_exc_cause[3] = 0;
    bad_cpl = 1; @(negedge clk); bad_cpl = 0;
    @(negedge clk);
    check(sec_exception && !exception, "trusted-mode exception goes to the CCU");
    acc(SRC_CCU, 0, 16'h0001, 0, e, d);
    check(d == 32'b01010, $sformatf("exception causes %b", d));
    acc(SRC_CCU, 1, 16'h0001, 32'h1f, e, d);
    @(negedge clk);
    check(!sec_exception, "causes cleared");
    quiescent = 0;
    acc(SRC_CCU, 0, 16'h0003, 0, e, d);
    check(d == 0, "not quiescent");
    quiescent = 1;
    acc(SRC_CCU, 0, 16'h0003, 0, e, d);
    check(d == 1, "quiescent");
    // CCU terminates: Newmanry request
    acc(SRC_CCU, 1, 16'h0002, 1, e, d);
    @(negedge clk);
    check(n_nm == 1, "Newmanry request");
    rst_n = 0; @(negedge clk); rst_n = 1;
    check(!trusted, "reset returns to normal mode");
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
