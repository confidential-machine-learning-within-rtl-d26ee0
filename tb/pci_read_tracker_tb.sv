// pci_read_tracker_tb: read requests from both egress lanes (some in the same cycle) get
// distinct tags from their lane's half; completions, split and interleaved, come back with
// tile, KEY_INDEX and AES restored, CC only on the last one, on the lane of the tile's
// exchange block; forged, repeated and over-long completions are dropped and reported;
// rd_allow falls when the table nears full; write requests pass unchanged.
module pci_read_tracker_tb;
  import itx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] eg_valid = 0, host_tx_valid, rd_allow, cpl_valid;
  xbeat_t eg_beat [2], host_tx_beat [2], host_rx_beat, cpl_beat;
  logic host_rx_valid = 0, bad_cpl, idle;
  int checks = 0, failures = 0, n_bad = 0;

  pci_read_tracker dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  always @(posedge clk) if (rst_n && bad_cpl) n_bad++;

  xbeat_t cpl_q[$]; logic [1:0] cpl_lane_q[$];
  always @(posedge clk) if (rst_n && cpl_valid != 0) begin cpl_q.push_back(cpl_beat); cpl_lane_q.push_back(cpl_valid); end

  function automatic xbeat_t rdreq(int tile, int kidx, int len);
    xbeat_t b = '0;
    b.sop = 1; b.eop = 1; b.hdr.ptype = PKT_RD_REQ; b.hdr.aes = 1; b.hdr.tile = TILE_W'(tile);
    b.hdr.key_index = 4'(kidx); b.hdr.len = LEN_W'(len); b.hdr.addr = 32'h5000;
    return b;
  endfunction

  // issue requests on the lanes in one cycle; return the tags seen on the host side
  task automatic issue(input logic [1:0] v, input xbeat_t b0, input xbeat_t b1,
                       output logic [TAG_W-1:0] t0, output logic [TAG_W-1:0] t1);
    @(negedge clk); eg_valid = v; eg_beat[0] = b0; eg_beat[1] = b1;
    @(negedge clk); eg_valid = 0;
    check(host_tx_valid == v, "request forwarded");
    t0 = host_tx_beat[0].hdr.tag; t1 = host_tx_beat[1].hdr.tag;
  endtask

  task automatic complete(input logic [TAG_W-1:0] tag, input int blocks);
    for (int i = 0; i < blocks; i++) begin
      @(negedge clk);
      host_rx_valid = 1; host_rx_beat = '0;
      host_rx_beat.sop = (i == 0); host_rx_beat.eop = (i == blocks - 1);
      host_rx_beat.hdr.ptype = PKT_RD_CPL; host_rx_beat.hdr.tag = tag;
      host_rx_beat.hdr.len = LEN_W'(blocks); host_rx_beat.hdr.tile = 11'h7ff;  // host's word is ignored
      host_rx_beat.data = 128'(i);
    end
    @(negedge clk); host_rx_valid = 0;
  endtask

  initial begin
    logic [TAG_W-1:0] ta, tb, tc, td, tags [$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(idle && rd_allow == 2'b11, "idle after reset");
    // A: lane 0, tile 100 (xb 0), ctx 3, 8 blocks;  B: lane 1, tile 1000 (xb 5), ctx 9, 4 blocks
    issue(2'b11, rdreq(100, 3, 8), rdreq(1000, 9, 4), ta, tb);
    check(ta[TAG_W-1] == 0 && tb[TAG_W-1] == 1, "tags from the lane's half");
    issue(2'b01, rdreq(300, 12, 2), '0, tc, td);
    check(tc != ta, "distinct tags");
    check(!idle, "busy with reads outstanding");
    // a write request passes with its header
    begin
      xbeat_t w = rdreq(5, 1, 3);
      w.hdr.ptype = PKT_WR_REQ; w.data = 128'hfeed;
      issue(2'b10, '0, w, td, td);
      check(host_tx_beat[1].hdr == w.hdr && host_tx_beat[1].data == 128'hfeed, "write passes");
    end
    // A completes in two halves, B in between
    complete(ta, 4);
    complete(tb, 4);
    complete(ta, 4);
    complete(tc, 2);
    @(negedge clk);
    check(cpl_q.size() == 14, $sformatf("completion beats %0d", cpl_q.size()));
    if (cpl_q.size() == 14) begin
      for (int i = 0; i < 4; i++) check(cpl_q[i].hdr.tile == 100 && cpl_q[i].hdr.key_index == 3 &&
                                       cpl_q[i].hdr.aes && !cpl_q[i].hdr.cc && cpl_lane_q[i] == 2'b01, "A first half");
      for (int i = 4; i < 8; i++) check(cpl_q[i].hdr.tile == 1000 && cpl_q[i].hdr.key_index == 9 &&
                                       cpl_q[i].hdr.cc && cpl_lane_q[i] == 2'b10, "B");
      for (int i = 8; i < 12; i++) check(cpl_q[i].hdr.tile == 100 && cpl_q[i].hdr.cc, "A last half has CC");
      check(cpl_q[13].hdr.tile == 300 && cpl_q[13].hdr.key_index == 12 && cpl_q[13].data == 1, "C");
    end
    check(n_bad == 0, "no bad completion yet");
    check(idle, "idle when all reads completed");
    // forged tag, repeated completion, over-long completion
    cpl_q.delete();
    complete(8'h45, 2);
    complete(ta, 2);
    issue(2'b01, rdreq(7, 1, 2), '0, ta, td);
    complete(ta, 3);
    @(negedge clk);
    check(n_bad == 3 && cpl_q.size() == 0, $sformatf("bad completions %0d, beats %0d", n_bad, cpl_q.size()));
    complete(ta, 2);
    // fill lane 0 until rd_allow drops: 128 tags less a margin of 24
    for (int i = 0; i < 110 && rd_allow[0]; i++) begin
      issue(2'b01, rdreq(7, 1, 1), '0, ta, td);
      tags.push_back(ta);
    end
    check(tags.size() == 104 && !rd_allow[0] && rd_allow[1], $sformatf("rd_allow after %0d reads", tags.size()));
    complete(tags[0], 1);
    @(negedge clk);
    check(rd_allow[0], "rd_allow back after a completion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
