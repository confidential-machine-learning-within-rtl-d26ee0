// xchg_lane_mux_tb: four exchange-block models send packets of random length at random
// times on lane 1 (exchange blocks 4-7). Checks that every packet appears on the lane whole
// and in its own order, that all four blocks are served, that read requests wait while
// rd_allow is low, and that ingress beats reach only the exchange block owning the tile.
module xchg_lane_mux_tb;
  import itx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] xb_tx_valid, xb_tx_ready, xb_rx_valid;
  xbeat_t xb_tx_beat [4];
  logic rd_allow = 1, eg_valid, in_valid = 0;
  xbeat_t eg_beat, in_beat, xb_rx_beat;
  int checks = 0, failures = 0;

  xchg_lane_mux #(.LANE(1)) dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  // exchange-block models: packet p of block j has p*16+j in addr, beats numbered in data
  localparam int NPKT = 12;
  int pkt_len [4][NPKT];
  int cur_pkt [4], cur_beat [4];
  int gap [4];
  bit done_sending;
  always_comb begin
    for (int j = 0; j < 4; j++) begin
      xb_tx_valid[j] = rst_n && cur_pkt[j] < NPKT && gap[j] == 0;
      xb_tx_beat[j] = '0;
      xb_tx_beat[j].sop = cur_beat[j] == 0;
      xb_tx_beat[j].eop = cur_beat[j] == pkt_len[j][cur_pkt[j] % NPKT] - 1;
      xb_tx_beat[j].hdr.ptype = (cur_pkt[j] % 3 == 2) ? PKT_RD_REQ : PKT_WR_REQ;
      xb_tx_beat[j].hdr.tile = TILE_W'((4 + j) * 184);
      xb_tx_beat[j].hdr.addr = 32'(cur_pkt[j] * 16 + j);
      xb_tx_beat[j].data = 128'(cur_beat[j]);
    end
  end
  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < 4; j++) begin
      if (gap[j] > 0) gap[j] <= gap[j] - 1;
      else if (xb_tx_valid[j] && xb_tx_ready[j]) begin
        if (cur_beat[j] == pkt_len[j][cur_pkt[j]] - 1) begin
          cur_beat[j] <= 0; cur_pkt[j] <= cur_pkt[j] + 1; gap[j] <= $urandom_range(0, 3);
        end else cur_beat[j] <= cur_beat[j] + 1;
      end
    end
  end

  // lane monitor
  int exp_pkt [4];
  int lane_src = -1, lane_beat = 0, rd_while_blocked = 0, served [4];
  always @(posedge clk) if (rst_n && eg_valid) begin
    int j, p;
    j = int'(eg_beat.hdr.addr) % 16;
    p = int'(eg_beat.hdr.addr) / 16;
    if (eg_beat.sop) begin
      check(lane_src == -1, "packet starts while another is open");
      check(p == exp_pkt[j], $sformatf("block %0d packet %0d expected %0d", j, p, exp_pkt[j]));
      lane_src = j; lane_beat = 0;
    end
    check(j == lane_src && int'(eg_beat.data) == lane_beat, "beats contiguous and ordered");
    lane_beat++;
    if (eg_beat.eop) begin
      check(lane_beat == pkt_len[j][p], "packet length");
      lane_src = -1; exp_pkt[j]++; served[j]++;
    end
  end

  initial begin
    for (int j = 0; j < 4; j++) for (int p = 0; p < NPKT; p++) pkt_len[j][p] = $urandom_range(1, 6);
    for (int j = 0; j < 4; j++) begin cur_pkt[j] = 0; cur_beat[j] = 0; gap[j] = 0; exp_pkt[j] = 0; served[j] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // hold read requests back for a while
    rd_allow = 0;
    repeat (60) begin
      @(negedge clk);
      if (xb_tx_valid != 0) for (int j = 0; j < 4; j++)
        if (xb_tx_ready[j] && xb_tx_beat[j].sop && xb_tx_beat[j].hdr.ptype == PKT_RD_REQ) rd_while_blocked++;
    end
    check(rd_while_blocked == 0, "read request granted while rd_allow low");
    rd_allow = 1;
    repeat (400) @(negedge clk);
    for (int j = 0; j < 4; j++) check(served[j] == NPKT, $sformatf("block %0d served %0d", j, served[j]));
    // ingress steering: tiles of blocks 4..7 reach their block, others none
    for (int xb = 0; xb < 8; xb++) begin
      @(negedge clk);
      in_valid = 1; in_beat = '0; in_beat.hdr.tile = TILE_W'(xb * 184 + 100); in_beat.data = 128'(xb);
      @(negedge clk);
      in_valid = 0;
      check(xb_rx_valid == ((xb >= 4) ? 4'(1 << (xb - 4)) : 4'h0), $sformatf("ingress to xb %0d: %b", xb, xb_rx_valid));
      if (xb >= 4) check(xb_rx_beat.data == 128'(xb), "ingress beat");
    end
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
