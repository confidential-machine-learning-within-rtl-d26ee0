// itx_cifar_batch_tb: confidential-training traffic for one CIFAR-10 training batch through
// the full-size design. The host holds the batch as an encrypted stream: BATCH images of
// 32x32 pixels x 3 colour bytes (192 blocks of 16 bytes each), cut into 1 KB frames (IV,
// 62 data blocks, tag) encrypted under the input-stream key, frame f at 0x1_0000 + 1 KB*f (region 1, up to 1 MB).
// Eight reader tiles, one in each exchange block, fetch the frames round robin (frame f
// to reader f mod 8), one 1 KB read at a time. The host answers every read with four
// 256-byte completions and interleaves the completions of different reads, so both
// ingress SXPs switch key contexts packet by packet. At the same time eight writer tiles
// (one more per exchange block, in another exchange-block context) write WR_FRAMES output
// frames each under the output-stream key (a checkpoint, say). Checks: every plaintext
// block arrives at its tile, every ciphertext and tag at the host matches the reference
// AES-GCM model, no security exception is raised, the device is quiescent at the end, and
// while reads are outstanding the host link is kept busy (the SXPs never hold it up).
// BATCH is 64, the batch the training configuration uses for ResNet-20 (the largest);
// ResNet-56 (32) and ResNet-110 (16) differ only in the number of frames. Address regions:
// the input stream in key region 1 from 0x1_0000, the output stream in region 2 from 1 MB.
module itx_cifar_batch_tb;
  import itx_pkg::*;
  import gcm_ref_pkg::*;
  localparam int BATCH       = 64;
  localparam int IMG_BLOCKS  = 32 * 32 * 3 / 16;                       // 192
  localparam int DATA_BLOCKS = 62;                                       // per 1 KB frame
  localparam int NFRAMES     = (BATCH * IMG_BLOCKS + DATA_BLOCKS - 1) / DATA_BLOCKS;
  localparam int CPL_BLOCKS  = 16;                                       // 256-byte completions
  localparam int WR_FRAMES   = 2;
  localparam logic [31:0] IN_BASE = 32'h0001_0000, OUT_BASE = 32'h0010_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NUM_XB-1:0] xb_tx_valid = '0, xb_tx_ready, xb_rx_valid;
  xbeat_t xb_tx_beat [NUM_XB], xb_rx_beat [NUM_LANES];
  logic [NUM_LANES-1:0] host_tx_valid;
  xbeat_t host_tx_beat [NUM_LANES];
  logic host_rx_valid = 0;
  xbeat_t host_rx_beat;
  cbus_req_t cbus_req [3];
  logic [2:0] cbus_gnt, cbus_rsp_valid;
  logic [31:0] cbus_rsp_rdata, ext_rdata = 0;
  logic cbus_rsp_err;
  cbus_req_t ext_req;
  logic ipu_exc = 0, sec_exception, exception, trusted, dev_rst_n;

  itx_top dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  // ------------------------------------------------------------ exchange blocks
  xbeat_t txq [NUM_XB][$];
  xbeat_t rxq [NUM_XB][$];
  logic [NUM_XB-1:0] rdy_s = '0;
  int n_sec = 0, n_done = 0;
  bit go = 0;
  always @(negedge clk) begin
    for (int i = 0; i < NUM_XB; i++) begin
      xb_tx_valid[i] = txq[i].size() != 0;
      xb_tx_beat[i]  = (txq[i].size() != 0) ? txq[i][0] : '0;
    end
    #1 rdy_s = xb_tx_ready;
  end
  always @(posedge clk) begin
    cycle <= cycle + 1;
    for (int i = 0; i < NUM_XB; i++) begin
      if (xb_tx_valid[i] && rdy_s[i]) void'(txq[i].pop_front());
      if (rst_n && xb_rx_valid[i]) rxq[i].push_back(xb_rx_beat[i / XB_PER_LANE]);
    end
    if (rst_n && sec_exception) n_sec++;
  end
  task automatic post(input int xb, input xhdr_t h, input logic [127:0] blk []);
    for (int i = 0; i < blk.size(); i++) begin
      xbeat_t b;
      b.sop = (i == 0); b.eop = (i == blk.size() - 1); b.hdr = h; b.data = blk[i];
      txq[xb].push_back(b);
    end
  endtask
  function automatic xhdr_t mkhdr(pkt_type_e t, bit aes, bit cc, int tile, logic [31:0] a, int len);
    xhdr_t h;
    h = '0;
    h.ptype = t; h.aes = aes; h.cc = cc; h.tile = TILE_W'(tile); h.addr = a; h.len = LEN_W'(len);
    return h;
  endfunction

  // ------------------------------------------------------------ host
  logic [127:0] mem [logic [31:0]];
  typedef struct { logic [TAG_W-1:0] tag; logic [31:0] addr; int sent; int len; } rd_t;
  rd_t rds [$];
  xhdr_t wr_h [NUM_LANES];
  int wr_i [NUM_LANES];
  int rx_busy = 0, rx_window = 0;
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < NUM_LANES; l++) if (host_tx_valid[l]) begin
      xbeat_t b;
      b = host_tx_beat[l];
      if (b.sop) begin wr_h[l] = b.hdr; wr_i[l] = 0; end
      if (wr_h[l].ptype == PKT_WR_REQ) begin
        mem[wr_h[l].addr + 32'(16 * wr_i[l])] = b.data;
        wr_i[l]++;
      end
      if (b.sop && b.hdr.ptype == PKT_RD_REQ) rds.push_back('{b.hdr.tag, b.hdr.addr, 0, int'(b.hdr.len)});
    end
    if (rds.size() != 0) begin rx_window++; if (host_rx_valid) rx_busy++; end
  end
  // one completion packet per turn, reads served round robin, no idle cycle between packets
  initial forever begin
    @(negedge clk);
    host_rx_valid = 0;
    while (rds.size() != 0) begin
      rd_t r;
      int n;
      r = rds.pop_front();
      n = (r.len - r.sent < CPL_BLOCKS) ? r.len - r.sent : CPL_BLOCKS;
      for (int i = 0; i < n; i++) begin
        host_rx_valid = 1;
        host_rx_beat = '0;
        host_rx_beat.sop = (i == 0); host_rx_beat.eop = (i == n - 1);
        host_rx_beat.hdr.ptype = PKT_RD_CPL; host_rx_beat.hdr.tag = r.tag;
        host_rx_beat.hdr.len = LEN_W'(n);
        host_rx_beat.data = mem[r.addr + 32'(16 * (r.sent + i))];
        @(negedge clk);
      end
      r.sent += n;
      if (r.sent < r.len) rds.push_back(r);
      host_rx_valid = 0;
    end
  end

  // ------------------------------------------------------------ CCU
  task automatic ccu_wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk);
    cbus_req[SRC_CCU] = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    #1;
    while (!cbus_gnt[SRC_CCU]) begin @(negedge clk); #1; end
    @(negedge clk);
    cbus_req[SRC_CCU] = '0;
  endtask
  task automatic ccu_rd(input logic [15:0] a, output logic [31:0] r);
    @(negedge clk);
    cbus_req[SRC_CCU] = '{valid: 1'b1, we: 1'b0, addr: a, wdata: 0};
    #1;
    while (!cbus_gnt[SRC_CCU]) begin @(negedge clk); #1; end
    @(negedge clk);
    cbus_req[SRC_CCU] = '0;
    r = cbus_rsp_rdata;
  endtask
  function automatic logic [15:0] sxp_addr(int n, logic [3:0] space, int idx);
    return 16'(32'h1000 * (n + 1)) | {4'h0, space, 8'(idx)};
  endfunction

  // ------------------------------------------------------------ stream contents
  logic [255:0] K_IN, K_OUT;
  logic [127:0] img [NFRAMES][DATA_BLOCKS];
  function automatic int reader_tile(int r); return r * TILES_PER_XB + 5; endfunction        // context 0 of xb r
  function automatic int writer_tile(int r); return r * TILES_PER_XB + 50; endfunction       // context 1 of xb r

  task automatic reader(input int r);
    for (int f = r; f < NFRAMES; f += NUM_XB) begin
      logic [127:0] z [];
      bit ok;
      z = new[1]; z[0] = '0;
      post(r, mkhdr(PKT_RD_REQ, 0, 0, reader_tile(r), IN_BASE + 32'(1024 * f), 64), z);
      wait (rxq[r].size() == 64);
      ok = rxq[r][63].hdr.cc && rxq[r][0].hdr.tile == TILE_W'(reader_tile(r));
      for (int i = 0; i < DATA_BLOCKS; i++) ok &= rxq[r][i + 1].data == img[f][i];
      check(ok, $sformatf("frame %0d decrypted at tile %0d", f, reader_tile(r)));
      rxq[r].delete();
    end
    n_done++;
  endtask

  logic [127:0] wr_ct [NUM_XB][WR_FRAMES][DATA_BLOCKS + 2];
  task automatic writer(input int r);
    for (int k = 0; k < WR_FRAMES; k++) begin
      logic [127:0] iv, pt [], ct [], tag, blk [];
      logic [31:0] a;
      iv = {32'hC4EC_0000 | 32'(r), 32'(k), $urandom, 32'h0};
      pt = new[DATA_BLOCKS];
      foreach (pt[i]) pt[i] = {$urandom, $urandom, $urandom, $urandom};
      tag = gcm(K_OUT, iv, pt, 0, ct);
      wr_ct[r][k][0] = iv;
      for (int i = 0; i < DATA_BLOCKS; i++) wr_ct[r][k][i + 1] = ct[i];
      wr_ct[r][k][DATA_BLOCKS + 1] = tag;
      // the tile splits its frame into two packets, CC on the second
      a = OUT_BASE + 32'(1024 * (r * WR_FRAMES + k));
      blk = new[32];
      blk[0] = iv;
      for (int i = 0; i < 31; i++) blk[i + 1] = pt[i];
      post(r, mkhdr(PKT_WR_REQ, 1, 0, writer_tile(r), a, 32), blk);
      blk = new[32];
      for (int i = 0; i < 31; i++) blk[i] = pt[31 + i];
      blk[31] = '0;
      post(r, mkhdr(PKT_WR_REQ, 1, 1, writer_tile(r), a + 32'd512, 32), blk);
      repeat (200) @(negedge clk);
    end
    n_done++;
  endtask

  // one reader and one writer tile per exchange block, started together
  for (genvar g = 0; g < NUM_XB; g++) begin : g_tile
    initial begin
      wait (go);
      fork
        reader(g);
        writer(g);
      join
    end
  end

  initial begin
    logic [31:0] rd;
    int t0, t1;
    for (int i = 0; i < 3; i++) cbus_req[i] = '0;
    host_rx_beat = '0;
    K_IN  = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    K_OUT = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    // the batch, encrypted frame by frame into host memory
    for (int f = 0; f < NFRAMES; f++) begin
      logic [127:0] iv, pt [], ct [], tag;
      iv = {32'hDA7A_0000, 32'(f), 32'h1234_5678, 32'h0};                  // stream id, frame index
      pt = new[DATA_BLOCKS];
      foreach (pt[i]) begin
        pt[i] = (f * DATA_BLOCKS + i < BATCH * IMG_BLOCKS) ? {$urandom, $urandom, $urandom, $urandom} : '0;
        img[f][i] = pt[i];
      end
      tag = gcm(K_IN, iv, pt, 0, ct);
      mem[IN_BASE + 32'(1024 * f)] = iv;
      for (int i = 0; i < DATA_BLOCKS; i++) mem[IN_BASE + 32'(1024 * f + 16 * (i + 1))] = ct[i];
      mem[IN_BASE + 32'(1024 * f + 16 * (DATA_BLOCKS + 1))] = tag;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (dev_rst_n);
    // keys: contexts 4-7 input stream, 8-11 output stream, in every SXP
    for (int n = 0; n < 4; n++)
      for (int c = 4; c < 12; c++)
        for (int w = 0; w < 8; w++)
          ccu_wr(sxp_addr(n, SXP_SPACE_KEY, c * 8 + w), (c < 8 ? K_IN : K_OUT) >> (32 * (7 - w)));
    // tables: readers of xb j (xbctx 4j) -> context 4+j -> region 1; writers (xbctx 4j+1) -> 8+j -> region 2
    for (int n = 0; n < 2; n++) begin
      for (int j = 0; j < 4; j++) begin
        ccu_wr(sxp_addr(n, SXP_SPACE_XBCTX, 4 * j), 4 + j);
        ccu_wr(sxp_addr(n, SXP_SPACE_XBCTX, 4 * j + 1), 8 + j);
        ccu_wr(sxp_addr(n, SXP_SPACE_PHYS, 4 + j), 1);
        ccu_wr(sxp_addr(n, SXP_SPACE_PHYS, 8 + j), 2);
      end
      ccu_wr(sxp_addr(n, SXP_SPACE_LIMIT, 0), IN_BASE);
      ccu_wr(sxp_addr(n, SXP_SPACE_LIMIT, 1), OUT_BASE);
      for (int g = 2; g < NUM_REGIONS; g++) ccu_wr(sxp_addr(n, SXP_SPACE_LIMIT, g), OUT_BASE + 32'h1_0000);
    end
    ccu_wr(16'h0000, 1);
    check(trusted, "trusted mode");
    t0 = cycle;
    go = 1;
    wait (n_done == 2 * NUM_XB);
    t1 = cycle;
    repeat (50) @(negedge clk);
    for (int r = 0; r < NUM_XB; r++)
      for (int k = 0; k < WR_FRAMES; k++) begin
        bit ok;
        logic [31:0] a;
        ok = 1;
        a = OUT_BASE + 32'(1024 * (r * WR_FRAMES + k));
        for (int i = 0; i < DATA_BLOCKS + 2; i++) ok &= mem.exists(a + 32'(16 * i)) && mem[a + 32'(16 * i)] == wr_ct[r][k][i];
        check(ok, $sformatf("output frame %0d of tile %0d at host", k, writer_tile(r)));
      end
    check(n_sec == 0, "no security exception");
    ccu_rd(16'h0003, rd);
    check(rd == 1, "quiescent after the batch");
    check(rx_busy * 10 >= rx_window * 9,
          $sformatf("host link busy %0d of %0d cycles with reads outstanding", rx_busy, rx_window));
    $display("batch of %0d images: %0d frames in, %0d frames out, %0d cycles, %0d completion blocks",
             BATCH, NFRAMES, NUM_XB * WR_FRAMES, t1 - t0, NFRAMES * 64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
