// itx_top_tb: end-to-end test of the trusted-extension datapath at its full size (eight
// exchange blocks, four SXPs, 16 key contexts, 256 read tags), with behavioural models of
// the parts around it: exchange blocks that offer packets with valid/ready, a host that
// stores written blocks in a memory and answers read requests with completions (split in
// two packets when longer than two blocks), the existing control port, and the CCU/ICU/host
// register requesters.
// Sequence: traffic in normal mode passes untouched (bypass) and IPU exceptions reach the
// ICU; the CCU loads keys into all four SXPs and programs the key-selection tables, then
// enters trusted mode (mode switch); the host is refused; two tiles on different lanes
// write encrypted frames (checked block by block against the reference AES-GCM model) and
// read them back (decrypted plaintext checked at the exchange block); cleartext-region
// traffic passes with AES cleared; a full 1 KB frame streams at one block per cycle; four exchange blocks contend for one lane (stalls); a
// burst of reads held by the host exhausts the lane's tag budget (read throttling); a write
// outside the context's region, a tampered tag in host memory and a forged completion each
// raise the CCU's security exception with the right cause; finally the CCU requests a
// Newmanry reset, after which the device is back in normal mode with its keys gone.
// Every mechanism is counted, and one that never happened counts as a failure.
module itx_top_tb;
  import itx_pkg::*;
  import gcm_ref_pkg::*;
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
  logic [31:0] cbus_rsp_rdata, ext_rdata = 32'hC0F1_0000;
  logic cbus_rsp_err;
  cbus_req_t ext_req;
  logic ipu_exc = 0, sec_exception, exception, trusted, dev_rst_n;

  itx_top dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  // ------------------------------------------------------------ mechanism counters
  int n_bypass = 0, n_icu_exc = 0, n_enter = 0, n_host_refused = 0, n_encrypt = 0,
      n_decrypt = 0, n_cleartext = 0, n_stall = 0, n_throttle = 0, n_cc_split = 0,
      n_region_exc = 0, n_tag_exc = 0, n_forged = 0, n_newmanry = 0, n_keys_gone = 0,
      n_busy = 0, n_quiet = 0, n_full_rate = 0;

  // ------------------------------------------------------------ exchange-block models
  xbeat_t txq [NUM_XB][$];
  xbeat_t rxq [NUM_XB][$];
  logic [NUM_XB-1:0] rdy_s = '0;
  int   sop_cycle [$];
  always @(negedge clk) begin
    for (int i = 0; i < NUM_XB; i++) begin
      xb_tx_valid[i] = txq[i].size() != 0;
      if (txq[i].size() != 0) xb_tx_beat[i] = txq[i][0];
      else                    xb_tx_beat[i] = '0;
    end
    #1 rdy_s = xb_tx_ready;
  end
  always @(posedge clk) begin
    cycle <= cycle + 1;
    for (int i = 0; i < NUM_XB; i++) begin
      if (xb_tx_valid[i] && rdy_s[i]) begin
        if (txq[i][0].sop) sop_cycle.push_back(cycle);
        void'(txq[i].pop_front());
      end
      if (xb_tx_valid[i] && !rdy_s[i]) n_stall++;
      if (rst_n && xb_rx_valid[i]) rxq[i].push_back(xb_rx_beat[i / XB_PER_LANE]);
    end
    if (rst_n && dev_rst_n && !dut.rd_allow[0]) n_throttle++;
  end

  function automatic xhdr_t mkhdr(pkt_type_e t, bit aes, bit cc, int tile, logic [31:0] a, int len);
    xhdr_t h = '0;
    h.ptype = t; h.aes = aes; h.cc = cc; h.tile = TILE_W'(tile); h.addr = a; h.len = LEN_W'(len);
    return h;
  endfunction
  task automatic post(input int xb, input xhdr_t h, input logic [127:0] blk []);
    for (int i = 0; i < blk.size(); i++) begin
      xbeat_t b;
      b.sop = (i == 0); b.eop = (i == blk.size() - 1); b.hdr = h; b.data = blk[i];
      txq[xb].push_back(b);
    end
  endtask
  function automatic int xb_of(int tile); return tile / TILES_PER_XB; endfunction

  // ------------------------------------------------------------ host model
  logic [127:0] mem [logic [31:0]];
  xbeat_t       htx [NUM_LANES][$];
  int           htx_cycle [NUM_LANES][$];
  typedef struct { logic [TAG_W-1:0] tag; logic [31:0] addr; int len; } rd_t;
  rd_t  rdq [$];
  bit   hold = 0;
  xhdr_t wr_h [NUM_LANES];
  int   wr_i [NUM_LANES];
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < NUM_LANES; l++) if (host_tx_valid[l]) begin
      xbeat_t b;
      b = host_tx_beat[l];
      htx[l].push_back(b);
      htx_cycle[l].push_back(cycle);
      if (b.sop) begin wr_h[l] = b.hdr; wr_i[l] = 0; end
      if (wr_h[l].ptype == PKT_WR_REQ) begin
        mem[wr_h[l].addr + 32'(16 * wr_i[l])] = b.data;
        wr_i[l]++;
      end
      if (b.sop && b.hdr.ptype == PKT_RD_REQ) rdq.push_back('{b.hdr.tag, b.hdr.addr, int'(b.hdr.len)});
    end
  end

  function automatic logic [127:0] rdmem(logic [31:0] a);
    return mem.exists(a) ? mem[a] : {a, a ^ 32'h5a5a_5a5a, ~a, 32'h600d_f00d};
  endfunction
  task automatic cpl_pkt(input logic [TAG_W-1:0] tag, input logic [31:0] a, input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      host_rx_valid = 1;
      host_rx_beat = '0;
      host_rx_beat.sop = (i == 0); host_rx_beat.eop = (i == n - 1);
      host_rx_beat.hdr.ptype = PKT_RD_CPL; host_rx_beat.hdr.tag = tag;
      host_rx_beat.hdr.len = LEN_W'(n);
      host_rx_beat.data = rdmem(a + 32'(16 * i));
    end
    @(negedge clk);
    host_rx_valid = 0;
  endtask
  initial forever begin
    @(negedge clk);
    if (!hold && rdq.size() != 0) begin
      rd_t r;
      r = rdq.pop_front();
      if (r.len > 2) begin
        cpl_pkt(r.tag, r.addr, 2);
        cpl_pkt(r.tag, r.addr + 32, r.len - 2);
        n_cc_split++;
      end else cpl_pkt(r.tag, r.addr, r.len);
    end
  end

  // ------------------------------------------------------------ register requesters
  task automatic cb(input int src, input bit we, input logic [15:0] a, input logic [31:0] d,
                    output bit err, output logic [31:0] rd);
    @(negedge clk);
    cbus_req[src] = '{valid: 1'b1, we: we, addr: a, wdata: d};
    #1;
    while (!cbus_gnt[src]) begin @(negedge clk); #1; end
    @(negedge clk);
    cbus_req[src] = '0;
    err = cbus_rsp_err; rd = cbus_rsp_rdata;
  endtask
  task automatic ccu_wr(input logic [15:0] a, input logic [31:0] d);
    bit e; logic [31:0] r;
    cb(SRC_CCU, 1, a, d, e, r);
    check(!e, $sformatf("CCU write %h accepted", a));
  endtask
  task automatic ccu_rd(input logic [15:0] a, output logic [31:0] r);
    bit e;
    cb(SRC_CCU, 0, a, 0, e, r);
  endtask
  function automatic logic [15:0] sxp_addr(int n, int space, int idx);
    return 16'(32'h1000 * (n + 1)) | {4'h0, 4'(space), 8'(idx)};
  endfunction
  task automatic load_key(input int n, input int ctx, input logic [255:0] k);
    for (int w = 0; w < 8; w++) ccu_wr(sxp_addr(n, SXP_SPACE_KEY, ctx * 8 + w), k[255 - 32*w -: 32]);
  endtask

  // ------------------------------------------------------------ test
  localparam int T0 = 10;                    // xb 0, lane 0, xbctx 0
  localparam int T1 = 5 * 184 + 100;         // xb 5, lane 1, xbctx 6
  localparam int T2 = 2 * 184 + 150;         // xb 2, lane 0, xbctx 11
  logic [255:0] KA, KB;

  task automatic wait_quiet(input int n);
    repeat (n) @(negedge clk);
  endtask
  task automatic clear_q();
    for (int l = 0; l < NUM_LANES; l++) begin htx[l].delete(); htx_cycle[l].delete(); end
    for (int i = 0; i < NUM_XB; i++) rxq[i].delete();
    sop_cycle.delete();
  endtask

  // encrypted write of nblk plaintext blocks from a tile, then checked at the host
  task automatic enc_write(input int tile, input logic [31:0] a, input logic [255:0] k,
                           input int nblk, output logic [127:0] pt []);
    logic [127:0] iv, ct [], tag, blk [];
    iv = {$urandom, $urandom, $urandom, 32'h0};
    pt = new[nblk];
    foreach (pt[i]) pt[i] = {$urandom, $urandom, $urandom, $urandom};
    tag = gcm(k, iv, pt, 0, ct);
    blk = new[nblk + 2];
    blk[0] = iv;
    for (int i = 0; i < nblk; i++) blk[i + 1] = pt[i];
    blk[nblk + 1] = '0;
    post(xb_of(tile), mkhdr(PKT_WR_REQ, 1, 1, tile, a, nblk + 2), blk);
    wait_quiet(60 + 2 * nblk);
    begin
      bit ok = 1;
      for (int i = 0; i < nblk; i++) ok &= mem[a + 32'(16 * (i + 1))] == ct[i];
      check(ok && mem[a] == iv, $sformatf("ciphertext of tile %0d at host", tile));
      check(mem[a + 32'(16 * (nblk + 1))] == tag, $sformatf("tag of tile %0d at host", tile));
      if (ok) n_encrypt++;
    end
  endtask

  task automatic dec_read(input int tile, input logic [31:0] a, input int nblk,
                          input logic [127:0] pt []);
    int xb = xb_of(tile);
    logic [127:0] z [];
    z = new[1]; z[0] = '0;
    rxq[xb].delete();
    post(xb, mkhdr(PKT_RD_REQ, 0, 0, tile, a, nblk + 2), z);
    wait_quiet(80 + 2 * nblk);
    check(rxq[xb].size() == nblk + 2, $sformatf("read of tile %0d: %0d beats", tile, rxq[xb].size()));
    if (rxq[xb].size() == nblk + 2) begin
      bit ok = 1;
      for (int i = 0; i < nblk; i++) ok &= rxq[xb][i + 1].data == pt[i];
      ok &= rxq[xb][nblk + 1].hdr.cc && rxq[xb][0].hdr.tile == TILE_W'(tile);
      check(ok, $sformatf("plaintext returned to tile %0d", tile));
      if (ok) n_decrypt++;
    end
  endtask

  initial begin
    bit e; logic [31:0] r;
    logic [127:0] pa [], pb [], pc [], pd [], blk [];
    for (int i = 0; i < 3; i++) cbus_req[i] = '0;
    host_rx_beat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (dev_rst_n);
    wait_quiet(2);

    // ---- normal mode: untouched traffic, host has access, exceptions to the ICU
    blk = new[3]; blk[0] = 128'h11; blk[1] = 128'h22; blk[2] = 128'h33;
    post(xb_of(T0), mkhdr(PKT_WR_REQ, 1, 1, T0, 32'h0001_0000, 3), blk);
    wait_quiet(40);
    check(htx[0].size() == 3, "normal-mode write reaches host");
    if (htx[0].size() == 3) begin
      check(sop_cycle.size() == 1 && htx_cycle[0][0] - sop_cycle[0] == 19,
            $sformatf("exchange block to host latency %0d", htx_cycle[0][0] - sop_cycle[0]));
      if (htx[0][0].data == 128'h11 && htx[0][2].data == 128'h33 && htx[0][0].hdr.aes &&
          htx[0][0].hdr.key_index == 0) n_bypass++;
    end
    clear_q();
    cb(SRC_HOST, 0, 16'h8000, 0, e, r);
    check(!e && r == 32'hC0F1_0000, "host reads configuration in normal mode");
    ipu_exc = 1; @(negedge clk); ipu_exc = 0;
    if (exception && !sec_exception) n_icu_exc++;

    // ---- CCU setup: keys in all four SXPs, tables in both egress SXPs
    KA = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    KB = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    for (int n = 0; n < 4; n++) begin
      load_key(n, 2, KA);
      load_key(n, 9, KB);
    end
    for (int n = 0; n < 2; n++) begin
      ccu_wr(sxp_addr(n, SXP_SPACE_XBCTX, 0), 2);     // tile T0 -> context 2
      ccu_wr(sxp_addr(n, SXP_SPACE_XBCTX, 6), 9);     // tile T1 -> context 9
      ccu_wr(sxp_addr(n, SXP_SPACE_XBCTX, 11), 2);    // tile T2 shares context 2
      ccu_wr(sxp_addr(n, SXP_SPACE_PHYS, 2), 1);      // context 2 -> region 1
      ccu_wr(sxp_addr(n, SXP_SPACE_PHYS, 9), 2);      // context 9 -> region 2
      for (int g = 0; g < NUM_REGIONS; g++)            // region g = [g, g+1) * 64 KiB
        ccu_wr(sxp_addr(n, SXP_SPACE_LIMIT, g), 32'((g + 1) * 32'h1_0000));
    end
    ccu_rd(sxp_addr(3, SXP_SPACE_CTL, 1), r);
    check(r == 32'h0204, $sformatf("key-valid mask %h", r));
    ccu_wr(16'h0000, 1);
    if (trusted) n_enter++;
    check(trusted, "trusted mode entered");

    // ---- host is shut out
    cb(SRC_HOST, 1, 16'h8000, 0, e, r);
    if (e && ext_req.valid == 0) n_host_refused++;
    cb(SRC_HOST, 1, sxp_addr(0, SXP_SPACE_XBCTX, 0), 5, e, r);
    if (e) n_host_refused++;
    cb(SRC_HOST, 1, 16'h0000, 0, e, r);
    check(e && trusted, "host cannot leave trusted mode");

    // ---- encrypted writes on both lanes at once, then read back
    fork
      enc_write(T0, 32'h0001_0000, KA, 4, pa);
      enc_write(T1, 32'h0002_0000, KB, 6, pb);
    join
    clear_q();
    fork
      dec_read(T0, 32'h0001_0000, 4, pa);
      dec_read(T1, 32'h0002_0000, 6, pb);
    join
    clear_q();

    // ---- cleartext region: a write with AES set passes with AES cleared
    blk = new[2]; blk[0] = 128'hAB; blk[1] = 128'hCD;
    post(xb_of(T0), mkhdr(PKT_WR_REQ, 1, 1, T0, 32'h0000_4000, 2), blk);
    wait_quiet(40);
    if (htx[0].size() == 2 && !htx[0][0].hdr.aes && htx[0][1].data == 128'hCD) n_cleartext++;
    clear_q();

    // ---- contention: four exchange blocks of lane 0 write at once (tile T2 uses context 2)
    for (int x = 0; x < 4; x++) begin
      logic [127:0] b4 [];
      b4 = new[4]; foreach (b4[i]) b4[i] = 128'(x * 16 + i);
      post(x, mkhdr(PKT_WR_REQ, 0, 0, x * 184 + 1, 32'h0000_8000 + 32'(x * 256), 4), b4);
    end
    wait_quiet(60);
    check(htx[0].size() == 16, "all contending packets delivered");
    begin
      bit ok;
      ok = 1;
      for (int p = 0; p < htx[0].size() / 4; p++)
        for (int i = 0; i < 4; i++) ok &= htx[0][4*p + i].sop == (i == 0) && htx[0][4*p + i].hdr.tile == htx[0][4*p].hdr.tile;
      check(ok, "packets not interleaved on the lane");
    end
    clear_q();
    // tile T2 encrypts with context 2 too, into its region
    enc_write(T2, 32'h0001_2000, KA, 3, pc);
    dec_read(T2, 32'h0001_2000, 3, pc);
    clear_q();

    // ---- a full 1 KB frame (IV, 62 data blocks, tag) streams at one block per cycle
    enc_write(T1, 32'h0002_0400, KB, 62, pd);
    check(htx[1].size() == 64 && htx_cycle[1][63] - htx_cycle[1][0] == 63,
          "1 KB frame leaves in 64 consecutive cycles");
    if (htx[1].size() == 64 && htx_cycle[1][63] - htx_cycle[1][0] == 63) n_full_rate++;
    clear_q();
    dec_read(T1, 32'h0002_0400, 62, pd);
    clear_q();

    // ---- read throttling: host holds its completions, lane 0 offers 140 reads
    hold = 1;
    for (int k = 0; k < 140; k++) begin
      logic [127:0] z [];
      z = new[1]; z[0] = '0;
      post(k % 4, mkhdr(PKT_RD_REQ, 0, 0, (k % 4) * 184 + 3, 32'h0000_0100 + 32'(k * 16), 1), z);
    end
    wait_quiet(400);
    check(rdq.size() >= 128 - 24 && rdq.size() <= 128, $sformatf("reads issued while throttled %0d", rdq.size()));
    cb(SRC_ICU, 0, 16'h0003, 0, e, r);
    if (r == 0) n_busy++;
    hold = 0;
    wait_quiet(1200);
    begin
      int got;
      got = 0;
      for (int x = 0; x < 4; x++) got += rxq[x].size();
      check(got == 140 && rdq.size() == 0, $sformatf("all throttled reads completed (%0d)", got));
      check(rxq[1].size() == 35 && rxq[1][0].data == rdmem(32'h0000_0110), "completion data and routing");
    end
    clear_q();
    cb(SRC_ICU, 0, 16'h0003, 0, e, r);
    if (r == 1) n_quiet++;
    check(!sec_exception, "no security exception so far");

    // ---- security exceptions, each seen by the CCU
    blk = new[3]; blk[0] = 1; blk[1] = 2; blk[2] = 3;
    post(xb_of(T0), mkhdr(PKT_WR_REQ, 1, 1, T0, 32'h0002_0000, 3), blk);   // region 2 is T1's
    wait_quiet(40);
    ccu_rd(16'h0001, r);
    if (sec_exception && r == 32'h1 && htx[0].size() == 0) n_region_exc++;
    ccu_wr(16'h0001, 32'h1f);
    mem[32'h0001_0000 + 32'(16 * 5)] ^= 128'h1;                            // tamper T0's tag
    dec_read(T0, 32'h0001_0000, 4, pa);
    ccu_rd(16'h0001, r);
    if (sec_exception && r == 32'h2) n_tag_exc++;
    ccu_wr(16'h0001, 32'h1f);
    rxq[xb_of(T0)].delete();
    cpl_pkt(8'h77, 32'h0001_0000, 2);                                      // forged completion
    wait_quiet(30);
    ccu_rd(16'h0001, r);
    if (sec_exception && r == 32'h8 && rxq[xb_of(T0)].size() == 0) n_forged++;
    ccu_wr(16'h0001, 32'h1f);
    ipu_exc = 1; @(negedge clk); ipu_exc = 0;
    @(negedge clk);
    check(sec_exception && !exception, "trusted-mode IPU exception goes to the CCU");
    ccu_wr(16'h0001, 32'h1f);

    // ---- Newmanry reset: back to normal mode, keys gone
    ccu_wr(16'h0002, 1);
    wait (!dev_rst_n);
    n_newmanry++;
    wait (dev_rst_n);
    wait_quiet(2);
    check(!trusted, "normal mode after Newmanry reset");
    ccu_rd(sxp_addr(0, SXP_SPACE_CTL, 1), r);
    if (r == 0) n_keys_gone++;
    clear_q();
    blk = new[2]; blk[0] = 128'h77; blk[1] = 128'h88;
    post(xb_of(T0), mkhdr(PKT_WR_REQ, 1, 1, T0, 32'h0001_0000, 2), blk);
    wait_quiet(40);
    if (htx[0].size() == 2 && htx[0][0].data == 128'h77 && htx[0][0].hdr.aes) n_bypass++;

    // ---- every mechanism must have happened
    check(n_bypass == 2, $sformatf("bypass %0d", n_bypass));
    check(n_icu_exc == 1, "exception to ICU");
    check(n_enter == 1, "entry into trusted mode");
    check(n_host_refused == 2, $sformatf("host refused %0d", n_host_refused));
    check(n_encrypt == 4, $sformatf("encrypted frames %0d", n_encrypt));
    check(n_decrypt == 5, $sformatf("decrypted frames %0d", n_decrypt));   // the tampered one too
    check(n_cleartext == 1, "cleartext region pass-through");
    check(n_stall > 0, "exchange-block stalls");
    check(n_throttle > 0, "read throttling");
    check(n_cc_split > 0, "completions split, CC on the last");
    check(n_region_exc == 1, "key region mismatch exception");
    check(n_tag_exc == 1, "tag mismatch exception");
    check(n_forged == 1, "forged completion exception");
    check(n_newmanry == 1 && n_keys_gone == 1, "Newmanry reset clears keys");
    check(n_busy == 1 && n_quiet == 1, "quiesce status");
    check(n_full_rate == 1, "full-rate 1 KB frame");
    $display("mechanisms: bypass=%0d icu_exc=%0d enter=%0d host_refused=%0d encrypt=%0d decrypt=%0d",
             n_bypass, n_icu_exc, n_enter, n_host_refused, n_encrypt, n_decrypt);
    $display("  cleartext=%0d stall=%0d throttle=%0d cc_split=%0d region_exc=%0d tag_exc=%0d forged=%0d newmanry=%0d",
             n_cleartext, n_stall, n_throttle, n_cc_split, n_region_exc, n_tag_exc, n_forged, n_newmanry);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
