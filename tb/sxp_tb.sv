// sxp_tb: one egress and one ingress Secure Exchange Pipe, programmed over the control bus.
// Egress: an encrypted write frame in one packet and one split over two packets (checked
// against the reference AES-GCM model, ciphertext and tag), a read request to an encrypted
// region (KEY_INDEX and AES set), a read request to the cleartext region (AES cleared), a
// write whose context is bound to another region (dropped, exception), and traffic outside
// trusted mode (unchanged). Ingress: a completion frame decrypted and authenticated, and
// one with a corrupted tag (exception). Also checks the 17-cycle latency.
module sxp_tb;
  import itx_pkg::*;
  import gcm_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic trusted = 0;
  logic [1:0] req_valid = 0;
  logic req_we = 0;
  logic [11:0] req_addr = 0;
  logic [31:0] req_wdata = 0, rdata_eg, rdata_in;
  logic eg_in_valid = 0, in_in_valid = 0, eg_out_valid, in_out_valid;
  xbeat_t eg_in_beat, in_in_beat, eg_out_beat, in_out_beat;
  logic [2:0] eg_exc, in_exc;
  logic eg_idle, in_idle;
  int checks = 0, failures = 0, cycle = 0;
  int eg_exc_n[3], in_exc_n[3];

  sxp #(.EGRESS(1'b1)) dut_eg (.clk, .rst_n, .trusted, .req_valid(req_valid[0]), .req_we,
    .req_addr, .req_wdata, .rdata(rdata_eg), .in_valid(eg_in_valid), .in_beat(eg_in_beat),
    .out_valid(eg_out_valid), .out_beat(eg_out_beat), .exc_cause(eg_exc), .idle(eg_idle));
  sxp #(.EGRESS(1'b0)) dut_in (.clk, .rst_n, .trusted, .req_valid(req_valid[1]), .req_we,
    .req_addr, .req_wdata, .rdata(rdata_in), .in_valid(in_in_valid), .in_beat(in_in_beat),
    .out_valid(in_out_valid), .out_beat(in_out_beat), .exc_cause(in_exc), .idle(in_idle));

  xbeat_t eg_q[$], in_q[$];
  int eg_t[$], in_t[$];
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (eg_out_valid) begin eg_q.push_back(eg_out_beat); eg_t.push_back(cycle); end
      if (in_out_valid) begin in_q.push_back(in_out_beat); in_t.push_back(cycle); end
      for (int i = 0; i < 3; i++) begin
        if (eg_exc[i]) eg_exc_n[i]++;
        if (in_exc[i]) in_exc_n[i]++;
      end
    end
  end

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  task automatic wr(input int which, input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); req_valid = 2'b01 << which; req_we = 1; req_addr = a; req_wdata = d;
    @(negedge clk); req_valid = 0; req_we = 0;
  endtask
  task automatic load_key(input int which, input int ctx, input logic [255:0] k);
    for (int w = 0; w < 8; w++) wr(which, {4'h0, 1'b0, 4'(ctx), 3'(w)}, k[255 - 32*w -: 32]);
  endtask

  // send one packet on a lane, one beat per cycle
  task automatic send(input bit ingress, input xhdr_t h, input logic [127:0] blk [], output int t0);
    for (int i = 0; i < blk.size(); i++) begin
      xbeat_t b;
      @(negedge clk);
      b.sop = (i == 0); b.eop = (i == blk.size() - 1); b.hdr = h; b.data = blk[i];
      if (i == 0) t0 = cycle;
      if (ingress) begin in_in_valid = 1; in_in_beat = b; end
      else         begin eg_in_valid = 1; eg_in_beat = b; end
    end
    @(negedge clk);
    eg_in_valid = 0; in_in_valid = 0;
  endtask

  function automatic xhdr_t mkhdr(pkt_type_e t, bit aes, bit cc, int tile, logic [31:0] a, int len);
    xhdr_t h = '0;
    h.ptype = t; h.aes = aes; h.cc = cc; h.tile = TILE_W'(tile); h.addr = a; h.len = LEN_W'(len);
    return h;
  endfunction

  localparam int TILE = 184 * 2 + 50;            // xb 2 of the lane, context 1 -> xbctx 9
  logic [255:0] K1, K2;

  initial begin
    logic [127:0] iv, pt[], ct[], tag, blk[], mid[];
    int t0;
    xbeat_t b;
    repeat (3) @(posedge clk);
    rst_n = 1;
    K1 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    K2 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    // egress tables: xbctx 9 -> context 5 -> region 3; regions r = [r*0x1000, (r+1)*0x1000)
    wr(0, {4'h1, 8'd9}, 5);
    wr(0, {4'h1, 8'd8}, 6);
    wr(0, {4'h2, 8'd5}, 3);
    wr(0, {4'h2, 8'd6}, 4);
    for (int r = 0; r < 17; r++) wr(0, {4'h3, 8'(r)}, 32'((r + 1) * 32'h1000));
    load_key(0, 5, K1);
    load_key(1, 7, K2);
    repeat (20) @(negedge clk);
    trusted = 1;

    // 1. write frame in one packet: IV, 3 data blocks, padding block
    iv = {$urandom, $urandom, $urandom, 32'h0};
    pt = new[3];
    foreach (pt[i]) pt[i] = {$urandom, $urandom, $urandom, $urandom};
    tag = gcm(K1, iv, pt, 0, ct);
    blk = new[5];
    blk[0] = iv; blk[1] = pt[0]; blk[2] = pt[1]; blk[3] = pt[2]; blk[4] = 128'h0;
    send(0, mkhdr(PKT_WR_REQ, 1, 1, TILE, 32'h3000, 5), blk, t0);
    repeat (20) @(negedge clk);
    check(eg_q.size() == 5, $sformatf("write frame beats %0d", eg_q.size()));
    if (eg_q.size() == 5) begin
      check(eg_t[0] - t0 == 17, $sformatf("egress latency %0d", eg_t[0] - t0));
      check(eg_q[0].data == iv, "IV passes");
      for (int i = 0; i < 3; i++) check(eg_q[i+1].data == ct[i], $sformatf("ciphertext %0d", i));
      check(eg_q[4].data == tag, "tag replaces padding");
      check(eg_q[0].hdr.key_index == 4'd5 && eg_q[0].sop && eg_q[4].eop, "KEY_INDEX set");
    end
    eg_q.delete(); eg_t.delete();

    // 2. write frame split over two packets (CC only on the second)
    iv = {$urandom, $urandom, $urandom, 32'h0};
    pt = new[4];
    foreach (pt[i]) pt[i] = {$urandom, $urandom, $urandom, $urandom};
    tag = gcm(K1, iv, pt, 0, ct);
    blk = new[3]; blk[0] = iv; blk[1] = pt[0]; blk[2] = pt[1];
    send(0, mkhdr(PKT_WR_REQ, 1, 0, TILE, 32'h3400, 3), blk, t0);
    blk = new[3]; blk[0] = pt[2]; blk[1] = pt[3]; blk[2] = 128'h0;
    send(0, mkhdr(PKT_WR_REQ, 1, 1, TILE, 32'h3430, 3), blk, t0);
    repeat (20) @(negedge clk);
    check(eg_q.size() == 6, "split frame beats");
    if (eg_q.size() == 6) begin
      check(eg_q[1].data == ct[0] && eg_q[2].data == ct[1] && eg_q[3].data == ct[2] &&
            eg_q[4].data == ct[3], "split frame ciphertext");
      check(eg_q[5].data == tag, "split frame tag");
    end
    eg_q.delete(); eg_t.delete();

    // 3./4. read requests: encrypted region and cleartext region
    blk = new[1]; blk[0] = 0;
    send(0, mkhdr(PKT_RD_REQ, 0, 0, TILE, 32'h3800, 64), blk, t0);
    send(0, mkhdr(PKT_RD_REQ, 1, 0, TILE, 32'h0100, 8), blk, t0);
    repeat (20) @(negedge clk);
    check(eg_q.size() == 2, "read requests pass");
    if (eg_q.size() == 2) begin
      check(eg_q[0].hdr.aes && eg_q[0].hdr.key_index == 4'd5 && eg_q[0].hdr.len == 64, "encrypted read request");
      check(!eg_q[1].hdr.aes, "cleartext read request");
    end
    check(eg_exc_n[0] == 0, "no mismatch yet");
    eg_q.delete(); eg_t.delete();

    // 5. context 5 is bound to region 3: a write to region 4 is dropped
    blk = new[3]; blk[0] = 1; blk[1] = 2; blk[2] = 3;
    send(0, mkhdr(PKT_WR_REQ, 1, 1, TILE, 32'h4000, 3), blk, t0);
    repeat (20) @(negedge clk);
    check(eg_q.size() == 0, "mismatched write dropped");
    check(eg_exc_n[0] == 1, "mismatch exception");

    // 6. ingress: completion frame with KEY_INDEX 7, then with a corrupted tag
    iv = {$urandom, $urandom, $urandom, 32'h0};
    pt = new[2];
    foreach (pt[i]) pt[i] = {$urandom, $urandom, $urandom, $urandom};
    tag = gcm(K2, iv, pt, 0, ct);
    blk = new[4]; blk[0] = iv; blk[1] = ct[0]; blk[2] = ct[1]; blk[3] = tag;
    begin
      xhdr_t h = mkhdr(PKT_RD_CPL, 1, 1, TILE, 0, 4);
      h.key_index = 4'd7;
      send(1, h, blk, t0);
      repeat (20) @(negedge clk);
      check(in_q.size() == 4, "completion beats");
      if (in_q.size() == 4) begin
        check(in_t[0] - t0 == 17, "ingress latency");
        check(in_q[1].data == pt[0] && in_q[2].data == pt[1], "decrypted payload");
        check(in_q[3].data == tag, "tag out");
      end
      check(in_exc_n[1] == 0 && in_exc_n[2] == 0, "good tag accepted");
      in_q.delete(); in_t.delete();
      blk[3] = tag ^ 128'h8000;
      send(1, h, blk, t0);
      repeat (20) @(negedge clk);
      check(in_exc_n[1] == 1, "bad tag raises exception");
      in_q.delete(); in_t.delete();
    end

    // 7. outside trusted mode nothing is touched
    trusted = 0;
    blk = new[3]; blk[0] = 11; blk[1] = 22; blk[2] = 33;
    send(0, mkhdr(PKT_WR_REQ, 1, 1, TILE, 32'h3000, 3), blk, t0);
    repeat (20) @(negedge clk);
    check(eg_q.size() == 3 && eg_q[0].data == 11 && eg_q[1].data == 22 && eg_q[2].data == 33 &&
          eg_q[0].hdr.key_index == 0, "normal mode bypass");
    check(eg_idle && in_idle, "idle at the end");
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
