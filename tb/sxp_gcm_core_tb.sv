// sxp_gcm_core_tb: drives the GCM engine with frames on two key contexts whose blocks are
// interleaved cycle by cycle (one encrypting, one decrypting), then with random frames on
// random contexts checked against the reference model, a frame with a corrupted tag, a
// data block on an idle context, and a key clear. The first two frames use vectors from an
// independent AES-GCM implementation. Each output must appear 16 cycles after its input.
module sxp_gcm_core_tb;
  import itx_pkg::*;
  import gcm_ref_pkg::*;
  localparam int LAT = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic kw_valid = 0, key_clear = 0;
  logic [3:0] kw_ctx = 0;
  logic [255:0] kw_key = 0;
  logic [15:0] key_valid;
  logic in_valid = 0, in_decrypt = 0;
  gcm_op_e in_op = OP_BYPASS;
  logic [3:0] in_ctx = 0;
  logic [127:0] in_block = 0;
  logic [15:0] in_side = 0;
  logic out_valid, out_auth_fail, out_err, idle;
  gcm_op_e out_op;
  logic [3:0] out_ctx;
  logic [127:0] out_block;
  logic [15:0] out_side;

  sxp_gcm_core #(.SIDE_W(16)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { gcm_op_e op; logic [3:0] ctx; bit dec; logic [127:0] blk;
                   logic [127:0] exp; bit exp_fail; bit exp_err; } item_t;
  item_t items [$];
  int sent_cycle [int];
  int nout = 0;

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    int id;
    id = int'(out_side);
    if (!items[id].exp_err) check(out_block === items[id].exp, $sformatf("item %0d data %h exp %h", id, out_block, items[id].exp));
    check(out_auth_fail == items[id].exp_fail, $sformatf("item %0d auth_fail", id));
    check(out_err == items[id].exp_err, $sformatf("item %0d err", id));
    check(cycle - sent_cycle[id] == LAT, $sformatf("item %0d latency %0d", id, cycle - sent_cycle[id]));
    nout++;
  end

  task automatic load_key(input logic [3:0] c, input logic [255:0] k);
    kw_valid <= 1; kw_ctx <= c; kw_key <= k;
    @(posedge clk);
    kw_valid <= 0;
    @(posedge clk);
  endtask

  function automatic void add(gcm_op_e op, logic [3:0] c, bit dec, logic [127:0] blk,
                              logic [127:0] exp, bit f = 0, bit e = 0);
    item_t it;
    it.op = op; it.ctx = c; it.dec = dec; it.blk = blk; it.exp = exp; it.exp_fail = f; it.exp_err = e;
    items.push_back(it);
  endfunction

  task automatic send(input int from, input int to);
    for (int i = from; i < to; i++) begin
      in_valid <= 1; in_op <= items[i].op; in_ctx <= items[i].ctx; in_decrypt <= items[i].dec;
      in_block <= items[i].blk; in_side <= 16'(i);
      sent_cycle[i] = cycle + 1;
      @(posedge clk);
    end
  endtask

  // frame helper from the reference model; tamper flips a tag bit
  function automatic void add_frame_ref(logic [3:0] c, bit dec, logic [255:0] k, int n, bit tamper);
    logic [127:0] iv, din[], dout[], pt[], ct[], tag;
    iv = {$urandom, $urandom, $urandom, 32'h0};
    pt = new[n];
    for (int i = 0; i < n; i++) pt[i] = {$urandom, $urandom, $urandom, $urandom};
    tag = gcm(k, iv, pt, 0, ct);
    add(OP_IV, c, dec, iv, iv);
    for (int i = 0; i < n; i++)
      if (dec) add(OP_DATA, c, 1, ct[i], pt[i]);
      else     add(OP_DATA, c, 0, pt[i], ct[i]);
    add(OP_MAC, c, dec, dec ? (tamper ? tag ^ 128'h1 : tag) : 128'h0, tag, dec && tamper);
  endfunction

  localparam logic [255:0] K1 = 256'h5baee261f53b26152d263ba83b037cd4962e434801256b885e9c9051f320b0db;
  localparam logic [255:0] K2 = 256'hd4b129840534f3f3875c25b08bea06c2874cfaa4dd17b2d842845de82a5bc539;
  logic [255:0] keys [16];

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(key_valid == 16'h0, "keys invalid after reset");
    load_key(4'd3, K1);
    load_key(4'd9, K2);
    repeat (LAT + 2) @(posedge clk);
    check(key_valid == 16'h0208, "key valid mask");
    check(idle, "idle after key loads");
    // context 3 encrypts the 4-block frame, context 9 decrypts the 2-block frame, interleaved
    add(OP_IV,   3, 0, 128'h83f39ea7adbd0d74e6dec7f300000000, 128'h83f39ea7adbd0d74e6dec7f300000000);
    add(OP_IV,   9, 1, 128'h888ac78054a2399ccfc9fcc200000000, 128'h888ac78054a2399ccfc9fcc200000000);
    add(OP_DATA, 3, 0, 128'hdfaecc8f646566641a7ba2660f3011fc, 128'h2ecc02db6c8654257cc94e4afb5fa065);
    add(OP_DATA, 9, 1, 128'h0fbf73d3c0ce013e79cffb7f7a4a679b, 128'hda31ce3dd166bdcd3a33847e5bbb07fd);
    add(OP_DATA, 3, 0, 128'h3570291c57990d1a0091268919f25d9d, 128'h77b6f96deaad71ee9f7f3d5c10eb9dee);
    add(OP_DATA, 9, 1, 128'haabed46bcbef96fcd019109365a40a2c, 128'h07ca47784231b19af45872ceefb9fc59);
    add(OP_DATA, 3, 0, 128'h0612df359d6026a240f4589a5d791f1d, 128'hab799059a0c0da7241ccb0b84a2dc7a6);
    add(OP_MAC,  9, 1, 128'he45f1a65a0a037e252668c8e06a1ceb3, 128'he45f1a65a0a037e252668c8e06a1ceb3);
    add(OP_DATA, 3, 0, 128'hd97cfefa777a7b4f15241abf57bd437a, 128'h42cc0dd9bc460668ec1a294d7014dd50);
    add(OP_MAC,  3, 0, 128'h0,                                128'h7f22becf18554875e7624563799c665f);
    add(OP_BYPASS, 5, 0, 128'h1234, 128'h1234);
    send(0, items.size());
    in_valid <= 0;
    // random frames on all 16 contexts, with a corrupted tag on some decryptions
    for (int c = 0; c < 16; c++) begin
      keys[c] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      load_key(4'(c), keys[c]);
    end
    repeat (LAT + 2) @(posedge clk);
    for (int f = 0; f < 12; f++) begin
      automatic int from = items.size();
      add_frame_ref(4'(f), f[0], keys[f], 1 + f % 5, f == 5 || f == 9);
      send(from, items.size());
    end
    in_valid <= 0;
    @(posedge clk);
    // data on an idle context is an error
    begin
      automatic int from = items.size();
      add(OP_DATA, 4'd14, 0, 128'h0, 128'h0, 0, 1);
      send(from, items.size());
      in_valid <= 0;
    end
    repeat (LAT + 4) @(posedge clk);
    // key clear disables all contexts
    key_clear <= 1; @(posedge clk); key_clear <= 0; @(posedge clk);
    check(key_valid == 16'h0, "key clear");
    check(nout == items.size(), $sformatf("outputs %0d expected %0d", nout, items.size()));
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
