// sxp_key_select_tb: programs the three tables with distinct patterns and checks the key
// context, the address region and the mismatch flag for directed and random tile/address
// pairs. Expected values are worked out here from the tile ranges (184 tiles per exchange
// block, 46 per exchange-block context) and by scanning the region list.
module sxp_key_select_tb;
  import itx_pkg::*;
  logic [TILE_W-1:0]   tile;
  logic [ADDR_W-1:0]   addr;
  logic [KCTX_W-1:0]   kxbctxmap [NUM_XBCTX];
  logic [REGION_W-1:0] kphysmap  [NUM_KCTX];
  logic [ADDR_W-1:0]   ksellimit [NUM_REGIONS];
  logic [3:0]          xbctx;
  logic [KCTX_W-1:0]   kctx;
  logic [REGION_W-1:0] addr_region;
  logic                cleartext, mismatch;
  int checks = 0, failures = 0;

  sxp_key_select dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  task automatic try(input int t, input logic [31:0] a);
    int e_xbctx, e_region, lo, hi;
    tile = TILE_W'(t); addr = a;
    #1;
    // exchange block t/184 -> position in lane; context within the block by 46-tile groups
    e_xbctx = ((t / 184) % 4) * 4 + ((t % 184) / 46 > 3 ? 3 : (t % 184) / 46);
    e_region = 17;
    lo = 0;
    for (int r = 0; r < 17; r++) begin
      hi = int'(ksellimit[r]);
      if (a >= 32'(lo) && a < 32'(hi)) e_region = r;
      if (hi > lo) lo = hi;
    end
    check(xbctx == 4'(e_xbctx), $sformatf("tile %0d xbctx %0d exp %0d", t, xbctx, e_xbctx));
    check(kctx == kxbctxmap[e_xbctx], $sformatf("tile %0d kctx", t));
    check(addr_region == 5'(e_region), $sformatf("addr %h region %0d exp %0d", a, addr_region, e_region));
    check(cleartext == (e_region == 0), "cleartext");
    check(mismatch == (e_region != 0 && 5'(e_region) != kphysmap[kxbctxmap[e_xbctx]]),
          $sformatf("mismatch tile %0d addr %h", t, a));
  endtask

  initial begin
    for (int i = 0; i < 16; i++) kxbctxmap[i] = 4'(15 - i);
    for (int i = 0; i < 16; i++) kphysmap[i]  = 5'(i + 1);       // context k -> region k+1
    for (int r = 0; r < 17; r++) ksellimit[r] = 32'((r + 1) * 32'h1000);
    // directed: tile 0 (xb 0, ctx 0) -> kctx 15 -> region 16 = [0x10000, 0x11000)
    try(0, 32'h0000_0100);   // cleartext
    try(0, 32'h0001_0010);   // matching region
    try(0, 32'h0000_2000);   // wrong region
    try(0, 32'h0020_0000);   // outside all regions
    try(183, 32'h0000_d000); // last tile of xb 0
    try(184 * 5 + 50, 32'h0000_a000);
    try(1471, 32'h0000_5000);
    // random, including tiles whose context maps onto the region they address
    for (int i = 0; i < 300; i++) begin
      int t = $urandom_range(0, 1471);
      int ctxe = ((t / 184) % 4) * 4 + ((t % 184) / 46 > 3 ? 3 : (t % 184) / 46);
      logic [31:0] a;
      if (i % 2 == 0) a = 32'((int'(kphysmap[kxbctxmap[ctxe]])) * 32'h1000 + $urandom_range(0, 32'hfff));
      else            a = 32'($urandom_range(0, 32'h12fff));
      try(t, a);
    end
    // an empty region (limit not above its predecessor) matches nothing
    ksellimit[5] = 32'h3000;
    try(0, 32'h0000_5800);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
