// sxp_key_select: maps a request to its physical key context and checks its address.
//
// The SXP derives the key context of a request from where it came from, not from anything
// the host controls, and then cross-checks that against where it is going:
//   1. the exchange-block context is computed from the source tile identifier;
//   2. KXBCTXMAP[exchange-block context] gives the physical key context (the KEY_INDEX);
//   3. KPHYSMAP[physical key context] gives the key region the context is bound to;
//   4. the key region definition registers (KSELLIMIT) give the region the request address
//      falls in; the two regions must agree.
// Region 0 is the cleartext region; requests to it bypass encryption and are not checked.
// A request to another region whose context is bound elsewhere (or an address outside every
// region) is a misconfiguration and raises a security exception.
//
// Encoding chosen here (the paper does not give one): the 17 regions are consecutive address
// ranges, region r = [KSELLIMIT[r-1], KSELLIMIT[r]) with KSELLIMIT[-1] = 0, so they are
// disjoint by construction; an empty region has a limit not above its predecessor's. A tile
// belongs to exchange block tile/184 (1472 tiles over 8 exchange blocks) and to one of four
// exchange-block contexts of that block, (tile mod 184)/46; the SXP serving four exchange
// blocks thus has 16 exchange-block contexts, numbered xb_in_lane*4 + context.
// Purely combinational.
module sxp_key_select
  import itx_pkg::*;
(
  input  logic [TILE_W-1:0]   tile,
  input  logic [ADDR_W-1:0]   addr,
  input  logic [KCTX_W-1:0]   kxbctxmap [NUM_XBCTX],
  input  logic [REGION_W-1:0] kphysmap  [NUM_KCTX],
  input  logic [ADDR_W-1:0]   ksellimit [NUM_REGIONS],
  output logic [3:0]          xbctx,
  output logic [KCTX_W-1:0]   kctx,
  output logic [REGION_W-1:0] addr_region,   // NUM_REGIONS when outside every region
  output logic                cleartext,
  output logic                mismatch
);
  int unsigned xb, sub;
  always_comb begin
    xb    = 32'(tile) / TILES_PER_XB;
    sub   = (32'(tile) % TILES_PER_XB) / TILES_PER_XBCTX;
    if (sub >= XBCTX_PER_XB) sub = XBCTX_PER_XB - 1;   // tiles beyond the last full group
    xbctx = 4'((xb % XB_PER_LANE) * XBCTX_PER_XB + sub);
    kctx  = kxbctxmap[xbctx];

    addr_region = REGION_W'(NUM_REGIONS);
    for (int r = NUM_REGIONS - 1; r >= 0; r--) begin
      if (addr < ksellimit[r] && (r == 0 || addr >= ksellimit[r > 0 ? r - 1 : 0]))
        addr_region = REGION_W'(r);
    end
    cleartext = (addr_region == '0);
    mismatch  = !cleartext && (addr_region != kphysmap[kctx]);
  end
endmodule
