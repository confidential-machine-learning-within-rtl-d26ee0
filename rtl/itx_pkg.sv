// itx_pkg: types, constants and arithmetic shared by the IPU trusted-extension (ITX) blocks.
//
// The external-exchange packets that cross the Secure Exchange Pipes (SXPs) are carried here as
// a stream of 128-bit beats, one AES block per beat. Every beat carries a copy of its packet's
// header, so that a block can be classified without reassembling the packet. The header holds
// the three fields the design adds to the exchange packet format (AES bit, 4-bit KEY_INDEX,
// CC bit); the other fields (type, tile, address, length, tag) are this design's own stand-in
// for the proprietary exchange format, which is not published.
//
// Sizes that follow the GC200 as described: 1472 tiles, 16 physical key contexts per SXP,
// 17 key regions (region 0 is cleartext), 256-bit AES keys, frames of at most 1 KiB
// (64 blocks), four SXPs on four exchange lanes (two per direction), each lane serving four
// exchange blocks. The address width, tag width and the number of exchange-block contexts
// per exchange block are this design's choices.
//
// The AES S-box is a constant table: entry x is the multiplicative inverse of x in
// GF(2^8) modulo x^8+x^4+x^3+x+1 (0 maps to 0), followed by the affine map
// s = b ^ rotl(b,1) ^ rotl(b,2) ^ rotl(b,3) ^ rotl(b,4) ^ 8'h63.
package itx_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NUM_TILES      = 1472;  // GC200 tiles
  localparam int unsigned TILE_W         = 11;    // tile identifier width
  localparam int unsigned NUM_XB         = 8;     // exchange blocks (as drawn on the lanes)
  localparam int unsigned XB_PER_LANE    = 4;     // exchange blocks served by one SXP / lane
  localparam int unsigned NUM_LANES      = 2;     // exchange lanes per direction
  localparam int unsigned TILES_PER_XB   = NUM_TILES / NUM_XB;          // 184
  localparam int unsigned XBCTX_PER_XB   = 4;     // exchange-block contexts per exchange block
  localparam int unsigned TILES_PER_XBCTX = TILES_PER_XB / XBCTX_PER_XB; // 46
  localparam int unsigned NUM_XBCTX      = XB_PER_LANE * XBCTX_PER_XB;  // 16 entries of KXBCTXMAP
  localparam int unsigned NUM_KCTX       = 16;    // physical key contexts per SXP
  localparam int unsigned KCTX_W         = 4;     // KEY_INDEX width
  localparam int unsigned NUM_REGIONS    = 17;    // key regions, region 0 = cleartext
  localparam int unsigned REGION_W       = 5;
  localparam int unsigned ADDR_W         = 32;    // tile PCI address width
  localparam int unsigned LEN_W          = 7;     // length in 16-byte blocks, up to 64 (1 KiB)
  localparam int unsigned TAG_W          = 8;     // PCI read tag
  localparam int unsigned MAX_FRAME_BLOCKS = 64;  // 1 KiB, the largest PCIe read

  // ---------------------------------------------------------------- packets
  typedef enum logic [1:0] {
    PKT_NONE   = 2'd0,
    PKT_RD_REQ = 2'd1,   // tile -> host read request (egress, header only)
    PKT_RD_CPL = 2'd2,   // host -> tile read completion (ingress)
    PKT_WR_REQ = 2'd3    // tile -> host write request (egress)
  } pkt_type_e;

  typedef struct packed {
    pkt_type_e           ptype;
    logic                aes;        // payload is (to be) encrypted
    logic                cc;         // last packet of a frame
    logic [KCTX_W-1:0]   key_index;  // physical key context
    logic [TILE_W-1:0]   tile;       // source tile (requests) / destination tile (completions)
    logic [ADDR_W-1:0]   addr;       // tile PCI address (requests)
    logic [LEN_W-1:0]    len;        // read: bytes/16 requested; others: blocks in this packet
    logic [TAG_W-1:0]    tag;        // PCI read tag (read requests and completions)
  } xhdr_t;

  typedef struct packed {
    logic          sop;   // first beat of the packet
    logic          eop;   // last beat of the packet
    xhdr_t         hdr;
    logic [127:0]  data;  // one AES block of payload
  } xbeat_t;

  // ---------------------------------------------------------------- AES-GCM core operations
  typedef enum logic [2:0] {
    OP_BYPASS  = 3'd0,   // block passes unchanged (header beats, cleartext packets)
    OP_KEYLOAD = 3'd1,   // compute AK = E(K, 0^128) for a newly loaded key
    OP_IV      = 3'd2,   // AES_IV: start a frame
    OP_DATA    = 3'd3,   // AES_DATA: en/decrypt one block
    OP_MAC     = 3'd4    // AES_MAC: finish the frame, produce / check the tag
  } gcm_op_e;

  // ---------------------------------------------------------------- control bus
  typedef enum logic [1:0] {
    SRC_HOST = 2'd0,
    SRC_ICU  = 2'd1,
    SRC_CCU  = 2'd2
  } cbus_src_e;

  typedef struct packed {
    logic        valid;
    logic        we;
    logic [15:0] addr;    // word address
    logic [31:0] wdata;
  } cbus_req_t;

  // SXP register map (word addresses inside one SXP's window)
  localparam logic [3:0] SXP_SPACE_KEY     = 4'h0;  // [7:3]=context, [2:0]=word (word 7 = key[31:0])
  localparam logic [3:0] SXP_SPACE_XBCTX   = 4'h1;  // [3:0]=exchange-block context -> KEY_INDEX
  localparam logic [3:0] SXP_SPACE_PHYS    = 4'h2;  // [3:0]=physical context -> key region
  localparam logic [3:0] SXP_SPACE_LIMIT   = 4'h3;  // [4:0]=region -> exclusive upper address
  localparam logic [3:0] SXP_SPACE_CTL     = 4'h4;  // 0: write 1 disables all keys; 1: key-valid mask (read)

  // ---------------------------------------------------------------- AES helpers
  localparam logic [7:0] SBOX [256] = '{
      8'h63, 8'h7c, 8'h77, 8'h7b, 8'hf2, 8'h6b, 8'h6f, 8'hc5, 8'h30, 8'h01, 8'h67, 8'h2b, 8'hfe, 8'hd7, 8'hab, 8'h76,
      8'hca, 8'h82, 8'hc9, 8'h7d, 8'hfa, 8'h59, 8'h47, 8'hf0, 8'had, 8'hd4, 8'ha2, 8'haf, 8'h9c, 8'ha4, 8'h72, 8'hc0,
      8'hb7, 8'hfd, 8'h93, 8'h26, 8'h36, 8'h3f, 8'hf7, 8'hcc, 8'h34, 8'ha5, 8'he5, 8'hf1, 8'h71, 8'hd8, 8'h31, 8'h15,
      8'h04, 8'hc7, 8'h23, 8'hc3, 8'h18, 8'h96, 8'h05, 8'h9a, 8'h07, 8'h12, 8'h80, 8'he2, 8'heb, 8'h27, 8'hb2, 8'h75,
      8'h09, 8'h83, 8'h2c, 8'h1a, 8'h1b, 8'h6e, 8'h5a, 8'ha0, 8'h52, 8'h3b, 8'hd6, 8'hb3, 8'h29, 8'he3, 8'h2f, 8'h84,
      8'h53, 8'hd1, 8'h00, 8'hed, 8'h20, 8'hfc, 8'hb1, 8'h5b, 8'h6a, 8'hcb, 8'hbe, 8'h39, 8'h4a, 8'h4c, 8'h58, 8'hcf,
      8'hd0, 8'hef, 8'haa, 8'hfb, 8'h43, 8'h4d, 8'h33, 8'h85, 8'h45, 8'hf9, 8'h02, 8'h7f, 8'h50, 8'h3c, 8'h9f, 8'ha8,
      8'h51, 8'ha3, 8'h40, 8'h8f, 8'h92, 8'h9d, 8'h38, 8'hf5, 8'hbc, 8'hb6, 8'hda, 8'h21, 8'h10, 8'hff, 8'hf3, 8'hd2,
      8'hcd, 8'h0c, 8'h13, 8'hec, 8'h5f, 8'h97, 8'h44, 8'h17, 8'hc4, 8'ha7, 8'h7e, 8'h3d, 8'h64, 8'h5d, 8'h19, 8'h73,
      8'h60, 8'h81, 8'h4f, 8'hdc, 8'h22, 8'h2a, 8'h90, 8'h88, 8'h46, 8'hee, 8'hb8, 8'h14, 8'hde, 8'h5e, 8'h0b, 8'hdb,
      8'he0, 8'h32, 8'h3a, 8'h0a, 8'h49, 8'h06, 8'h24, 8'h5c, 8'hc2, 8'hd3, 8'hac, 8'h62, 8'h91, 8'h95, 8'he4, 8'h79,
      8'he7, 8'hc8, 8'h37, 8'h6d, 8'h8d, 8'hd5, 8'h4e, 8'ha9, 8'h6c, 8'h56, 8'hf4, 8'hea, 8'h65, 8'h7a, 8'hae, 8'h08,
      8'hba, 8'h78, 8'h25, 8'h2e, 8'h1c, 8'ha6, 8'hb4, 8'hc6, 8'he8, 8'hdd, 8'h74, 8'h1f, 8'h4b, 8'hbd, 8'h8b, 8'h8a,
      8'h70, 8'h3e, 8'hb5, 8'h66, 8'h48, 8'h03, 8'hf6, 8'h0e, 8'h61, 8'h35, 8'h57, 8'hb9, 8'h86, 8'hc1, 8'h1d, 8'h9e,
      8'he1, 8'hf8, 8'h98, 8'h11, 8'h69, 8'hd9, 8'h8e, 8'h94, 8'h9b, 8'h1e, 8'h87, 8'he9, 8'hce, 8'h55, 8'h28, 8'hdf,
      8'h8c, 8'ha1, 8'h89, 8'h0d, 8'hbf, 8'he6, 8'h42, 8'h68, 8'h41, 8'h99, 8'h2d, 8'h0f, 8'hb0, 8'h54, 8'hbb, 8'h16
  };

  function automatic logic [7:0] sbox(input logic [7:0] x);
    return SBOX[x];
  endfunction

  function automatic logic [31:0] sub_word(input logic [31:0] w);
    return {sbox(w[31:24]), sbox(w[23:16]), sbox(w[15:8]), sbox(w[7:0])};
  endfunction

  function automatic logic [7:0] xtime(input logic [7:0] b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  // One AES round on a 128-bit state (byte 0 in bits 127:120, column-major).
  function automatic logic [127:0] aes_round(input logic [127:0] s, input logic [127:0] rk,
                                             input logic last);
    logic [7:0] b [16];
    logic [7:0] t [16];
    logic [127:0] o;
    for (int i = 0; i < 16; i++) b[i] = sbox(s[127-8*i -: 8]);
    // ShiftRows: row r of column c takes column (c + r) mod 4
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) t[4*c+r] = b[4*((c+r)%4)+r];
    for (int c = 0; c < 4; c++) begin
      logic [7:0] a0, a1, a2, a3;
      a0 = t[4*c]; a1 = t[4*c+1]; a2 = t[4*c+2]; a3 = t[4*c+3];
      if (last) begin
        o[127-32*c -: 32] = {a0, a1, a2, a3};
      end else begin
        o[127-32*c -: 32] = {xtime(a0) ^ xtime(a1) ^ a1 ^ a2 ^ a3,
                             a0 ^ xtime(a1) ^ xtime(a2) ^ a2 ^ a3,
                             a0 ^ a1 ^ xtime(a2) ^ xtime(a3) ^ a3,
                             xtime(a0) ^ a0 ^ a1 ^ a2 ^ xtime(a3)};
      end
    end
    return o ^ rk;
  endfunction

  // AES-256 key schedule step: given round keys i-2 and i-1, return round key i (i >= 2).
  function automatic logic [127:0] next_round_key(input logic [127:0] rk_m2,
                                                  input logic [127:0] rk_m1, input int i);
    logic [31:0] w0, w1, w2, w3, t;
    logic [7:0]  rcon;
    rcon = 8'h01 << (i/2 - 1);
    if (i % 2 == 0) t = sub_word({rk_m1[23:0], rk_m1[31:24]}) ^ {rcon, 24'h0};
    else            t = sub_word(rk_m1[31:0]);
    w0 = rk_m2[127:96] ^ t;
    w1 = rk_m2[95:64] ^ w0;
    w2 = rk_m2[63:32] ^ w1;
    w3 = rk_m2[31:0]  ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  // ---------------------------------------------------------------- GHASH
  // Multiplication in GF(2^128) with the GCM bit order (bit 127 is the coefficient of x^0),
  // reduction polynomial x^128 + x^7 + x^2 + x + 1.
  function automatic logic [127:0] gf128_mul(input logic [127:0] x, input logic [127:0] y);
    logic [127:0] z, v;
    z = '0;
    v = y;
    for (int i = 127; i >= 0; i--) begin
      if (x[i]) z = z ^ v;
      v = v[0] ? ((v >> 1) ^ {8'he1, 120'h0}) : (v >> 1);
    end
    return z;
  endfunction

  // GCM inc32: increment the low 32 bits of a counter block.
  function automatic logic [127:0] inc32(input logic [127:0] c);
    return {c[127:32], c[31:0] + 32'd1};
  endfunction

endpackage
