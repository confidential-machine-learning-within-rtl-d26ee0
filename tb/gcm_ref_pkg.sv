// gcm_ref_pkg: a plain, non-pipelined reference model of AES-256 and AES-256-GCM for the
// testbenches. It is written independently of the RTL: the S-box is computed from its
// definition (inverse in GF(2^8) followed by the affine map) instead of a table, the key
// schedule is the textbook word-by-word expansion and GHASH multiplies bit by bit.
// Frames follow the format used on the exchange lanes: one IV block, n data blocks, one
// tag block; the counter block J0 is {IV[127:32], 32'd1}.
package gcm_ref_pkg;

  function automatic logic [7:0] gmul8(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[0]) p ^= a;
      a = {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
      b = b >> 1;
    end
    return p;
  endfunction

  function automatic logic [7:0] ref_sbox(input logic [7:0] x);
    logic [7:0] inv = 0, s;
    if (x != 0) for (int y = 1; y < 256; y++) if (gmul8(x, 8'(y)) == 8'h01) inv = 8'(y);
    s = inv;
    for (int i = 1; i <= 4; i++) s ^= 8'((inv << i) | (inv >> (8 - i)));
    return s ^ 8'h63;
  endfunction

  logic [7:0] sb [256];
  bit sb_ready = 0;

  function automatic void init_sbox();
    if (!sb_ready) begin
      for (int i = 0; i < 256; i++) sb[i] = ref_sbox(8'(i));
      sb_ready = 1;
    end
  endfunction

  function automatic logic [127:0] aes256_encrypt(input logic [255:0] key, input logic [127:0] pt);
    logic [31:0] w [60];
    logic [7:0]  s [16], t [16];
    logic [7:0]  rc = 8'h01;
    init_sbox();
    for (int i = 0; i < 8; i++) w[i] = key[255 - 32*i -: 32];
    for (int i = 8; i < 60; i++) begin
      logic [31:0] tmp = w[i-1];
      if (i % 8 == 0) begin
        tmp = {tmp[23:0], tmp[31:24]};
        tmp = {sb[tmp[31:24]], sb[tmp[23:16]], sb[tmp[15:8]], sb[tmp[7:0]]} ^ {rc, 24'h0};
        rc  = gmul8(rc, 8'h02);
      end else if (i % 8 == 4) begin
        tmp = {sb[tmp[31:24]], sb[tmp[23:16]], sb[tmp[15:8]], sb[tmp[7:0]]};
      end
      w[i] = w[i-8] ^ tmp;
    end
    for (int i = 0; i < 16; i++) s[i] = pt[127 - 8*i -: 8] ^ w[i/4][31 - 8*(i%4) -: 8];
    for (int r = 1; r <= 14; r++) begin
      for (int i = 0; i < 16; i++) s[i] = sb[s[i]];
      for (int c = 0; c < 4; c++) for (int row = 0; row < 4; row++) t[4*c+row] = s[4*((c+row)%4)+row];
      for (int c = 0; c < 4; c++) begin
        if (r != 14) begin
          s[4*c]   = gmul8(t[4*c],2) ^ gmul8(t[4*c+1],3) ^ t[4*c+2] ^ t[4*c+3];
          s[4*c+1] = t[4*c] ^ gmul8(t[4*c+1],2) ^ gmul8(t[4*c+2],3) ^ t[4*c+3];
          s[4*c+2] = t[4*c] ^ t[4*c+1] ^ gmul8(t[4*c+2],2) ^ gmul8(t[4*c+3],3);
          s[4*c+3] = gmul8(t[4*c],3) ^ t[4*c+1] ^ t[4*c+2] ^ gmul8(t[4*c+3],2);
        end else begin
          for (int k = 0; k < 4; k++) s[4*c+k] = t[4*c+k];
        end
      end
      for (int i = 0; i < 16; i++) s[i] ^= w[4*r + i/4][31 - 8*(i%4) -: 8];
    end
    for (int i = 0; i < 16; i++) aes256_encrypt[127 - 8*i -: 8] = s[i];
  endfunction

  function automatic logic [127:0] ghash_mul(input logic [127:0] x, input logic [127:0] y);
    logic [127:0] z = 0, v = y;
    for (int i = 0; i < 128; i++) begin
      if (x[127 - i]) z ^= v;
      if (v[0]) v = (v >> 1) ^ {8'he1, 120'h0};
      else      v = v >> 1;
    end
    return z;
  endfunction

  // Encrypt (or decrypt) n blocks: out[] gets the transformed blocks; returns the tag computed
  // over the ciphertext.
  function automatic logic [127:0] gcm(input logic [255:0] key, input logic [127:0] iv,
                                       input logic [127:0] din [], input bit decrypt,
                                       output logic [127:0] dout []);
    logic [127:0] h, j0, ctr, y = 0, c;
    int n = din.size();
    h   = aes256_encrypt(key, 128'h0);
    j0  = {iv[127:32], 32'd1};
    ctr = j0;
    dout = new[n];
    for (int i = 0; i < n; i++) begin
      ctr[31:0] = ctr[31:0] + 1;
      dout[i] = din[i] ^ aes256_encrypt(key, ctr);
      c = decrypt ? din[i] : dout[i];
      y = ghash_mul(y ^ c, h);
    end
    y = ghash_mul(y ^ {64'd0, 64'(n) * 64'd128}, h);
    return y ^ aes256_encrypt(key, j0);
  endfunction

endpackage
