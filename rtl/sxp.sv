// sxp: Secure Exchange Pipe, the encryption stage on one exchange lane.
//
// One SXP sits on each of the four exchange lanes between the PCI complex and the exchange
// blocks: the two egress SXPs encrypt write requests and assign key contexts to read
// requests, the two ingress SXPs decrypt read completions. Outside trusted mode every packet
// passes unchanged. In trusted mode:
//   egress  (EGRESS=1): for a read or write request the key selection (sxp_key_select) finds
//           the physical key context from the source tile, writes it into KEY_INDEX and checks
//           the address against the key region bound to that context. Requests to the
//           cleartext region pass with AES cleared; a mismatch drops the packet and raises a
//           security exception. Read requests to an encrypted region get AES set, so the PCI
//           complex can tag their completions. Write requests with AES set are encrypted.
//   ingress (EGRESS=0): read completions with AES set are decrypted with the context named
//           by their KEY_INDEX, which the PCI complex inserted.
// The payload blocks of an encrypted packet are handed to the GCM engine as: the first block
// of a packet that starts a frame (its context has no open frame) -> AES_IV; the last block
// of a packet with CC set -> AES_MAC (the tag when decrypting, a padding block when
// encrypting, replaced by the tag); every other block -> AES_DATA. All beats, including the
// ones that bypass, go through the engine so that order and latency (17 cycles: one for
// classification, 16 in the engine) are the same for every beat.
// A failed tag check or an engine protocol error also raises a security exception
// (exc_cause, one cycle); the decrypted blocks have already been forwarded,
// as the paper's pipelined engine does, and it is the exception that stops the TEE.
//
// Interface: in_valid/in_beat one beat per cycle, packets contiguous (guaranteed by the
// lane multiplexer); out_valid/out_beat; control bus to sxp_regs. No back-pressure.
module sxp
  import itx_pkg::*;
#(
  parameter bit EGRESS = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         trusted,
  // control bus
  input  logic         req_valid,
  input  logic         req_we,
  input  logic [11:0]  req_addr,
  input  logic [31:0]  req_wdata,
  output logic [31:0]  rdata,
  // lane in / out
  input  logic         in_valid,
  input  xbeat_t       in_beat,
  output logic         out_valid,
  output xbeat_t       out_beat,
  // security exception
  output logic [2:0]   exc_cause,   // {protocol error, tag mismatch, key region mismatch}
  output logic         idle
);
  // ------------------------------------------------------------ registers
  logic [KCTX_W-1:0]   kxbctxmap [NUM_XBCTX];
  logic [REGION_W-1:0] kphysmap  [NUM_KCTX];
  logic [ADDR_W-1:0]   ksellimit [NUM_REGIONS];
  logic                kw_valid, key_clear;
  logic [KCTX_W-1:0]   kw_ctx;
  logic [255:0]        kw_key;
  logic [NUM_KCTX-1:0] key_valid;

  sxp_regs u_regs (
    .clk, .rst_n, .req_valid, .req_we, .req_addr, .req_wdata, .rdata,
    .kxbctxmap, .kphysmap, .ksellimit, .kw_valid, .kw_ctx, .kw_key, .key_clear, .key_valid
  );

  // ------------------------------------------------------------ key selection
  logic [3:0]          ks_xbctx;
  logic [KCTX_W-1:0]   ks_kctx;
  logic [REGION_W-1:0] ks_region;
  logic                ks_clear, ks_mismatch;

  sxp_key_select u_ks (
    .tile(in_beat.hdr.tile), .addr(in_beat.hdr.addr), .kxbctxmap, .kphysmap, .ksellimit,
    .xbctx(ks_xbctx), .kctx(ks_kctx), .addr_region(ks_region),
    .cleartext(ks_clear), .mismatch(ks_mismatch)
  );

  // ------------------------------------------------------------ per-packet decision
  typedef struct packed {
    xhdr_t             hdr;     // header as forwarded
    logic              crypt;   // payload goes through AES
    logic              drop;
    logic [KCTX_W-1:0] ctx;
  } pkt_dec_t;

  pkt_dec_t dec_sop, dec_q, dec;
  always_comb begin
    dec_sop.hdr   = in_beat.hdr;
    dec_sop.crypt = 1'b0;
    dec_sop.drop  = 1'b0;
    dec_sop.ctx   = in_beat.hdr.key_index;
    if (trusted) begin
      if (EGRESS) begin
        if (in_beat.hdr.ptype inside {PKT_RD_REQ, PKT_WR_REQ}) begin
          if (ks_clear) begin
            dec_sop.hdr.aes       = 1'b0;
            dec_sop.hdr.key_index = '0;
          end else if (ks_mismatch) begin
            dec_sop.drop = 1'b1;
          end else begin
            dec_sop.hdr.key_index = ks_kctx;
            dec_sop.ctx           = ks_kctx;
            if (in_beat.hdr.ptype == PKT_RD_REQ) dec_sop.hdr.aes = 1'b1;
            else dec_sop.crypt = in_beat.hdr.aes;
          end
        end
      end else begin
        dec_sop.crypt = (in_beat.hdr.ptype == PKT_RD_CPL) && in_beat.hdr.aes;
      end
    end
    dec = in_beat.sop ? dec_sop : dec_q;
  end

  // ------------------------------------------------------------ block classification
  logic [NUM_KCTX-1:0] open_q;     // a frame is open on this context
  gcm_op_e             op;
  always_comb begin
    op = OP_BYPASS;
    if (dec.crypt) begin
      if (in_beat.sop && !open_q[dec.ctx])        op = OP_IV;
      else if (in_beat.eop && in_beat.hdr.cc)     op = OP_MAC;
      else                                        op = OP_DATA;
    end
  end

  // stage register in front of the engine
  logic        s_valid, s_decrypt;
  gcm_op_e     s_op;
  logic [KCTX_W-1:0] s_ctx;
  logic [127:0] s_block;
  logic [$bits(xhdr_t)+1:0] s_side;
  logic        ks_exc_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_q   <= '0;
      dec_q    <= '0;
      s_valid  <= 1'b0;
      ks_exc_q <= 1'b0;
    end else begin
      s_valid  <= in_valid && !dec.drop;
      ks_exc_q <= in_valid && in_beat.sop && dec_sop.drop;
      if (in_valid) begin
        if (in_beat.sop) dec_q <= dec_sop;
        if (op == OP_IV)  open_q[dec.ctx] <= 1'b1;
        if (op == OP_MAC) open_q[dec.ctx] <= 1'b0;
      end
      if (key_clear) open_q <= '0;
    end
  end

  always_ff @(posedge clk) begin
    s_op      <= op;
    s_ctx     <= dec.ctx;
    s_decrypt <= !EGRESS;
    s_block   <= in_beat.data;
    s_side    <= {in_beat.sop, in_beat.eop, dec.hdr};
  end

  // ------------------------------------------------------------ GCM engine
  logic                     c_valid, c_fail, c_err, c_idle;
  gcm_op_e                  c_op;
  logic [KCTX_W-1:0]        c_ctx;
  logic [127:0]             c_block;
  logic [$bits(xhdr_t)+1:0] c_side;

  sxp_gcm_core #(.SIDE_W($bits(xhdr_t) + 2)) u_core (
    .clk, .rst_n,
    .kw_valid, .kw_ctx, .kw_key, .key_clear, .key_valid,
    .in_valid(s_valid), .in_op(s_op), .in_ctx(s_ctx), .in_decrypt(s_decrypt),
    .in_block(s_block), .in_side(s_side),
    .out_valid(c_valid), .out_op(c_op), .out_ctx(c_ctx), .out_block(c_block),
    .out_side(c_side), .out_auth_fail(c_fail), .out_err(c_err), .idle(c_idle)
  );

  assign out_valid     = c_valid;
  assign out_beat.sop  = c_side[$bits(xhdr_t)+1];
  assign out_beat.eop  = c_side[$bits(xhdr_t)];
  assign out_beat.hdr  = c_side[$bits(xhdr_t)-1:0];
  assign out_beat.data = c_block;

  // a key-region mismatch is reported when the packet is dropped; engine faults on output
  assign exc_cause = {c_err, c_fail, ks_exc_q};
  assign idle      = c_idle && !s_valid;
endmodule
