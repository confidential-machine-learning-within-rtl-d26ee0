// sxp_gcm_core: the AES256-GCM engine of a Secure Exchange Pipe, with 16 physical key contexts.
//
// Each context holds what the paper lists: the AES key, the GHASH key AK = E(K, 0^128)
// (computed when the key is loaded), EK = E(K, J0) for the current frame, the current counter
// block, and the partial GHASH value H. Every cycle the engine accepts one block together with
// an operation and a context number, and may switch context from one block to the next:
//   OP_IV    context idle: J0 = {IV[127:32], 32'd1}; EK := E(J0); output the IV unchanged;
//            the counter becomes inc32(J0); the context becomes active.
//   OP_DATA  context active: output data ^ E(counter); fold the ciphertext into H with AK;
//            increment the counter.
//   OP_MAC   context active: tag = GHASH(H, len block) ^ EK, output the tag; when decrypting,
//            compare it with the received block and flag a mismatch; the context becomes idle.
//   OP_BYPASS the block passes unchanged (same latency, so packet order is kept).
// Additional authenticated data is always empty and the plaintext is block aligned, as in
// the paper, so the length block is {64'd0, 128 * blocks}. The block count is recovered from
// the counter (counter - 2), i.e. from the IV register, as the paper says the tag is computed
// "using AK, EK, IV, and H".
//
// Pipelining: the counter and active bit live at the input side and are updated in the cycle
// an operation is accepted; AK, EK and H live at the output side and are read and written in
// the single output cycle, so back-to-back blocks of one context need no forwarding. Loading
// a key (kw_*) stores it and queues an OP_KEYLOAD, which enters the pipe on the next cycle
// without an incoming block and writes AK when it leaves. key_clear disables all contexts.
// An IV/DATA/MAC on a disabled key, DATA/MAC on an idle context or IV on an active one sets
// out_err. Latency: LATENCY = 16 cycles from in_* to out_*, one block per cycle, no stall.
//
// Following the paper: 16 contexts, the stored per-context state, the three operations,
// empty AAD, block-aligned data. This design's choices: J0 takes the counter value 1 as in
// standard GCM with a 96-bit IV (see the README), the error checks, the key-load queue.
module sxp_gcm_core
  import itx_pkg::*;
#(
  parameter int unsigned NCTX   = NUM_KCTX,
  parameter int unsigned SIDE_W = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // key loading (from the SXP registers)
  input  logic               kw_valid,
  input  logic [KCTX_W-1:0]  kw_ctx,
  input  logic [255:0]       kw_key,
  input  logic               key_clear,
  output logic [NCTX-1:0]    key_valid,
  // block input
  input  logic               in_valid,
  input  gcm_op_e            in_op,
  input  logic [KCTX_W-1:0]  in_ctx,
  input  logic               in_decrypt,
  input  logic [127:0]       in_block,
  input  logic [SIDE_W-1:0]  in_side,
  // block output
  output logic               out_valid,
  output gcm_op_e            out_op,
  output logic [KCTX_W-1:0]  out_ctx,
  output logic [127:0]       out_block,
  output logic [SIDE_W-1:0]  out_side,
  output logic               out_auth_fail,
  output logic               out_err,
  output logic               idle
);
  localparam int unsigned LATENCY = 16;

  typedef struct packed {
    gcm_op_e            op;
    logic [KCTX_W-1:0]  ctx;
    logic               decrypt;
    logic               err;
    logic [31:0]        nblk;
    logic [127:0]       din;
    logic [SIDE_W-1:0]  side;
  } meta_t;

  // ------------------------------------------------------------ input-side context state
  logic [255:0] key_q  [NCTX];
  logic [127:0] ctr_q  [NCTX];
  logic [NCTX-1:0] active_q, pend_q, kvalid_q;

  // pick a queued key load when no block arrives
  logic              kl_issue;
  logic [KCTX_W-1:0] kl_ctx;
  always_comb begin
    kl_ctx = '0;
    for (int i = NCTX - 1; i >= 0; i--) if (pend_q[i]) kl_ctx = KCTX_W'(i);
    kl_issue = !in_valid && (pend_q != '0);
  end

  logic              p_valid;
  logic [127:0]      p_block;
  logic [255:0]      p_key;
  meta_t             p_meta;

  always_comb begin
    p_valid      = in_valid || kl_issue;
    p_meta.op    = in_valid ? in_op : OP_KEYLOAD;
    p_meta.ctx   = in_valid ? in_ctx : kl_ctx;
    p_meta.decrypt = in_decrypt;
    p_meta.din   = in_block;
    p_meta.side  = in_side;
    p_meta.nblk  = ctr_q[p_meta.ctx][31:0] - 32'd2;
    p_meta.err   = 1'b0;
    p_key        = key_q[p_meta.ctx];
    p_block      = ctr_q[p_meta.ctx];
    unique case (p_meta.op)
      OP_KEYLOAD: p_block = '0;
      OP_IV: begin
        p_block    = {in_block[127:32], 32'd1};
        p_meta.err = !kvalid_q[in_ctx] || active_q[in_ctx];
      end
      OP_DATA, OP_MAC: p_meta.err = !kvalid_q[in_ctx] || !active_q[in_ctx];
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= '0;
      pend_q   <= '0;
      kvalid_q <= '0;
      for (int i = 0; i < NCTX; i++) begin
        key_q[i] <= '0;
        ctr_q[i] <= '0;
      end
    end else begin
      if (in_valid) begin
        unique case (in_op)
          OP_IV: begin
            ctr_q[in_ctx]    <= {in_block[127:32], 32'd2};
            active_q[in_ctx] <= 1'b1;
          end
          OP_DATA: ctr_q[in_ctx] <= inc32(ctr_q[in_ctx]);
          OP_MAC:  active_q[in_ctx] <= 1'b0;
          default: ;
        endcase
      end
      if (kl_issue) pend_q[kl_ctx] <= 1'b0;
      if (kw_valid) begin
        key_q[kw_ctx]    <= kw_key;
        pend_q[kw_ctx]   <= 1'b1;
        kvalid_q[kw_ctx] <= 1'b1;
        active_q[kw_ctx] <= 1'b0;
      end
      if (key_clear) begin
        kvalid_q <= '0;
        pend_q   <= '0;
        active_q <= '0;
        for (int i = 0; i < NCTX; i++) key_q[i] <= '0;
      end
    end
  end
  assign key_valid = kvalid_q;

  // ------------------------------------------------------------ AES pipe
  logic         a_valid;
  logic [127:0] a_block;
  meta_t        a_meta;

  aes256_pipe #(.META_W($bits(meta_t))) u_aes (
    .clk, .rst_n,
    .in_valid (p_valid), .in_block (p_block), .in_key (p_key), .in_meta (p_meta),
    .out_valid(a_valid), .out_block(a_block), .out_meta(a_meta)
  );

  // ------------------------------------------------------------ output-side context state
  logic [127:0] ak_q [NCTX];
  logic [127:0] ek_q [NCTX];
  logic [127:0] h_q  [NCTX];

  logic [127:0] x_data, g_in, g_out, tag, o_block;
  logic [127:0] len_blk;
  always_comb begin
    x_data  = a_meta.din ^ a_block;
    len_blk = {64'd0, 25'd0, a_meta.nblk, 7'd0};   // 128 * blocks, in bits
    g_in    = h_q[a_meta.ctx] ^ ((a_meta.op == OP_MAC) ? len_blk
                                 : (a_meta.decrypt ? a_meta.din : x_data));
    g_out   = gf128_mul(g_in, ak_q[a_meta.ctx]);
    tag     = g_out ^ ek_q[a_meta.ctx];
    unique case (a_meta.op)
      OP_DATA: o_block = x_data;
      OP_MAC:  o_block = tag;
      default: o_block = a_meta.din;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCTX; i++) begin
        ak_q[i] <= '0;
        ek_q[i] <= '0;
        h_q[i]  <= '0;
      end
      out_valid     <= 1'b0;
      out_auth_fail <= 1'b0;
      out_err       <= 1'b0;
    end else begin
      out_valid     <= a_valid && (a_meta.op != OP_KEYLOAD);
      out_auth_fail <= a_valid && (a_meta.op == OP_MAC) && a_meta.decrypt && (tag != a_meta.din);
      out_err       <= a_valid && a_meta.err;
      if (a_valid) begin
        unique case (a_meta.op)
          OP_KEYLOAD: begin
            ak_q[a_meta.ctx] <= a_block;
            h_q[a_meta.ctx]  <= '0;
          end
          OP_IV: begin
            ek_q[a_meta.ctx] <= a_block;
            h_q[a_meta.ctx]  <= '0;
          end
          OP_DATA: h_q[a_meta.ctx] <= g_out;
          OP_MAC:  h_q[a_meta.ctx] <= '0;
          default: ;
        endcase
      end
      if (key_clear) begin
        for (int i = 0; i < NCTX; i++) begin
          ak_q[i] <= '0;
          ek_q[i] <= '0;
          h_q[i]  <= '0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    out_op    <= a_meta.op;
    out_ctx   <= a_meta.ctx;
    out_block <= o_block;
    out_side  <= a_meta.side;
  end

  // blocks in flight, for the quiesce status
  logic [5:0] inflight_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight_q <= '0;
    else inflight_q <= inflight_q + 6'(p_valid) - 6'(a_valid);
  end
  assign idle = (inflight_q == '0) && (pend_q == '0) && !out_valid;

  // the pipe never holds more than its depth
  assert property (@(posedge clk) disable iff (!rst_n) inflight_q <= 6'(LATENCY));
endmodule
