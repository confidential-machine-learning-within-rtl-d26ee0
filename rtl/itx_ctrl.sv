// itx_ctrl: trusted-mode control, register access control and security-exception routing.
//
// Trusted mode is the state in which everything security-sensitive in the IPU is out of the
// host's reach. It is entered by writing 1 to the TRUSTED register and cannot be left by a
// register write: only the Newmanry or chip reset (dev_rst_n) clears it. Three requesters
// reach the IPU's registers: the host (through the PCI BAR), the board's IPU control unit
// (ICU) and the confidential compute unit (CCU, the root of trust, whose requests the ICU
// relays). They are served one per cycle, CCU first, then ICU, then host; a requester holds
// its request until granted, and gets rsp_valid/rdata/err the next cycle. Rules:
//   ITX registers (word 0x0000..0x00FF): written by ICU/CCU; the host may read them, and may
//     request a Newmanry reset only outside trusted mode.
//       0 TRUSTED     write 1: enter trusted mode; read: mode
//       1 EXC_STATUS  sticky security causes: [0] key region mismatch, [1] tag mismatch,
//                     [2] engine protocol error, [3] forged completion, [4] other IPU exception;
//                     write 1s to clear (CCU/ICU)
//       2 NEWMANRY    write 1: request a Newmanry reset
//       3 STATUS      [0] quiescent: no read outstanding and no block in any SXP
//   SXP n registers (word 0x1000*(n+1) + local, n = 0..3): CCU only, so keys and key maps
//     come only from the root of trust.
//   All other words go to the IPU's existing control port (configuration registers, tile
//     memory): ICU/CCU always, host only outside trusted mode.
// A refused access is not forwarded, returns 0 and sets err.
// Exceptions: in trusted mode every security exception and every IPU exception goes to the
// CCU's dedicated pin (sec_exception, level, while any EXC_STATUS bit is set); outside it IPU
// exceptions go to the ICU pin as before.
// The paper gives the mode, its entry and exit, who may access what and the exception pin;
// the register map, the arbitration and the quiesce status are this design's own.
module itx_ctrl
  import itx_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,            // device-logic reset (chip or Newmanry)
  // requesters: 0 host, 1 ICU, 2 CCU
  input  cbus_req_t   req     [3],
  output logic [2:0]  gnt,
  output logic [2:0]  rsp_valid,
  output logic [31:0] rsp_rdata,
  output logic        rsp_err,
  // SXP register ports
  output logic [3:0]  sxp_req_valid,
  output logic        sxp_req_we,
  output logic [11:0] sxp_req_addr,
  output logic [31:0] sxp_req_wdata,
  input  logic [31:0] sxp_rdata [4],
  // existing IPU control port
  output cbus_req_t   ext_req,
  input  logic [31:0] ext_rdata,
  // status and exceptions
  input  logic [2:0]  sxp_exc_cause [4],  // per SXP {protocol error, tag mismatch, region mismatch}
  input  logic        bad_cpl,
  input  logic        ipu_exc,
  input  logic        quiescent,
  output logic        trusted,
  output logic        sec_exception,      // to the CCU
  output logic        exception,          // to the ICU
  output logic        nm_req
);
  // ------------------------------------------------------------ arbitration
  logic [1:0] src;
  logic       any;
  always_comb begin
    any = 1'b1;
    if (req[SRC_CCU].valid)      src = SRC_CCU;
    else if (req[SRC_ICU].valid) src = SRC_ICU;
    else begin src = SRC_HOST; any = req[SRC_HOST].valid; end
    gnt = '0;
    if (any) gnt[src] = 1'b1;
  end

  cbus_req_t r;
  assign r = req[src];

  typedef enum logic [1:0] {T_ITX, T_SXP, T_EXT} target_e;
  target_e tgt;
  logic    allow;
  logic [4:0] exc_q;
  logic    trusted_q;
  always_comb begin
    if (r.addr[15:8] == 8'h00)                        tgt = T_ITX;
    else if (r.addr[15:12] >= 4'h1 && r.addr[15:12] <= 4'h4) tgt = T_SXP;
    else                                              tgt = T_EXT;
    unique case (tgt)
      T_ITX:   allow = !r.we || src != SRC_HOST ||
                       (r.addr[7:0] == 8'd2 && !trusted_q);
      T_SXP:   allow = (src == SRC_CCU);
      default: allow = (src != SRC_HOST) || !trusted_q;
    endcase
  end

  logic go;
  assign go = any && allow;

  always_comb begin
    sxp_req_valid = '0;
    if (go && tgt == T_SXP) sxp_req_valid[r.addr[13:12] - 2'd1] = 1'b1;
    sxp_req_we    = r.we;
    sxp_req_addr  = r.addr[11:0];
    sxp_req_wdata = r.wdata;
    ext_req       = r;
    ext_req.valid = go && tgt == T_EXT;
  end

  // ------------------------------------------------------------ ITX registers
  logic [4:0] exc_in;
  always_comb begin
    exc_in = {ipu_exc, bad_cpl, 3'b000};
    for (int i = 0; i < 4; i++) exc_in[2:0] |= sxp_exc_cause[i];
  end

  logic [31:0] itx_rdata;
  always_comb begin
    unique case (r.addr[7:0])
      8'd0:    itx_rdata = 32'(trusted_q);
      8'd1:    itx_rdata = 32'(exc_q);
      8'd3:    itx_rdata = 32'(quiescent);
      default: itx_rdata = '0;
    endcase
  end

  logic        itx_wr;
  assign itx_wr = go && tgt == T_ITX && r.we;

  // response bookkeeping
  logic [2:0]  rsp_src_q;
  target_e     rsp_tgt_q;
  logic [1:0]  rsp_sxp_q;
  logic        rsp_err_q;
  logic [31:0] rsp_itx_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trusted_q <= 1'b0;
      exc_q     <= '0;
      nm_req    <= 1'b0;
      rsp_src_q <= '0;
      rsp_tgt_q <= T_ITX;
      rsp_sxp_q <= '0;
      rsp_err_q <= 1'b0;
      rsp_itx_q <= '0;
    end else begin
      nm_req <= 1'b0;
      exc_q  <= exc_q | (trusted_q ? exc_in : '0);
      if (itx_wr) begin
        unique case (r.addr[7:0])
          8'd0: if (r.wdata[0]) trusted_q <= 1'b1;          // no way back but reset
          8'd1: exc_q <= (exc_q & ~r.wdata[4:0]) | (trusted_q ? exc_in : '0);
          8'd2: nm_req <= r.wdata[0];
          default: ;
        endcase
      end
      rsp_src_q <= gnt;
      rsp_tgt_q <= tgt;
      rsp_sxp_q <= r.addr[13:12] - 2'd1;
      rsp_err_q <= any && !allow;
      rsp_itx_q <= itx_rdata;
    end
  end

  assign trusted   = trusted_q;
  assign rsp_valid = rsp_src_q;
  assign rsp_err   = rsp_err_q;
  always_comb begin
    unique case (rsp_tgt_q)
      T_ITX:   rsp_rdata = rsp_itx_q;
      T_SXP:   rsp_rdata = sxp_rdata[rsp_sxp_q];
      default: rsp_rdata = ext_rdata;
    endcase
    if (rsp_err_q) rsp_rdata = '0;
  end

  assign sec_exception = trusted_q && (exc_q != '0);
  assign exception     = !trusted_q && ipu_exc;

  // the mode only ever goes from normal to trusted between resets
  assert property (@(posedge clk) disable iff (!rst_n) trusted_q |=> trusted_q);
endmodule
