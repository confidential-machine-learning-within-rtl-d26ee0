// itx_top: the IPU Trusted Extensions (ITX) datapath between the PCI complex and the
// exchange blocks, with the trusted-mode control.
//
// Data path (one IPU): eight exchange blocks sit on four exchange lanes. Exchange blocks
// 0-3 send requests on egress lane 0 and receive completions on ingress lane 0; blocks 4-7
// use lanes 1. Each lane carries a Secure Exchange Pipe:
//   exchange blocks -> xchg_lane_mux -> egress SXP (encrypt writes, KEY_INDEX on requests)
//     -> pci_read_tracker (records reads, assigns tags) -> host_tx[lane]
//   host_rx (read completions) -> pci_read_tracker (restores tile/KEY_INDEX/AES, sets CC)
//     -> ingress SXP of the tile's lane (decrypt, check tag) -> xchg_lane_mux -> exchange block
// Control path: host, ICU and CCU register requests -> itx_ctrl, which owns trusted mode,
// lets only the CCU program the SXPs, shuts the host out in trusted mode and routes
// security exceptions to the CCU pin. A Newmanry reset requested there resets all of this
// logic through itx_reset_gen (keys and trusted mode are cleared); dev_rst_n is also an
// output so the rest of the IPU can reset with it.
// Parts of the IPU that the extensions connect to but do not change are outside: tiles and
// exchange blocks (xb_* ports), the PCI controller and host exchange (host_* ports), the
// existing control port (ext_* ports), the ICU and CCU (cbus ports and exception pins).
// Latencies: exchange block to host 1 (lane) + 17 (SXP) + 1 (tracker) = 19 cycles; host to
// exchange block 1 + 17 + 1 = 19 cycles; one 16-byte block per cycle per lane.
module itx_top
  import itx_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,             // chip reset
  // exchange blocks
  input  logic [NUM_XB-1:0] xb_tx_valid,
  input  xbeat_t            xb_tx_beat [NUM_XB],
  output logic [NUM_XB-1:0] xb_tx_ready,
  output logic [NUM_XB-1:0] xb_rx_valid,
  output xbeat_t            xb_rx_beat [NUM_LANES],   // shared by the blocks of a lane
  // host side (PCI complex)
  output logic [NUM_LANES-1:0] host_tx_valid,
  output xbeat_t               host_tx_beat [NUM_LANES],
  input  logic                 host_rx_valid,
  input  xbeat_t               host_rx_beat,
  // register requests: 0 host, 1 ICU, 2 CCU
  input  cbus_req_t    cbus_req [3],
  output logic [2:0]   cbus_gnt,
  output logic [2:0]   cbus_rsp_valid,
  output logic [31:0]  cbus_rsp_rdata,
  output logic         cbus_rsp_err,
  // existing IPU control port
  output cbus_req_t    ext_req,
  input  logic [31:0]  ext_rdata,
  // exceptions, mode, reset
  input  logic         ipu_exc,
  output logic         sec_exception,     // to the CCU
  output logic         exception,         // to the ICU
  output logic         trusted,
  output logic         dev_rst_n
);
  logic nm_req;

  itx_reset_gen u_rst (.clk, .chip_rst_n(rst_n), .nm_req, .dev_rst_n);

  // ------------------------------------------------------------ control
  logic [3:0]  sxp_req_valid;
  logic        sxp_req_we;
  logic [11:0] sxp_req_addr;
  logic [31:0] sxp_req_wdata;
  logic [31:0] sxp_rdata [4];
  logic [2:0]  sxp_exc_cause [4];
  logic [3:0]  sxp_idle;
  logic        trk_idle, bad_cpl;

  itx_ctrl u_ctrl (
    .clk, .rst_n(dev_rst_n),
    .req(cbus_req), .gnt(cbus_gnt), .rsp_valid(cbus_rsp_valid), .rsp_rdata(cbus_rsp_rdata),
    .rsp_err(cbus_rsp_err),
    .sxp_req_valid, .sxp_req_we, .sxp_req_addr, .sxp_req_wdata, .sxp_rdata,
    .ext_req, .ext_rdata,
    .sxp_exc_cause, .bad_cpl, .ipu_exc, .quiescent(trk_idle && (&sxp_idle)),
    .trusted, .sec_exception, .exception, .nm_req
  );

  // ------------------------------------------------------------ lanes
  logic [NUM_LANES-1:0] lane_eg_valid, sxp_eg_valid, lane_in_valid, sxp_in_valid, rd_allow;
  xbeat_t               lane_eg_beat [NUM_LANES];
  xbeat_t               sxp_eg_beat  [NUM_LANES];
  xbeat_t               sxp_in_beat  [NUM_LANES];
  xbeat_t               cpl_beat;

  for (genvar l = 0; l < NUM_LANES; l++) begin : g_lane
    xbeat_t xb_beats [XB_PER_LANE];
    for (genvar j = 0; j < XB_PER_LANE; j++) begin : g_xb
      assign xb_beats[j] = xb_tx_beat[l*XB_PER_LANE + j];
    end

    xchg_lane_mux #(.LANE(l)) u_mux (
      .clk, .rst_n(dev_rst_n),
      .xb_tx_valid(xb_tx_valid[l*XB_PER_LANE +: XB_PER_LANE]), .xb_tx_beat(xb_beats),
      .xb_tx_ready(xb_tx_ready[l*XB_PER_LANE +: XB_PER_LANE]), .rd_allow(rd_allow[l]),
      .eg_valid(lane_eg_valid[l]), .eg_beat(lane_eg_beat[l]),
      .in_valid(sxp_in_valid[l]), .in_beat(sxp_in_beat[l]),
      .xb_rx_valid(xb_rx_valid[l*XB_PER_LANE +: XB_PER_LANE]), .xb_rx_beat(xb_rx_beat[l])
    );

    // SXP numbering: 0,1 egress (lanes 0,1), 2,3 ingress (lanes 0,1)
    sxp #(.EGRESS(1'b1)) u_sxp_eg (
      .clk, .rst_n(dev_rst_n), .trusted,
      .req_valid(sxp_req_valid[l]), .req_we(sxp_req_we), .req_addr(sxp_req_addr),
      .req_wdata(sxp_req_wdata), .rdata(sxp_rdata[l]),
      .in_valid(lane_eg_valid[l]), .in_beat(lane_eg_beat[l]),
      .out_valid(sxp_eg_valid[l]), .out_beat(sxp_eg_beat[l]),
      .exc_cause(sxp_exc_cause[l]), .idle(sxp_idle[l])
    );

    sxp #(.EGRESS(1'b0)) u_sxp_in (
      .clk, .rst_n(dev_rst_n), .trusted,
      .req_valid(sxp_req_valid[2+l]), .req_we(sxp_req_we), .req_addr(sxp_req_addr),
      .req_wdata(sxp_req_wdata), .rdata(sxp_rdata[2+l]),
      .in_valid(lane_in_valid[l]), .in_beat(cpl_beat),
      .out_valid(sxp_in_valid[l]), .out_beat(sxp_in_beat[l]),
      .exc_cause(sxp_exc_cause[2+l]), .idle(sxp_idle[2+l])
    );
  end

  // ------------------------------------------------------------ PCI complex read table
  pci_read_tracker u_trk (
    .clk, .rst_n(dev_rst_n),
    .eg_valid(sxp_eg_valid), .eg_beat(sxp_eg_beat),
    .host_tx_valid, .host_tx_beat, .rd_allow,
    .host_rx_valid, .host_rx_beat,
    .cpl_valid(lane_in_valid), .cpl_beat, .bad_cpl, .idle(trk_idle)
  );
endmodule
