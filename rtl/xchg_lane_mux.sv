// xchg_lane_mux: connects one exchange lane to the four exchange blocks it serves.
//
// The external exchange has four lanes between the PCI complex and the exchange blocks, two
// per direction, with an SXP on each. An egress lane collects the requests of four exchange
// blocks; an ingress lane delivers completions to them. Traffic is steered by exchange block
// identifier: a completion goes to the exchange block that owns its destination tile
// (tile / 184, 1472 tiles over 8 exchange blocks).
//
// Egress: round-robin arbitration between the four exchange blocks, one whole packet at a
// time, so that packets stay contiguous on the lane (the SXP classifies blocks by packet).
// Each exchange block offers beats with valid/ready. A read request is only granted while
// rd_allow is high: the PCI complex lowers it when its read-tag table could overflow.
// The output is registered: a beat appears on the lane one cycle after its handshake.
// Ingress: the lane's beat is registered and presented to the exchange block owning the tile.
//
// The paper gives the lane/exchange-block topology (four blocks per SXP) and the steering
// rule; the arbitration policy and handshake are this design's own.
module xchg_lane_mux
  import itx_pkg::*;
#(
  parameter int unsigned LANE = 0      // this lane serves exchange blocks 4*LANE .. 4*LANE+3
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // egress: exchange blocks -> lane
  input  logic [XB_PER_LANE-1:0] xb_tx_valid,
  input  xbeat_t                 xb_tx_beat [XB_PER_LANE],
  output logic [XB_PER_LANE-1:0] xb_tx_ready,
  input  logic                   rd_allow,
  output logic                   eg_valid,
  output xbeat_t                 eg_beat,
  // ingress: lane -> exchange blocks
  input  logic                   in_valid,
  input  xbeat_t                 in_beat,
  output logic [XB_PER_LANE-1:0] xb_rx_valid,
  output xbeat_t                 xb_rx_beat
);
  localparam int unsigned SEL_W = $clog2(XB_PER_LANE);

  logic             locked_q;
  logic [SEL_W-1:0] grant_q, rr_q, pick;
  logic             pick_ok;

  // next requester after the last one served whose head beat may go
  always_comb begin
    pick    = '0;
    pick_ok = 1'b0;
    for (int k = XB_PER_LANE; k >= 1; k--) begin
      logic [SEL_W-1:0] c;
      c = SEL_W'((32'(rr_q) + 32'(k)) % XB_PER_LANE);
      if (xb_tx_valid[c] && xb_tx_beat[c].sop &&
          (xb_tx_beat[c].hdr.ptype != PKT_RD_REQ || rd_allow)) begin
        pick    = c;
        pick_ok = 1'b1;
      end
    end
  end

  logic [SEL_W-1:0] sel;
  logic             sel_ok;
  always_comb begin
    sel         = locked_q ? grant_q : pick;
    sel_ok      = locked_q || pick_ok;
    xb_tx_ready = '0;
    if (sel_ok) xb_tx_ready[sel] = 1'b1;
  end

  logic fire;
  assign fire = sel_ok && xb_tx_valid[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked_q <= 1'b0;
      grant_q  <= '0;
      rr_q     <= '0;
      eg_valid <= 1'b0;
    end else begin
      eg_valid <= fire;
      if (fire) begin
        if (xb_tx_beat[sel].eop) begin
          locked_q <= 1'b0;
          rr_q     <= sel;
        end else begin
          locked_q <= 1'b1;
          grant_q  <= sel;
        end
      end
    end
  end
  always_ff @(posedge clk) eg_beat <= xb_tx_beat[sel];

  // ingress steering by destination tile
  int unsigned dst_xb;
  always_comb dst_xb = 32'(in_beat.hdr.tile) / TILES_PER_XB;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) xb_rx_valid <= '0;
    else begin
      xb_rx_valid <= '0;
      if (in_valid && dst_xb / XB_PER_LANE == LANE) xb_rx_valid[dst_xb % XB_PER_LANE] <= 1'b1;
    end
  end
  always_ff @(posedge clk) xb_rx_beat <= in_beat;

  // a granted exchange block keeps its packet contiguous
  assert property (@(posedge clk) disable iff (!rst_n) locked_q |-> !(fire && xb_tx_beat[sel].sop))
    else $error("packet interleaved on lane %0d", LANE);
endmodule
