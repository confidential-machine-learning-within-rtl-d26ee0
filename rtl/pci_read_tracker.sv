// pci_read_tracker: the PCI complex's table of outstanding tile reads, extended for ITX.
//
// A tile reads host memory with one read request and receives one or more read completions.
// The completions come from the untrusted host, so the fields that tell the ingress SXP how
// to decrypt them must not: when a read request leaves (after the egress SXP has set its
// KEY_INDEX and AES bit) this table records, under a fresh PCI tag, the source tile, the
// KEY_INDEX, the AES bit and the number of 16-byte blocks still to come. When a completion
// arrives, its tag selects the entry; the PCI complex writes the destination tile, KEY_INDEX
// and AES bit into the completion's header, sets CC on the completion that brings the last
// outstanding blocks, and frees the entry. The completion is then placed on the ingress lane
// that serves the destination tile's exchange block. A completion whose tag is not
// outstanding, or that brings more blocks than are pending, is dropped and reported
// (bad_cpl), since only the host can have produced it.
//
// Tags: each egress lane owns half of the 256 tags (tag = {lane, index}), so both lanes can
// issue a read request in the same cycle. rd_allow[l] drops while the free tags of lane l
// could not absorb the read requests already in flight between the lane arbiter and here
// (RD_MARGIN), so a request is never refused here. Write requests pass unchanged.
// Timing: one register stage in each direction. cpl_beat always carries the completion
// packet type, so those header bits are constant outputs. The paper gives the table's contents and
// the CC rule; tag count, margin and the pending-block count are this design's choices
// (it counts blocks, which fixes the number of completion packets).
module pci_read_tracker
  import itx_pkg::*;
#(
  parameter int unsigned TAGS_PER_LANE = 128,
  parameter int unsigned RD_MARGIN     = 24
) (
  input  logic          clk,
  input  logic          rst_n,
  // egress: from the two egress SXPs, to the host
  input  logic [1:0]    eg_valid,
  input  xbeat_t        eg_beat [2],
  output logic [1:0]    host_tx_valid,
  output xbeat_t        host_tx_beat [2],
  output logic [1:0]    rd_allow,
  // ingress: completions from the host, to the two ingress lanes
  input  logic          host_rx_valid,
  input  xbeat_t        host_rx_beat,
  output logic [1:0]    cpl_valid,
  output xbeat_t        cpl_beat,
  output logic          bad_cpl,
  output logic          idle
);
  localparam int unsigned IDX_W = $clog2(TAGS_PER_LANE);

  typedef struct packed {
    logic [TILE_W-1:0] tile;
    logic [KCTX_W-1:0] key_index;
    logic              aes;
    logic [LEN_W-1:0]  remaining;
  } entry_t;

  entry_t            tbl_q  [2][TAGS_PER_LANE];
  logic [TAGS_PER_LANE-1:0] busy_q [2];
  logic [IDX_W:0]    count_q [2];

  // ---------------------------------------------------------------- allocation
  logic [IDX_W-1:0] free_idx [2];
  logic [1:0]       alloc;
  always_comb begin
    for (int l = 0; l < 2; l++) begin
      free_idx[l] = '0;
      for (int i = TAGS_PER_LANE - 1; i >= 0; i--) if (!busy_q[l][i]) free_idx[l] = IDX_W'(i);
      alloc[l]    = eg_valid[l] && eg_beat[l].sop && eg_beat[l].hdr.ptype == PKT_RD_REQ;
      rd_allow[l] = 32'(count_q[l]) + RD_MARGIN < TAGS_PER_LANE;
    end
  end

  // ---------------------------------------------------------------- completion lookup
  typedef struct packed {
    logic              ok;
    logic [LEN_W-1:0]  rem;
    xhdr_t             hdr;
  } cpl_dec_t;

  cpl_dec_t cd, cd_q, cur;
  logic              c_lane;
  logic [IDX_W-1:0]  c_idx;
  entry_t            c_ent;
  always_comb begin
    c_lane = host_rx_beat.hdr.tag[TAG_W-1];
    c_idx  = host_rx_beat.hdr.tag[IDX_W-1:0];
    c_ent  = tbl_q[c_lane][c_idx];
    cd.hdr           = host_rx_beat.hdr;
    cd.hdr.ptype     = PKT_RD_CPL;
    cd.hdr.tile      = c_ent.tile;
    cd.hdr.key_index = c_ent.key_index;
    cd.hdr.aes       = c_ent.aes;
    cd.hdr.cc        = (host_rx_beat.hdr.len == c_ent.remaining);
    cd.rem           = c_ent.remaining - host_rx_beat.hdr.len;
    cd.ok            = busy_q[c_lane][c_idx] && host_rx_beat.hdr.len != '0 &&
                       host_rx_beat.hdr.len <= c_ent.remaining;
    cur = host_rx_beat.sop ? cd : cd_q;
  end

  logic free_now;
  assign free_now = host_rx_valid && host_rx_beat.sop && cd.ok && cd.hdr.cc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < 2; l++) begin
        busy_q[l]  <= '0;
        count_q[l] <= '0;
        for (int i = 0; i < TAGS_PER_LANE; i++) tbl_q[l][i] <= '0;
      end
      cd_q          <= '0;
      host_tx_valid <= '0;
      cpl_valid     <= '0;
      bad_cpl       <= 1'b0;
    end else begin
      // issue
      host_tx_valid <= eg_valid;
      for (int l = 0; l < 2; l++) begin
        if (alloc[l]) begin
          busy_q[l][free_idx[l]] <= 1'b1;
          tbl_q[l][free_idx[l]]  <= '{tile: eg_beat[l].hdr.tile, key_index: eg_beat[l].hdr.key_index,
                                      aes: eg_beat[l].hdr.aes, remaining: eg_beat[l].hdr.len};
        end
      end
      // complete
      if (host_rx_valid && host_rx_beat.sop) begin
        cd_q <= cd;
        if (cd.ok) begin
          tbl_q[c_lane][c_idx].remaining <= cd.rem;
          if (cd.hdr.cc) busy_q[c_lane][c_idx] <= 1'b0;
        end
      end
      for (int l = 0; l < 2; l++)
        count_q[l] <= count_q[l] + (IDX_W+1)'(alloc[l]) - (IDX_W+1)'(free_now && c_lane == 1'(l));
      cpl_valid <= '0;
      if (host_rx_valid && cur.ok)
        cpl_valid[(32'(cur.hdr.tile) / TILES_PER_XB) / XB_PER_LANE] <= 1'b1;
      bad_cpl <= host_rx_valid && host_rx_beat.sop && !cd.ok;
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < 2; l++) begin
      host_tx_beat[l] <= eg_beat[l];
      if (alloc[l]) host_tx_beat[l].hdr.tag <= {1'(l), (TAG_W-1)'(free_idx[l])};
    end
    cpl_beat     <= host_rx_beat;
    cpl_beat.hdr <= cur.hdr;
  end

  assign idle = (count_q[0] == '0) && (count_q[1] == '0);

  // a read request is never issued without a free tag
  for (genvar l = 0; l < 2; l++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) alloc[l] |-> !(&busy_q[l]))
      else $error("read tag table of lane %0d overflowed", l);
  end
endmodule
