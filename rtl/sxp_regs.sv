// sxp_regs: the control registers of one Secure Exchange Pipe, on the internal control bus.
//
// Holds the key-selection tables and takes the AES keys: KXBCTXMAP (16 x 4 bits, exchange-
// block context -> physical key context), KPHYSMAP (16 x 5 bits, physical key context ->
// key region), KSELLIMIT (17 x 32 bits, key region limits) and the 16 key contexts. A 256-bit
// key is written as eight 32-bit words, most significant first, into a staging register;
// writing word 7 commits it to the addressed context of the GCM engine (kw_valid pulse),
// which then derives the GHASH key. Keys are write-only: reads of the key space return 0.
// Writing 1 to CTL word 0 disables all keys (used when a TEE is torn down); CTL word 1 reads
// the key-valid mask. Reset clears every register, so a chip reset scrubs all key material.
//
// Bus: one request per cycle (valid, we, word address, wdata), read data the next cycle,
// never stalls. Address bits [11:8] select the space (itx_pkg SXP_SPACE_*), bits [7:0] the
// entry. The paper names the three register sets and says keys are loaded through control
// registers; the map and the staging scheme are this design's own.
module sxp_regs
  import itx_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                req_valid,
  input  logic                req_we,
  input  logic [11:0]         req_addr,
  input  logic [31:0]         req_wdata,
  output logic [31:0]         rdata,
  output logic [KCTX_W-1:0]   kxbctxmap [NUM_XBCTX],
  output logic [REGION_W-1:0] kphysmap  [NUM_KCTX],
  output logic [ADDR_W-1:0]   ksellimit [NUM_REGIONS],
  output logic                kw_valid,
  output logic [KCTX_W-1:0]   kw_ctx,
  output logic [255:0]        kw_key,
  output logic                key_clear,
  input  logic [NUM_KCTX-1:0] key_valid
);
  logic [3:0] space;
  logic [7:0] idx;
  assign space = req_addr[11:8];
  assign idx   = req_addr[7:0];

  logic [255:0] stage_q;
  logic wr;
  assign wr = req_valid && req_we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_XBCTX; i++)   kxbctxmap[i] <= '0;
      for (int i = 0; i < NUM_KCTX; i++)    kphysmap[i]  <= '0;
      for (int i = 0; i < NUM_REGIONS; i++) ksellimit[i] <= '0;
      stage_q   <= '0;
      kw_valid  <= 1'b0;
      kw_ctx    <= '0;
      key_clear <= 1'b0;
      rdata     <= '0;
    end else begin
      kw_valid  <= 1'b0;
      key_clear <= 1'b0;
      if (wr) begin
        unique case (space)
          SXP_SPACE_KEY: begin
            if (idx[2:0] == 3'd7) begin
              kw_valid <= 1'b1;
              kw_ctx   <= idx[6:3];
              stage_q  <= '0;   // do not keep key material around
            end else begin
              stage_q[255 - 32*idx[2:0] -: 32] <= req_wdata;
            end
          end
          SXP_SPACE_XBCTX: if (idx < 8'(NUM_XBCTX))   kxbctxmap[idx[3:0]] <= req_wdata[KCTX_W-1:0];
          SXP_SPACE_PHYS:  if (idx < 8'(NUM_KCTX))    kphysmap[idx[3:0]]  <= req_wdata[REGION_W-1:0];
          SXP_SPACE_LIMIT: if (idx < 8'(NUM_REGIONS)) ksellimit[idx[4:0]] <= req_wdata;
          SXP_SPACE_CTL:   if (idx == 8'd0 && req_wdata[0]) key_clear <= 1'b1;
          default: ;
        endcase
      end
      if (req_valid && !req_we) begin
        unique case (space)
          SXP_SPACE_XBCTX: rdata <= (idx < 8'(NUM_XBCTX))   ? 32'(kxbctxmap[idx[3:0]]) : '0;
          SXP_SPACE_PHYS:  rdata <= (idx < 8'(NUM_KCTX))    ? 32'(kphysmap[idx[3:0]])  : '0;
          SXP_SPACE_LIMIT: rdata <= (idx < 8'(NUM_REGIONS)) ? ksellimit[idx[4:0]]      : '0;
          SXP_SPACE_CTL:   rdata <= (idx == 8'd1) ? 32'(key_valid) : '0;
          default:         rdata <= '0;
        endcase
      end
    end
  end

  // the key of the commit cycle: staged words 0..6 plus word 7 from the bus
  logic [255:0] key_next_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) key_next_q <= '0;
    else if (wr && space == SXP_SPACE_KEY && idx[2:0] == 3'd7) key_next_q <= {stage_q[255:32], req_wdata};
    else key_next_q <= '0;
  end
  assign kw_key = key_next_q;
endmodule
