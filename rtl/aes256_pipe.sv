// aes256_pipe: fully pipelined AES-256 block encryption, one block per clock.
//
// The GCM engine of each Secure Exchange Pipe needs the AES block cipher at PCIe line rate:
// 16 GB/s per SXP is one 16-byte block per cycle at about 1 GHz, so the cipher is unrolled
// into one register stage for the initial AddRoundKey and one per round (14 for AES-256).
// The key travels down the pipe with its block and the key schedule is expanded on the fly:
// each stage holds the two most recent round keys (256 bits) and derives the next one, so
// every block may use a different key, which is what lets the GCM engine switch key
// contexts from one cycle to the next. Only encryption is needed (GCM uses the forward
// cipher for both directions).
//
// Interface: in_valid/in_block/in_key/in_meta are sampled every clock; out_* appear exactly
// LATENCY = 15 clocks later, in order. in_meta is carried unchanged alongside the block for
// the caller's bookkeeping. There is no back-pressure: the pipe never stalls.
// The paper specifies the algorithm (AES-256, standard) and that the engine is fully
// pipelined; the stage split and the on-the-fly key expansion are this design's choices.
module aes256_pipe
  import itx_pkg::*;
#(
  parameter int unsigned META_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [127:0]      in_block,
  input  logic [255:0]      in_key,
  input  logic [META_W-1:0] in_meta,
  output logic              out_valid,
  output logic [127:0]      out_block,
  output logic [META_W-1:0] out_meta
);
  localparam int unsigned NR = 14;

  logic [127:0]      st   [NR+1];
  logic [255:0]      win  [NR+1];   // {round key r-1, round key r} entering stage r
  logic              vld  [NR+1];
  logic [META_W-1:0] meta [NR+1];

  // stage 0: initial AddRoundKey with round key 0
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld[0] <= 1'b0;
    else        vld[0] <= in_valid;
  end
  always_ff @(posedge clk) begin
    st[0]   <= in_block ^ in_key[255:128];
    win[0]  <= in_key;
    meta[0] <= in_meta;
  end

  // stages 1..14: one round each, next round key expanded alongside
  for (genvar r = 1; r <= NR; r++) begin : g_round
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[r] <= 1'b0;
      else        vld[r] <= vld[r-1];
    end
    always_ff @(posedge clk) begin
      st[r]   <= aes_round(st[r-1], win[r-1][127:0], r == NR);
      meta[r] <= meta[r-1];
      if (r < NR) win[r] <= {win[r-1][127:0], next_round_key(win[r-1][255:128], win[r-1][127:0], r + 1)};
      else        win[r] <= win[r-1];
    end
  end

  assign out_valid = vld[NR];
  assign out_block = st[NR];
  assign out_meta  = meta[NR];
endmodule
