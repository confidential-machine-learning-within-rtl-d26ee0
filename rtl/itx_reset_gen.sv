// itx_reset_gen: device-logic reset of the IPU, from the chip reset and the Newmanry reset.
//
// Two resets return an IPU in trusted mode to normal mode: the chip (board / secondary bus)
// reset, and the Newmanry reset that the CCU requests through a control register when it
// terminates a TEE. Both clear the trusted-mode register and every SXP register, keys
// included. This block holds dev_rst_n low while chip_rst_n is low and for HOLD_CYCLES cycles
// after a Newmanry request, and releases it synchronously to clk (assertion is immediate).
// The request register itself is cleared by the reset it causes.
// The two resets come from the paper; the hold time and synchronizer are this design's own.
module itx_reset_gen #(
  parameter int unsigned HOLD_CYCLES = 8
) (
  input  logic clk,
  input  logic chip_rst_n,
  input  logic nm_req,        // one-cycle Newmanry reset request
  output logic dev_rst_n
);
  logic [$clog2(HOLD_CYCLES+1)-1:0] cnt_q;
  logic [1:0] sync_q;

  always_ff @(posedge clk or negedge chip_rst_n) begin
    if (!chip_rst_n)  cnt_q <= '0;
    else if (nm_req)  cnt_q <= $bits(cnt_q)'(HOLD_CYCLES);
    else if (cnt_q != '0) cnt_q <= cnt_q - 1'b1;
  end

  logic hold;
  assign hold = nm_req || (cnt_q != '0);

  always_ff @(posedge clk or negedge chip_rst_n) begin
    if (!chip_rst_n) sync_q <= '0;
    else if (hold)   sync_q <= '0;
    else             sync_q <= {sync_q[0], 1'b1};
  end
  assign dev_rst_n = sync_q[1] && chip_rst_n;   // chip reset also asserts it combinationally
endmodule
