// proc_sys_reset -- reset sequencer for the programmable-logic clock domain.
//
// Collects every reason to hold the logic in reset (ext_reset_in or
// aux_reset_in low, mb_debug_sys_rst high, or dcm_locked low), brings that
// condition into the slowest_sync_clk domain through a two-flop
// synchroniser, and releases the outputs in order once it has been clear
// for HOLD_CYCLES cycles:
//   1. bus_struct_reset and interconnect_aresetn,
//   2. peripheral_reset and peripheral_aresetn, HOLD_CYCLES later,
//   3. mb_reset, HOLD_CYCLES after that.
// Any reset condition puts all outputs into reset at once (asynchronous
// assertion) and restarts the sequence; release is synchronous to the
// clock. Outputs come straight from flip-flops, so they do not glitch.
//
// The port names are the published ones, and the block's role of handling
// the system resets is as published. The release order, the hold time and
// the synchroniser are this design's choices, modelled on the usual vendor
// reset block.
module proc_sys_reset #(
  parameter int unsigned HOLD_CYCLES = 16,
  localparam int unsigned CW = $clog2(3 * HOLD_CYCLES + 1)
) (
  input  logic slowest_sync_clk,
  input  logic ext_reset_in,       // active low
  input  logic aux_reset_in,       // active low
  input  logic mb_debug_sys_rst,   // active high
  input  logic dcm_locked,
  output logic mb_reset,
  output logic bus_struct_reset,
  output logic peripheral_reset,
  output logic interconnect_aresetn,
  output logic peripheral_aresetn
);

  logic          rst_req;
  logic [1:0]    sync;
  logic [CW-1:0] cnt;

  assign rst_req = !ext_reset_in || !aux_reset_in || mb_debug_sys_rst || !dcm_locked;

  // Reset is applied asynchronously (as soon as rst_req rises) and released
  // synchronously, so the outputs are in reset from the first instant a
  // source is active, even before the clock runs.
  always_ff @(posedge slowest_sync_clk or posedge rst_req) begin
    if (rst_req) sync <= 2'b11;
    else         sync <= {sync[0], 1'b0};
  end

  // cnt counts cycles since the synchronised request went away, saturating
  // at 3*HOLD_CYCLES when everything is released.
  always_ff @(posedge slowest_sync_clk or posedge rst_req) begin
    if (rst_req) begin
      cnt                  <= '0;
      bus_struct_reset     <= 1'b1;
      interconnect_aresetn <= 1'b0;
      peripheral_reset     <= 1'b1;
      peripheral_aresetn   <= 1'b0;
      mb_reset             <= 1'b1;
    end else if (sync[1]) begin
      cnt                  <= '0;
      bus_struct_reset     <= 1'b1;
      interconnect_aresetn <= 1'b0;
      peripheral_reset     <= 1'b1;
      peripheral_aresetn   <= 1'b0;
      mb_reset             <= 1'b1;
    end else begin
      if (int'(cnt) < 3 * HOLD_CYCLES) cnt <= cnt + 1'b1;
      bus_struct_reset     <= !(int'(cnt) >= HOLD_CYCLES);
      interconnect_aresetn <=  (int'(cnt) >= HOLD_CYCLES);
      peripheral_reset     <= !(int'(cnt) >= 2 * HOLD_CYCLES);
      peripheral_aresetn   <=  (int'(cnt) >= 2 * HOLD_CYCLES);
      mb_reset             <= !(int'(cnt) >= 3 * HOLD_CYCLES);
    end
  end

endmodule
