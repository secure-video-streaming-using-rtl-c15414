// secure_stream_pl -- programmable-logic side of the secure camera node.
//
// The edge device streams camera frames only after the user's key has been
// checked, and the check runs in the fabric so that the reference key never
// sits in processor memory. This top wires the fabric half of the block
// design:
//   rst_ps8_0_100M     proc_sys_reset: sequences the fabric reset from the
//                      processor's pl_resetn0,
//   axi_interconnect_0 axil_interconnect: joins the processor's AXI master
//                      port to the one slave,
//   validateKey_0      validate_key: the key-check block.
// The processor itself (clock pl_clk0, reset pl_resetn0, master port
// M_AXI_HPM0_FPD) is outside and reaches this module through its ports.
// The interconnect takes its reset from interconnect_aresetn and validateKey
// from peripheral_aresetn; the unused inputs of the reset block are tied
// inactive.
//
// Software view (addresses with the default BASE_ADDR 0xA000_0000):
// write the key to 0xA000_0080..0xA000_009C, write 1 to 0xA000_0000, poll
// 0xA000_0000 for bit 1 (or wait for interrupt after enabling it), read bit 0
// of 0xA000_0100. Accesses outside the 64 KiB window get DECERR.
//
// Timing: after pl_resetn0 rises, the interconnect leaves reset 18 cycles
// later and validateKey 34 cycles later (2 synchroniser + 16/32 hold).
module secure_stream_pl
  import vk_pkg::*;
#(
  parameter logic [31:0]         BASE_ADDR    = 32'hA000_0000,
  parameter int unsigned         WINDOW_BYTES = 65536,
  parameter int unsigned         HOLD_CYCLES  = 16,
  parameter logic [KEY_BITS-1:0] SECRET_KEY   = DEFAULT_SECRET_KEY
) (
  input  logic      pl_clk0,
  input  logic      pl_resetn0,
  input  axil_req_t M_AXI_HPM0_FPD_req,
  output axil_rsp_t M_AXI_HPM0_FPD_rsp,
  output logic      interrupt
);

  logic      interconnect_aresetn, peripheral_aresetn;
  logic      mb_reset, bus_struct_reset, peripheral_reset;
  axil_req_t m00_req;
  axil_rsp_t m00_rsp;

  proc_sys_reset #(
    .HOLD_CYCLES (HOLD_CYCLES)
  ) rst_ps8_0_100M (
    .slowest_sync_clk     (pl_clk0),
    .ext_reset_in         (pl_resetn0),
    .aux_reset_in         (1'b1),
    .mb_debug_sys_rst     (1'b0),
    .dcm_locked           (1'b1),
    .mb_reset             (mb_reset),
    .bus_struct_reset     (bus_struct_reset),
    .peripheral_reset     (peripheral_reset),
    .interconnect_aresetn (interconnect_aresetn),
    .peripheral_aresetn   (peripheral_aresetn)
  );

  axil_interconnect #(
    .BASE_ADDR    (BASE_ADDR),
    .WINDOW_BYTES (WINDOW_BYTES)
  ) axi_interconnect_0 (
    .aclk    (pl_clk0),
    .aresetn (interconnect_aresetn),
    .s00_req (M_AXI_HPM0_FPD_req),
    .s00_rsp (M_AXI_HPM0_FPD_rsp),
    .m00_req (m00_req),
    .m00_rsp (m00_rsp)
  );

  validate_key #(
    .SECRET_KEY (SECRET_KEY)
  ) validateKey_0 (
    .ap_clk           (pl_clk0),
    .ap_rst_n         (peripheral_aresetn),
    .s_axi_M_AXI0_req (m00_req),
    .s_axi_M_AXI0_rsp (m00_rsp),
    .interrupt        (interrupt)
  );

endmodule
