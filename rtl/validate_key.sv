// validate_key -- the custom authentication block (validateKey).
//
// The processor writes a 256-bit candidate key into the block over
// AXI4-Lite (eight 32-bit words at offset 0x080), writes 1 to CTRL (0x000)
// and, once CTRL reports done or the interrupt fires, reads the result from
// DATA_OUT (0x100): 1 if the candidate equals the reference key compiled
// into the logic, else 0. The reference key is never readable.
//
// Structure: vk_axil_slave (registers and bus handshake) writes
// vk_key_ram (candidate key); vk_key_compare reads the memory and compares
// byte by byte against SECRET_KEY.
//
// Timing: 34 ap_clk cycles from the start being taken to done with a
// 256-bit key (published latency of the original core), plus one cycle for
// the register interface to pass the start bit on. Port names (ap_clk,
// ap_rst_n, s_axi_M_AXI0, interrupt) are the published ones; the AXI bundle
// is carried as two structs.
module validate_key
  import vk_pkg::*;
#(
  parameter logic [KEY_BITS-1:0] SECRET_KEY = DEFAULT_SECRET_KEY
) (
  input  logic      ap_clk,
  input  logic      ap_rst_n,
  input  axil_req_t s_axi_M_AXI0_req,
  output axil_rsp_t s_axi_M_AXI0_rsp,
  output logic      interrupt
);

  localparam int unsigned WAW = $clog2(KEY_WORDS);

  logic           ap_start, ap_done, ap_idle, ap_ready, result;
  logic           key_we, key_re;
  logic [WAW-1:0] key_waddr, key_raddr;
  logic [31:0]    key_wdata, key_rdata;
  logic [3:0]     key_wstrb;

  vk_axil_slave #(
    .ADDR_W (VK_ADDR_W),
    .WORDS  (KEY_WORDS)
  ) u_regs (
    .clk       (ap_clk),
    .rst_n     (ap_rst_n),
    .s_axi_req (s_axi_M_AXI0_req),
    .s_axi_rsp (s_axi_M_AXI0_rsp),
    .ap_start  (ap_start),
    .ap_done   (ap_done),
    .ap_idle   (ap_idle),
    .ap_ready  (ap_ready),
    .result    (result),
    .key_we    (key_we),
    .key_waddr (key_waddr),
    .key_wdata (key_wdata),
    .key_wstrb (key_wstrb),
    .interrupt (interrupt)
  );

  vk_key_ram #(
    .WORDS (KEY_WORDS)
  ) u_key_ram (
    .clk   (ap_clk),
    .we    (key_we),
    .waddr (key_waddr),
    .wdata (key_wdata),
    .wstrb (key_wstrb),
    .re    (key_re),
    .raddr (key_raddr),
    .rdata (key_rdata)
  );

  vk_key_compare #(
    .KEY_BYTES  (KEY_BYTES),
    .SECRET_KEY (SECRET_KEY)
  ) u_compare (
    .clk         (ap_clk),
    .rst_n       (ap_rst_n),
    .ap_start    (ap_start),
    .ap_done     (ap_done),
    .ap_idle     (ap_idle),
    .ap_ready    (ap_ready),
    .key_rd_en   (key_re),
    .key_rd_addr (key_raddr),
    .key_rd_data (key_rdata),
    .result      (result)
  );

endmodule
