// vk_pkg -- shared types and constants of the key-validation subsystem.
//
// The subsystem lets the application processor prove it holds a 256-bit
// key without the reference key ever leaving the programmable logic: the
// processor writes a candidate key into the validateKey block over
// AXI4-Lite, starts it, and reads back a single pass/fail bit.
//
// This package holds:
//   * the AXI4-Lite bundle, split into a master-to-slave struct
//     (axil_req_t) and a slave-to-master struct (axil_rsp_t), 32-bit
//     address and data;
//   * the register map of validateKey. The three offsets CTRL (0x000),
//     KEY (0x080) and DATA_OUT (0x100) are the published ones; GIE, IER and
//     ISR and the bit positions inside CTRL follow the usual high-level
//     synthesis block-level control layout and are this design's choice;
//   * the default secret key, the value the reference tests use as the
//     correct key. Byte j of the key is the j-th pair of hex digits counted
//     from the left, and sits at byte address KEY + j.
package vk_pkg;

  // ---------------------------------------------------------------- key
  localparam int unsigned KEY_BITS  = 256;
  localparam int unsigned KEY_BYTES = KEY_BITS / 8;
  localparam int unsigned KEY_WORDS = KEY_BITS / 32;

  localparam logic [KEY_BITS-1:0] DEFAULT_SECRET_KEY =
    256'h7336763979244226452948404d635166546a576e5a7234753777217a25432a46;

  // ------------------------------------------------------- register map
  localparam int unsigned VK_ADDR_W = 9;
  localparam logic [VK_ADDR_W-1:0] ADDR_CTRL     = 9'h000;
  localparam logic [VK_ADDR_W-1:0] ADDR_GIE      = 9'h004;
  localparam logic [VK_ADDR_W-1:0] ADDR_IER      = 9'h008;
  localparam logic [VK_ADDR_W-1:0] ADDR_ISR      = 9'h00C;
  localparam logic [VK_ADDR_W-1:0] ADDR_KEY_BASE = 9'h080;
  localparam logic [VK_ADDR_W-1:0] ADDR_DATA_OUT = 9'h100;

  // CTRL register bits
  localparam int unsigned CTRL_AP_START = 0;
  localparam int unsigned CTRL_AP_DONE  = 1;
  localparam int unsigned CTRL_AP_IDLE  = 2;
  localparam int unsigned CTRL_AP_READY = 3;

  // ------------------------------------------------------------ AXI4-Lite
  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_EXOKAY = 2'b01,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } axi_resp_e;

  typedef struct packed {
    logic [31:0] awaddr;
    logic [2:0]  awprot;
    logic        awvalid;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
    logic        wvalid;
    logic        bready;
    logic [31:0] araddr;
    logic [2:0]  arprot;
    logic        arvalid;
    logic        rready;
  } axil_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    axi_resp_e   bresp;
    logic        bvalid;
    logic        arready;
    logic [31:0] rdata;
    axi_resp_e   rresp;
    logic        rvalid;
  } axil_rsp_t;

endpackage
