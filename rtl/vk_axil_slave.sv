// vk_axil_slave -- AXI4-Lite register interface of validateKey.
//
// Decodes the low ADDR_W bits of each access into:
//   0x000 CTRL     bit0 ap_start (write 1 to start; reads 1 until the core
//                  accepts it), bit1 ap_done (set when a comparison ends,
//                  cleared by reading CTRL), bit2 ap_idle, bit3 ap_ready
//                  (set with ap_done, cleared by reading CTRL)
//   0x004 GIE      bit0 global interrupt enable
//   0x008 IER      bit0 done interrupt enable, bit1 ready interrupt enable
//   0x00C ISR      bit0 done, bit1 ready status; writing 1 toggles a bit
//   0x080..0x09C   input key, eight words, write-only (reads return 0 so
//                  the bus cannot read key material back)
//   0x100 DATA_OUT bit0 result of the last comparison (1 = key valid)
// Other addresses read 0 and ignore writes; every response is OKAY.
// interrupt = GIE & (ISR[0] | ISR[1]).
//
// The offsets of CTRL, the key and DATA_OUT are the published ones; the
// CTRL bit layout, GIE/IER/ISR and the interrupt behaviour follow the common
// layout of synthesised C cores and are this design's choice.
//
// Handshake: a write is taken when AWVALID and WVALID are both high and no
// write response is pending (AWREADY = WREADY for that cycle); BVALID
// follows one cycle later. A read is taken when ARVALID is high and no read
// data is pending; RVALID follows one cycle later. One outstanding access
// per direction. Nothing is accepted while rst_n is low.
module vk_axil_slave
  import vk_pkg::*;
#(
  parameter int unsigned ADDR_W = VK_ADDR_W,
  parameter int unsigned WORDS  = KEY_WORDS,
  localparam int unsigned WAW   = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  axil_req_t      s_axi_req,
  output axil_rsp_t      s_axi_rsp,
  // block-level handshake with the compare core
  output logic           ap_start,
  input  logic           ap_done,
  input  logic           ap_idle,
  input  logic           ap_ready,
  input  logic           result,
  // write port of the input-key memory
  output logic           key_we,
  output logic [WAW-1:0] key_waddr,
  output logic [31:0]    key_wdata,
  output logic [3:0]     key_wstrb,
  output logic           interrupt
);

  logic [ADDR_W-1:0] waddr, raddr;
  logic              wr_fire, rd_fire;
  logic              bvalid, rvalid;
  logic [31:0]       rdata;

  logic       start_r;
  logic       done_sticky, ready_sticky;
  logic       gie;
  logic [1:0] ier, isr;
  logic       result_r;

  assign waddr   = s_axi_req.awaddr[ADDR_W-1:0];
  assign raddr   = s_axi_req.araddr[ADDR_W-1:0];
  assign wr_fire = rst_n && s_axi_req.awvalid && s_axi_req.wvalid && !bvalid;
  assign rd_fire = rst_n && s_axi_req.arvalid && !rvalid;

  function automatic logic is_key(input logic [ADDR_W-1:0] a);
    return (a >= ADDR_KEY_BASE) && (a < ADDR_KEY_BASE + ADDR_W'(4 * WORDS));
  endfunction

  // ------------------------------------------------------------ key write
  assign key_we    = wr_fire && is_key(waddr);
  assign key_waddr = WAW'((waddr - ADDR_KEY_BASE) >> 2);
  assign key_wdata = s_axi_req.wdata;
  assign key_wstrb = s_axi_req.wstrb;

  // ------------------------------------------------------- control state
  wire wr_ctrl  = wr_fire && (waddr == ADDR_CTRL);
  wire rd_ctrl  = rd_fire && (raddr == ADDR_CTRL);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      start_r      <= 1'b0;
      done_sticky  <= 1'b0;
      ready_sticky <= 1'b0;
      gie          <= 1'b0;
      ier          <= 2'b00;
      isr          <= 2'b00;
      result_r     <= 1'b0;
    end else begin
      // ap_start: set by software, held until the core accepts it.
      if (wr_ctrl && s_axi_req.wstrb[0] && s_axi_req.wdata[CTRL_AP_START])
        start_r <= 1'b1;
      else if (start_r && ap_idle)
        start_r <= 1'b0;

      // done / ready: set by the core, cleared when CTRL is read.
      if (ap_done)      done_sticky  <= 1'b1;
      else if (rd_ctrl) done_sticky  <= 1'b0;
      if (ap_ready)     ready_sticky <= 1'b1;
      else if (rd_ctrl) ready_sticky <= 1'b0;

      if (ap_done) result_r <= result;

      if (wr_fire && waddr == ADDR_GIE && s_axi_req.wstrb[0]) gie <= s_axi_req.wdata[0];
      if (wr_fire && waddr == ADDR_IER && s_axi_req.wstrb[0]) ier <= s_axi_req.wdata[1:0];

      for (int i = 0; i < 2; i++) begin
        logic ev;
        ev = (i == 0) ? ap_done : ap_ready;
        if (ier[i] && ev)
          isr[i] <= 1'b1;
        else if (wr_fire && waddr == ADDR_ISR && s_axi_req.wstrb[0] && s_axi_req.wdata[i])
          isr[i] <= ~isr[i];
      end
    end
  end

  assign ap_start  = start_r;
  assign interrupt = gie && (|isr);

  // ------------------------------------------------------- AXI responses
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bvalid <= 1'b0;
      rvalid <= 1'b0;
      rdata  <= '0;
    end else begin
      if (wr_fire)                        bvalid <= 1'b1;
      else if (bvalid && s_axi_req.bready) bvalid <= 1'b0;

      if (rd_fire) begin
        rvalid <= 1'b1;
        unique case (raddr)
          ADDR_CTRL: begin
            rdata                <= '0;
            rdata[CTRL_AP_START] <= start_r;
            rdata[CTRL_AP_DONE]  <= done_sticky;
            rdata[CTRL_AP_IDLE]  <= ap_idle;
            rdata[CTRL_AP_READY] <= ready_sticky;
          end
          ADDR_GIE:      rdata <= {31'd0, gie};
          ADDR_IER:      rdata <= {30'd0, ier};
          ADDR_ISR:      rdata <= {30'd0, isr};
          ADDR_DATA_OUT: rdata <= {31'd0, result_r};
          default:       rdata <= '0;
        endcase
      end else if (rvalid && s_axi_req.rready) begin
        rvalid <= 1'b0;
      end
    end
  end

  always_comb begin
    s_axi_rsp         = '0;
    s_axi_rsp.awready = wr_fire;
    s_axi_rsp.wready  = wr_fire;
    s_axi_rsp.bvalid  = bvalid;
    s_axi_rsp.bresp   = RESP_OKAY;
    s_axi_rsp.arready = rd_fire;
    s_axi_rsp.rvalid  = rvalid;
    s_axi_rsp.rdata   = rdata;
    s_axi_rsp.rresp   = RESP_OKAY;
  end

  // AXI rule: a response, once valid, stays valid until it is taken.
  a_bvalid_stable: assert property (@(posedge clk) disable iff (!rst_n)
    bvalid && !s_axi_req.bready |=> bvalid);
  a_rvalid_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rvalid && !s_axi_req.rready |=> rvalid && $stable(rdata));

endmodule
