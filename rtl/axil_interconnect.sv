// axil_interconnect -- one-master, one-slave AXI4-Lite interconnect.
//
// Sits between the processor's AXI master port (S00) and the validateKey
// slave (M00). An access whose address lies in
// [BASE_ADDR, BASE_ADDR + WINDOW_BYTES) is registered and forwarded to M00
// with its address unchanged; the slave's response is registered and
// returned. Any other address is answered locally with DECERR (reads return
// 0) and never reaches the slave.
//
// Handshake: per direction one transaction at a time. A write is taken from
// S00 when AWVALID and WVALID are both high and the write path is idle; AW
// and W are then offered to M00 (each until its READY), the B response is
// awaited and passed back. A read is taken when ARVALID is high and the read
// path is idle, AR is offered to M00, and R is passed back. Each direction
// adds one cycle of latency on the way out and one on the way back.
//
// That the block exists and joins a single master to a single slave is as
// published; the address window, the decode error and the registered
// single-transaction design are this design's choices. No request is
// accepted while aresetn is low. One clock and one
// reset are used for both sides.
module axil_interconnect
  import vk_pkg::*;
#(
  parameter logic [31:0] BASE_ADDR    = 32'hA000_0000,
  parameter int unsigned WINDOW_BYTES = 65536
) (
  input  logic      aclk,
  input  logic      aresetn,
  // S00_AXI: from the master
  input  axil_req_t s00_req,
  output axil_rsp_t s00_rsp,
  // M00_AXI: to the slave
  output axil_req_t m00_req,
  input  axil_rsp_t m00_rsp
);

  typedef enum logic [1:0] {P_IDLE, P_FWD, P_WAIT, P_RESP} path_e;

  function automatic logic hit(input logic [31:0] a);
    return (a >= BASE_ADDR) && ({1'b0, a} < {1'b0, BASE_ADDR} + 33'(WINDOW_BYTES));
  endfunction

  // ---------------------------------------------------------- write path
  path_e       wst;
  logic [31:0] awaddr_q, wdata_q;
  logic [2:0]  awprot_q;
  logic [3:0]  wstrb_q;
  logic        aw_pend, w_pend;
  axi_resp_e   bresp_q;

  wire s_wr_take = aresetn && (wst == P_IDLE) && s00_req.awvalid && s00_req.wvalid;

  always_ff @(posedge aclk) begin
    if (!aresetn) begin
      wst      <= P_IDLE;
      aw_pend  <= 1'b0;
      w_pend   <= 1'b0;
      awaddr_q <= '0;
      awprot_q <= '0;
      wdata_q  <= '0;
      wstrb_q  <= '0;
      bresp_q  <= RESP_OKAY;
    end else begin
      unique case (wst)
        P_IDLE: if (s_wr_take) begin
          awaddr_q <= s00_req.awaddr;
          awprot_q <= s00_req.awprot;
          wdata_q  <= s00_req.wdata;
          wstrb_q  <= s00_req.wstrb;
          if (hit(s00_req.awaddr)) begin
            aw_pend <= 1'b1;
            w_pend  <= 1'b1;
            wst     <= P_FWD;
          end else begin
            bresp_q <= RESP_DECERR;
            wst     <= P_RESP;
          end
        end
        P_FWD: begin
          if (m00_rsp.awready) aw_pend <= 1'b0;
          if (m00_rsp.wready)  w_pend  <= 1'b0;
          if ((!aw_pend || m00_rsp.awready) && (!w_pend || m00_rsp.wready))
            wst <= P_WAIT;
        end
        P_WAIT: if (m00_rsp.bvalid) begin
          bresp_q <= m00_rsp.bresp;
          wst     <= P_RESP;
        end
        P_RESP: if (s00_req.bready) wst <= P_IDLE;
        default: wst <= P_IDLE;
      endcase
    end
  end

  // ----------------------------------------------------------- read path
  path_e       rst_q;
  logic [31:0] araddr_q, rdata_q;
  logic [2:0]  arprot_q;
  axi_resp_e   rresp_q;

  wire s_rd_take = aresetn && (rst_q == P_IDLE) && s00_req.arvalid;

  always_ff @(posedge aclk) begin
    if (!aresetn) begin
      rst_q    <= P_IDLE;
      araddr_q <= '0;
      arprot_q <= '0;
      rdata_q  <= '0;
      rresp_q  <= RESP_OKAY;
    end else begin
      unique case (rst_q)
        P_IDLE: if (s_rd_take) begin
          araddr_q <= s00_req.araddr;
          arprot_q <= s00_req.arprot;
          if (hit(s00_req.araddr)) begin
            rst_q <= P_FWD;
          end else begin
            rdata_q <= '0;
            rresp_q <= RESP_DECERR;
            rst_q   <= P_RESP;
          end
        end
        P_FWD:  if (m00_rsp.arready) rst_q <= P_WAIT;
        P_WAIT: if (m00_rsp.rvalid) begin
          rdata_q <= m00_rsp.rdata;
          rresp_q <= m00_rsp.rresp;
          rst_q   <= P_RESP;
        end
        P_RESP: if (s00_req.rready) rst_q <= P_IDLE;
        default: rst_q <= P_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------- outputs
  always_comb begin
    m00_req         = '0;
    m00_req.awaddr  = awaddr_q;
    m00_req.awprot  = awprot_q;
    m00_req.awvalid = (wst == P_FWD) && aw_pend;
    m00_req.wdata   = wdata_q;
    m00_req.wstrb   = wstrb_q;
    m00_req.wvalid  = (wst == P_FWD) && w_pend;
    m00_req.bready  = (wst == P_WAIT);
    m00_req.araddr  = araddr_q;
    m00_req.arprot  = arprot_q;
    m00_req.arvalid = (rst_q == P_FWD);
    m00_req.rready  = (rst_q == P_WAIT);

    s00_rsp         = '0;
    s00_rsp.awready = s_wr_take;
    s00_rsp.wready  = s_wr_take;
    s00_rsp.bvalid  = (wst == P_RESP);
    s00_rsp.bresp   = bresp_q;
    s00_rsp.arready = s_rd_take;
    s00_rsp.rvalid  = (rst_q == P_RESP);
    s00_rsp.rdata   = rdata_q;
    s00_rsp.rresp   = rresp_q;
  end

  // A valid request towards the slave is held until it is accepted.
  a_m_arvalid_hold: assert property (@(posedge aclk) disable iff (!aresetn)
    m00_req.arvalid && !m00_rsp.arready |=> m00_req.arvalid && $stable(m00_req.araddr));
  a_m_awvalid_hold: assert property (@(posedge aclk) disable iff (!aresetn)
    m00_req.awvalid && !m00_rsp.awready |=> m00_req.awvalid && $stable(m00_req.awaddr));

endmodule
