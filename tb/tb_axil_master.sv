// tb_axil_master -- AXI4-Lite master driver for the testbenches.
//
// Stands in for the processor's master port. Testbenches call its tasks
// through the instance: write(addr, data, strb, resp) and
// read(addr, data, resp). Each task drives its address (and data) channel
// at a falling edge, holds it until the slave's READY is seen at a rising
// edge, then waits for and takes the response. When rand_delay is set, the
// tasks insert 0-3 idle cycles before the request and hold BREADY/RREADY
// low for 0-3 cycles to exercise back-pressure. The tasks also check the
// AXI rule (from the tenth cycle on, after reset) that a response stays valid until taken, counted in
// rule_errors.
module tb_axil_master
  import vk_pkg::*;
(
  input  logic      clk,
  output axil_req_t req,
  input  axil_rsp_t rsp
);

  bit rand_delay = 1'b0;
  int rule_errors = 0;

  initial req = '0;

  task automatic idle_cycles();
    if (rand_delay) repeat ($urandom % 4) @(negedge clk);
  endtask

  task automatic write(input logic [31:0] addr, input logic [31:0] data,
                       input logic [3:0] strb, output axi_resp_e resp);
    bit aw_done, w_done;
    idle_cycles();
    @(negedge clk);
    req.awaddr  = addr;
    req.awprot  = 3'b000;
    req.awvalid = 1'b1;
    req.wdata   = data;
    req.wstrb   = strb;
    req.wvalid  = 1'b1;
    aw_done = 0;
    w_done  = 0;
    while (!(aw_done && w_done)) begin
      @(posedge clk);
      if (rsp.awready) aw_done = 1;
      if (rsp.wready)  w_done  = 1;
      @(negedge clk);
      if (aw_done) req.awvalid = 1'b0;
      if (w_done)  req.wvalid  = 1'b0;
    end
    if (rand_delay) begin
      repeat ($urandom % 4) begin
        @(negedge clk);
      end
    end
    req.bready = 1'b1;
    forever begin
      @(posedge clk);
      if (rsp.bvalid) break;
    end
    resp = rsp.bresp;
    @(negedge clk);
    req.bready = 1'b0;
  endtask

  task automatic read(input logic [31:0] addr, output logic [31:0] data,
                      output axi_resp_e resp);
    idle_cycles();
    @(negedge clk);
    req.araddr  = addr;
    req.arprot  = 3'b000;
    req.arvalid = 1'b1;
    forever begin
      @(posedge clk);
      if (rsp.arready) break;
    end
    @(negedge clk);
    req.arvalid = 1'b0;
    if (rand_delay) begin
      repeat ($urandom % 4) begin
        @(negedge clk);
      end
    end
    req.rready = 1'b1;
    forever begin
      @(posedge clk);
      if (rsp.rvalid) break;
    end
    data = rsp.rdata;
    resp = rsp.rresp;
    @(negedge clk);
    req.rready = 1'b0;
  endtask

  // A response, once valid, must stay valid with the same data until taken.
  logic        b_hold, r_hold;
  logic [31:0] r_data_q;
  int          cyc = 0;
  always_ff @(posedge clk) begin
    cyc      <= cyc + 1;
    b_hold   <= rsp.bvalid && !req.bready;
    r_hold   <= rsp.rvalid && !req.rready;
    r_data_q <= rsp.rdata;
    if (cyc > 8 && b_hold && !rsp.bvalid) rule_errors <= rule_errors + 1;
    if (cyc > 8 && r_hold && (!rsp.rvalid || rsp.rdata != r_data_q)) rule_errors <= rule_errors + 1;
  end

endmodule
