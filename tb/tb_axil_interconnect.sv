// tb_axil_interconnect -- self-checking test of the one-to-one AXI4-Lite
// interconnect.
//
// Behind M00 sits a memory slave model with random AWREADY, WREADY,
// ARREADY and response delays; it answers SLVERR in the top 4 KiB of the
// window and counts every transaction it sees. Through S00 the testbench
// issues random writes and reads inside the window (checked against a
// reference array), accesses just outside both ends of the window (which
// must return DECERR, read data 0, and never reach the slave), and checks
// that the slave's SLVERR is passed back unchanged.
module tb_axil_interconnect;
  import vk_pkg::*;

  localparam logic [31:0] BASE = 32'hA000_0000;
  localparam int unsigned WIN  = 65536;

  logic      clk = 1'b0;
  logic      rst_n;
  axil_req_t s_req, m_req;
  axil_rsp_t s_rsp, m_rsp;

  int checks = 0, failures = 0;
  int slave_wr = 0, slave_rd = 0;

  axil_interconnect #(.BASE_ADDR(BASE), .WINDOW_BYTES(WIN)) dut (
    .aclk(clk), .aresetn(rst_n), .s00_req(s_req), .s00_rsp(s_rsp),
    .m00_req(m_req), .m00_rsp(m_rsp));
  tb_axil_master m (.clk, .req(s_req), .rsp(s_rsp));

  always #5 clk = ~clk;

  // ------------------------------------------------------- slave model
  logic [31:0] smem [16384];   // the 64 KiB window, by word
  logic        aw_got, w_got;
  logic [31:0] aw_a, w_d;
  logic [3:0]  w_s;
  logic [31:0] ar_a;
  logic        ar_got;

  function automatic axi_resp_e slave_resp(input logic [31:0] a);
    return (a[15:12] == 4'hF) ? RESP_SLVERR : RESP_OKAY;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_rsp  <= '0;
      aw_got <= 0;
      w_got  <= 0;
      ar_got <= 0;
    end else begin
      m_rsp.awready <= 1'b0;
      m_rsp.wready  <= 1'b0;
      m_rsp.arready <= 1'b0;
      // write address / data, each accepted after a random wait
      if (m_req.awvalid && !m_rsp.awready && !aw_got && ($urandom % 3 == 0)) begin
        m_rsp.awready <= 1'b1;
        aw_got <= 1'b1;
        aw_a   <= m_req.awaddr;
      end
      if (m_req.wvalid && !m_rsp.wready && !w_got && ($urandom % 3 == 0)) begin
        m_rsp.wready <= 1'b1;
        w_got <= 1'b1;
        w_d   <= m_req.wdata;
        w_s   <= m_req.wstrb;
      end
      if (aw_got && w_got && !m_rsp.bvalid && ($urandom % 2 == 0)) begin
        logic [31:0] v;
        v = smem[aw_a[15:2]];
        for (int b = 0; b < 4; b++) if (w_s[b]) v[8*b +: 8] = w_d[8*b +: 8];
        smem[aw_a[15:2]] <= v;
        m_rsp.bvalid <= 1'b1;
        m_rsp.bresp  <= slave_resp(aw_a);
        aw_got <= 0;
        w_got  <= 0;
        slave_wr <= slave_wr + 1;
      end else if (m_rsp.bvalid && m_req.bready) begin
        m_rsp.bvalid <= 1'b0;
      end
      // read
      if (m_req.arvalid && !m_rsp.arready && !ar_got && ($urandom % 3 == 0)) begin
        m_rsp.arready <= 1'b1;
        ar_got <= 1'b1;
        ar_a   <= m_req.araddr;
      end
      if (ar_got && !m_rsp.rvalid && ($urandom % 2 == 0)) begin
        m_rsp.rvalid <= 1'b1;
        m_rsp.rdata  <= smem[ar_a[15:2]];
        m_rsp.rresp  <= slave_resp(ar_a);
        ar_got <= 0;
        slave_rd <= slave_rd + 1;
      end else if (m_rsp.rvalid && m_req.rready) begin
        m_rsp.rvalid <= 1'b0;
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [31:0] model [16384];

  initial begin
    axi_resp_e   r;
    logic [31:0] a, d, e;
    int          wr0, rd0;
    logic [31:0] outside [4];
    outside = '{BASE - 4, BASE + WIN, 32'h0000_0000, 32'hFFFF_FFFC};

    for (int i = 0; i < 16384; i++) begin
      smem[i]  = '0;
      model[i] = '0;
    end
    rst_n = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    for (int pass = 0; pass < 2; pass++) begin
      m.rand_delay = pass[0];
      // in-window traffic (bottom 16 words and both window edges)
      for (int i = 0; i < 60; i++) begin
        case (i % 3)
          0: a = BASE + 4 * ($urandom % 16);
          1: a = BASE + WIN - 4 * (1 + $urandom % 4);
          default: a = BASE + 4 * ($urandom % 16);
        endcase
        if ($urandom % 2) begin
          d = $urandom;
          m.write(a, d, 4'hF, r);
          check(r == slave_resp(a), $sformatf("write %h response %0d", a, r));
          model[a[15:2]] = d;
        end else begin
          m.read(a, d, r);
          e = model[a[15:2]];
          check(r == slave_resp(a), $sformatf("read %h response %0d", a, r));
          check(d == e, $sformatf("read %h = %h expected %h", a, d, e));
        end
      end
      // out-of-window: DECERR, never forwarded
      foreach (outside[i]) begin
        wr0 = slave_wr;
        rd0 = slave_rd;
        m.write(outside[i], 32'hDEAD_BEEF, 4'hF, r);
        check(r == RESP_DECERR, $sformatf("write %h outside window: resp %0d", outside[i], r));
        m.read(outside[i], d, r);
        check(r == RESP_DECERR && d == 0, $sformatf("read %h outside window: resp %0d data %h", outside[i], r, d));
        check(slave_wr == wr0 && slave_rd == rd0, "outside access reached the slave");
      end
    end

    check(m.rule_errors == 0, "AXI response rule");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
