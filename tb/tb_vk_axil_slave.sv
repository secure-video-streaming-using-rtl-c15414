// tb_vk_axil_slave -- self-checking test of the validateKey register slave.
//
// The compare core is replaced by a small model: once it sees ap_start
// while idle it stays busy for a random 2-40 cycles, then pulses ap_done and
// ap_ready with the result bit the testbench chose. Key-memory writes are
// captured into an array and compared with what was written over the bus.
// Checks: key writes (addresses, data, strobes), the key window reading 0,
// GIE/IER read-back, start -> done polling, clear-on-read of done/ready,
// DATA_OUT for both results, the interrupt and ISR toggle-on-write,
// unmapped addresses, and the AXI response rule. The whole sequence runs
// once with an eager master and once with random delays and back-pressure.
module tb_vk_axil_slave;
  import vk_pkg::*;
  import tb_vk_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n;
  axil_req_t   s_axi_req;
  axil_rsp_t   s_axi_rsp;
  logic        ap_start, ap_done, ap_idle, ap_ready, result;
  logic        key_we;
  logic [2:0]  key_waddr;
  logic [31:0] key_wdata;
  logic [3:0]  key_wstrb;
  logic        interrupt;

  int checks = 0, failures = 0;
  int starts_seen = 0;

  vk_axil_slave dut (
    .clk, .rst_n, .s_axi_req, .s_axi_rsp, .ap_start, .ap_done, .ap_idle,
    .ap_ready, .result, .key_we, .key_waddr, .key_wdata, .key_wstrb, .interrupt
  );
  tb_axil_master m (.clk, .req(s_axi_req), .rsp(s_axi_rsp));

  always #5 clk = ~clk;

  // ---------------------------------------------------------- core model
  logic next_result;
  int   busy_left;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ap_idle   <= 1'b1;
      ap_done   <= 1'b0;
      ap_ready  <= 1'b0;
      result    <= 1'b0;
      busy_left <= 0;
    end else begin
      ap_done  <= 1'b0;
      ap_ready <= 1'b0;
      if (ap_idle && ap_start) begin
        ap_idle     <= 1'b0;
        busy_left   <= 2 + int'($urandom % 39);
        starts_seen <= starts_seen + 1;
      end else if (!ap_idle) begin
        if (busy_left == 0) begin
          ap_idle  <= 1'b1;
          ap_done  <= 1'b1;
          ap_ready <= 1'b1;
          result   <= next_result;
        end else begin
          busy_left <= busy_left - 1;
        end
      end
    end
  end

  // ------------------------------------------------- key memory capture
  logic [31:0] kmem [8];
  always_ff @(posedge clk) begin
    if (key_we)
      for (int b = 0; b < 4; b++)
        if (key_wstrb[b]) kmem[key_waddr][8*b +: 8] <= key_wdata[8*b +: 8];
  end

  initial begin
    repeat (40000) @(posedge clk);
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

  task automatic wr(input logic [31:0] a, input logic [31:0] d, input logic [3:0] s = 4'hF);
    axi_resp_e r;
    m.write(a, d, s, r);
    check(r == RESP_OKAY, $sformatf("write %h response", a));
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    axi_resp_e r;
    m.read(a, d, r);
    check(r == RESP_OKAY, $sformatf("read %h response", a));
  endtask

  task automatic one_pass();
    logic [31:0] d;
    logic [255:0] key;
    int polls;

    // key words, then a strobed partial overwrite of word 3
    key = random_key();
    for (int w = 0; w < 8; w++) wr(32'h80 + 4*w, key_word(key, w));
    wr(32'h8C, 32'hAABBCCDD, 4'b0101);
    @(negedge clk);
    for (int w = 0; w < 8; w++) begin
      logic [31:0] e;
      e = key_word(key, w);
      if (w == 3) e = {e[31:24], 8'hBB, e[15:8], 8'hDD};
      check(kmem[w] == e, $sformatf("key word %0d: %h expected %h", w, kmem[w], e));
    end
    for (int w = 0; w < 8; w++) begin
      rd(32'h80 + 4*w, d);
      check(d == 0, "key window reads 0");
    end

    // interrupt enables
    wr(32'h004, 32'h1);
    wr(32'h008, 32'h1);
    rd(32'h004, d); check(d == 32'h1, "GIE read-back");
    rd(32'h008, d); check(d == 32'h1, "IER read-back");
    rd(32'h000, d); check(d[CTRL_AP_IDLE] && !d[CTRL_AP_START], "CTRL idle before start");

    for (int run = 0; run < 4; run++) begin
      int s0;
      next_result = run[0];
      s0 = starts_seen;
      wr(32'h000, 32'h1);
      polls = 0;
      do begin
        rd(32'h000, d);
        polls++;
      end while (!d[CTRL_AP_DONE] && polls < 100);
      check(d[CTRL_AP_DONE] && d[CTRL_AP_READY] && d[CTRL_AP_IDLE], "CTRL shows done, ready, idle");
      check(starts_seen == s0 + 1, "exactly one start per write of CTRL");
      rd(32'h000, d);
      check(!d[CTRL_AP_DONE] && !d[CTRL_AP_READY], "done/ready cleared on read");
      rd(32'h100, d);
      check(d == {31'd0, next_result}, $sformatf("DATA_OUT %h expected %0b", d, next_result));
      check(interrupt, "interrupt after done");
      rd(32'h00C, d); check(d == 32'h1, "ISR done bit");
      wr(32'h00C, 32'h1);
      rd(32'h00C, d); check(d == 32'h0, "ISR toggled clear");
      check(!interrupt, "interrupt cleared");
    end

    // with GIE off the status still sets but the line stays low
    wr(32'h004, 32'h0);
    next_result = 1'b1;
    wr(32'h000, 32'h1);
    do rd(32'h000, d); while (!d[CTRL_AP_DONE]);
    rd(32'h00C, d); check(d == 32'h1, "ISR set with GIE off");
    check(!interrupt, "no interrupt with GIE off");
    wr(32'h00C, 32'h1);
    wr(32'h008, 32'h0);

    // unmapped addresses
    rd(32'h040, d); check(d == 0, "unmapped read 0");
    wr(32'h040, 32'hFFFF_FFFF);
    rd(32'h1FC, d); check(d == 0, "unmapped read 0 (0x1FC)");
  endtask

  initial begin
    next_result = 0;
    rst_n = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    one_pass();
    m.rand_delay = 1'b1;
    one_pass();
    check(m.rule_errors == 0, $sformatf("AXI response rule errors: %0d", m.rule_errors));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
