// tb_validate_key -- self-checking test of the whole validateKey block.
//
// Plays the processor's role over AXI4-Lite: writes a candidate key as
// eight words at 0x080, enables the done interrupt, writes 1 to CTRL, waits
// for the interrupt, reads DATA_OUT and clears ISR. Candidates are the
// reference vectors (correct, three invalid, two incomplete, empty), the
// correct key with each byte corrupted, and random keys; the expected
// answer is simply whether the candidate equals the reference key. A
// monitor measures the time from the bus accepting the CTRL write to the
// interrupt rising: 1 cycle to pass the start bit on, 34 cycles of core
// latency, 1 cycle to set the status bit, 36 in all. A second DUT built
// with another SECRET_KEY checks that the parameter sets the key.
module tb_validate_key;
  import vk_pkg::*;
  import tb_vk_pkg::*;

  localparam int START_TO_IRQ = 1 + 34 + 1;
  localparam logic [255:0] OTHER_KEY =
    256'h00112233445566778899aabbccddeeff0123456789abcdeffedcba9876543210;

  logic      clk = 1'b0;
  logic      rst_n;
  axil_req_t req, req2;
  axil_rsp_t rsp, rsp2;
  logic      irq, irq2;

  int checks = 0, failures = 0;
  int cycle = 0;
  int t_start = 0, t_irq = 0;

  validate_key dut (.ap_clk(clk), .ap_rst_n(rst_n), .s_axi_M_AXI0_req(req),
                    .s_axi_M_AXI0_rsp(rsp), .interrupt(irq));
  validate_key #(.SECRET_KEY(OTHER_KEY)) dut2 (
    .ap_clk(clk), .ap_rst_n(rst_n), .s_axi_M_AXI0_req(req2),
    .s_axi_M_AXI0_rsp(rsp2), .interrupt(irq2));
  tb_axil_master m  (.clk, .req(req),  .rsp(rsp));
  tb_axil_master m2 (.clk, .req(req2), .rsp(rsp2));

  always #5 clk = ~clk;

  logic irq_q;
  always_ff @(posedge clk) begin
    cycle <= cycle + 1;
    irq_q <= irq;
    if (req.awvalid && rsp.awready && req.awaddr[8:0] == ADDR_CTRL) t_start <= cycle;
    if (irq && !irq_q) t_irq <= cycle;
  end

  initial begin
    repeat (100000) @(posedge clk);
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

  task automatic attempt(input logic [255:0] key, input string name);
    axi_resp_e   r;
    logic [31:0] d;
    logic        expect_ok;
    expect_ok = (key == DEFAULT_SECRET_KEY);
    for (int w = 0; w < 8; w++) m.write(32'h80 + 4*w, key_word(key, w), 4'hF, r);
    m.write(32'h000, 32'h1, 4'hF, r);
    while (!irq) @(posedge clk);
    #1;
    // t_irq is the first edge that samples the line high, one after it rose
    check(t_irq - 1 - t_start == START_TO_IRQ,
          $sformatf("%s: start to interrupt %0d cycles, expected %0d", name, t_irq - 1 - t_start, START_TO_IRQ));
    m.read(32'h100, d, r);
    check(d == {31'd0, expect_ok}, $sformatf("%s: DATA_OUT %h expected %0b", name, d, expect_ok));
    m.read(32'h000, d, r);
    check(d[CTRL_AP_DONE] && d[CTRL_AP_IDLE], {name, ": CTRL done and idle"});
    m.write(32'h00C, 32'h1, 4'hF, r);
  endtask

  initial begin
    axi_resp_e   r;
    logic [31:0] d;
    logic [255:0] k;
    rst_n = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    m.write(32'h004, 32'h1, 4'hF, r);
    m.write(32'h008, 32'h1, 4'hF, r);

    attempt(KEY_CORRECT, "correct");
    for (int i = 0; i < 3; i++) attempt(KEY_INVALID[i], $sformatf("invalid%0d", i));
    for (int i = 0; i < 2; i++) attempt(KEY_INCOMPLETE[i], $sformatf("incomplete%0d", i));
    attempt(KEY_EMPTY, "empty");
    attempt(KEY_CORRECT, "correct after failures");
    for (int j = 0; j < 32; j += 3) begin
      k = KEY_CORRECT;
      k[255 - 8*j -: 8] ^= 8'h80;
      attempt(k, $sformatf("byte %0d corrupted", j));
    end
    m.rand_delay = 1'b1;
    for (int i = 0; i < 8; i++) attempt(random_key(), $sformatf("random%0d", i));
    attempt(KEY_CORRECT, "correct with bus delays");

    // the reference key is a parameter
    for (int w = 0; w < 8; w++) m2.write(32'h80 + 4*w, key_word(OTHER_KEY, w), 4'hF, r);
    m2.write(32'h000, 32'h1, 4'hF, r);
    do m2.read(32'h000, d, r); while (!d[CTRL_AP_DONE]);
    m2.read(32'h100, d, r);
    check(d == 32'h1, "second instance accepts its own key");
    for (int w = 0; w < 8; w++) m2.write(32'h80 + 4*w, key_word(KEY_CORRECT, w), 4'hF, r);
    m2.write(32'h000, 32'h1, 4'hF, r);
    do m2.read(32'h000, d, r); while (!d[CTRL_AP_DONE]);
    m2.read(32'h100, d, r);
    check(d == 32'h0, "second instance rejects the default key");

    check(m.rule_errors == 0 && m2.rule_errors == 0, "AXI response rule");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
