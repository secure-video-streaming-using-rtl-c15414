// tb_secure_stream_pl -- end-to-end test of the programmable-logic design at
// its default parameters.
//
// The testbench plays the application processor: it drives pl_clk0 (100 MHz),
// pl_resetn0 and the AXI master port, and behaves like the driver software:
// write the eight key words at BASE+0x080, write 1 to BASE+0x000, wait for
// done (by interrupt or by polling CTRL), read BASE+0x100.
//
// Workload:
//   1. the seven reference unit tests: correct key, three invalid keys, two
//      incomplete keys, the empty key (only the first may pass);
//   2. the authentication campaign: 10 correct, 5 invalid, 7 incomplete,
//      4 empty and 6 wrong keys in shuffled order, which must give exactly
//      10 successful and 22 unsuccessful authentications.
// Mechanisms that must each happen at least once (counted, a failure if
// never seen): an access issued during the reset sequence that waits for
// the block to leave reset, done signalled by interrupt, done found by
// polling, a start written while a comparison runs (queued, runs next), an
// access outside the address window answered with DECERR, a read of the key
// window (returns 0). For every interrupt-driven attempt the time from the
// CTRL write being accepted on the master port to the interrupt rising is
// checked: 1 (interconnect) + 1 (start bit) + 34 (compare) + 1 (status) = 37
// cycles.
module tb_secure_stream_pl;
  import vk_pkg::*;
  import tb_vk_pkg::*;

  localparam logic [31:0] BASE = 32'hA000_0000;
  localparam int START_TO_IRQ = 1 + 1 + 34 + 1;

  typedef enum int {K_CORRECT, K_INVALID, K_INCOMPLETE, K_EMPTY, K_WRONG} kind_e;

  logic      clk = 1'b0;
  logic      pl_resetn0;
  axil_req_t req;
  axil_rsp_t rsp;
  logic      irq;

  int checks = 0, failures = 0;
  int cycle = 0;
  int t_start = 0, t_irq = 0;
  int n_success = 0, n_reject = 0;
  int n_reset_wait = 0, n_irq_mode = 0, n_poll_mode = 0, n_queued = 0;
  int n_decerr = 0, n_key_read = 0;

  secure_stream_pl dut (
    .pl_clk0            (clk),
    .pl_resetn0         (pl_resetn0),
    .M_AXI_HPM0_FPD_req (req),
    .M_AXI_HPM0_FPD_rsp (rsp),
    .interrupt          (irq)
  );
  tb_axil_master m (.clk, .req, .rsp);

  always #5 clk = ~clk;

  logic irq_q;
  always_ff @(posedge clk) begin
    cycle <= cycle + 1;
    irq_q <= irq;
    if (req.awvalid && rsp.awready && req.awaddr == BASE) t_start <= cycle;
    if (irq && !irq_q) t_irq <= cycle;
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

  task automatic wr(input logic [31:0] off, input logic [31:0] d);
    axi_resp_e r;
    m.write(BASE + off, d, 4'hF, r);
    check(r == RESP_OKAY, $sformatf("write +%h response %0d", off, r));
  endtask

  task automatic rd(input logic [31:0] off, output logic [31:0] d);
    axi_resp_e r;
    m.read(BASE + off, d, r);
    check(r == RESP_OKAY, $sformatf("read +%h response %0d", off, r));
  endtask

  // One authentication as the driver software does it; returns the result.
  task automatic authenticate(input logic [255:0] key, input bit use_irq,
                              input string name, output logic ok);
    logic [31:0] d;
    int polls;
    for (int w = 0; w < 8; w++) wr(32'h80 + 4*w, key_word(key, w));
    wr(32'h000, 32'h1);
    if (use_irq) begin
      while (!irq) @(posedge clk);
      #1;
      check(t_irq - 1 - t_start == START_TO_IRQ,
            $sformatf("%s: start to interrupt %0d cycles, expected %0d",
                      name, t_irq - 1 - t_start, START_TO_IRQ));
      rd(32'h000, d);
      check(d[CTRL_AP_DONE], {name, ": done with interrupt"});
      wr(32'h00C, 32'h1);
      check(!irq, {name, ": interrupt cleared"});
      n_irq_mode++;
    end else begin
      polls = 0;
      do begin
        rd(32'h000, d);
        polls++;
      end while (!d[CTRL_AP_DONE] && polls < 200);
      check(d[CTRL_AP_DONE], {name, ": done by polling"});
      wr(32'h00C, 32'h1);     // status is set even when polled
      n_poll_mode++;
    end
    rd(32'h100, d);
    ok = d[0];
    check(d[31:1] == 0, {name, ": DATA_OUT upper bits zero"});
  endtask

  function automatic logic [255:0] make_key(input kind_e k, input int n);
    logic [255:0] key;
    case (k)
      K_CORRECT: key = KEY_CORRECT;
      K_INVALID: begin
        if (n < 3) key = KEY_INVALID[n];
        else begin
          key = KEY_CORRECT;
          key[$urandom % 256] ^= 1'b1;
        end
      end
      K_INCOMPLETE: begin
        if (n < 2) key = KEY_INCOMPLETE[n];
        else begin
          // the first 32-n bytes typed, the rest of the buffer zero
          key = KEY_CORRECT;
          for (int j = 32 - n; j < 32; j++) key[255 - 8*j -: 8] = 8'h00;
        end
      end
      K_EMPTY: key = KEY_EMPTY;
      default: begin
        do key = random_key(); while (key == KEY_CORRECT);
      end
    endcase
    return key;
  endfunction

  initial begin
    logic [31:0] d;
    logic        ok;
    axi_resp_e   r;
    kind_e       plan [$];
    int          seen [kind_e];
    int          t_rel;

    // ------------------------------------------------ reset and first access
    pl_resetn0 = 1'b0;
    repeat (10) @(posedge clk);
    @(negedge clk);
    pl_resetn0 = 1'b1;
    t_rel = cycle;
    repeat (5) @(posedge clk);
    m.read(BASE + ADDR_CTRL, d, r);      // issued while still in reset
    check(cycle - t_rel >= 2 + 2 * 16, $sformatf("first access completed %0d cycles after reset release", cycle - t_rel));
    check(r == RESP_OKAY && d[CTRL_AP_IDLE] && !d[CTRL_AP_DONE], "CTRL after reset: idle, not done");
    n_reset_wait++;
    check(!irq, "no interrupt after reset");

    wr(32'h004, 32'h1);                  // GIE
    wr(32'h008, 32'h1);                  // IER: done

    // ------------------------------------------------ reference unit tests
    authenticate(KEY_CORRECT, 1, "unit: correct", ok);
    check(ok, "unit: correct key accepted");
    for (int i = 0; i < 3; i++) begin
      authenticate(KEY_INVALID[i], i[0], $sformatf("unit: invalid %0d", i), ok);
      check(!ok, $sformatf("unit: invalid key %0d rejected", i));
    end
    for (int i = 0; i < 2; i++) begin
      authenticate(KEY_INCOMPLETE[i], 1, $sformatf("unit: incomplete %0d", i), ok);
      check(!ok, $sformatf("unit: incomplete key %0d rejected", i));
    end
    authenticate(KEY_EMPTY, 0, "unit: empty", ok);
    check(!ok, "unit: empty key rejected");

    // ------------------------------------------------ campaign of 32 attempts
    repeat (10) plan.push_back(K_CORRECT);
    repeat (5)  plan.push_back(K_INVALID);
    repeat (7)  plan.push_back(K_INCOMPLETE);
    repeat (4)  plan.push_back(K_EMPTY);
    repeat (6)  plan.push_back(K_WRONG);
    plan.shuffle();
    foreach (plan[i]) begin
      kind_e       k;
      int          n;
      logic [255:0] key;
      k = plan[i];
      n = seen.exists(k) ? seen[k] : 0;
      seen[k] = n + 1;
      key = make_key(k, n);
      m.rand_delay = i[1];
      authenticate(key, i[0], $sformatf("campaign %0d (%s)", i, k.name()), ok);
      check(ok == (k == K_CORRECT), $sformatf("campaign %0d (%s): result %0b", i, k.name(), ok));
      if (ok) n_success++; else n_reject++;
    end
    m.rand_delay = 1'b0;
    check(n_success == 10, $sformatf("successful authentications %0d, expected 10", n_success));
    check(n_reject == 22, $sformatf("unsuccessful authentications %0d, expected 22", n_reject));

    // ------------------------------------------------ start while running
    // A second start written while the first comparison runs is held in
    // CTRL and starts the next comparison as soon as the core is idle.
    for (int w = 0; w < 8; w++) wr(32'h80 + 4*w, key_word(KEY_CORRECT, w));
    wr(32'h000, 32'h1);
    wr(32'h000, 32'h1);
    rd(32'h000, d);
    check(d[CTRL_AP_START] && !d[CTRL_AP_IDLE], "queued start visible in CTRL while running");
    begin
      int t_first;
      while (!irq) @(posedge clk);
      t_first = cycle;
      wr(32'h00C, 32'h1);
      while (!irq) @(posedge clk);
      check(cycle - t_first <= 34 + 8, $sformatf("queued run ended %0d cycles after the first", cycle - t_first));
      wr(32'h00C, 32'h1);
    end
    rd(32'h100, d);
    check(d[0], "queued run accepts the correct key");
    rd(32'h000, d);
    check(!d[CTRL_AP_START] && d[CTRL_AP_IDLE], "no third run");
    n_queued++;

    // ------------------------------------------------ outside the window, key window
    m.read(BASE + 32'h0001_0000, d, r);
    check(r == RESP_DECERR, "read outside window gives DECERR");
    m.write(BASE - 4, 32'h1, 4'hF, r);
    check(r == RESP_DECERR, "write outside window gives DECERR");
    n_decerr += 2;
    rd(32'h080, d);
    check(d == 0, "key window reads 0");
    n_key_read++;

    // ------------------------------------------------ mechanism coverage
    check(n_reset_wait > 0, "access during reset sequence never exercised");
    check(n_irq_mode > 0,   "interrupt-driven completion never exercised");
    check(n_poll_mode > 0,  "polled completion never exercised");
    check(n_queued > 0,     "start during a run never exercised");
    check(n_decerr > 0,     "decode error never exercised");
    check(n_key_read > 0,   "key window read never exercised");
    check(m.rule_errors == 0, "AXI response rule");
    $display("mechanisms: reset_wait=%0d irq=%0d poll=%0d queued=%0d decerr=%0d key_read=%0d",
             n_reset_wait, n_irq_mode, n_poll_mode, n_queued, n_decerr, n_key_read);
    $display("authentications: successful=%0d unsuccessful=%0d", n_success, n_reject);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
