// tb_vk_key_compare -- self-checking test of the key comparison core.
//
// A memory model in the testbench (registered read, like the key memory)
// holds the candidate key. Runs the reference vectors (correct, three
// invalid, two incomplete, empty), then the correct key with each of the
// 32 bytes corrupted in turn, then 20 random keys. For every run it checks
// the result bit, that ap_ready pulses with ap_done, that ap_done is a
// one-cycle pulse and that done comes exactly 34 cycles after the edge that
// sampled ap_start. It also checks that ap_start held high back to back
// starts a second run once the first ends.
module tb_vk_key_compare;
  import tb_vk_pkg::*;

  localparam int LATENCY = 34;

  logic        clk = 1'b0;
  logic        rst_n;
  logic        ap_start, ap_done, ap_idle, ap_ready;
  logic        key_rd_en;
  logic [2:0]  key_rd_addr;
  logic [31:0] key_rd_data;
  logic        result;

  logic [31:0] mem [8];
  int          cycle = 0;
  int checks = 0, failures = 0;

  vk_key_compare dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) cycle <= cycle + 1;
  always_ff @(posedge clk) if (key_rd_en) key_rd_data <= mem[key_rd_addr];

  initial begin
    repeat (20000) @(posedge clk);
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

  task automatic run(input logic [255:0] key, input string name);
    int t0, t1;
    logic expect_ok;
    for (int w = 0; w < 8; w++) mem[w] = key_word(key, w);
    expect_ok = (key == KEY_CORRECT);
    @(negedge clk);
    check(ap_idle, {name, ": idle before start"});
    ap_start = 1;
    @(posedge clk) #1;
    t0 = cycle;
    @(negedge clk);
    ap_start = 0;
    check(!ap_idle, {name, ": busy after start"});
    while (!ap_done) @(posedge clk) #1;
    t1 = cycle;
    check(t1 - t0 == LATENCY, $sformatf("%s: latency %0d, expected %0d", name, t1 - t0, LATENCY));
    check(ap_ready, {name, ": ap_ready with ap_done"});
    check(result == expect_ok, $sformatf("%s: result %0b expected %0b", name, result, expect_ok));
    @(posedge clk) #1;
    check(!ap_done, {name, ": ap_done is one cycle"});
    check(result == expect_ok, {name, ": result holds"});
  endtask

  initial begin
    logic [255:0] k;
    ap_start = 0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    run(KEY_CORRECT, "correct");
    for (int i = 0; i < 3; i++) run(KEY_INVALID[i], $sformatf("invalid%0d", i));
    for (int i = 0; i < 2; i++) run(KEY_INCOMPLETE[i], $sformatf("incomplete%0d", i));
    run(KEY_EMPTY, "empty");
    run(KEY_CORRECT, "correct again");
    for (int j = 0; j < 32; j++) begin
      k = KEY_CORRECT;
      k[255 - 8*j -: 8] ^= 8'(1 << (j % 8));
      run(k, $sformatf("byte %0d flipped", j));
    end
    for (int i = 0; i < 20; i++) run(random_key(), $sformatf("random%0d", i));

    // back-to-back: start held high across the end of a run
    for (int w = 0; w < 8; w++) mem[w] = key_word(KEY_CORRECT, w);
    @(negedge clk);
    ap_start = 1;
    begin
      int dones, t0;
      dones = 0;
      t0 = cycle;
      while (cycle - t0 < 2 * LATENCY + 4) begin
        @(posedge clk) #1;
        if (ap_done) begin
          dones++;
          check(result, "back-to-back result");
        end
      end
      check(dones == 2, $sformatf("back-to-back runs: %0d, expected 2", dones));
    end
    ap_start = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
