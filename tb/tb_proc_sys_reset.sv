// tb_proc_sys_reset -- self-checking test of the reset sequencer.
//
// For each reset source in turn (ext_reset_in low, aux_reset_in low,
// mb_debug_sys_rst high, dcm_locked low) it asserts the source for a random
// 1-9 cycles and checks that all five outputs are in reset within three
// edges. Then it releases the source just before a rising edge E0 and checks,
// edge by edge, that interconnect_aresetn / bus_struct_reset are released
// on edge 18, peripheral_aresetn / peripheral_reset on edge 34 and
// mb_reset on edge 50 (2 synchroniser edges + HOLD_CYCLES multiples, with
// HOLD_CYCLES = 16), that the active-low and active-high outputs are always
// complements, and that a new reset during the sequence restarts it.
module tb_proc_sys_reset;

  localparam int HOLD = 16;
  localparam int REL_IC = 2 + HOLD;
  localparam int REL_PER = 2 + 2 * HOLD;
  localparam int REL_MB = 2 + 3 * HOLD;

  logic clk = 1'b0;
  logic ext_reset_in, aux_reset_in, mb_debug_sys_rst, dcm_locked;
  logic mb_reset, bus_struct_reset, peripheral_reset, interconnect_aresetn, peripheral_aresetn;

  int checks = 0, failures = 0;

  proc_sys_reset dut (
    .slowest_sync_clk(clk), .ext_reset_in, .aux_reset_in, .mb_debug_sys_rst,
    .dcm_locked, .mb_reset, .bus_struct_reset, .peripheral_reset,
    .interconnect_aresetn, .peripheral_aresetn);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
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

  task automatic set_source(input int src, input logic active);
    case (src)
      0: ext_reset_in     = !active;
      1: aux_reset_in     = !active;
      2: mb_debug_sys_rst =  active;
      default: dcm_locked = !active;
    endcase
  endtask

  task automatic all_in_reset(input string what);
    check(!interconnect_aresetn && bus_struct_reset && !peripheral_aresetn &&
          peripheral_reset && mb_reset, what);
  endtask

  initial begin
    ext_reset_in = 1; aux_reset_in = 1; mb_debug_sys_rst = 0; dcm_locked = 1;
    for (int src = 0; src < 4; src++) begin
      // assert
      @(negedge clk);
      set_source(src, 1'b1);
      repeat (3) @(posedge clk);
      #1 all_in_reset($sformatf("source %0d: all outputs in reset", src));
      repeat ($urandom % 9) @(negedge clk);
      // release before edge E0 and follow the sequence
      @(negedge clk);
      set_source(src, 1'b0);
      for (int e = 0; e <= REL_MB + 2; e++) begin
        @(posedge clk) #1;
        check(interconnect_aresetn == (e >= REL_IC),
              $sformatf("src %0d edge %0d: interconnect_aresetn=%0b", src, e, interconnect_aresetn));
        check(peripheral_aresetn == (e >= REL_PER),
              $sformatf("src %0d edge %0d: peripheral_aresetn=%0b", src, e, peripheral_aresetn));
        check(mb_reset == (e < REL_MB),
              $sformatf("src %0d edge %0d: mb_reset=%0b", src, e, mb_reset));
        check(bus_struct_reset == !interconnect_aresetn && peripheral_reset == !peripheral_aresetn,
              "active-high outputs complement the active-low ones");
      end
    end

    // a reset in mid-sequence restarts it
    @(negedge clk);
    ext_reset_in = 0;
    @(negedge clk);
    ext_reset_in = 1;
    repeat (REL_IC + 5) @(posedge clk);
    #1 check(interconnect_aresetn && !peripheral_aresetn, "mid-sequence: interconnect out, peripherals held");
    @(negedge clk);
    ext_reset_in = 0;
    repeat (3) @(posedge clk);
    #1 all_in_reset("mid-sequence reset puts everything back");
    @(negedge clk);
    ext_reset_in = 1;
    repeat (REL_PER + 1) @(posedge clk);
    #1 check(peripheral_aresetn, "peripherals released after restart");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
