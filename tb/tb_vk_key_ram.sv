// tb_vk_key_ram -- self-checking test of the input-key memory.
//
// Fills all eight words, then performs 400 random cycles of byte-strobed
// writes and reads against a reference array kept in the testbench; every
// read result is checked one cycle after its address, and a read with re
// low must leave rdata unchanged.
module tb_vk_key_ram;

  localparam int WORDS = 8;

  logic        clk = 1'b0;
  logic        we, re;
  logic [2:0]  waddr, raddr;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;

  int checks = 0, failures = 0;
  logic [31:0] model [WORDS];

  vk_key_ram #(.WORDS(WORDS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] expect_q, held;
    logic        exp_vld;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0; wstrb = 0;
    @(negedge clk);
    // initial fill
    for (int w = 0; w < WORDS; w++) begin
      we = 1; waddr = 3'(w); wdata = $urandom; wstrb = 4'hF;
      model[w] = wdata;
      @(negedge clk);
    end
    we = 0;
    exp_vld = 0;
    for (int c = 0; c < 400; c++) begin
      // check the read issued last cycle
      if (exp_vld) begin
        checks++;
        if (rdata !== expect_q) begin
          failures++;
          $display("read mismatch: got %h expected %h", rdata, expect_q);
        end
      end
      held = rdata;
      re    = ($urandom % 3) != 0;
      raddr = 3'($urandom % WORDS);
      we    = ($urandom % 2) != 0;
      waddr = 3'($urandom % WORDS);
      wdata = $urandom;
      wstrb = 4'($urandom);
      exp_vld  = re;
      expect_q = model[raddr];         // read-before-write on the same edge
      @(posedge clk);
      #1;
      if (!re) begin
        checks++;
        if (rdata !== held) begin
          failures++;
          $display("rdata changed without re");
        end
      end
      if (we) for (int b = 0; b < 4; b++) if (wstrb[b]) model[waddr][8*b +: 8] = wdata[8*b +: 8];
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
