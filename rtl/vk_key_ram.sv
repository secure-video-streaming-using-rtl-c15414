// vk_key_ram -- input-key memory of validateKey.
//
// Holds the candidate key the processor writes, as WORDS 32-bit words
// (eight for a 256-bit key), written a 32-bit word at a time as the
// processor loads it. Simple dual port: the AXI4-Lite slave writes through
// port A with byte strobes, the compare core reads through port B.
//
// Timing: a write lands on the clock edge where we is high. A read is
// registered: rdata shows mem[raddr] on the cycle after the edge where re
// was high, and holds while re is low, the behaviour of a block or
// distributed RAM with an output register.
//
// The contents are not reset and persist between attempts; that matches a
// memory-mapped array of a synthesised C function and is this design's
// assumption, the source describes only the 256-bit key port.
module vk_key_ram #(
  parameter int unsigned WORDS = 8,
  localparam int unsigned AW   = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic [3:0]    wstrb,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [31:0]   rdata
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int b = 0; b < 4; b++) begin
        if (wstrb[b]) mem[waddr][8*b +: 8] <= wdata[8*b +: 8];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
