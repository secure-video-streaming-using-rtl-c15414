// vk_key_compare -- the key comparison loop of validateKey.
//
// The reference key is a parameter, so it exists only as constants in the
// logic and never in any memory the processor can read. On ap_start the
// core walks the candidate key byte by byte, reading the input-key memory
// one 32-bit word per byte (byte j lives in word j/4, bits 8*(j%4)+:8) and
// ANDs the per-byte equality into a match flag. The loop is pipelined with
// an initiation interval of one: the memory read of byte j+1 overlaps the
// compare of byte j. It never stops early, so the run time is the same for
// every key, and the only output is one pass/fail bit.
//
// Interface: the usual block-level handshake of a synthesised C function.
// ap_start is sampled while ap_idle is high; ap_done and ap_ready pulse
// together for one cycle when the comparison ends, and result then holds
// the answer until the next one ends.
//
// Timing: with KEY_BYTES = 32, ap_done rises 34 clock cycles after the edge
// that sampled ap_start (32 iterations + 1 read latency + 1 output
// register), the latency published for the original core. The byte loop,
// its pipelining and the 34-cycle figure follow the source; the split of
// those 34 cycles between read, compare and output register is this
// design's choice.
module vk_key_compare #(
  parameter int unsigned            KEY_BYTES  = 32,
  parameter logic [KEY_BYTES*8-1:0] SECRET_KEY = vk_pkg::DEFAULT_SECRET_KEY,
  localparam int unsigned           WORDS      = KEY_BYTES / 4,
  localparam int unsigned           WAW        = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned           IW         = $clog2(KEY_BYTES)
) (
  input  logic           clk,
  input  logic           rst_n,
  // block-level handshake
  input  logic           ap_start,
  output logic           ap_done,
  output logic           ap_idle,
  output logic           ap_ready,
  // read port of the input-key memory
  output logic           key_rd_en,
  output logic [WAW-1:0] key_rd_addr,
  input  logic [31:0]    key_rd_data,
  // answer
  output logic           result
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  state_e        state;
  logic [IW-1:0] idx;       // byte whose read is issued this cycle
  logic          s1_vld;    // a read came back this cycle
  logic [IW-1:0] s1_idx;    // ... for this byte
  logic          match;
  logic [7:0]    cand_byte;
  logic [7:0]    ref_byte;

  // Issue stage: one word read per byte.
  assign key_rd_en   = (state == S_RUN);
  assign key_rd_addr = WAW'(idx >> 2);

  // Compare stage: pick the byte out of the returned word and the matching
  // byte of the reference key (byte 0 is the most significant of SECRET_KEY).
  assign cand_byte = key_rd_data[8*s1_idx[1:0] +: 8];
  assign ref_byte  = SECRET_KEY[8*(KEY_BYTES-1-int'(s1_idx)) +: 8];

  assign ap_idle = (state == S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      idx      <= '0;
      s1_vld   <= 1'b0;
      s1_idx   <= '0;
      match    <= 1'b0;
      result   <= 1'b0;
      ap_done  <= 1'b0;
      ap_ready <= 1'b0;
    end else begin
      ap_done  <= 1'b0;
      ap_ready <= 1'b0;
      s1_vld   <= (state == S_RUN);
      s1_idx   <= idx;
      if (s1_vld) match <= match & (cand_byte == ref_byte);

      unique case (state)
        S_IDLE: begin
          if (ap_start) begin
            state <= S_RUN;
            idx   <= '0;
            match <= 1'b1;
          end
        end
        S_RUN: begin
          idx <= idx + 1'b1;
          if (int'(idx) == KEY_BYTES - 1) state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (!s1_vld) begin
            result   <= match;
            ap_done  <= 1'b1;
            ap_ready <= 1'b1;
            state    <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A drained pipeline always ends in one done pulse and a return to idle.
  a_drain_gives_done: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_DRAIN && !s1_vld) |=> ap_done && ap_idle);

endmodule
