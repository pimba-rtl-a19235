// spu_regs: operand registers of one State-update Processing Unit.
//
// REG_WRITE stores one 256-bit MX8 word into the register chosen by side
// (upper or bottom bank) and reg_id (d, q, k, v). The paper says operands are
// loaded into registers before the iterations start and shared by all chunks
// of a chunk group; keeping a separate set per bank side, so the two banks of
// an SPU may hold different chunk groups, is this design's choice. In
// attention attend mode the v register holds the scores. Write takes effect
// at the next clock edge; all registers clear on reset.
module spu_regs
  import pimba_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      we,
  input  logic      side,
  input  reg_e      sel,
  input  mx8_word_t wdata,
  output mx8_word_t ops [2][4]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < 2; s++)
        for (int r = 0; r < 4; r++) ops[s][r] <= '0;
    end else if (we) begin
      ops[side][sel] <= wdata;
    end
  end

endmodule
