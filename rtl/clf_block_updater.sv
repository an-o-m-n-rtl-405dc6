// clf_block_updater: Memory Block Updater of the Cache-Like Filter.
//
// FIFO replacement inside one memory block. The block's pointer (from the
// bank's wpt memory) names the slot written last; the new event goes to the
// next slot, pointer+1, wrapping from S-1 to 0, and that value is also the
// new pointer. The other S-1 slots are written back unchanged, since the
// whole block is one memory word. This follows the paper's description
// (pointer 3 with s = 4: the event is written to slot 0).
//
// Slot layout as in clf_edu: slot i at bits [i*EW +: EW].
//
// Purely combinational.
module clf_block_updater #(
  parameter  int unsigned S  = 4,
  parameter  int unsigned EW = 20,
  localparam int unsigned PW = (S > 1) ? $clog2(S) : 1
) (
  input  logic [S*EW-1:0] blk_in,
  input  logic [PW-1:0]   wpt_in,
  input  logic [EW-1:0]   entry,
  output logic [S*EW-1:0] blk_out,
  output logic [PW-1:0]   wpt_out
);

  always_comb begin
    wpt_out = (wpt_in >= PW'(S - 1)) ? '0 : wpt_in + 1'b1;
    blk_out = blk_in;
    for (int i = 0; i < S; i++)
      if (wpt_out == PW'(i)) blk_out[i*EW +: EW] = entry;
  end

endmodule
