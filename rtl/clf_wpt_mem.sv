// clf_wpt_mem: the "wpt" memory of one bank of the Cache-Like Filter.
//
// It holds, for every memory block of the bank, the FIFO index pointer: the
// slot in the block that was written last. The paper gives each bank such a
// small memory of ceil(log2 s)-bit pointers; the next event of that row or
// column goes to slot pointer+1.
//
// One synchronous read port (re, raddr -> rdata, valid one edge later) and
// one write port (we, waddr, wdata). A read of the address written on the
// same edge returns the old pointer (read-first); the denoising module
// forwards the new pointer itself.
module clf_wpt_mem #(
  parameter  int unsigned DEPTH = 200,
  parameter  int unsigned PW    = 2,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [PW-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [PW-1:0] rdata
);

  logic [PW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
