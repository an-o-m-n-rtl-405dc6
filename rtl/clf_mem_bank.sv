// clf_mem_bank: one memory bank of the Cache-Like Filter (RMBi or CMBi).
//
// A bank holds DEPTH memory blocks. Each block is one WIDTH-bit word that
// packs the s most recent events of one sensor row (row banks) or column
// (column banks); the filter always reads and writes a whole block.
//
// The bank has two ports so that two accesses can share a cycle:
//   port 1: read or write (en1, we1, addr1, wdata1 -> rdata1). It serves the
//           write-back of the block of the event in its second pipeline
//           stage, or else a neighbour-row read of that event.
//   port 2: read only (en2, addr2 -> rdata2). It serves the first-stage read
//           of the following event.
// This pairing (port 1 "w/raddr1", port 2 "raddr2") follows the port sketch
// of the paper's pipeline figure.
//
// Timing: both reads are synchronous; rdataN holds the word one clock edge
// after enN, and keeps it while enN is low. A port-2 read of the address that
// port 1 writes on the same edge returns the old word (read-first); the
// denoising module forwards the new word itself. The synchronous read is a
// choice of this design; the paper's FPGA build used distributed RAM.
module clf_mem_bank #(
  parameter  int unsigned DEPTH = 200,
  parameter  int unsigned WIDTH = 80,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             en1,
  input  logic             we1,
  input  logic [AW-1:0]    addr1,
  input  logic [WIDTH-1:0] wdata1,
  output logic [WIDTH-1:0] rdata1,
  input  logic             en2,
  input  logic [AW-1:0]    addr2,
  output logic [WIDTH-1:0] rdata2
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en1) begin
      if (we1) mem[addr1] <= wdata1;
      else     rdata1     <= mem[addr1];
    end
  end

  always_ff @(posedge clk) begin
    if (en2) rdata2 <= mem[addr2];
  end

endmodule
