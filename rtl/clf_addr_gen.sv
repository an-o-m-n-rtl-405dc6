// clf_addr_gen: bank and block addresses for one event in a denoising module.
//
// A denoising module keeps the events of sensor line c (a row for the row
// module, a column for the column module) in bank c mod N_BANK, block
// floor(c / N_BANK). With N_BANK a power of two this is a bit split: the low
// log2(N_BANK) bits of c select the bank and the remaining high bits are the
// block address. For a (2*D_TH+1)-line spatial window the module also needs
// the lines c-D_TH .. c+D_TH, computed here with small adders as in the
// paper's architecture figure (c-1 and c+1 for D_TH = 1).
//
// Output j (0 .. 2*D_TH) is line c + j - D_TH; j = D_TH is the event's own
// line. in_range[j] is low when that line falls outside 0 .. LINES-1 (the
// sensor border); such a line is not read. The paper does not treat the
// border; skipping the read is this design's choice.
//
// Purely combinational.
module clf_addr_gen #(
  parameter  int unsigned LINES  = 800,
  parameter  int unsigned N_BANK = 4,
  parameter  int unsigned D_TH   = 1,
  parameter  int unsigned CW     = 10,
  localparam int unsigned NW     = 2 * D_TH + 1,
  localparam int unsigned BKW    = (N_BANK > 1) ? $clog2(N_BANK) : 1,
  localparam int unsigned DEPTH  = (LINES + N_BANK - 1) / N_BANK,
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic [CW-1:0]  c,
  output logic [BKW-1:0] bank     [NW],
  output logic [AW-1:0]  blk      [NW],
  output logic           in_range [NW]
);

  localparam int unsigned SH = $clog2(N_BANK);

  always_comb begin
    for (int j = 0; j < NW; j++) begin
      int line;  // may fall below zero at the sensor border
      line        = int'(c) + j - int'(D_TH);
      in_range[j] = (line >= 0) && (line < int'(LINES));
      bank[j]     = BKW'(unsigned'(line) % N_BANK);
      blk[j]      = AW'(unsigned'(line) >> SH);
    end
  end

  // the bank split is a plain bit split only for a power-of-two bank count
  initial assert (N_BANK == (1 << SH)) else $error("N_BANK must be a power of two");
  initial assert (N_BANK >= NW) else $error("N_BANK must cover the 2*D_TH+1 window lines");

endmodule
