// clf_edu: Event Decision Unit of the Cache-Like Filter.
//
// It compares the input event with the S events stored in one memory block
// and counts how many are correlated with it. A stored event is correlated
// when it is valid, its stored coordinate (column x for a row block, row y
// for a column block) is within D_TH of the input's, and its timestamp is at
// most t_th older than the input's. Both tests and the final sum follow the
// paper's EDU; the count is the block's contribution to n_e0.
//
// Stored timestamps keep only BW_T bits, so the age is (t_in - t_stored)
// modulo 2^BW_T. An event older than a multiple of 2^BW_T can therefore look
// recent again; the paper analyses and accepts this false-positive window.
// The spatial test uses the absolute difference |c_in - c_stored|.
//
// Block layout (slot i at bits [i*EW +: EW]), each slot {valid, t, c}. The
// valid bit is this design's addition so that a cleared memory holds no
// events.
//
// Purely combinational.
module clf_edu #(
  parameter  int unsigned S     = 4,
  parameter  int unsigned BW_T  = 8,
  parameter  int unsigned CW    = 11,
  parameter  int unsigned D_TH  = 1,
  localparam int unsigned EW    = 1 + BW_T + CW,
  localparam int unsigned CNTW  = $clog2(S + 1)
) (
  input  logic [S*EW-1:0] blk,
  input  logic [CW-1:0]   c_in,
  input  logic [BW_T-1:0] t_in,
  input  logic [BW_T-1:0] t_th,
  output logic [CNTW-1:0] count
);

  always_comb begin
    count = '0;
    for (int i = 0; i < S; i++) begin
      logic            v;
      logic [BW_T-1:0] ts;
      logic [CW-1:0]   cs;
      logic [CW-1:0]   dc;
      logic [BW_T-1:0] dt;
      logic            hit;
      {v, ts, cs} = blk[i*EW +: EW];
      dc     = (c_in >= cs) ? (c_in - cs) : (cs - c_in);
      dt     = t_in - ts;  // modulo 2^BW_T
      hit    = v && (dc <= CW'(D_TH)) && (dt <= t_th);
      count  = count + CNTW'(hit);
    end
  end

endmodule
