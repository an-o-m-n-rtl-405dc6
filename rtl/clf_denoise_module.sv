// clf_denoise_module: Row (RDM) or Column (CDM) Denoising Module of the
// Cache-Like Filter.
//
// What it does. It remembers the S most recent events of every sensor line
// (a row for the RDM, a column for the CDM) and, for each new event, counts
// the remembered events that are correlated with it in the lines c-D_TH ..
// c+D_TH around the event's own line c. The RDM is this module with the row
// y as "own" coordinate and the column x as the stored "other" coordinate;
// the CDM swaps the two. Both are the paper's design.
//
// How it works. The lines are spread over N_BANK memory banks (line c lives
// in bank c mod N_BANK, block c / N_BANK), so the 2*D_TH+1 lines of the
// window always sit in different banks and can be read in the same cycle.
// Each block holds S events, {valid, t[BW_T-1:0], other coordinate}, and is
// refilled first-in first-out through a per-bank pointer memory (wpt). Per
// the paper's two-stage memory pipeline:
//   stage 1  the event's own block (and its pointer) is read;
//   stage 2  the EDU checks that block, the Memory Block Updater writes the
//            event into it, and the blocks of the neighbouring lines are read
//            - unless the own block already holds a correlated event and
//            READ_CANCEL is set (the paper's read cancellation);
//   then     the neighbour EDUs count and all counts are summed.
// With read cancellation the sum is exact when it is zero or comes only from
// the own line; otherwise only the own line's count is reported, which is
// enough for the decision "count >= N_CR" when N_CR = 1, as in the paper.
// READ_CANCEL = 0 always reads the neighbours and gives the exact count; that
// switch is this design's addition.
// PIPELINED = 0 is the paper's variant without the optional pipeline
// registers: all 2*D_TH+1 window lines are read in stage A through port 2
// (they lie in different banks), all EDUs work in stage B, there is no read
// cancellation, and the count is ready one cycle earlier.
//
// Interface and timing. Stage A (a_*) is the event in the filter's input
// register. The own-block read is issued in that cycle, stage 2 is the next
// cycle (B), the neighbour EDUs work in cycle C, and the count is registered
// into d_count / d_valid at the end of cycle C. So d_valid follows a_valid
// three clock edges later (two with PIPELINED = 0), one event per cycle, no
// stalls.
// A port-2 read of a block that the event one cycle ahead writes on the same
// edge would see the old block; such a read is replaced by the written block
// (forwarding). The paper does not discuss this case; the forwarding is this
// design's choice, and keeps consecutive events of the same line exact.
//
// After reset the module clears every block and pointer, one block address
// per cycle (DEPTH cycles), and raises init_done when done; no event may be
// presented before. The clearing and the valid bit per stored event are this
// design's choices (not mentioned in the paper).
module clf_denoise_module #(
  parameter  int unsigned LINES       = 800,  // sensor lines of this module
  parameter  int unsigned N_BANK      = 4,    // N_RM or N_CM
  parameter  int unsigned S           = 4,    // s_RM or s_CM
  parameter  int unsigned D_TH        = 1,    // spatial threshold
  parameter  int unsigned BW_T        = 8,    // stored timestamp bits
  parameter  int unsigned OWN_W       = 10,   // width of the own coordinate
  parameter  int unsigned OTH_W       = 11,   // width of the stored coordinate
  parameter  bit          READ_CANCEL = 1'b1,
  parameter  bit          PIPELINED   = 1'b1,  // 0: all window lines read at once
  localparam int unsigned NW          = 2 * D_TH + 1,
  localparam int unsigned DEPTH       = (LINES + N_BANK - 1) / N_BANK,
  localparam int unsigned AW          = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned BKW         = (N_BANK > 1) ? $clog2(N_BANK) : 1,
  localparam int unsigned PW          = (S > 1) ? $clog2(S) : 1,
  localparam int unsigned EW          = 1 + BW_T + OTH_W,
  localparam int unsigned BLKW        = S * EW,
  localparam int unsigned SCW         = $clog2(S + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  output logic                      init_done,
  // stage A: event in the filter's input register
  input  logic                      a_valid,
  input  logic [OWN_W-1:0]          a_own,
  input  logic [OTH_W-1:0]          a_oth,
  input  logic [BW_T-1:0]           a_t,
  // configuration: time threshold T_th in timestamp units
  input  logic [BW_T-1:0]           t_th,
  // result: number of correlated events found by this module
  output logic                      d_valid,
  output logic [clf_pkg::CNT_W-1:0] d_count,
  // observation: neighbour reads cancelled, own block forwarded
  output logic                      stat_cancel,
  output logic                      stat_fwd
);

  localparam int unsigned C = D_TH;  // window index of the event's own line

  // ---------------------------------------------------------------- memories
  logic            en1   [N_BANK];
  logic            we1   [N_BANK];
  logic [AW-1:0]   addr1 [N_BANK];
  logic [BLKW-1:0] wdat1 [N_BANK];
  logic [BLKW-1:0] rdat1 [N_BANK];
  logic            en2   [N_BANK];
  logic [AW-1:0]   addr2 [N_BANK];
  logic [BLKW-1:0] rdat2 [N_BANK];
  logic            pwe   [N_BANK];
  logic [AW-1:0]   pwaddr;
  logic [PW-1:0]   pwdata;
  logic [PW-1:0]   prdat [N_BANK];

  for (genvar b = 0; b < N_BANK; b++) begin : g_bank
    clf_mem_bank #(.DEPTH(DEPTH), .WIDTH(BLKW)) u_mb (
      .clk, .en1(en1[b]), .we1(we1[b]), .addr1(addr1[b]), .wdata1(wdat1[b]),
      .rdata1(rdat1[b]), .en2(en2[b]), .addr2(addr2[b]), .rdata2(rdat2[b])
    );
    clf_wpt_mem #(.DEPTH(DEPTH), .PW(PW)) u_wpt (
      .clk, .we(pwe[b]), .waddr(pwaddr), .wdata(pwdata),
      .re(en2[b]), .raddr(addr2[b]), .rdata(prdat[b])
    );
  end

  // ------------------------------------------------------------ init sweep
  logic [AW-1:0] swp;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      swp       <= '0;
      init_done <= 1'b0;
    end else if (!init_done) begin
      swp       <= swp + 1'b1;
      init_done <= (swp == AW'(DEPTH - 1));
    end
  end

  // ----------------------------------------------------- stage A (addresses)
  logic [BKW-1:0] bank_a [NW];
  logic [AW-1:0]  blk_a  [NW];
  logic           inr_a  [NW];

  clf_addr_gen #(.LINES(LINES), .N_BANK(N_BANK), .D_TH(D_TH), .CW(OWN_W)) u_ag (
    .c(a_own), .bank(bank_a), .blk(blk_a), .in_range(inr_a)
  );

  // ------------------------------------------------------ stage B registers
  logic            b_valid;
  logic            b_fwd  [NW];
  logic [OTH_W-1:0] b_oth;
  logic [BW_T-1:0] b_t;
  logic [BKW-1:0]  bank_b [NW];
  logic [AW-1:0]   blk_b  [NW];
  logic            inr_b  [NW];
  logic [BLKW-1:0] fwd_blk;   // block written at the end of the previous cycle
  logic [PW-1:0]   fwd_wpt;

  // a block read for the event in A is the block the event in B writes now
  logic fwd_a [NW];
  always_comb begin
    for (int j = 0; j < NW; j++)
      fwd_a[j] = b_valid && (bank_b[C] == bank_a[j]) && (blk_b[C] == blk_a[j]);
  end

  // ------------------------------------------------- stage B combinational
  logic [BLKW-1:0] own_blk, new_blk;
  logic [PW-1:0]   own_wpt, new_wpt;
  logic [SCW-1:0]  own_cnt;
  logic            nb_en  [NW];

  assign own_blk = b_fwd[C] ? fwd_blk : rdat2[bank_b[C]];
  assign own_wpt = b_fwd[C] ? fwd_wpt : prdat[bank_b[C]];

  clf_edu #(.S(S), .BW_T(BW_T), .CW(OTH_W), .D_TH(D_TH)) u_edu_own (
    .blk(own_blk), .c_in(b_oth), .t_in(b_t), .t_th, .count(own_cnt)
  );

  clf_block_updater #(.S(S), .EW(EW)) u_upd (
    .blk_in(own_blk), .wpt_in(own_wpt), .entry({1'b1, b_t, b_oth}),
    .blk_out(new_blk), .wpt_out(new_wpt)
  );

  always_comb begin
    for (int j = 0; j < NW; j++)
      nb_en[j] = PIPELINED && (j != C) && b_valid && inr_b[j] && (!READ_CANCEL || own_cnt == '0);
  end

  // port 2 of each bank: stage-A read of the own line (pipelined) or of every
  // window line (unpipelined, the lines are in different banks); port 1:
  // init clear, write-back of stage B, or stage-B neighbour read (pipelined)
  always_comb begin
    pwaddr = init_done ? blk_b[C] : swp;
    pwdata = init_done ? new_wpt  : PW'(S - 1);
    for (int b = 0; b < N_BANK; b++) begin
      en2[b]   = 1'b0;
      addr2[b] = blk_a[C];
      for (int j = 0; j < NW; j++) begin
        if ((j == C || !PIPELINED) && init_done && a_valid && inr_a[j] && bank_a[j] == BKW'(b)) begin
          en2[b]   = 1'b1;
          addr2[b] = blk_a[j];
        end
      end
      en1[b]   = 1'b0;
      we1[b]   = 1'b0;
      addr1[b] = blk_b[C];
      wdat1[b] = new_blk;
      pwe[b]   = 1'b0;
      if (!init_done) begin
        en1[b]   = 1'b1;
        we1[b]   = 1'b1;
        addr1[b] = swp;
        wdat1[b] = '0;
        pwe[b]   = 1'b1;
      end else if (b_valid && bank_b[C] == BKW'(b)) begin
        en1[b] = 1'b1;
        we1[b] = 1'b1;
        pwe[b] = 1'b1;
      end else begin
        for (int j = 0; j < NW; j++) begin
          if (nb_en[j] && bank_b[j] == BKW'(b)) begin
            en1[b]   = 1'b1;
            addr1[b] = blk_b[j];
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid <= 1'b0;
      b_fwd   <= '{default: 1'b0};
    end else begin
      b_valid <= a_valid && init_done;
      for (int j = 0; j < NW; j++) b_fwd[j] <= a_valid && fwd_a[j];
    end
  end

  always_ff @(posedge clk) begin
    b_oth   <= a_oth;
    b_t     <= a_t;
    bank_b  <= bank_a;
    blk_b   <= blk_a;
    inr_b   <= inr_a;
    fwd_blk <= new_blk;
    fwd_wpt <= new_wpt;
  end

  assign stat_cancel = b_valid && PIPELINED && READ_CANCEL && (own_cnt != '0);
  assign stat_fwd    = b_valid && b_fwd[C];

  // ------------------------------------------------------ stage C registers
  logic             c_valid;
  logic [SCW-1:0]   c_own_cnt;
  logic             c_rd   [NW];
  logic [BKW-1:0]   bank_c [NW];
  logic [OTH_W-1:0] c_oth;
  logic [BW_T-1:0]  c_t;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c_valid <= 1'b0;
    else        c_valid <= b_valid;
  end

  always_ff @(posedge clk) begin
    c_own_cnt <= own_cnt;
    c_rd      <= nb_en;
    bank_c    <= bank_b;
    c_oth     <= b_oth;
    c_t       <= b_t;
  end

  // neighbour EDUs (the own-line slot of these arrays is unused). Pipelined:
  // stage C, on the port-1 data. Unpipelined: stage B, next to the own-line
  // EDU, on the port-2 data (forwarded when the previous event writes it).
  logic [SCW-1:0]   nb_cnt [NW];
  logic [BLKW-1:0]  nb_blk [NW];
  logic [OTH_W-1:0] nb_oth;
  logic [BW_T-1:0]  nb_t;

  assign nb_oth = PIPELINED ? c_oth : b_oth;
  assign nb_t   = PIPELINED ? c_t   : b_t;

  for (genvar j = 0; j < NW; j++) begin : g_nb
    if (j == C) begin : g_own
      assign nb_cnt[j] = '0;
      assign nb_blk[j] = '0;
    end else begin : g_edu
      assign nb_blk[j] = PIPELINED ? rdat1[bank_c[j]]
                                   : (b_fwd[j] ? fwd_blk : rdat2[bank_b[j]]);
      clf_edu #(.S(S), .BW_T(BW_T), .CW(OTH_W), .D_TH(D_TH)) u_edu (
        .blk(nb_blk[j]), .c_in(nb_oth), .t_in(nb_t), .t_th,
        .count(nb_cnt[j])
      );
    end
  end

  logic [clf_pkg::CNT_W-1:0] sum_c;
  always_comb begin
    if (PIPELINED) begin
      sum_c = clf_pkg::CNT_W'(c_own_cnt);
      for (int j = 0; j < NW; j++)
        if (c_rd[j]) sum_c += clf_pkg::CNT_W'(nb_cnt[j]);
    end else begin
      sum_c = clf_pkg::CNT_W'(own_cnt);
      for (int j = 0; j < NW; j++)
        if (inr_b[j]) sum_c += clf_pkg::CNT_W'(nb_cnt[j]);
    end
  end

  // ------------------------------------------------------ stage D registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid <= 1'b0;
      d_count <= '0;
    end else begin
      d_valid <= PIPELINED ? c_valid : b_valid;
      d_count <= sum_c;
    end
  end

  // an event must not arrive while the memories are still being cleared
  a_valid_after_init: assert property (@(posedge clk) disable iff (!rst_n) a_valid |-> init_done)
    else $error("event presented before init_done");

endmodule
