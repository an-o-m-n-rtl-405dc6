// clf_top: the Cache-Like Filter (CLF), a spatiotemporal background-activity
// filter for dynamic vision sensor (DVS) event streams.
//
// What it does. Each input event (x, y, t, p) is classed as signal or noise:
// it is signal when at least N_CR earlier events lie in its
// (2*D_TH+1) x (2*D_TH+1) pixel neighbourhood and are at most T_th older.
// Instead of one timestamp per pixel (O(m*n) memory), the filter keeps the
// last S_RM events of every row in the Row Denoising Module (RDM) and the
// last S_CM events of every column in the Column Denoising Module (CDM),
// O(m+n) memory. The two modules' counts of correlated events are added and
// compared with N_CR. This is the paper's architecture; the default
// parameters are its main configuration N_RM/N_CM = 4, s_RM = s_CM = 4,
// BW_T = 8 on a 1280 x 800 sensor with a 3 x 3 window (D_TH = 1).
// S_RM = 0 or S_CM = 0 leaves that module out, as in the paper's row-only
// and column-only builds.
//
// Timing. One event per clock, no back-pressure once running. An event is
// accepted on a rising edge with in_valid and in_ready high; its result is
// on the outputs (out_valid high for one cycle) four edges later, so the
// event spends five clock cycles in the filter: input register, own-line
// block read, write-back and neighbour reads, neighbour EDUs, decision. The
// paper gives the same five-cycle delay for its pipelined filter.
// PIPELINED = 0 builds the paper's simpler variant without the pipeline
// registers: all window lines are read at once, there is no read
// cancellation, the count is always exact, and the result comes one cycle
// earlier (three edges after acceptance, four cycles in the filter).
// in_ready is low only after reset, while the memories are being cleared
// (max(ROWS, COLS) / N_BANK cycles); that clearing is this design's choice.
//
// Configuration inputs cfg_t_th (T_th, in timestamp units, compared with
// the age modulo 2^BW_T) and cfg_n_cr (N_CR) should be held steady while
// events flow. out_count is the summed count behind the decision; with
// read cancellation it can be lower than the full count (see
// clf_denoise_module). The output event is the input event unchanged.
module clf_top
  import clf_pkg::*;
#(
  parameter  int unsigned COLS        = 1280,  // sensor width  (x range)
  parameter  int unsigned ROWS        = 800,   // sensor height (y range)
  parameter  int unsigned N_BANK      = 4,     // N_RM = N_CM
  parameter  int unsigned S_RM        = 4,     // events per row block, 0 = no RDM
  parameter  int unsigned S_CM        = 4,     // events per column block, 0 = no CDM
  parameter  int unsigned BW_T        = 8,     // stored timestamp bits
  parameter  int unsigned D_TH        = 1,     // spatial threshold
  parameter  bit          READ_CANCEL = 1'b1,  // cancel neighbour reads on an own-line hit
  parameter  bit          PIPELINED   = 1'b1   // two-stage memory access (0: one stage)
) (
  input  logic             clk,
  input  logic             rst_n,
  // event input
  input  logic             in_valid,
  output logic             in_ready,
  input  event_t           in_event,
  // configuration
  input  logic [BW_T-1:0]  cfg_t_th,
  input  logic [CNT_W-1:0] cfg_n_cr,
  // classified event output
  output logic             out_valid,
  output event_t           out_event,
  output logic             out_is_signal,
  output logic [CNT_W-1:0] out_count,
  // observation, index 0 = RDM, 1 = CDM: neighbour reads cancelled, own
  // block forwarded from the write one cycle ahead (one pulse per event)
  output logic [1:0]       stat_rd_cancel,
  output logic [1:0]       stat_fwd
);

  // --------------------------------------------------------- input register
  logic   a_valid;
  event_t a_ev;
  logic   rdm_done, cdm_done;

  assign in_ready = rdm_done && cdm_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) a_valid <= 1'b0;
    else        a_valid <= in_valid && in_ready;
  end

  always_ff @(posedge clk) a_ev <= in_event;

  // ------------------------------------------------------ denoising modules
  logic             rdm_v, cdm_v;
  logic [CNT_W-1:0] cr_event_row, cr_event_col;

  if (S_RM > 0) begin : g_rdm
    clf_denoise_module #(
      .LINES(ROWS), .N_BANK(N_BANK), .S(S_RM), .D_TH(D_TH), .BW_T(BW_T),
      .OWN_W(Y_W), .OTH_W(X_W), .READ_CANCEL(READ_CANCEL),
      .PIPELINED(PIPELINED)
    ) u_rdm (
      .clk, .rst_n, .init_done(rdm_done),
      .a_valid, .a_own(a_ev.y), .a_oth(a_ev.x), .a_t(a_ev.t[BW_T-1:0]),
      .t_th(cfg_t_th), .d_valid(rdm_v), .d_count(cr_event_row),
      .stat_cancel(stat_rd_cancel[0]), .stat_fwd(stat_fwd[0])
    );
  end else begin : g_no_rdm
    assign rdm_done     = 1'b1;
    assign rdm_v        = 1'b0;
    assign cr_event_row = '0;
    assign stat_rd_cancel[0] = 1'b0;
    assign stat_fwd[0]       = 1'b0;
  end

  if (S_CM > 0) begin : g_cdm
    clf_denoise_module #(
      .LINES(COLS), .N_BANK(N_BANK), .S(S_CM), .D_TH(D_TH), .BW_T(BW_T),
      .OWN_W(X_W), .OTH_W(Y_W), .READ_CANCEL(READ_CANCEL),
      .PIPELINED(PIPELINED)
    ) u_cdm (
      .clk, .rst_n, .init_done(cdm_done),
      .a_valid, .a_own(a_ev.x), .a_oth(a_ev.y), .a_t(a_ev.t[BW_T-1:0]),
      .t_th(cfg_t_th), .d_valid(cdm_v), .d_count(cr_event_col),
      .stat_cancel(stat_rd_cancel[1]), .stat_fwd(stat_fwd[1])
    );
  end else begin : g_no_cdm
    assign cdm_done     = 1'b1;
    assign cdm_v        = 1'b0;
    assign cr_event_col = '0;
    assign stat_rd_cancel[1] = 1'b0;
    assign stat_fwd[1]       = 1'b0;
  end

  // ------------------------------------------ event delay to the decision
  logic   b_valid, c_valid, d_valid;
  event_t b_ev, c_ev, d_ev;

  // the unpipelined modules skip stage C
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {b_valid, c_valid, d_valid} <= '0;
    else        {b_valid, c_valid, d_valid} <= {a_valid, b_valid, PIPELINED ? c_valid : b_valid};
  end

  always_ff @(posedge clk) begin
    b_ev <= a_ev;
    c_ev <= b_ev;
    d_ev <= PIPELINED ? c_ev : b_ev;
  end

  // -------------------------------------------------------------- decision
  logic [CNT_W-1:0] total;
  assign total = cr_event_row + cr_event_col;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid     <= 1'b0;
      out_is_signal <= 1'b0;
      out_count     <= '0;
    end else begin
      out_valid     <= d_valid;
      out_is_signal <= d_valid && (total >= cfg_n_cr);
      out_count     <= total;
    end
  end

  always_ff @(posedge clk) out_event <= d_ev;

  // the modules' results line up with the event delay line
  results_aligned: assert property (@(posedge clk) disable iff (!rst_n)
      d_valid |-> ((S_RM == 0) || rdm_v) && ((S_CM == 0) || cdm_v))
    else $error("denoising module result out of step with the event");
  // input coordinates must lie on the sensor
  coords_on_sensor: assert property (@(posedge clk) disable iff (!rst_n)
      (in_valid && in_ready) |-> (in_event.x < X_W'(COLS)) && (in_event.y < Y_W'(ROWS)))
    else $error("event outside the %0d x %0d sensor", COLS, ROWS);

endmodule
