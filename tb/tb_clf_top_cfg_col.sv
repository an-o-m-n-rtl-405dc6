// tb_clf_top_cfg_col: end-to-end self-checking testbench of clf_top in the column-only configuration 4-0-4-32
// (N_CM-s_RM-s_CM-BW_T) on a reduced 40 x 24 sensor.
//
// A random scene drives the filter: a small object wanders over the sensor
// and fires events around itself (signal), while uniform background events
// (noise) are mixed in. Timestamps grow by a few units per event, with
// occasional long pauses so that stored events age out and the BW_T-bit
// timestamps wrap around. Every accepted event is also fed to the untimed
// reference model in clf_ref_pkg; each output is checked for the event, the
// correlated count and the decision, and for its delay (the result is on the
// outputs in the fifth cycle after the accepting edge, the fourth when
// unpipelined). The run has two
// phases, N_CR = 1 and N_CR = 2, and counts how often each mechanism of the
// filter occurred: memory clearing after reset, read cancellation (checked
// against the model, pipelined build only), forwarding of a block being written, FIFO replacement
// of a valid stored event, window lines off the sensor border, signal and
// noise decisions. A mechanism that never occurs counts as a failure.
module tb_clf_top_cfg_col;
  import clf_pkg::*;
  import clf_ref_pkg::*;

  localparam int unsigned COLS  = 40;
  localparam int unsigned ROWS  = 24;
  localparam int unsigned NB    = 4;
  localparam int unsigned SRM   = 0;
  localparam int unsigned SCM   = 4;
  localparam int unsigned BWT   = 32;
  localparam int unsigned DTH   = 1;
  localparam bit          RC    = 1'b1;
  localparam bit          PIPE  = 1'b1;
  localparam int unsigned DELAY = PIPE ? 5 : 4;  // sampled edges from accept to output
  localparam int unsigned N_EV  = 20000;       // events per phase
  localparam int unsigned T_TH  = 60;
  // clearing covers the longest line count of the modules that are built
  localparam int unsigned LONGEST  = (SCM == 0) ? ROWS : (SRM == 0) ? COLS : (ROWS > COLS ? ROWS : COLS);
  localparam int unsigned INIT_CYC = (LONGEST + NB - 1) / NB;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic             in_valid = 1'b0;
  logic             in_ready;
  event_t           in_event = '0;
  logic [BWT-1:0]   cfg_t_th = BWT'(T_TH);
  logic [CNT_W-1:0] cfg_n_cr = 1;
  logic             out_valid, out_is_signal;
  event_t           out_event;
  logic [CNT_W-1:0] out_count;
  logic [1:0]       stat_rd_cancel, stat_fwd;

  always #5 clk = ~clk;

  clf_top #(
    .COLS(COLS), .ROWS(ROWS), .N_BANK(NB), .S_RM(SRM), .S_CM(SCM), .BW_T(BWT),
    .D_TH(DTH), .READ_CANCEL(RC), .PIPELINED(PIPE)
  ) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_event, .cfg_t_th, .cfg_n_cr,
    .out_valid, .out_event, .out_is_signal, .out_count, .stat_rd_cancel, .stat_fwd
  );

  int          checks = 0, failures = 0;
  longint      cyc = 0;
  clf_model    model;

  typedef struct {
    event_t      ev;
    int unsigned cnt;
    bit          sig;
    longint      acc;
  } exp_t;
  exp_t        expq[$];

  int unsigned n_init_stall = 0, n_cancel_rtl = 0, n_fwd = 0, n_out = 0;

  always @(negedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // accept: feed the model with exactly what the filter takes in
  always @(posedge clk) begin
    if (rst_n && !in_ready) n_init_stall++;
    if (in_valid && in_ready) begin
      int unsigned rc, cc, tot;
      bit          sig;
      exp_t        e;
      tot = model.process(in_event.x, in_event.y, in_event.t, T_TH, cfg_n_cr, rc, cc, sig);
      e.ev = in_event; e.cnt = tot; e.sig = sig; e.acc = cyc;
      expq.push_back(e);
    end
    n_cancel_rtl += stat_rd_cancel[0] + stat_rd_cancel[1];
    n_fwd        += stat_fwd[0] + stat_fwd[1];
  end

  // monitor
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      n_out++;
      if (expq.size() == 0) check(0, "output without an accepted event");
      else begin
        exp_t e;
        e = expq.pop_front();
        check(out_event == e.ev, $sformatf("event mismatch x=%0d y=%0d", e.ev.x, e.ev.y));
        check(32'(out_count) == e.cnt,
              $sformatf("count %0d, model %0d (x=%0d y=%0d t=%0d)", out_count, e.cnt, e.ev.x, e.ev.y, e.ev.t));
        check(out_is_signal == e.sig, "decision mismatch");
        check(cyc - e.acc == DELAY, $sformatf("delay %0d cycles, expected %0d", cyc - e.acc, DELAY));
      end
    end
  end

  // scene generator
  int unsigned ox, oy;
  longint unsigned ts;

  task automatic run_phase(int unsigned n_cr);
    cfg_n_cr = CNT_W'(n_cr);
    for (int unsigned i = 0; i < N_EV; ) begin
      @(negedge clk);
      if ($urandom_range(9) == 0) begin in_valid = 1'b0; continue; end
      // move the object now and then
      if ($urandom_range(15) == 0) begin
        ox = (ox + $urandom_range(2) + COLS - 1) % COLS;
        oy = (oy + $urandom_range(2) + ROWS - 1) % ROWS;
      end
      if ($urandom_range(199) == 0) ts += 300 + $urandom_range(400);  // long pause
      else                          ts += $urandom_range(6);
      if ($urandom_range(2) == 0) begin  // background activity
        in_event.x = X_W'($urandom_range(COLS - 1));
        in_event.y = Y_W'($urandom_range(ROWS - 1));
      end else begin                      // object
        int xx, yy;
        xx = int'(ox) + int'($urandom_range(4)) - 2;
        yy = int'(oy) + int'($urandom_range(4)) - 2;
        in_event.x = X_W'((xx < 0) ? 0 : (xx >= int'(COLS)) ? COLS - 1 : xx);
        in_event.y = Y_W'((yy < 0) ? 0 : (yy >= int'(ROWS)) ? ROWS - 1 : yy);
      end
      in_event.t = TS_W'(ts);
      in_event.p = 1'($urandom_range(1));
      in_valid   = 1'b1;
      i++;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (10) @(negedge clk);  // drain before the configuration changes
  endtask

  initial begin
    model = new(COLS, ROWS, SRM, SCM, BWT, DTH, RC && PIPE);
    ox = COLS / 2; oy = ROWS / 2; ts = 1000;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!in_ready) @(negedge clk);
    check(n_init_stall >= INIT_CYC - 1 && n_init_stall <= INIT_CYC + 1,
          $sformatf("memory clearing took %0d cycles, expected %0d", n_init_stall, INIT_CYC));
    run_phase(1);
    run_phase(2);
    check(expq.size() == 0, "events still in flight at the end");
    check(n_out == 2 * N_EV, $sformatf("%0d outputs for %0d events", n_out, 2 * N_EV));
    check(n_cancel_rtl == model.n_cancel,
          $sformatf("read cancellations %0d, model %0d", n_cancel_rtl, model.n_cancel));
    $display("mechanisms: init_stall=%0d read_cancel=%0d forward=%0d fifo_replace=%0d border=%0d signal=%0d noise=%0d",
             n_init_stall, n_cancel_rtl, n_fwd, model.n_evict(), model.n_border, model.n_signal, model.n_noise);
    check(n_init_stall > 0, "memory clearing never seen");
    if (PIPE) check(n_cancel_rtl > 0, "read cancellation never happened");
    check(n_fwd > 0, "forwarding never happened");
    check(model.n_evict() > 0, "FIFO replacement never happened");
    check(model.n_border > 0, "sensor border never reached");
    check(model.n_signal > 0 && model.n_noise > 0, "signal or noise decision missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
